// secded_codec: the "128+4+9" SECDED code that lets DRAM ECC bits carry MTE tags.
//
// One codeword protects 128 data bits (one 16-byte granule) together with that granule's
// 4-bit allocation tag, using 9 check bits: 141 bits in all, four codewords per 64-byte
// line. Doubling the data word from the usual 64+8 code frees enough ECC bits for the tag
// while keeping single-error correction and double-error detection. The 128/4/9 split and
// four codewords per line follow the design; the particular code is this design's choice:
// an extended Hamming code. The 132 payload bits sit in the non-power-of-two positions
// 3..140 of a 140-bit Hamming word (payload bit 0 at position 3, upward), the 8 Hamming check
// bits sit at positions 1,2,4,...,128, and bit 0 of the codeword holds overall parity.
//
// Both directions are combinational. Encoder: enc_payload -> enc_cw. Decoder: dec_cw ->
// dec_payload (corrected), dec_ce (one bit corrected), dec_ue (two-bit error, uncorrectable).
// The code is systematic: the 132 payload positions of enc_cw are plain copies of enc_payload.
module secded_codec #(
  parameter int unsigned K = 132,    // payload: 128 data + 4 tag bits
  parameter int unsigned R = 8       // Hamming check bits (plus one overall parity)
) (
  input  logic [K-1:0]   enc_payload,
  output logic [K+R:0]   enc_cw,
  input  logic [K+R:0]   dec_cw,
  output logic [K-1:0]   dec_payload,
  output logic           dec_ce,
  output logic           dec_ue
);
  localparam int unsigned N = K + R;    // Hamming positions 1..N

  function automatic bit is_pow2(int unsigned p);
    return (p & (p - 1)) == 0;
  endfunction

  // encoder
  always_comb begin
    logic [R-1:0] h;
    int unsigned  k;
    enc_cw = '0;
    h      = '0;
    k      = 0;
    for (int unsigned p = 1; p <= N; p++) begin
      if (!is_pow2(p)) begin
        enc_cw[p] = enc_payload[k];
        if (enc_payload[k]) h ^= R'(p);
        k++;
      end
    end
    for (int unsigned i = 0; i < R; i++) enc_cw[1 << i] = h[i];
    enc_cw[0] = ^enc_cw[N:1];
  end

  // decoder
  always_comb begin
    logic [R-1:0] syn;
    logic         par;
    logic [N:0]   fixed;
    int unsigned  k;
    syn = '0;
    for (int unsigned p = 1; p <= N; p++)
      if (dec_cw[p]) syn ^= R'(p);
    par    = ^dec_cw;
    fixed  = dec_cw;
    dec_ce = 1'b0;
    dec_ue = 1'b0;
    if (par) begin
      // odd number of flipped bits: a single error at position syn (0 = the parity bit)
      if (int'(syn) <= int'(N)) begin
        fixed[syn] = ~fixed[syn];
        dec_ce     = 1'b1;
      end else begin
        dec_ue = 1'b1;
      end
    end else if (syn != '0) begin
      dec_ue = 1'b1;                 // even number of flips, nonzero syndrome: double error
    end
    dec_payload = '0;
    k = 0;
    for (int unsigned p = 1; p <= N; p++) begin
      if (!is_pow2(p)) begin
        dec_payload[k] = fixed[p];
        k++;
      end
    end
  end
endmodule
