// tb_secded_codec: self-checking test of the 128+4+9 SECDED code.
// Random payloads (128 data + 4 tag bits) are encoded; the codeword must be 141 bits with
// even overall parity and must decode to the same payload. Every single-bit flip position is
// then corrected, and random double flips are detected as uncorrectable. The expected
// syndrome behaviour is derived from the code definition, not from the decoder.
module tb_secded_codec;
  int checks = 0, failures = 0;
  logic [131:0] pl, dpl;
  logic [140:0] cw, rcw;
  logic ce, ue;

  secded_codec dut (.enc_payload(pl), .enc_cw(cw), .dec_cw(rcw), .dec_payload(dpl),
                    .dec_ce(ce), .dec_ue(ue));

  // reference Hamming syndrome of a 141-bit word
  function automatic logic [7:0] ref_syn(logic [140:0] w);
    logic [7:0] s = '0;
    for (int p = 1; p <= 140; p++) if (w[p]) s ^= 8'(p);
    return s;
  endfunction

  task automatic expect_ok(string what, logic exp_ce, logic exp_ue, logic chk_pl);
    #1;
    checks++;
    if (ce !== exp_ce || ue !== exp_ue || (chk_pl && dpl !== pl)) begin
      failures++;
      $display("FAIL %s: ce=%0b ue=%0b payload %s", what, ce, ue, (dpl === pl) ? "ok" : "wrong");
    end
  endtask

  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int t = 0; t < 40; t++) begin
      pl = {$urandom, $urandom, $urandom, $urandom, 4'($urandom)};
      if (t == 0) pl = '0;
      if (t == 1) pl = '1;
      rcw = '0;
      #1;
      rcw = cw;
      #1;
      checks++;
      if (ref_syn(cw) != 8'd0 || (^cw) != 1'b0) begin
        failures++; $display("FAIL encode: syndrome %h parity %b", ref_syn(cw), ^cw);
      end
      // payload must sit at non-power-of-two positions, in order
      begin
        int k;
        k = 0;
        checks++;
        for (int p = 1; p <= 140; p++) if ((p & (p - 1)) != 0) begin
          if (cw[p] !== pl[k]) begin failures++; $display("FAIL placement p=%0d", p); break; end
          k++;
        end
      end
      expect_ok("clean", 1'b0, 1'b0, 1'b1);
      for (int b = 0; b < 141; b++) begin
        rcw = cw; rcw[b] = ~rcw[b];
        expect_ok($sformatf("single flip %0d", b), 1'b1, 1'b0, 1'b1);
      end
      for (int d = 0; d < 20; d++) begin
        int a, b;
        a = $urandom_range(0, 140);
        b = (a + $urandom_range(1, 140)) % 141;
        rcw = cw; rcw[a] = ~rcw[a]; rcw[b] = ~rcw[b];
        expect_ok($sformatf("double flip %0d %0d", a, b), 1'b0, 1'b1, 1'b0);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
