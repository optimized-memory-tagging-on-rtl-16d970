// mcu: memory controller that stores each granule's MTE tag inside the DRAM ECC bits.
//
// A 64-byte line is kept in DRAM as four 141-bit SECDED codewords, each holding one
// 16-byte granule, that granule's 4-bit allocation tag and 9 check bits (the "128+4+9"
// scheme). Four codewords take 564 bits of the 576 that a 72-byte ECC DIMM burst carries;
// the top 12 bits are written as zero. Tags therefore cost no DRAM capacity and come back in
// the same read as their data. The controller does no tag checking.
// Lint notes: those 12 spare bits are ignored on reads, and the stored copy of the request
// never uses its line address, which is loaded into dram_addr when the request is accepted.
//
// Requests and their DRAM traffic:
//   read                      : 1 DRAM read; decode, correct, return data + tags (+ err)
//   full bundle write         : 1 DRAM write of freshly encoded codewords
//   any partial write         : read-modify-write; this covers a data-only write, whose
//                               stored tags must be preserved, and a tag-only write, whose
//                               stored data must be preserved
// An uncorrectable error found in the read half of a read-modify-write cancels the write and
// is reported with err, so a poisoned line is never silently re-encoded.
// The scheme, the capacity argument and the need for read-modify-write follow the design;
// the FSM, the DRAM port and the error policy are this design's choices. The DRAM behind the
// port is outside the chip.
//
// Timing: a request is accepted only in IDLE; the response follows one cycle after the last
// DRAM response, plus one cycle of decode for reads.
module mcu
  import mte_pkg::*;
#(
  parameter int unsigned DRAM_W = 576       // bits per line burst on the DRAM port
) (
  input  logic              clk,
  input  logic              rst_n,
  // from the system-level cache
  input  logic              req_valid,
  output logic              req_ready,
  input  mem_req_t          req,
  output logic              resp_valid,
  output mem_resp_t         resp,
  // DRAM port (one line per beat)
  output logic              dram_req_valid,
  input  logic              dram_req_ready,
  output logic              dram_we,
  output laddr_t            dram_addr,
  output logic [DRAM_W-1:0] dram_wdata,
  input  logic              dram_resp_valid,
  input  logic [DRAM_W-1:0] dram_rdata,
  // events
  output logic              ev_rmw,
  output logic              ev_ce,
  output logic              ev_ue
);
  localparam int unsigned CW  = 141;          // codeword bits
  localparam int unsigned PL  = 132;          // payload bits: 128 data + 4 tag

  typedef enum logic [2:0] {M_IDLE, M_RD, M_DEC, M_MERGE, M_WR} state_e;
  state_e   state;
  mem_req_t rq;

  line_data_t  cur_data;     // line being written
  line_tags_t  cur_tags;
  logic [DRAM_W-1:0] rd_q;   // registered DRAM read beat

  logic [PL-1:0] enc_pl  [GRANULES];
  logic [CW-1:0] enc_cw  [GRANULES];
  logic [CW-1:0] dec_cw  [GRANULES];
  logic [PL-1:0] dec_pl  [GRANULES];
  logic [GRANULES-1:0] dec_ce, dec_ue;

  for (genvar g = 0; g < GRANULES; g++) begin : g_cw
    assign enc_pl[g] = {cur_tags[g*TAG_W +: TAG_W], cur_data[g*128 +: 128]};
    assign dec_cw[g] = rd_q[g*CW +: CW];
    secded_codec #(.K(PL), .R(8)) u_codec (
      .enc_payload (enc_pl[g]),
      .enc_cw      (enc_cw[g]),
      .dec_cw      (dec_cw[g]),
      .dec_payload (dec_pl[g]),
      .dec_ce      (dec_ce[g]),
      .dec_ue      (dec_ue[g])
    );
  end

  line_data_t rd_data;
  line_tags_t rd_tags;
  logic [DRAM_W-1:0] wr_beat;
  always_comb begin
    wr_beat = '0;
    for (int g = 0; g < int'(GRANULES); g++) begin
      rd_data[g*128 +: 128]     = dec_pl[g][127:0];
      rd_tags[g*TAG_W +: TAG_W] = dec_pl[g][131:128];
      wr_beat[g*CW +: CW]       = enc_cw[g];
    end
  end

  assign req_ready = (state == M_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= M_IDLE;
      rq             <= '0;
      cur_data       <= '0;
      cur_tags       <= '0;
      rd_q           <= '0;
      resp_valid     <= 1'b0;
      resp           <= '0;
      dram_req_valid <= 1'b0;
      dram_we        <= 1'b0;
      dram_addr      <= '0;
      dram_wdata     <= '0;
      ev_rmw         <= 1'b0;
      ev_ce          <= 1'b0;
      ev_ue          <= 1'b0;
    end else begin
      resp_valid <= 1'b0;
      ev_rmw     <= 1'b0;
      ev_ce      <= 1'b0;
      ev_ue      <= 1'b0;
      if (dram_req_valid && dram_req_ready) dram_req_valid <= 1'b0;
      unique case (state)
        M_IDLE: if (req_valid) begin
          rq        <= req;
          cur_data  <= req.data;
          cur_tags  <= req.tags;
          dram_addr <= req.laddr;
          if (req.op == MEM_WRITE && (&req.bmask) && (&req.tmask)) begin
            state <= M_MERGE;          // nothing to merge: go straight to encode
          end else begin
            dram_we        <= 1'b0;
            dram_req_valid <= 1'b1;
            state          <= M_RD;
          end
        end
        M_RD: if (dram_resp_valid) begin
          rd_q  <= dram_rdata;
          state <= M_DEC;
        end
        M_DEC: begin
          ev_ce <= |dec_ce;
          ev_ue <= |dec_ue;
          if (rq.op == MEM_READ || (|dec_ue)) begin
            resp.data  <= rd_data;
            resp.tags  <= rd_tags;
            resp.err   <= |dec_ue;
            resp_valid <= 1'b1;
            state      <= M_IDLE;
          end else begin
            ev_rmw   <= 1'b1;
            cur_data <= merge_data(rd_data, rq.data, rq.bmask);
            cur_tags <= merge_tags(rd_tags, rq.tags, rq.tmask);
            state    <= M_MERGE;
          end
        end
        M_MERGE: begin
          dram_we        <= 1'b1;
          dram_wdata     <= wr_beat;
          dram_req_valid <= 1'b1;
          state          <= M_WR;
        end
        M_WR: if (dram_resp_valid) begin
          resp       <= '0;
          resp_valid <= 1'b1;
          state      <= M_IDLE;
        end
        default: state <= M_IDLE;
      endcase
    end
  end

  a_dram_stable: assert property (@(posedge clk) disable iff (!rst_n)
    dram_req_valid && !dram_req_ready |=> dram_req_valid && $stable(dram_addr) && $stable(dram_we));
endmodule
