// tagged_cache: a cache level whose every line stores its MTE allocation tags beside the data.
//
// The same module serves as the private L1 data cache, the private L2 and each bank of the
// system-level cache (SLC). A line is a bundle of 512 data bits and 16 tag bits (one 4-bit tag
// per 16-byte granule); tags are filled, merged, kept and written back together with the data,
// so a tag never needs a transaction of its own. That co-location is the point of the design;
// the cache organisation is this design's own, and deliberately simple: direct mapped,
// write back, write allocate, blocking (one request in flight), one response per request.
//
// Miss handling of writes, chosen so that tags are never lost:
//   * full bundle write (all bytes, all tags): allocate without a fill;
//   * data-only full-line write or tag-only write: passed on to the next level unallocated
//     ("write around"), so that the memory controller merges it with the stored half of the
//     bundle by read-modify-write;
//   * any other (partial) write: fill the line, then merge.
// A dirty victim is written back as a full bundle before its slot is reused.
//
// Timing: a hit is answered two cycles after the request is accepted (accept, look up,
// respond). A miss adds the downstream round trips. up_req_ready is high only while idle.
module tagged_cache
  import mte_pkg::*;
#(
  parameter int unsigned SETS = 64     // lines (direct mapped)
) (
  input  logic      clk,
  input  logic      rst_n,
  // upstream (toward the core)
  input  logic      up_req_valid,
  output logic      up_req_ready,
  input  mem_req_t  up_req,
  output logic      up_resp_valid,
  output mem_resp_t up_resp,
  // downstream (toward memory)
  output logic      dn_req_valid,
  input  logic      dn_req_ready,
  output mem_req_t  dn_req,
  input  logic      dn_resp_valid,
  input  mem_resp_t dn_resp,
  // event pulses for performance counting
  output logic      ev_hit,
  output logic      ev_miss,
  output logic      ev_evict,
  output logic      ev_around
);
  localparam int unsigned IDX_W = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned TAG_BITS = LADDR_W - IDX_W;

  typedef enum logic [2:0] {S_IDLE, S_LOOKUP, S_WB, S_FILL, S_FWD, S_WAIT} state_e;
  typedef enum logic [1:0] {N_FILL, N_INSTALL, N_DONE} next_e;

  state_e     state;
  next_e      after_wb;       // what follows a write back
  mem_req_t   rq;

  line_data_t              data_mem  [SETS];
  line_tags_t              mtag_mem  [SETS];
  logic [TAG_BITS-1:0]     atag_mem  [SETS];
  logic [SETS-1:0]         valid, dirty;

  logic [IDX_W-1:0]    idx;
  logic [TAG_BITS-1:0] atag;
  logic                hit, full_bmask, full_tmask, full_bundle, around;
  mem_req_t            wb_req;

  always_comb begin
    idx         = rq.laddr[IDX_W-1:0];
    atag        = rq.laddr[LADDR_W-1:IDX_W];
    hit         = valid[idx] && (atag_mem[idx] == atag);
    full_bmask  = &rq.bmask;
    full_tmask  = &rq.tmask;
    full_bundle = full_bmask && full_tmask;
    around      = (rq.op == MEM_WRITE) && !full_bundle &&
                  ((rq.bmask == '0) || (full_bmask && rq.tmask == '0));
    wb_req       = '0;
    wb_req.op    = MEM_WRITE;
    wb_req.laddr = {atag_mem[idx], idx};
    wb_req.data  = data_mem[idx];
    wb_req.tags  = mtag_mem[idx];
    wb_req.bmask = '1;
    wb_req.tmask = '1;
  end

  assign up_req_ready = (state == S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      after_wb      <= N_DONE;
      rq            <= '0;
      valid         <= '0;
      dirty         <= '0;
      up_resp_valid <= 1'b0;
      up_resp       <= '0;
      dn_req_valid  <= 1'b0;
      dn_req        <= '0;
      ev_hit        <= 1'b0;
      ev_miss       <= 1'b0;
      ev_evict      <= 1'b0;
      ev_around     <= 1'b0;
    end else begin
      up_resp_valid <= 1'b0;
      ev_hit        <= 1'b0;
      ev_miss       <= 1'b0;
      ev_evict      <= 1'b0;
      ev_around     <= 1'b0;
      unique case (state)
        S_IDLE: if (up_req_valid) begin
          rq    <= up_req;
          state <= S_LOOKUP;
        end
        S_LOOKUP: begin
          if (hit) begin
            ev_hit <= 1'b1;
            if (rq.op == MEM_WRITE) begin
              data_mem[idx] <= merge_data(data_mem[idx], rq.data, rq.bmask);
              mtag_mem[idx] <= merge_tags(mtag_mem[idx], rq.tags, rq.tmask);
              dirty[idx]    <= 1'b1;
            end
            up_resp.data  <= data_mem[idx];
            up_resp.tags  <= mtag_mem[idx];
            up_resp.err   <= 1'b0;
            up_resp_valid <= 1'b1;
            state         <= S_IDLE;
          end else if (around) begin
            ev_around    <= 1'b1;
            dn_req       <= rq;
            dn_req_valid <= 1'b1;
            state        <= S_FWD;
          end else begin
            ev_miss <= 1'b1;
            if (valid[idx] && dirty[idx]) begin
              ev_evict     <= 1'b1;
              dn_req       <= wb_req;
              dn_req_valid <= 1'b1;
              after_wb     <= full_bundle ? N_INSTALL : N_FILL;
              state        <= S_WB;
            end else if (full_bundle) begin
              data_mem[idx] <= rq.data;
              mtag_mem[idx] <= rq.tags;
              atag_mem[idx] <= atag;
              valid[idx]    <= 1'b1;
              dirty[idx]    <= 1'b1;
              up_resp       <= '0;
              up_resp_valid <= 1'b1;
              state         <= S_IDLE;
            end else begin
              dn_req       <= '{op: MEM_READ, laddr: rq.laddr, default: '0};
              dn_req_valid <= 1'b1;
              state        <= S_FILL;
            end
          end
        end
        S_WB: begin
          if (dn_req_valid && dn_req_ready) dn_req_valid <= 1'b0;
          if (dn_resp_valid) begin
            valid[idx] <= 1'b0;
            dirty[idx] <= 1'b0;
            if (after_wb == N_INSTALL) begin
              data_mem[idx] <= rq.data;
              mtag_mem[idx] <= rq.tags;
              atag_mem[idx] <= atag;
              valid[idx]    <= 1'b1;
              dirty[idx]    <= 1'b1;
              up_resp       <= '0;
              up_resp_valid <= 1'b1;
              state         <= S_IDLE;
            end else begin
              dn_req       <= '{op: MEM_READ, laddr: rq.laddr, default: '0};
              dn_req_valid <= 1'b1;
              state        <= S_FILL;
            end
          end
        end
        S_FILL: begin
          if (dn_req_valid && dn_req_ready) dn_req_valid <= 1'b0;
          if (dn_resp_valid) begin
            if (dn_resp.err) begin
              // poisoned line: report it upward and do not allocate
              up_resp       <= dn_resp;
              up_resp_valid <= 1'b1;
              state         <= S_IDLE;
            end else begin
              data_mem[idx] <= dn_resp.data;
              mtag_mem[idx] <= dn_resp.tags;
              atag_mem[idx] <= atag;
              valid[idx]    <= 1'b1;
              dirty[idx]    <= 1'b0;
              state         <= S_WAIT;   // one idle cycle, then the lookup hits
            end
          end
        end
        S_WAIT: state <= S_LOOKUP;
        S_FWD: begin
          if (dn_req_valid && dn_req_ready) dn_req_valid <= 1'b0;
          if (dn_resp_valid) begin
            up_resp       <= dn_resp;
            up_resp_valid <= 1'b1;
            state         <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A response may only arrive while a downstream request is in flight.
  a_resp_expected: assert property (@(posedge clk) disable iff (!rst_n)
    dn_resp_valid |-> (state inside {S_WB, S_FILL, S_FWD}));
  // A downstream request is held until it is accepted.
  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    dn_req_valid && !dn_req_ready |=> dn_req_valid && $stable(dn_req));
endmodule
