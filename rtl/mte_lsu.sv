// mte_lsu: the MTE part of a core's load/store unit, between the core and its L1 data cache.
//
// The core issues 8-byte loads, 8-byte stores and tag stores in program order. Tags are
// checked at the cache-lookup point by tag_check, which compares the pointer's address tag
// (bits 59:56) with the allocation tag that arrives with the cache line; there is no extra
// pipeline stage and no separate tag access.
//   * Load: first the store buffer is searched. If an older store writes the same word and
//     forwarding is allowed (equal address tags, no pending tag store on the granule) the data
//     is forwarded; if forwarding is refused the load waits for the buffer to drain; otherwise
//     the line is read from L1 and data and tag check result return together.
//   * Store: enters the store buffer at once. With checking on, an "early line fetch" reads
//     the store's line from L1 (allocating it, with its tags) long before the store reaches
//     the head, and the tag check result is recorded in the entry. A store drains into L1
//     only when checked. In SYNC mode a failed store never writes and raises a fault; in
//     ASYNC mode it writes and sets the sticky TFSR bit.
//   * Tag store: enters the buffer unchecked and, at the head, writes the granule's tag in L1.
// The load/store behaviour, early fetch and the forwarding rule follow the design. The
// in-order single-issue structure, the single L1 port with priority load > early fetch > drain,
// and the fault reporting ports are this design's simplification of an out-of-order core.
// Addresses use top-byte-ignore: bits 47:0 of the pointer are the physical address (no MMU).
// A load forwarded from a store with the same address tag gets that store's data even if the
// store later fails its check; the store's fault (st_fault) is then the exception that, in a
// real core, squashes the load. The core pipeline that would squash it is not part of this model.
// Lint notes: the address-tag, allocation-tag and mismatch outputs of the two tag_check
// instances are left unused (only the SYNC/ASYNC results are needed here), and the assertions
// use rst_n synchronously while the flops reset asynchronously.
//
// Timing: a forwarded load answers the cycle after it is accepted; an L1 access costs the L1
// latency plus two cycles. op_ready is the acceptance strobe of the op presented.
module mte_lsu
  import mte_pkg::*;
#(
  parameter int unsigned SB_DEPTH = 16
) (
  input  logic            clk,
  input  logic            rst_n,
  input  tcf_e            tcf,
  // core side
  input  logic            op_valid,
  output logic            op_ready,
  input  lsu_op_e         op,
  input  logic [VA_W-1:0] op_va,
  input  logic [63:0]     op_data,
  output logic            ld_resp_valid,
  output logic [63:0]     ld_data,
  output logic            ld_fault,      // SYNC tag mismatch: the load did not complete
  output logic            ld_err,        // uncorrectable memory error
  output logic            ld_fwd,        // data came from the store buffer
  output logic            st_fault_valid,// SYNC tag mismatch of a store: it was not written
  output logic [VA_W-1:0] st_fault_va,
  output logic            tfsr,          // ASYNC mismatch seen (sticky)
  input  logic            tfsr_clr,
  output logic            sb_empty,
  // L1 side
  output logic            l1_req_valid,
  input  logic            l1_req_ready,
  output mem_req_t        l1_req,
  input  logic            l1_resp_valid,
  input  mem_resp_t       l1_resp,
  // events
  output logic            ev_fwd,
  output logic            ev_fwd_tag_block,
  output logic            ev_fwd_stg_block,
  output logic            ev_early_fetch,
  output logic            ev_tag_override
);
  typedef enum logic [1:0] {L_IDLE, L_PORT, L_WAIT} lstate_e;
  typedef enum logic [1:0] {P_IDLE, P_REQ, P_RESP} pstate_e;
  typedef enum logic [1:0] {O_LOAD, O_DRAIN, O_CHECK} owner_e;

  lstate_e          lstate;
  pstate_e          pstate;
  owner_e           owner;
  logic [VA_W-1:0]  ld_va;
  logic             blocked_seen;
  logic             chk_on;

  assign chk_on = (tcf != TCF_NONE);

  // store buffer
  logic            sb_enq_valid, sb_enq_ready;
  logic            chk_valid, chk_ovr_valid, chk_done, chk_fail;
  logic [VA_W-1:0] chk_va;
  mtag_t           chk_ovr_tag;
  logic            head_valid, head_ready, head_stg, head_fail, deq;
  logic [VA_W-1:0] head_va;
  logic [63:0]     head_data;
  logic            fwd_hit, fwd_ok, fwd_tag_block, fwd_stg_block;
  logic [63:0]     fwd_data;

  store_buffer #(.DEPTH(SB_DEPTH)) u_sb (
    .clk, .rst_n, .chk_on,
    .enq_valid (sb_enq_valid), .enq_ready (sb_enq_ready),
    .enq_stg (op == LSU_STG), .enq_va (op_va), .enq_data (op_data),
    .chk_valid, .chk_va, .chk_ovr_valid, .chk_ovr_tag, .chk_done, .chk_fail,
    .head_valid, .head_ready, .head_stg, .head_fail, .head_va, .head_data, .deq,
    .ld_va (op_va), .fwd_hit, .fwd_ok, .fwd_tag_block, .fwd_stg_block, .fwd_data,
    .empty (sb_empty)
  );

  // tag checks at the cache lookup
  line_tags_t st_line_tags;
  logic ld_sync, ld_async, st_sync, st_async;
  mtag_t ld_atag, ld_alloc, st_atag, st_alloc;
  logic  ld_mis, st_mis;

  always_comb begin
    st_line_tags = l1_resp.tags;
    if (chk_ovr_valid) st_line_tags[chk_va[5:4]*TAG_W +: TAG_W] = chk_ovr_tag;
  end

  tag_check u_ld_chk (
    .chk_valid (1'b1), .tcf, .va (ld_va), .line_tags (l1_resp.tags),
    .addr_tag (ld_atag), .alloc_tag (ld_alloc), .mismatch (ld_mis),
    .sync_fault (ld_sync), .async_flag (ld_async)
  );
  tag_check u_st_chk (
    .chk_valid (1'b1), .tcf, .va (chk_va), .line_tags (st_line_tags),
    .addr_tag (st_atag), .alloc_tag (st_alloc), .mismatch (st_mis),
    .sync_fault (st_sync), .async_flag (st_async)
  );

  // core-side acceptance
  logic is_ld, ld_accept_fwd, ld_accept_l1, ld_blocked;
  always_comb begin
    is_ld         = op_valid && (op == LSU_LOAD) && (lstate == L_IDLE);
    ld_blocked    = is_ld && fwd_hit && !fwd_ok || is_ld && fwd_stg_block;
    ld_accept_fwd = is_ld && fwd_ok;
    ld_accept_l1  = is_ld && !fwd_hit && !fwd_stg_block;
    sb_enq_valid  = op_valid && (op != LSU_LOAD) && (lstate == L_IDLE);
    op_ready      = ld_accept_fwd || ld_accept_l1 || (sb_enq_valid && sb_enq_ready);
  end

  // L1 port requests
  logic want_load, want_drain, want_check;
  always_comb begin
    want_load  = (lstate == L_PORT);
    want_drain = head_valid && head_ready && !head_fail;
    want_check = chk_valid;
    chk_done   = (pstate == P_RESP) && (owner == O_CHECK) && l1_resp_valid;
    chk_fail   = st_sync;
    deq        = ((pstate == P_RESP) && (owner == O_DRAIN) && l1_resp_valid) ||
                 (head_ready && head_fail);
  end

  function automatic mem_req_t drain_req(logic stg, logic [VA_W-1:0] va, logic [63:0] d);
    mem_req_t r;
    r       = '0;
    r.op    = MEM_WRITE;
    r.laddr = va[PA_W-1:6];
    if (stg) begin
      r.tmask = tag_mask_t'(1) << va[5:4];
      r.tags  = {GRANULES{va[ATAG_LSB +: TAG_W]}};
    end else begin
      r.bmask = byte_mask_t'(8'hFF) << (va[5:3] * 8);
      r.data  = {8{d}};
    end
    return r;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lstate           <= L_IDLE;
      pstate           <= P_IDLE;
      owner            <= O_LOAD;
      ld_va            <= '0;
      blocked_seen     <= 1'b0;
      l1_req_valid     <= 1'b0;
      l1_req           <= '0;
      ld_resp_valid    <= 1'b0;
      ld_data          <= '0;
      ld_fault         <= 1'b0;
      ld_err           <= 1'b0;
      ld_fwd           <= 1'b0;
      st_fault_valid   <= 1'b0;
      st_fault_va      <= '0;
      tfsr             <= 1'b0;
      ev_fwd           <= 1'b0;
      ev_fwd_tag_block <= 1'b0;
      ev_fwd_stg_block <= 1'b0;
      ev_early_fetch   <= 1'b0;
      ev_tag_override  <= 1'b0;
    end else begin
      ld_resp_valid    <= 1'b0;
      st_fault_valid   <= 1'b0;
      ev_fwd           <= 1'b0;
      ev_fwd_tag_block <= 1'b0;
      ev_fwd_stg_block <= 1'b0;
      ev_early_fetch   <= 1'b0;
      ev_tag_override  <= 1'b0;
      if (tfsr_clr) tfsr <= 1'b0;

      // loads
      if (ld_accept_fwd) begin
        ld_resp_valid <= 1'b1;
        ld_data       <= fwd_data;
        ld_fault      <= 1'b0;
        ld_err        <= 1'b0;
        ld_fwd        <= 1'b1;
        ev_fwd        <= 1'b1;
      end else if (ld_accept_l1) begin
        ld_va  <= op_va;
        lstate <= L_PORT;
      end
      // count a refused forward once per load
      if (ld_blocked && !blocked_seen) begin
        blocked_seen     <= 1'b1;
        ev_fwd_tag_block <= fwd_tag_block;
        ev_fwd_stg_block <= fwd_stg_block;
      end
      if (op_ready) blocked_seen <= 1'b0;

      // failed SYNC store at the head: dropped, fault reported
      if (head_ready && head_fail) begin
        st_fault_valid <= 1'b1;
        st_fault_va    <= head_va;
      end

      // L1 port
      unique case (pstate)
        P_IDLE: begin
          if (want_load) begin
            owner        <= O_LOAD;
            l1_req       <= '{op: MEM_READ, laddr: ld_va[PA_W-1:6], default: '0};
            l1_req_valid <= 1'b1;
            lstate       <= L_WAIT;
            pstate       <= P_REQ;
          end else if (want_check) begin
            owner          <= O_CHECK;
            l1_req         <= '{op: MEM_READ, laddr: chk_va[PA_W-1:6], default: '0};
            l1_req_valid   <= 1'b1;
            ev_early_fetch <= 1'b1;
            pstate         <= P_REQ;
          end else if (want_drain) begin
            owner        <= O_DRAIN;
            l1_req       <= drain_req(head_stg, head_va, head_data);
            l1_req_valid <= 1'b1;
            pstate       <= P_REQ;
          end
        end
        P_REQ: if (l1_req_ready) begin
          l1_req_valid <= 1'b0;
          pstate       <= P_RESP;
        end
        P_RESP: if (l1_resp_valid) begin
          pstate <= P_IDLE;
          unique case (owner)
            O_LOAD: begin
              ld_resp_valid <= 1'b1;
              ld_data       <= ld_sync ? '0 : l1_resp.data[ld_va[5:3]*64 +: 64];
              ld_fault      <= ld_sync;
              ld_err        <= l1_resp.err;
              ld_fwd        <= 1'b0;
              if (ld_async) tfsr <= 1'b1;
              lstate        <= L_IDLE;
            end
            O_CHECK: begin
              if (st_async) tfsr <= 1'b1;
              ev_tag_override <= chk_ovr_valid;
            end
            default: ;
          endcase
        end
        default: pstate <= P_IDLE;
      endcase
    end
  end

  a_l1_stable: assert property (@(posedge clk) disable iff (!rst_n)
    l1_req_valid && !l1_req_ready |=> l1_req_valid && $stable(l1_req));
endmodule
