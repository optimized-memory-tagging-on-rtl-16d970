// store_buffer: in-order store queue of the load/store unit, extended for MTE.
//
// Each entry records, beside the store's address and data, the pointer's 4-bit address tag
// and whether the entry is a tag store (an instruction that writes a granule's allocation tag
// rather than data). A data store may leave the buffer only after its tag check is done;
// the check result is written back into the entry by the load/store unit.
//
// Store-to-load forwarding follows the design's rule: a younger load may take data from the
// youngest older store to the same 8-byte word only if the load's address tag equals the tag
// recorded for that store. The store's own check may still be pending, but with equal tags
// it will either pass for both or fault the store (and so the load that used its data).
// Forwarding across a tag store is not allowed: this buffer blocks a load while any tag store
// to the load's 16-byte granule is pending, which is a conservative reading of that rule
// (the load must also see the new tag before its own check). A blocked load waits until the
// conflicting entries have drained. With tag checking off, the tag rules do not apply.
//
// The buffer also tells the check engine which tag a store must be compared with when an
// older tag store to the same granule is still in the buffer (the cache does not yet hold
// that tag).
//
// Accesses are 8-byte aligned. All lookups are combinational; enqueue, check update and
// dequeue take effect at the clock edge. Depth is this design's choice.
module store_buffer
  import mte_pkg::*;
#(
  parameter int unsigned DEPTH = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              chk_on,        // tag checking enabled (SYNC or ASYNC)
  // enqueue
  input  logic              enq_valid,
  output logic              enq_ready,
  input  logic              enq_stg,
  input  logic [VA_W-1:0]   enq_va,
  input  logic [63:0]       enq_data,
  // check engine: oldest data store not yet checked
  output logic              chk_valid,
  output logic [VA_W-1:0]   chk_va,
  output logic              chk_ovr_valid, // an older tag store to the same granule is pending
  output mtag_t             chk_ovr_tag,   // ... and this is the tag it will write
  input  logic              chk_done,
  input  logic              chk_fail,      // SYNC mismatch: the store must not complete
  // head (oldest entry)
  output logic              head_valid,
  output logic              head_ready,    // checked, may be written to the cache
  output logic              head_stg,
  output logic              head_fail,
  output logic [VA_W-1:0]   head_va,
  output logic [63:0]       head_data,
  input  logic              deq,
  // forwarding query from a load
  input  logic [VA_W-1:0]   ld_va,
  output logic              fwd_hit,       // an older store writes the load's word
  output logic              fwd_ok,        // forwarding allowed
  output logic              fwd_tag_block, // refused: address tags differ
  output logic              fwd_stg_block, // refused: tag store pending on the granule
  output logic [63:0]       fwd_data,
  output logic              empty
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  typedef struct packed {
    logic            stg;
    logic [VA_W-1:0] va;
    logic [63:0]     data;
    logic            checked;
    logic            fail;
  } sb_entry_t;

  sb_entry_t        ent [DEPTH];
  logic [PW-1:0]    head, tail, chk_ptr;
  logic [PW:0]      count;

  function automatic logic [PW-1:0] wrap(int unsigned i);
    return PW'(i % DEPTH);
  endfunction

  assign enq_ready  = (int'(count) < int'(DEPTH));
  assign empty      = (count == '0);
  assign head_valid = !empty;
  assign head_stg   = ent[head].stg;
  assign head_fail  = ent[head].fail;
  assign head_va    = ent[head].va;
  assign head_data  = ent[head].data;
  assign head_ready = head_valid && ent[head].checked;

  // oldest unchecked entry and its tag override
  always_comb begin
    chk_valid     = 1'b0;
    chk_ptr       = head;
    chk_ovr_valid = 1'b0;
    chk_ovr_tag   = '0;
    for (int unsigned i = 0; i < DEPTH; i++) begin
      logic [PW-1:0] p;
      p = wrap(int'(head) + i);
      if (i < int'(count) && !chk_valid) begin
        if (!ent[p].checked) begin
          chk_valid = 1'b1;
          chk_ptr   = p;
        end
      end
    end
    chk_va = ent[chk_ptr].va;
    // youngest tag store older than the checked entry, same granule
    for (int unsigned i = 0; i < DEPTH; i++) begin
      logic [PW-1:0] p;
      p = wrap(int'(head) + i);
      if (chk_valid && p != chk_ptr && i < int'(count) && older(p, chk_ptr) && ent[p].stg &&
          ent[p].va[PA_W-1:4] == chk_va[PA_W-1:4]) begin
        chk_ovr_valid = 1'b1;
        chk_ovr_tag   = ent[p].va[ATAG_LSB +: TAG_W];
      end
    end
  end

  // position of p relative to head
  function automatic logic older(logic [PW-1:0] a, logic [PW-1:0] b);
    return ((int'(a) - int'(head) + int'(DEPTH)) % int'(DEPTH)) <
           ((int'(b) - int'(head) + int'(DEPTH)) % int'(DEPTH));
  endfunction

  // forwarding
  always_comb begin
    logic        st_hit;
    logic [63:0] st_data;
    mtag_t       st_tag;
    logic        stg_hit;
    st_hit  = 1'b0;
    st_data = '0;
    st_tag  = '0;
    stg_hit = 1'b0;
    for (int unsigned i = 0; i < DEPTH; i++) begin
      logic [PW-1:0] p;
      p = wrap(int'(head) + i);
      if (i < int'(count)) begin
        if (!ent[p].stg && ent[p].va[PA_W-1:3] == ld_va[PA_W-1:3]) begin
          st_hit  = 1'b1;                     // later (younger) matches overwrite
          st_data = ent[p].data;
          st_tag  = ent[p].va[ATAG_LSB +: TAG_W];
        end
        if (ent[p].stg && ent[p].va[PA_W-1:4] == ld_va[PA_W-1:4]) stg_hit = 1'b1;
      end
    end
    fwd_hit       = st_hit;
    fwd_data      = st_data;
    fwd_tag_block = chk_on && st_hit && (st_tag != ld_va[ATAG_LSB +: TAG_W]);
    fwd_stg_block = chk_on && stg_hit;
    fwd_ok        = st_hit && !fwd_tag_block && !fwd_stg_block;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head  <= '0;
      tail  <= '0;
      count <= '0;
      for (int unsigned i = 0; i < DEPTH; i++) ent[i] <= '0;
    end else begin
      if (chk_done && chk_valid) begin
        ent[chk_ptr].checked <= 1'b1;
        ent[chk_ptr].fail    <= chk_fail;
      end
      if (enq_valid && enq_ready) begin
        ent[tail].stg     <= enq_stg;
        ent[tail].va      <= enq_va;
        ent[tail].data    <= enq_data;
        // tag stores are not checked; with checking off, nothing is
        ent[tail].checked <= enq_stg || !chk_on;
        ent[tail].fail    <= 1'b0;
        tail              <= wrap(int'(tail) + 1);
      end
      if (deq && head_ready) head <= wrap(int'(head) + 1);
      count <= count + (PW+1)'(enq_valid && enq_ready) - (PW+1)'(deq && head_ready);
    end
  end

  a_no_deq_unchecked: assert property (@(posedge clk) disable iff (!rst_n)
    deq |-> head_ready);
endmodule
