// tag_check: the MTE tag comparator at the cache-lookup point of the load/store pipeline.
//
// It extracts the 4-bit address tag from bits 59:56 of the access pointer, selects the
// allocation tag of the addressed 16-byte granule (pointer bits 5:4) from the 16 tag bits
// that arrive with the cache line, and compares them. In SYNC mode a mismatch becomes a
// fault that stops the access; in ASYNC mode it only requests the sticky status bit; with
// checking off it reports nothing. The tag bit positions and the two modes follow the Arm
// architecture. The unit is purely combinational, so it adds no pipeline stage: the check
// happens in the same cycle as the cache lookup result, in parallel with the other
// permission checks, as the design intends.
//
// Interface: chk_valid qualifies the inputs; sync_fault and async_flag are valid in the same
// cycle. addr_tag (a plain copy of pointer bits 59:56) and alloc_tag are diagnostic outputs;
// the load/store unit uses only the two results.
module tag_check
  import mte_pkg::*;
(
  input  logic                 chk_valid,
  input  tcf_e                 tcf,
  input  logic [VA_W-1:0]      va,
  input  line_tags_t           line_tags,
  output mtag_t                addr_tag,
  output mtag_t                alloc_tag,
  output logic                 mismatch,
  output logic                 sync_fault,
  output logic                 async_flag
);
  logic [1:0] granule;

  always_comb begin
    addr_tag   = va[ATAG_LSB +: TAG_W];
    granule    = va[5:4];
    alloc_tag  = line_tags[granule*TAG_W +: TAG_W];
    mismatch   = chk_valid && (addr_tag != alloc_tag);
    sync_fault = mismatch && (tcf == TCF_SYNC);
    async_flag = mismatch && (tcf == TCF_ASYNC);
  end
endmodule
