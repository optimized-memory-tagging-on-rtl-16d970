// mte_pkg: shared types and constants of the co-located memory-tagging memory system.
//
// Everywhere below the CPU core, a 64-byte cache line travels and is stored as one "bundle":
// 512 data bits plus one 4-bit allocation tag per 16-byte granule (16 tag bits per line).
// The 16-byte granule, the 4-bit tag and the tag's position in bits 59:56 of a pointer follow
// the Arm Memory Tagging Extension. Transaction encoding, address widths and the
// request/response handshake are this design's own choices.
//
// Handshake used by every memory link (LSU->L1->L2->mesh->SLC->MCU): the requester raises
// req_valid with a mem_req_t and holds it until req_ready; every request, read or write,
// is answered by exactly one resp_valid pulse carrying a mem_resp_t (writes return an
// acknowledge). Only one request per link is outstanding at a time.
package mte_pkg;

  localparam int unsigned LINE_BYTES    = 64;                 // cache line
  localparam int unsigned GRANULE_BYTES = 16;                 // MTE tag granule
  localparam int unsigned TAG_W         = 4;                  // MTE allocation/address tag
  localparam int unsigned GRANULES      = LINE_BYTES / GRANULE_BYTES;   // 4 per line
  localparam int unsigned LINE_BITS     = LINE_BYTES * 8;     // 512
  localparam int unsigned LTAG_BITS     = GRANULES * TAG_W;   // 16 tag bits per line
  localparam int unsigned VA_W          = 64;                 // pointer width
  localparam int unsigned PA_W          = 48;                 // physical address bits (assumed)
  localparam int unsigned LADDR_W       = PA_W - 6;           // line address width
  localparam int unsigned ATAG_LSB      = 56;                 // address tag in VA[59:56]

  typedef logic [LINE_BITS-1:0]  line_data_t;
  typedef logic [LTAG_BITS-1:0]  line_tags_t;
  typedef logic [LINE_BYTES-1:0] byte_mask_t;
  typedef logic [GRANULES-1:0]   tag_mask_t;
  typedef logic [TAG_W-1:0]      mtag_t;
  typedef logic [LADDR_W-1:0]    laddr_t;

  // A line-granular memory transaction. A write replaces the data bytes selected by
  // bmask and the granule tags selected by tmask and leaves the rest of the line as it is.
  //   bmask all ones, tmask all ones : full bundle write (a cache eviction)
  //   bmask all ones, tmask zero     : data-only write; memory must preserve the tags
  //   bmask zero,     tmask nonzero  : tag-only write (the tag-store instruction)
  typedef enum logic [0:0] {
    MEM_READ  = 1'b0,
    MEM_WRITE = 1'b1
  } mem_op_e;

  typedef struct packed {
    mem_op_e    op;
    laddr_t     laddr;
    line_data_t data;
    byte_mask_t bmask;
    line_tags_t tags;
    tag_mask_t  tmask;
  } mem_req_t;

  typedef struct packed {
    line_data_t data;
    line_tags_t tags;
    logic       err;     // uncorrectable memory error somewhere in the line
  } mem_resp_t;

  // Tag-check mode of the running context (Arm SCTLR_ELx.TCF encoding).
  typedef enum logic [1:0] {
    TCF_NONE  = 2'd0,    // MTE present, no tag checking
    TCF_SYNC  = 2'd1,    // mismatch faults and the access does not complete
    TCF_ASYNC = 2'd2     // access completes, mismatch sets a sticky status bit
  } tcf_e;

  // Memory operations the core hands to the load/store unit.
  typedef enum logic [1:0] {
    LSU_LOAD  = 2'd0,    // 8-byte load
    LSU_STORE = 2'd1,    // 8-byte store
    LSU_STG   = 2'd2     // tag store: set the granule's allocation tag to the address tag
  } lsu_op_e;

  // Event pulses of one core's load/store unit and private caches (for counters).
  typedef struct packed {
    logic fwd;            // load data forwarded from the store buffer
    logic fwd_tag_block;  // forwarding refused: address tags differ
    logic fwd_stg_block;  // forwarding refused: tag store pending on the granule
    logic early_fetch;    // line fetched for a store's tag check
    logic tag_override;   // store checked against a pending tag store's tag
    logic l1_hit, l1_miss, l1_evict, l1_around;
    logic l2_hit, l2_miss, l2_evict, l2_around;
  } pe_events_t;

  // Merge of a write into a stored bundle.
  function automatic line_data_t merge_data(line_data_t old_d, line_data_t new_d, byte_mask_t m);
    line_data_t r;
    for (int b = 0; b < int'(LINE_BYTES); b++)
      r[b*8 +: 8] = m[b] ? new_d[b*8 +: 8] : old_d[b*8 +: 8];
    return r;
  endfunction

  function automatic line_tags_t merge_tags(line_tags_t old_t, line_tags_t new_t, tag_mask_t m);
    line_tags_t r;
    for (int g = 0; g < int'(GRANULES); g++)
      r[g*TAG_W +: TAG_W] = m[g] ? new_t[g*TAG_W +: TAG_W] : old_t[g*TAG_W +: TAG_W];
    return r;
  endfunction

endpackage
