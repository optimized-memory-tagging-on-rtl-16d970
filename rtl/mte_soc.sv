// mte_soc: the memory-tagging memory system of a many-core server SoC, from the cores'
// load/store units down to the DRAM ports.
//
// NCORES processing elements (load/store unit with tag checking, L1, L2) connect through the
// mesh to NMCU channels, each a system-level-cache bank in front of a memory controller that
// keeps the tags in DRAM ECC bits. A tag is created by a tag store in a core, travels and is
// stored in the same bundle as its 64-byte line at every level, and is only ever compared in
// the cores. The DRAM devices are external; their ports are the top's ports. 192 cores follow
// the evaluated system; 8 channels follow its 8 populated DIMMs, one per channel (assumed).
// Cache and buffer sizes are this design's choices.
//
// Lines are interleaved over the channels by the low line-address bits. Per-core ports are
// indexed by core, DRAM ports by channel.
module mte_soc
  import mte_pkg::*;
#(
  parameter int unsigned NCORES   = 192,
  parameter int unsigned NMCU     = 8,
  parameter int unsigned SB_DEPTH = 16,
  parameter int unsigned L1_SETS  = 64,
  parameter int unsigned L2_SETS  = 256,
  parameter int unsigned SLC_SETS = 1024,   // per bank
  parameter int unsigned DRAM_W   = 576
) (
  input  logic              clk,
  input  logic              rst_n,
  // cores
  input  tcf_e              tcf            [NCORES],
  input  logic              op_valid       [NCORES],
  output logic              op_ready       [NCORES],
  input  lsu_op_e           op             [NCORES],
  input  logic [VA_W-1:0]   op_va          [NCORES],
  input  logic [63:0]       op_data        [NCORES],
  output logic              ld_resp_valid  [NCORES],
  output logic [63:0]       ld_data        [NCORES],
  output logic              ld_fault       [NCORES],
  output logic              ld_err         [NCORES],
  output logic              ld_fwd         [NCORES],
  output logic              st_fault_valid [NCORES],
  output logic [VA_W-1:0]   st_fault_va    [NCORES],
  output logic              tfsr           [NCORES],
  input  logic              tfsr_clr       [NCORES],
  output logic              sb_empty       [NCORES],
  output pe_events_t        pe_ev          [NCORES],
  // DRAM channels
  output logic              dram_req_valid [NMCU],
  input  logic              dram_req_ready [NMCU],
  output logic              dram_we        [NMCU],
  output laddr_t            dram_addr      [NMCU],
  output logic [DRAM_W-1:0] dram_wdata     [NMCU],
  input  logic              dram_resp_valid[NMCU],
  input  logic [DRAM_W-1:0] dram_rdata     [NMCU],
  // channel events
  output logic              ev_slc_hit     [NMCU],
  output logic              ev_slc_miss    [NMCU],
  output logic              ev_slc_evict   [NMCU],
  output logic              ev_slc_around  [NMCU],
  output logic              ev_rmw         [NMCU],
  output logic              ev_ce          [NMCU],
  output logic              ev_ue          [NMCU],
  output logic              ev_mesh_xfer
);
  logic      m_req_valid  [NCORES];
  logic      m_req_ready  [NCORES];
  mem_req_t  m_req        [NCORES];
  logic      m_resp_valid [NCORES];
  mem_resp_t m_resp;                       // mesh response, shared by all tiles

  logic      s_req_valid  [NMCU];
  logic      s_req_ready  [NMCU];
  mem_req_t  s_req        [NMCU];
  logic      s_resp_valid [NMCU];
  mem_resp_t s_resp       [NMCU];

  logic      c_req_valid  [NMCU];
  logic      c_req_ready  [NMCU];
  mem_req_t  c_req        [NMCU];
  logic      c_resp_valid [NMCU];
  mem_resp_t c_resp       [NMCU];

  for (genvar c = 0; c < NCORES; c++) begin : g_pe
    pe_tile #(.SB_DEPTH(SB_DEPTH), .L1_SETS(L1_SETS), .L2_SETS(L2_SETS)) u_pe (
      .clk, .rst_n, .tcf (tcf[c]),
      .op_valid (op_valid[c]), .op_ready (op_ready[c]), .op (op[c]),
      .op_va (op_va[c]), .op_data (op_data[c]),
      .ld_resp_valid (ld_resp_valid[c]), .ld_data (ld_data[c]), .ld_fault (ld_fault[c]),
      .ld_err (ld_err[c]), .ld_fwd (ld_fwd[c]),
      .st_fault_valid (st_fault_valid[c]), .st_fault_va (st_fault_va[c]),
      .tfsr (tfsr[c]), .tfsr_clr (tfsr_clr[c]), .sb_empty (sb_empty[c]),
      .mesh_req_valid (m_req_valid[c]), .mesh_req_ready (m_req_ready[c]),
      .mesh_req (m_req[c]), .mesh_resp_valid (m_resp_valid[c]), .mesh_resp (m_resp),
      .ev (pe_ev[c])
    );
  end

  mesh #(.NREQ(NCORES), .NBANK(NMCU)) u_mesh (
    .clk, .rst_n,
    .up_req_valid (m_req_valid), .up_req_ready (m_req_ready), .up_req (m_req),
    .up_resp_valid (m_resp_valid), .up_resp (m_resp),
    .dn_req_valid (s_req_valid), .dn_req_ready (s_req_ready), .dn_req (s_req),
    .dn_resp_valid (s_resp_valid), .dn_resp (s_resp),
    .ev_xfer (ev_mesh_xfer)
  );

  for (genvar m = 0; m < NMCU; m++) begin : g_ch
    tagged_cache #(.SETS(SLC_SETS)) u_slc (
      .clk, .rst_n,
      .up_req_valid (s_req_valid[m]), .up_req_ready (s_req_ready[m]), .up_req (s_req[m]),
      .up_resp_valid (s_resp_valid[m]), .up_resp (s_resp[m]),
      .dn_req_valid (c_req_valid[m]), .dn_req_ready (c_req_ready[m]), .dn_req (c_req[m]),
      .dn_resp_valid (c_resp_valid[m]), .dn_resp (c_resp[m]),
      .ev_hit (ev_slc_hit[m]), .ev_miss (ev_slc_miss[m]), .ev_evict (ev_slc_evict[m]),
      .ev_around (ev_slc_around[m])
    );
    mcu #(.DRAM_W(DRAM_W)) u_mcu (
      .clk, .rst_n,
      .req_valid (c_req_valid[m]), .req_ready (c_req_ready[m]), .req (c_req[m]),
      .resp_valid (c_resp_valid[m]), .resp (c_resp[m]),
      .dram_req_valid (dram_req_valid[m]), .dram_req_ready (dram_req_ready[m]),
      .dram_we (dram_we[m]), .dram_addr (dram_addr[m]), .dram_wdata (dram_wdata[m]),
      .dram_resp_valid (dram_resp_valid[m]), .dram_rdata (dram_rdata[m]),
      .ev_rmw (ev_rmw[m]), .ev_ce (ev_ce[m]), .ev_ue (ev_ue[m])
    );
  end
endmodule
