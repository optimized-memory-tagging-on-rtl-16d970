// pe_tile: one core processing element's memory side: the MTE load/store unit, the private
// L1 data cache and the private L2, all holding tags beside data.
//
// The core pipeline itself is outside this model; its memory operations enter at the
// load/store unit ports. Tags are generated (tag store) and validated (tag check) in the
// load/store unit, kept co-resident with data in both cache levels, and leave the tile only as
// part of a line bundle on the mesh port. Cache sizes are this design's choice.
//
// Timing is that of the parts: an L1 hit costs two cycles after acceptance by the cache,
// every further level adds its own lookup and the mesh.
module pe_tile
  import mte_pkg::*;
#(
  parameter int unsigned SB_DEPTH = 16,
  parameter int unsigned L1_SETS  = 64,
  parameter int unsigned L2_SETS  = 256
) (
  input  logic            clk,
  input  logic            rst_n,
  input  tcf_e            tcf,
  input  logic            op_valid,
  output logic            op_ready,
  input  lsu_op_e         op,
  input  logic [VA_W-1:0] op_va,
  input  logic [63:0]     op_data,
  output logic            ld_resp_valid,
  output logic [63:0]     ld_data,
  output logic            ld_fault,
  output logic            ld_err,
  output logic            ld_fwd,
  output logic            st_fault_valid,
  output logic [VA_W-1:0] st_fault_va,
  output logic            tfsr,
  input  logic            tfsr_clr,
  output logic            sb_empty,
  // mesh port
  output logic            mesh_req_valid,
  input  logic            mesh_req_ready,
  output mem_req_t        mesh_req,
  input  logic            mesh_resp_valid,
  input  mem_resp_t       mesh_resp,
  output pe_events_t      ev
);
  logic      l1_req_valid, l1_req_ready, l1_resp_valid;
  mem_req_t  l1_req;
  mem_resp_t l1_resp;
  logic      l2_req_valid, l2_req_ready, l2_resp_valid;
  mem_req_t  l2_req;
  mem_resp_t l2_resp;

  mte_lsu #(.SB_DEPTH(SB_DEPTH)) u_lsu (
    .clk, .rst_n, .tcf,
    .op_valid, .op_ready, .op, .op_va, .op_data,
    .ld_resp_valid, .ld_data, .ld_fault, .ld_err, .ld_fwd,
    .st_fault_valid, .st_fault_va, .tfsr, .tfsr_clr, .sb_empty,
    .l1_req_valid, .l1_req_ready, .l1_req, .l1_resp_valid, .l1_resp,
    .ev_fwd (ev.fwd), .ev_fwd_tag_block (ev.fwd_tag_block),
    .ev_fwd_stg_block (ev.fwd_stg_block), .ev_early_fetch (ev.early_fetch),
    .ev_tag_override (ev.tag_override)
  );

  tagged_cache #(.SETS(L1_SETS)) u_l1 (
    .clk, .rst_n,
    .up_req_valid (l1_req_valid), .up_req_ready (l1_req_ready), .up_req (l1_req),
    .up_resp_valid (l1_resp_valid), .up_resp (l1_resp),
    .dn_req_valid (l2_req_valid), .dn_req_ready (l2_req_ready), .dn_req (l2_req),
    .dn_resp_valid (l2_resp_valid), .dn_resp (l2_resp),
    .ev_hit (ev.l1_hit), .ev_miss (ev.l1_miss), .ev_evict (ev.l1_evict),
    .ev_around (ev.l1_around)
  );

  tagged_cache #(.SETS(L2_SETS)) u_l2 (
    .clk, .rst_n,
    .up_req_valid (l2_req_valid), .up_req_ready (l2_req_ready), .up_req (l2_req),
    .up_resp_valid (l2_resp_valid), .up_resp (l2_resp),
    .dn_req_valid (mesh_req_valid), .dn_req_ready (mesh_req_ready), .dn_req (mesh_req),
    .dn_resp_valid (mesh_resp_valid), .dn_resp (mesh_resp),
    .ev_hit (ev.l2_hit), .ev_miss (ev.l2_miss), .ev_evict (ev.l2_evict),
    .ev_around (ev.l2_around)
  );
endmodule
