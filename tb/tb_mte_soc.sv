// tb_mte_soc: end-to-end test of the SoC model at reduced size (4 cores, 2 memory channels,
// small caches) with a behavioural DRAM behind each memory controller. DRAM starts as all
// zero, which is a valid codeword: every line reads as data 0 with all tags 0.
// Directed part on core 0 drives each mechanism once: store-to-load forwarding with equal
// tags, forwarding refused on different tags, forwarding blocked by a pending tag store, the
// tag-store override, a SYNC load fault, a SYNC store fault, the ASYNC status flag, a tag
// store that misses every cache and becomes a read-modify-write at the memory controller,
// a corrected single-bit DRAM error and an uncorrectable double-bit error reported to the
// load. Random part: all cores run load/store/tag-store programs in parallel on disjoint
// lines (the model has no coherence), each load checked against a sequential reference;
// then every word is read back. Each mechanism counter must be non-zero at the end.
module tb_mte_soc;
  import mte_pkg::*;
  localparam int NC = 4, NM = 2;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  tcf_e        tcf            [NC];
  logic        op_valid       [NC];
  logic        op_ready       [NC];
  lsu_op_e     op             [NC];
  logic [63:0] op_va          [NC];
  logic [63:0] op_data        [NC];
  logic        ld_resp_valid  [NC];
  logic [63:0] ld_data        [NC];
  logic        ld_fault       [NC];
  logic        ld_err         [NC];
  logic        ld_fwd         [NC];
  logic        st_fault_valid [NC];
  logic [63:0] st_fault_va    [NC];
  logic        tfsr           [NC];
  logic        tfsr_clr       [NC];
  logic        sb_empty       [NC];
  pe_events_t  pe_ev          [NC];
  logic        dram_req_valid [NM];
  logic        dram_req_ready [NM];
  logic        dram_we        [NM];
  laddr_t      dram_addr      [NM];
  logic [575:0] dram_wdata    [NM];
  logic        dram_resp_valid[NM];
  logic [575:0] dram_rdata    [NM];
  logic ev_slc_hit [NM], ev_slc_miss [NM], ev_slc_evict [NM], ev_slc_around [NM];
  logic ev_rmw [NM], ev_ce [NM], ev_ue [NM];
  logic ev_mesh_xfer;

  mte_soc #(.NCORES(NC), .NMCU(NM), .SB_DEPTH(8), .L1_SETS(4), .L2_SETS(8), .SLC_SETS(8)) dut (.*);

  for (genvar m = 0; m < NM; m++) begin : g_dram
    dram_model #(.DRAM_W(576), .AW(LADDR_W), .LAT(6)) u (.clk, .req_valid(dram_req_valid[m]),
      .req_ready(dram_req_ready[m]), .we(dram_we[m]), .addr(dram_addr[m]), .wdata(dram_wdata[m]),
      .resp_valid(dram_resp_valid[m]), .rdata(dram_rdata[m]));
  end

  // mechanism counters
  int n_fwd = 0, n_tagblk = 0, n_stgblk = 0, n_early = 0, n_ovr = 0, n_ldfault = 0, n_stfault = 0;
  int n_l1h = 0, n_l1m = 0, n_l1e = 0, n_l1a = 0, n_l2h = 0, n_l2m = 0, n_l2e = 0, n_l2a = 0;
  int n_slch = 0, n_slcm = 0, n_slce = 0, n_slca = 0, n_rmw = 0, n_ce = 0, n_ue = 0, n_xfer = 0;
  int n_async = 0, n_lderr = 0, n_squash = 0;
  always @(posedge clk) begin
    for (int c = 0; c < NC; c++) begin
      n_fwd += int'(pe_ev[c].fwd); n_tagblk += int'(pe_ev[c].fwd_tag_block);
      n_stgblk += int'(pe_ev[c].fwd_stg_block); n_early += int'(pe_ev[c].early_fetch);
      n_ovr += int'(pe_ev[c].tag_override);
      n_l1h += int'(pe_ev[c].l1_hit); n_l1m += int'(pe_ev[c].l1_miss);
      n_l1e += int'(pe_ev[c].l1_evict); n_l1a += int'(pe_ev[c].l1_around);
      n_l2h += int'(pe_ev[c].l2_hit); n_l2m += int'(pe_ev[c].l2_miss);
      n_l2e += int'(pe_ev[c].l2_evict); n_l2a += int'(pe_ev[c].l2_around);
      n_stfault += int'(st_fault_valid[c]);
      n_ldfault += int'(ld_resp_valid[c] && ld_fault[c]);
      n_lderr += int'(ld_resp_valid[c] && ld_err[c]);
    end
    for (int m = 0; m < NM; m++) begin
      n_slch += int'(ev_slc_hit[m]); n_slcm += int'(ev_slc_miss[m]);
      n_slce += int'(ev_slc_evict[m]); n_slca += int'(ev_slc_around[m]);
      n_rmw += int'(ev_rmw[m]); n_ce += int'(ev_ce[m]); n_ue += int'(ev_ue[m]);
    end
    n_xfer += int'(ev_mesh_xfer);
  end

  // sequential reference (cores use disjoint lines)
  logic [63:0] rw [logic [47:0]];
  mtag_t       rg [logic [47:0]];
  // data of stores that will fail SYNC checking: a load with the same address tag may be
  // forwarded from them; in the core that load is squashed by the store's precise fault
  logic [63:0] doomed [logic [47:0]];
  logic        bad [logic [41:0]];     // lines with an uncorrectable error
  function automatic logic [63:0] ref_word(logic [63:0] va);
    logic [47:0] k;
    k = {3'b0, va[47:3]};
    return rw.exists(k) ? rw[k] : 64'h0;
  endfunction
  function automatic mtag_t ref_tag(logic [63:0] va);
    logic [47:0] k;
    k = {4'b0, va[47:4]};
    return rg.exists(k) ? rg[k] : 4'h0;
  endfunction
  function automatic logic [63:0] mkva(mtag_t t, int line, int word);
    return {4'h0, t, 8'h0, 33'h0, 9'(line), 3'(word), 3'b0};
  endfunction

  logic [63:0] r_data [NC];
  logic r_fault [NC], r_fwd [NC], r_err [NC];
  task automatic issue(int c, lsu_op_e o, logic [63:0] va, logic [63:0] d);
    @(negedge clk);
    op_valid[c] = 1; op[c] = o; op_va[c] = va; op_data[c] = d;
    forever begin
      logic rdy;
      #1;
      rdy = op_ready[c];
      @(posedge clk);
      if (rdy) break;
      @(negedge clk);
    end
    @(negedge clk);
    op_valid[c] = 0;
    if (o == LSU_LOAD) begin
      while (!ld_resp_valid[c]) begin @(posedge clk); @(negedge clk); end
      r_data[c] = ld_data[c]; r_fault[c] = ld_fault[c]; r_fwd[c] = ld_fwd[c]; r_err[c] = ld_err[c];
    end
  endtask
  task automatic expect_load(int c, logic [63:0] va, logic exp_fault, string what);
    issue(c, LSU_LOAD, va, '0);
    checks++;
    if (r_fwd[c] && exp_fault && doomed.exists({3'b0, va[47:3]}) && r_data[c] == doomed[{3'b0, va[47:3]}])
      n_squash++;
    else if (r_fault[c] !== exp_fault || r_err[c] || (!exp_fault && r_data[c] !== ref_word(va))) begin
      failures++;
      $display("FAIL core %0d %s: va %h fault %b/%b err %b data %h exp %h", c, what, va,
               r_fault[c], exp_fault, r_err[c], r_data[c], ref_word(va));
    end
  endtask
  task automatic store(int c, logic [63:0] va, logic [63:0] d);
    issue(c, LSU_STORE, va, d);
    if (tcf[c] != TCF_SYNC || va[59:56] == ref_tag(va)) begin
      rw[{3'b0, va[47:3]}] = d; doomed.delete({3'b0, va[47:3]});
    end else doomed[{3'b0, va[47:3]}] = d;
  endtask
  task automatic stg(int c, logic [63:0] va);
    issue(c, LSU_STG, va, '0);
    rg[{4'b0, va[47:4]}] = va[59:56];
  endtask
  task automatic drain(int c);
    @(negedge clk);
    while (!sb_empty[c]) begin @(posedge clk); @(negedge clk); end
    repeat (2) @(posedge clk);
  endtask
  task automatic expect_nz(string what, int got);
    checks++;
    if (got == 0) begin failures++; $display("FAIL %s never happened", what); end
  endtask

  // random program for core c on lines c*32 .. c*32+31
  task automatic run(int c, int n);
    for (int i = 0; i < n; i++) begin
      int line, word;
      logic [63:0] va;
      mtag_t t;
      line = c*32 + $urandom_range(0, 31); word = $urandom_range(0, 7);
      va = mkva(0, line, word);
      t = ref_tag(va);
      case ($urandom_range(0, 9))
        0, 1, 2, 3, 4: begin
          if ($urandom_range(0, 5) == 0) t = t + 4'd1;
          va[59:56] = t;
          expect_load(c, va, t != ref_tag(va), "random load");
        end
        5, 6, 7, 8: begin
          if ($urandom_range(0, 7) == 0) t = t + 4'd1;
          va[59:56] = t; store(c, va, {$urandom, $urandom});
        end
        default: begin va[59:56] = 4'($urandom); stg(c, va); end
      endcase
    end
  endtask

  initial begin
    #20000000; failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int c = 0; c < NC; c++) begin
      tcf[c] = TCF_SYNC; op_valid[c] = 0; op[c] = LSU_LOAD; op_va[c] = 0; op_data[c] = 0;
      tfsr_clr[c] = 0;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    // forwarding with equal tags, then refused on different tags
    store(0, mkva(0, 200, 0), 64'h1111);
    expect_load(0, mkva(0, 200, 0), 0, "forward");
    store(0, mkva(0, 201, 0), 64'h2222);
    expect_load(0, mkva(3, 201, 0), 1, "refused on different tags");
    drain(0);
    // tag store to a cold line: around every cache level, read-modify-write at the MCU
    stg(0, mkva(5, 202, 0));
    // forwarding blocked by the pending tag store; the younger store uses the override tag
    store(0, mkva(5, 202, 1), 64'h3333);
    store(0, mkva(0, 202, 1), 64'h4444);   // old tag: faults against the pending tag 5
    drain(0);
    expect_load(0, mkva(5, 202, 1), 0, "after tag store");
    stg(0, mkva(7, 203, 0));
    store(0, mkva(7, 203, 0), 64'h5555);
    expect_load(0, mkva(7, 203, 0), 0, "behind a tag store");
    drain(0);
    // ASYNC: the load completes, the status flag is set
    tcf[0] = TCF_ASYNC;
    issue(0, LSU_LOAD, mkva(9, 204, 0), '0);
    n_async += int'(tfsr[0] && !r_fault[0]);
    @(negedge clk); tfsr_clr[0] = 1; @(negedge clk); tfsr_clr[0] = 0;
    tcf[0] = TCF_SYNC;
    // DRAM faults on cold lines: line 206 -> channel 0 address 103, line 208 -> address 104
    g_dram[0].u.flip(42'd103, 77);
    expect_load(0, mkva(0, 206, 0), 0, "corrected single-bit error");
    g_dram[0].u.flip(42'd104, 5); g_dram[0].u.flip(42'd104, 9);
    issue(0, LSU_LOAD, mkva(0, 208, 0), '0);
    checks++;
    if (!r_err[0]) begin failures++; $display("FAIL double-bit error not reported"); end
    // all cores in parallel
    fork
      run(0, 1500);
      run(1, 1500);
      run(2, 1500);
      run(3, 1500);
    join
    for (int c = 0; c < NC; c++) drain(c);
    for (int c = 0; c < NC; c++)
      for (int line = c*32; line < c*32 + 32; line++) for (int w = 0; w < 8; w++) begin
        logic [63:0] va;
        va = mkva(0, line, w); va[59:56] = ref_tag(va);
        expect_load(c, va, 0, "final");
      end
    expect_nz("store-to-load forward", n_fwd);       expect_nz("forward refused (tags)", n_tagblk);
    expect_nz("forward blocked (tag store)", n_stgblk); expect_nz("early line fetch", n_early);
    expect_nz("tag override", n_ovr);                expect_nz("SYNC load fault", n_ldfault);
    expect_nz("SYNC store fault", n_stfault);        expect_nz("ASYNC status", n_async);
    expect_nz("L1 hit", n_l1h);   expect_nz("L1 miss", n_l1m);   expect_nz("L1 evict", n_l1e);
    expect_nz("L1 around", n_l1a);
    expect_nz("L2 hit", n_l2h);   expect_nz("L2 miss", n_l2m);   expect_nz("L2 evict", n_l2e);
    expect_nz("L2 around", n_l2a);
    expect_nz("SLC hit", n_slch); expect_nz("SLC miss", n_slcm); expect_nz("SLC evict", n_slce);
    expect_nz("SLC around", n_slca);
    expect_nz("MCU read-modify-write", n_rmw); expect_nz("ECC correction", n_ce);
    expect_nz("ECC uncorrectable", n_ue);      expect_nz("load error", n_lderr);
    expect_nz("mesh transfer", n_xfer);
    $display("fwd %0d tagblk %0d stgblk %0d early %0d ovr %0d ldfault %0d stfault %0d squashed %0d",
             n_fwd, n_tagblk, n_stgblk, n_early, n_ovr, n_ldfault, n_stfault, n_squash);
    $display("L1 %0d/%0d/%0d/%0d L2 %0d/%0d/%0d/%0d SLC %0d/%0d/%0d/%0d rmw %0d ce %0d ue %0d xfer %0d",
             n_l1h, n_l1m, n_l1e, n_l1a, n_l2h, n_l2m, n_l2e, n_l2a,
             n_slch, n_slcm, n_slce, n_slca, n_rmw, n_ce, n_ue, n_xfer);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
