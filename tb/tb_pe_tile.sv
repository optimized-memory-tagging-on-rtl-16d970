// tb_pe_tile: self-checking test of one processing element (load/store unit, L1, L2).
// The mesh port is served by a behavioural line memory (line a starts with every granule
// tagged a[3:0]). Small L1 (4 sets) and L2 (8 sets) so misses, hits and dirty evictions of
// tagged bundles happen often. Directed part: a cold load misses both levels, the repeat
// hits the L1 with a fixed latency; a tag store and a data store reach memory only as
// bundles after eviction. Random part: a program of loads, stores and tag stores over 24
// lines is checked load by load against a sequential reference of data and tags; at the end
// every word is read back. The tile's event counters must all be non-zero.
module tb_pe_tile;
  import mte_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  tcf_e tcf;
  logic op_valid, op_ready, ld_resp_valid, ld_fault, ld_err, ld_fwd, st_fault_valid, tfsr, tfsr_clr, sb_empty;
  lsu_op_e op;
  logic [63:0] op_va, op_data, ld_data, st_fault_va;
  logic mesh_req_valid, mesh_req_ready, mesh_resp_valid;
  mem_req_t mesh_req;
  mem_resp_t mesh_resp;
  pe_events_t ev;

  pe_tile #(.SB_DEPTH(8), .L1_SETS(4), .L2_SETS(8)) dut (.*);
  line_mem_model #(.LAT(4)) mem (.clk, .req_valid(mesh_req_valid), .req_ready(mesh_req_ready),
    .req(mesh_req), .resp_valid(mesh_resp_valid), .resp(mesh_resp));

  int n_l1h = 0, n_l1m = 0, n_l1e = 0, n_l2h = 0, n_l2m = 0, n_l2e = 0, n_fwd = 0, n_early = 0;
  int n_stfault = 0, n_squash = 0;
  always @(posedge clk) begin
    n_l1h += int'(ev.l1_hit); n_l1m += int'(ev.l1_miss); n_l1e += int'(ev.l1_evict);
    n_l2h += int'(ev.l2_hit); n_l2m += int'(ev.l2_miss); n_l2e += int'(ev.l2_evict);
    n_fwd += int'(ev.fwd); n_early += int'(ev.early_fetch);
    n_stfault += int'(st_fault_valid);
  end

  // sequential reference
  logic [63:0] rw [logic [47:0]];
  mtag_t       rg [logic [47:0]];
  // data of stores that will fail SYNC checking: a load with the same address tag may be
  // forwarded from them; in the core that load is squashed by the store's precise fault
  logic [63:0] doomed [logic [47:0]];
  function automatic logic [63:0] ref_word(logic [63:0] va);
    logic [41:0] a;
    logic [47:0] k;
    int w;
    k = {3'b0, va[47:3]};
    if (rw.exists(k)) return rw[k];
    a = va[47:6]; w = int'(va[5:3]);
    return {32'(a) * 32'h9E37_79B9 + 32'(2*w + 1), 32'(a) * 32'h9E37_79B9 + 32'(2*w)};
  endfunction
  function automatic mtag_t ref_tag(logic [63:0] va);
    logic [47:0] k;
    k = {4'b0, va[47:4]};
    return rg.exists(k) ? rg[k] : mtag_t'(va[9:6]);
  endfunction
  function automatic logic [63:0] mkva(mtag_t t, int line, int word);
    return {4'h0, t, 8'h0, 36'h0, 6'(line), 3'(word), 3'b0};
  endfunction

  logic [63:0] r_data; logic r_fault, r_fwd; int r_lat;
  task automatic issue(lsu_op_e o, logic [63:0] va, logic [63:0] d);
    @(negedge clk);
    op_valid = 1; op = o; op_va = va; op_data = d;
    r_lat = 0;
    forever begin
      logic rdy;
      #1;
      rdy = op_ready;
      @(posedge clk);
      r_lat++;
      if (rdy) break;
      @(negedge clk);
    end
    @(negedge clk);
    op_valid = 0;
    if (o == LSU_LOAD) begin
      while (!ld_resp_valid) begin @(posedge clk); r_lat++; @(negedge clk); end
      r_data = ld_data; r_fault = ld_fault; r_fwd = ld_fwd;
    end
  endtask
  task automatic expect_load(logic [63:0] va, logic exp_fault, string what);
    issue(LSU_LOAD, va, '0);
    checks++;
    if (r_fwd && exp_fault && doomed.exists({3'b0, va[47:3]}) && r_data == doomed[{3'b0, va[47:3]}])
      n_squash++;
    else if (r_fault !== exp_fault || ld_err || (!exp_fault && r_data !== ref_word(va))) begin
      failures++;
      $display("FAIL %s: va %h fault %b/%b data %h exp %h", what, va, r_fault, exp_fault,
               r_data, ref_word(va));
    end
  endtask
  task automatic store(logic [63:0] va, logic [63:0] d);
    issue(LSU_STORE, va, d);
    if (tcf != TCF_SYNC || va[59:56] == ref_tag(va)) begin
      rw[{3'b0, va[47:3]}] = d; doomed.delete({3'b0, va[47:3]});
    end else doomed[{3'b0, va[47:3]}] = d;
  endtask
  task automatic stg(logic [63:0] va);
    issue(LSU_STG, va, '0);
    rg[{4'b0, va[47:4]}] = va[59:56];
  endtask
  task automatic drain();
    @(negedge clk);
    while (!sb_empty) begin @(posedge clk); @(negedge clk); end
    repeat (2) @(posedge clk);
  endtask
  task automatic expect_cnt(string what, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: %0d, expected %0d", what, got, exp); end
  endtask
  task automatic expect_nz(string what, int got);
    checks++;
    if (got == 0) begin failures++; $display("FAIL %s never happened", what); end
  endtask

  initial begin
    #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int w0, r0;
    tcf = TCF_SYNC; op_valid = 0; op = LSU_LOAD; op_va = 0; op_data = 0; tfsr_clr = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // cold load: misses L1 and L2, one line read on the mesh port
    r0 = mem.n_reads;
    expect_load(mkva(5, 5, 1), 0, "cold load");
    expect_cnt("cold load: mesh reads", mem.n_reads - r0, 1);
    expect_cnt("cold load: L1 misses", n_l1m, 1);
    expect_cnt("cold load: L2 misses", n_l2m, 1);
    // repeat: L1 hit, nothing on the mesh port
    r0 = mem.n_reads;
    expect_load(mkva(5, 5, 2), 0, "L1 hit");
    expect_cnt("L1 hit load latency (cycles from presentation)", r_lat, 5);
    expect_cnt("L1 hit: mesh reads", mem.n_reads - r0, 0);
    expect_load(mkva(4, 5, 2), 1, "L1 hit, tag mismatch");
    // tag store then a store with the new tag; push the line out of both levels
    stg(mkva(9, 6, 0));
    store(mkva(9, 6, 1), 64'hCAFE_F00D);
    drain();
    w0 = mem.n_writes;
    for (int i = 1; i <= 3; i++) expect_load(mkva(mtag_t'(6 + 8*i), 6 + 8*i, 0), 0, "evicting load");
    checks++;
    if (mem.n_writes - w0 != 1 || mem.peek_tags(42'd6) != {4'h6, 4'h6, 4'h6, 4'h9} ||
        mem.peek_data(42'd6)[127:64] != 64'hCAFE_F00D) begin
      failures++;
      $display("FAIL evicted bundle: writes %0d tags %h", mem.n_writes - w0, mem.peek_tags(42'd6));
    end
    expect_load(mkva(9, 6, 1), 0, "reload of evicted bundle");
    expect_load(mkva(6, 6, 0), 1, "old tag faults after reload");
    // random program
    for (int i = 0; i < 3000; i++) begin
      int line, word;
      logic [63:0] va;
      mtag_t t;
      line = $urandom_range(0, 23); word = $urandom_range(0, 7);
      va = mkva(0, line, word);
      t = ref_tag(va);
      case ($urandom_range(0, 9))
        0, 1, 2, 3, 4: begin
          if ($urandom_range(0, 5) == 0) t = t + 4'd1;
          va[59:56] = t;
          expect_load(va, t != ref_tag(va), "random load");
        end
        5, 6, 7, 8: begin
          if ($urandom_range(0, 7) == 0) t = t + 4'd1;
          va[59:56] = t; store(va, {$urandom, $urandom});
        end
        default: begin va[59:56] = 4'($urandom); stg(va); end
      endcase
    end
    drain();
    for (int line = 0; line < 24; line++) for (int w = 0; w < 8; w++) begin
      logic [63:0] va;
      va = mkva(0, line, w); va[59:56] = ref_tag(va);
      expect_load(va, 0, "final");
    end
    expect_nz("L1 hit", n_l1h);   expect_nz("L1 miss", n_l1m);   expect_nz("L1 eviction", n_l1e);
    expect_nz("L2 hit", n_l2h);   expect_nz("L2 miss", n_l2m);   expect_nz("L2 eviction", n_l2e);
    expect_nz("forward", n_fwd);  expect_nz("early fetch", n_early);
    expect_nz("SYNC store fault", n_stfault);
    $display("L1 h/m/e %0d/%0d/%0d L2 h/m/e %0d/%0d/%0d fwd %0d early %0d store faults %0d squashed %0d",
             n_l1h, n_l1m, n_l1e, n_l2h, n_l2m, n_l2e, n_fwd, n_early, n_stfault, n_squash);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
