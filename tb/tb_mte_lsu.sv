// tb_mte_lsu: self-checking test of the MTE load/store unit.
// The L1 is replaced by a behavioural line memory (line a starts with every granule tagged
// a[3:0]). Directed cases: load tag pass / SYNC fault / ASYNC status / checking off; store
// forwarding with equal tags; forwarding refused on different tags (the load then waits for
// the store and reads memory); a SYNC-failed store that must not write; a tag store, the
// refused forward across it, and a later store checked against the pending tag (override);
// early line fetch issued for each tagged store. A random program-order run compares every
// load's data and fault with a reference that executes the same program sequentially.
module tb_mte_lsu;
  import mte_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  tcf_e tcf;
  logic op_valid, op_ready, ld_resp_valid, ld_fault, ld_err, ld_fwd, st_fault_valid, tfsr, tfsr_clr, sb_empty;
  lsu_op_e op;
  logic [63:0] op_va, op_data, ld_data, st_fault_va;
  logic l1_req_valid, l1_req_ready, l1_resp_valid;
  mem_req_t l1_req;
  mem_resp_t l1_resp;
  logic ev_fwd, ev_fwd_tag_block, ev_fwd_stg_block, ev_early_fetch, ev_tag_override;

  mte_lsu #(.SB_DEPTH(8)) dut (.*);
  line_mem_model #(.LAT(2)) l1 (.clk, .req_valid(l1_req_valid), .req_ready(l1_req_ready),
    .req(l1_req), .resp_valid(l1_resp_valid), .resp(l1_resp));

  int n_fwd = 0, n_tagblk = 0, n_stgblk = 0, n_early = 0, n_ovr = 0, n_stfault = 0;
  logic [63:0] last_st_fault_va;
  always @(posedge clk) begin
    n_fwd += int'(ev_fwd); n_tagblk += int'(ev_fwd_tag_block); n_stgblk += int'(ev_fwd_stg_block);
    n_early += int'(ev_early_fetch); n_ovr += int'(ev_tag_override);
    if (st_fault_valid) begin n_stfault++; last_st_fault_va = st_fault_va; end
  end

  // reference memory, in program order
  logic [63:0] rw [logic [47:0]];      // by word address
  mtag_t       rg [logic [47:0]];      // by granule address
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

  logic any_fwd = 0;    // random part: forwarding may or may not happen

  // issue one op; for loads wait for and return the response
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

  task automatic expect_load(logic [63:0] va, logic exp_fault, logic exp_fwd, string what);
    issue(LSU_LOAD, va, '0);
    checks++;
    if (r_fault !== exp_fault || (!any_fwd && r_fwd !== exp_fwd) || (!exp_fault && r_data !== ref_word(va))) begin
      failures++;
      $display("FAIL %s: va %h fault %b/%b fwd %b/%b data %h exp %h", what, va, r_fault, exp_fault,
               r_fwd, exp_fwd, r_data, ref_word(va));
    end
  endtask

  task automatic store(logic [63:0] va, logic [63:0] d);
    issue(LSU_STORE, va, d);
    if (tcf != TCF_SYNC || va[59:56] == ref_tag(va)) rw[{3'b0, va[47:3]}] = d;
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

  initial begin
    #3000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int e0;
    tcf = TCF_SYNC; op_valid = 0; op = LSU_LOAD; op_va = 0; op_data = 0; tfsr_clr = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // loads: line 5 is tagged 5
    expect_load(mkva(5, 5, 1), 0, 0, "load tag match");
    expect_cnt("L1 load latency (cycles from presentation)", r_lat, 6);
    expect_load(mkva(6, 5, 1), 1, 0, "load SYNC mismatch");
    tcf = TCF_ASYNC;
    expect_load(mkva(6, 5, 2), 0, 0, "load ASYNC mismatch");
    checks++; if (!tfsr) begin failures++; $display("FAIL tfsr not set"); end
    @(negedge clk); tfsr_clr = 1; @(negedge clk); tfsr_clr = 0;
    tcf = TCF_NONE;
    expect_load(mkva(6, 5, 3), 0, 0, "load checking off");
    checks++; if (tfsr) begin failures++; $display("FAIL tfsr set with checking off"); end
    tcf = TCF_SYNC;
    // store then load: forwarded
    e0 = n_early;
    store(mkva(7, 7, 0), 64'h1111_2222_3333_4444);
    expect_load(mkva(7, 7, 0), 0, 1, "forward equal tags");
    expect_cnt("forward latency", r_lat, 1);
    drain();
    expect_cnt("early fetch for a tagged store", n_early - e0, 1);
    // forwarding refused on different tags; load waits and sees memory (store faults)
    e0 = n_stfault;
    store(mkva(7, 7, 1), 64'h5555);        // correct tag 7
    store(mkva(3, 7, 2), 64'h6666);        // wrong tag: will fault
    expect_load(mkva(6, 7, 1), 1, 0, "refused: load tag 6 vs store tag 7");
    expect_cnt("tag-block events", n_tagblk, 1);
    drain();
    expect_cnt("SYNC store fault", n_stfault - e0, 1);
    checks++; if (last_st_fault_va != mkva(3, 7, 2)) begin failures++; $display("FAIL fault va"); end
    expect_load(mkva(7, 7, 2), 0, 0, "faulted store did not write");
    expect_load(mkva(7, 7, 1), 0, 0, "good store wrote");
    // tag store: refuse forwarding across it, override for a younger store
    store(mkva(8, 8, 0), 64'hAAAA);
    stg(mkva(12, 8, 1));                   // granule 0 of line 8 -> tag 12
    store(mkva(12, 8, 0), 64'hBBBB);       // checked against the pending tag 12
    any_fwd = 1;                           // the tag store may already have drained
    expect_load(mkva(12, 8, 0), 0, 0, "load behind a tag store");
    any_fwd = 0;
    expect_cnt("stg-block events", n_stgblk, 1);
    drain();
    expect_cnt("override used", n_ovr, 1);
    expect_load(mkva(12, 8, 1), 0, 0, "new tag in force");
    expect_load(mkva(8, 8, 0), 1, 0, "old tag now faults");
    expect_load(mkva(8, 8, 2), 0, 0, "other granule keeps old tag");
    // random program
    any_fwd = 1;
    for (int i = 0; i < 1500; i++) begin
      int line, word;
      logic [63:0] va;
      mtag_t t;
      line = $urandom_range(0, 5); word = $urandom_range(0, 7);
      va = mkva(0, line, word);
      t = ref_tag(va);
      case ($urandom_range(0, 9))
        0, 1, 2, 3: begin
          if ($urandom_range(0, 4) == 0) t = t + 4'd1;
          va[59:56] = t;
          expect_load(va, t != ref_tag(va), r_fwd, "random load");
        end
        4, 5, 6, 7, 8: begin va[59:56] = t; store(va, {$urandom, $urandom}); end
        default: begin va[59:56] = 4'($urandom); stg(va); end
      endcase
    end
    drain();
    any_fwd = 0;
    for (int line = 0; line < 6; line++) for (int w = 0; w < 8; w++) begin
      logic [63:0] va;
      va = mkva(0, line, w); va[59:56] = ref_tag(va);
      expect_load(va, 0, 0, "final");
    end
    $display("forwards %0d tag-blocks %0d stg-blocks %0d early fetches %0d overrides %0d",
             n_fwd, n_tagblk, n_stgblk, n_early, n_ovr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
