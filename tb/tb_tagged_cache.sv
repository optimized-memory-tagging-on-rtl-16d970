// tb_tagged_cache: self-checking test of the tag-holding cache (used as L1, L2 and SLC).
// Directed part: checks hit latency and the downstream traffic of each case (read miss
// fill, hit, dirty eviction as a full bundle write, full-bundle write allocate without fill,
// data-only and tag-only write-around, partial write fill-and-merge). Random part: a mix of
// reads and writes over a few conflicting lines; every read must return the data and tags
// of an independent reference memory.
module tb_tagged_cache;
  import mte_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic up_req_valid, up_req_ready, up_resp_valid;
  mem_req_t up_req;
  mem_resp_t up_resp;
  logic dn_req_valid, dn_req_ready, dn_resp_valid;
  mem_req_t dn_req;
  mem_resp_t dn_resp;
  logic ev_hit, ev_miss, ev_evict, ev_around;

  tagged_cache #(.SETS(8)) dut (.clk, .rst_n, .up_req_valid, .up_req_ready, .up_req,
    .up_resp_valid, .up_resp, .dn_req_valid, .dn_req_ready, .dn_req, .dn_resp_valid, .dn_resp,
    .ev_hit, .ev_miss, .ev_evict, .ev_around);
  line_mem_model #(.LAT(3)) mem (.clk, .req_valid(dn_req_valid), .req_ready(dn_req_ready),
    .req(dn_req), .resp_valid(dn_resp_valid), .resp(dn_resp));

  // independent reference of memory contents
  line_data_t rd [laddr_t];
  line_tags_t rt [laddr_t];
  function automatic line_data_t ref_d(laddr_t a);
    line_data_t d;
    if (rd.exists(a)) return rd[a];
    for (int w = 0; w < 16; w++) d[w*32 +: 32] = 32'(a) * 32'h9E37_79B9 + 32'(w);
    return d;
  endfunction
  function automatic line_tags_t ref_t(laddr_t a);
    return rt.exists(a) ? rt[a] : {4{4'(a)}};
  endfunction

  mem_resp_t last;
  int lat;
  task automatic xact(mem_op_e op, laddr_t a, line_data_t d, byte_mask_t bm, line_tags_t t, tag_mask_t tm);
    up_req = '{op: op, laddr: a, data: d, bmask: bm, tags: t, tmask: tm};
    @(negedge clk);
    up_req_valid = 1'b1;
    lat = 0;
    forever begin
      logic rdy;
      rdy = up_req_ready;
      @(posedge clk);
      lat++;
      if (rdy) break;
      @(negedge clk);
    end
    @(negedge clk);
    up_req_valid = 1'b0;
    while (!up_resp_valid) begin @(posedge clk); lat++; @(negedge clk); end
    last = up_resp;
    if (op == MEM_WRITE) begin
      rd[a] = merge_data(ref_d(a), d, bm);
      rt[a] = merge_tags(ref_t(a), t, tm);
    end
  endtask

  task automatic rd_check(laddr_t a, string what);
    xact(MEM_READ, a, '0, '0, '0, '0);
    checks++;
    if (last.data !== ref_d(a) || last.tags !== ref_t(a)) begin
      failures++; $display("FAIL %s: line %h data/tags differ (tags %h exp %h)", what, a, last.tags, ref_t(a));
    end
  endtask

  task automatic expect_traffic(string what, int r0, int w0, int dr, int dw);
    checks++;
    if (mem.n_reads - r0 != dr || mem.n_writes - w0 != dw) begin
      failures++;
      $display("FAIL %s: downstream reads %0d writes %0d, expected %0d %0d", what,
               mem.n_reads - r0, mem.n_writes - w0, dr, dw);
    end
  endtask

  initial begin
    #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int r0, w0, d0, t0;
    up_req_valid = 0; up_req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // read miss: one fill
    r0 = mem.n_reads; w0 = mem.n_writes;
    rd_check(42'h10, "read miss");
    expect_traffic("read miss", r0, w0, 1, 0);
    // read hit: no traffic, two cycles
    r0 = mem.n_reads; w0 = mem.n_writes;
    rd_check(42'h10, "read hit");
    expect_traffic("read hit", r0, w0, 0, 0);
    checks++;
    if (lat != 2) begin failures++; $display("FAIL hit latency %0d, expected 2", lat); end
    // partial write hit, then conflicting read evicts the dirty line as a full bundle
    xact(MEM_WRITE, 42'h10, {16{32'hCAFE_F00D}}, 64'h0000_0000_0000_FF00, 16'h5555, 4'b0010);
    r0 = mem.n_reads; w0 = mem.n_writes;
    rd_check(42'h18, "conflict read");
    expect_traffic("dirty eviction", r0, w0, 1, 1);
    rd_check(42'h10, "written-back line");
    // full bundle write miss: allocate, no fill
    r0 = mem.n_reads; w0 = mem.n_writes;
    xact(MEM_WRITE, 42'h21, {16{32'h1234_5678}}, '1, 16'hABCD, '1);
    expect_traffic("full bundle write miss", r0, w0, 0, 0);
    rd_check(42'h21, "full bundle line");
    // data-only full-line write miss: passed on, tags kept by the next level
    r0 = mem.n_reads; w0 = mem.n_writes; d0 = mem.n_data_only;
    xact(MEM_WRITE, 42'h33, {16{32'h0BAD_BEEF}}, '1, 16'h0, '0);
    expect_traffic("data-only write around", r0, w0, 0, 1);
    checks++; if (mem.n_data_only - d0 != 1) begin failures++; $display("FAIL data-only not forwarded"); end
    // tag-only write miss: passed on
    r0 = mem.n_reads; w0 = mem.n_writes; t0 = mem.n_tag_only;
    xact(MEM_WRITE, 42'h44, '0, '0, 16'h0700, 4'b0100);
    expect_traffic("tag-only write around", r0, w0, 0, 1);
    checks++; if (mem.n_tag_only - t0 != 1) begin failures++; $display("FAIL tag-only not forwarded"); end
    rd_check(42'h33, "data-only line");
    rd_check(42'h44, "tag-only line");
    // partial write miss: fill then merge
    r0 = mem.n_reads; w0 = mem.n_writes;
    xact(MEM_WRITE, 42'h55, {16{32'h7777_7777}}, 64'hFF, '0, '0);
    expect_traffic("partial write miss", r0, w0, 1, 0);
    rd_check(42'h55, "partial line");
    // tag-only write hit merges in place
    r0 = mem.n_reads; w0 = mem.n_writes;
    xact(MEM_WRITE, 42'h55, '0, '0, 16'hF000, 4'b1000);
    expect_traffic("tag-only write hit", r0, w0, 0, 0);
    rd_check(42'h55, "tag write hit line");
    // random mix over 24 lines mapping onto 8 sets
    for (int i = 0; i < 600; i++) begin
      laddr_t a;
      byte_mask_t bm;
      tag_mask_t tm;
      a = laddr_t'($urandom_range(0, 23));
      case ($urandom_range(0, 5))
        0, 1: rd_check(a, "random read");
        2: begin bm = {$urandom, $urandom}; tm = 4'($urandom);
             xact(MEM_WRITE, a, {16{$urandom}}, bm, 16'($urandom), tm); end
        3: xact(MEM_WRITE, a, {16{$urandom}}, '1, 16'($urandom), '1);
        4: xact(MEM_WRITE, a, {16{$urandom}}, '1, '0, '0);
        default: xact(MEM_WRITE, a, '0, '0, 16'($urandom), 4'($urandom));
      endcase
    end
    for (int a = 0; a < 24; a++) rd_check(laddr_t'(a), "final read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
