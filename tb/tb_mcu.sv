// tb_mcu: self-checking test of the memory controller that keeps tags in ECC bits.
// Checks, against an independent reference and the DRAM model's counters:
//   * the DRAM transactions of every request type (read 1 read; full bundle write 1 write;
//     data-only and tag-only writes 1 read + 1 write, i.e. read-modify-write);
//   * that a data-only write preserves the stored tags and a tag-only write the stored data;
//   * the stored DRAM beat: four 141-bit codewords with zero syndrome, the granule's tag at
//     payload bits 128..131, unused top bits zero;
//   * single-bit DRAM faults are corrected (data and tag bits), double faults reported.
module tb_mcu;
  import mte_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid, req_ready, resp_valid;
  mem_req_t req;
  mem_resp_t resp;
  logic dram_req_valid, dram_req_ready, dram_we, dram_resp_valid;
  laddr_t dram_addr;
  logic [575:0] dram_wdata, dram_rdata;
  logic ev_rmw, ev_ce, ev_ue;
  int n_rmw = 0, n_ce = 0, n_ue = 0;

  mcu dut (.clk, .rst_n, .req_valid, .req_ready, .req, .resp_valid, .resp,
    .dram_req_valid, .dram_req_ready, .dram_we, .dram_addr, .dram_wdata,
    .dram_resp_valid, .dram_rdata, .ev_rmw, .ev_ce, .ev_ue);
  dram_model #(.DRAM_W(576), .AW(LADDR_W), .LAT(4)) dram (.clk, .req_valid(dram_req_valid),
    .req_ready(dram_req_ready), .we(dram_we), .addr(dram_addr), .wdata(dram_wdata),
    .resp_valid(dram_resp_valid), .rdata(dram_rdata));

  always @(posedge clk) begin
    n_rmw += int'(ev_rmw); n_ce += int'(ev_ce); n_ue += int'(ev_ue);
  end

  line_data_t rd [laddr_t];
  line_tags_t rt [laddr_t];
  function automatic line_data_t ref_d(laddr_t a); return rd.exists(a) ? rd[a] : '0; endfunction
  function automatic line_tags_t ref_t(laddr_t a); return rt.exists(a) ? rt[a] : '0; endfunction

  mem_resp_t last;
  task automatic xact(mem_op_e op, laddr_t a, line_data_t d, byte_mask_t bm, line_tags_t t, tag_mask_t tm);
    req = '{op: op, laddr: a, data: d, bmask: bm, tags: t, tmask: tm};
    @(negedge clk);
    req_valid = 1'b1;
    forever begin
      logic rdy;
      rdy = req_ready;
      @(posedge clk);
      if (rdy) break;
      @(negedge clk);
    end
    @(negedge clk);
    req_valid = 1'b0;
    while (!resp_valid) begin @(posedge clk); @(negedge clk); end
    last = resp;
    if (op == MEM_WRITE && !resp.err) begin
      rd[a] = merge_data(ref_d(a), d, bm);
      rt[a] = merge_tags(ref_t(a), t, tm);
    end
  endtask

  task automatic rd_check(laddr_t a, string what);
    xact(MEM_READ, a, '0, '0, '0, '0);
    checks++;
    if (last.data !== ref_d(a) || last.tags !== ref_t(a) || last.err) begin
      failures++; $display("FAIL %s: line %h (tags %h exp %h err %b)", what, a, last.tags, ref_t(a), last.err);
    end
  endtask

  task automatic expect_dram(string what, int r0, int w0, int dr, int dw);
    checks++;
    if (dram.n_reads - r0 != dr || dram.n_writes - w0 != dw) begin
      failures++;
      $display("FAIL %s: DRAM reads %0d writes %0d, expected %0d %0d", what,
               dram.n_reads - r0, dram.n_writes - w0, dr, dw);
    end
  endtask

  // payload bit k of a codeword lives at Hamming position pos(k) (k-th non power of two)
  function automatic int pos_of(int k);
    int n = 0;
    for (int p = 3; p <= 140; p++) if ((p & (p - 1)) != 0) begin
      if (n == k) return p;
      n++;
    end
    return -1;
  endfunction

  task automatic check_layout(laddr_t a);
    logic [575:0] beat;
    beat = dram.peek(a);
    checks++;
    if (beat[575:564] != '0) begin failures++; $display("FAIL unused beat bits not zero"); end
    for (int g = 0; g < 4; g++) begin
      logic [140:0] cw;
      logic [7:0] s;
      mtag_t tg;
      cw = beat[g*141 +: 141];
      s = '0;
      for (int p = 1; p <= 140; p++) if (cw[p]) s ^= 8'(p);
      for (int b = 0; b < 4; b++) tg[b] = cw[pos_of(128 + b)];
      checks++;
      if (s != 0 || ^cw != 0 || tg != ref_t(a)[g*4 +: 4]) begin
        failures++; $display("FAIL layout line %h granule %0d: syn %h tag %h", a, g, s, tg);
      end
    end
  endtask

  initial begin
    #3000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int r0, w0, m0;
    req_valid = 0; req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    rd_check(42'h5, "unwritten line");
    // full bundle write: one DRAM write, no read
    r0 = dram.n_reads; w0 = dram.n_writes; m0 = n_rmw;
    xact(MEM_WRITE, 42'h5, {16{32'hDEAD_BEEF}} ^ 512'h1234, '1, 16'h4321, '1);
    expect_dram("full write", r0, w0, 0, 1);
    check_layout(42'h5);
    r0 = dram.n_reads; w0 = dram.n_writes;
    rd_check(42'h5, "after full write");
    expect_dram("read", r0, w0, 1, 0);
    // data-only write: RMW, tags preserved
    r0 = dram.n_reads; w0 = dram.n_writes;
    xact(MEM_WRITE, 42'h5, {16{32'h0F0F_0F0F}}, '1, 16'hFFFF, '0);
    expect_dram("data-only write (RMW)", r0, w0, 1, 1);
    rd_check(42'h5, "tags preserved");
    // tag-only write: RMW, data preserved
    r0 = dram.n_reads; w0 = dram.n_writes;
    xact(MEM_WRITE, 42'h5, {16{32'hFFFF_FFFF}}, '0, 16'h0A00, 4'b0100);
    expect_dram("tag-only write (RMW)", r0, w0, 1, 1);
    rd_check(42'h5, "data preserved");
    check_layout(42'h5);
    checks++;
    if (n_rmw - m0 != 2) begin failures++; $display("FAIL rmw events %0d", n_rmw - m0); end
    // single-bit faults anywhere in the 564 used bits are corrected
    for (int i = 0; i < 60; i++) begin
      int b;
      b = $urandom_range(0, 563);
      if (i < 4) b = i * 141 + pos_of(128 + i);     // a tag bit of each granule
      dram.flip(42'h5, b);
      rd_check(42'h5, $sformatf("single fault at bit %0d", b));
      dram.flip(42'h5, b);
    end
    @(posedge clk); @(negedge clk);
    checks++;
    if (n_ce != 60) begin failures++; $display("FAIL corrected-error events %0d", n_ce); end
    // double fault in one codeword: uncorrectable; an RMW on it is cancelled
    dram.flip(42'h5, 141 + 10); dram.flip(42'h5, 141 + 77);
    xact(MEM_READ, 42'h5, '0, '0, '0, '0);
    checks++;
    if (!last.err) begin failures++; $display("FAIL double fault not reported"); end
    w0 = dram.n_writes;
    xact(MEM_WRITE, 42'h5, '0, '0, 16'h0, 4'b0001);
    checks++;
    if (!last.err || dram.n_writes != w0) begin failures++; $display("FAIL RMW over poisoned line"); end
    dram.flip(42'h5, 141 + 10); dram.flip(42'h5, 141 + 77);
    // random traffic
    for (int i = 0; i < 300; i++) begin
      laddr_t a;
      a = laddr_t'($urandom_range(0, 15));
      case ($urandom_range(0, 3))
        0: rd_check(a, "random read");
        1: xact(MEM_WRITE, a, {16{$urandom}}, '1, 16'($urandom), '1);
        2: xact(MEM_WRITE, a, {16{$urandom}}, {$urandom, $urandom}, 16'($urandom), 4'($urandom));
        default: xact(MEM_WRITE, a, '0, '0, 16'($urandom), 4'($urandom));
      endcase
    end
    for (int a = 0; a < 16; a++) begin
      rd_check(laddr_t'(a), "final");
      check_layout(laddr_t'(a));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
