// tb_mesh: self-checking test of the bundle-carrying interconnect.
// Three requesters and two banks (behavioural memories). Each requester runs its own
// stream of reads and writes on lines of its own; every read must return the data and
// tags last written (so bundles arrive intact at the right bank and come back to the
// right requester). Also checked: line interleaving (the bank memory holds the line at the
// local address laddr>>1 of bank laddr[0]) and round-robin order when all requesters ask
// in the same cycle.
module tb_mesh;
  import mte_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  localparam int NR = 3, NB = 2;

  logic      up_req_valid [NR], up_req_ready [NR], up_resp_valid [NR];
  mem_req_t  up_req [NR];
  mem_resp_t up_resp;
  logic      dn_req_valid [NB], dn_req_ready [NB], dn_resp_valid [NB];
  mem_req_t  dn_req [NB];
  mem_resp_t dn_resp [NB];
  logic      ev_xfer;

  mesh #(.NREQ(NR), .NBANK(NB)) dut (.*);
  line_mem_model #(.LAT(2)) bank0 (.clk, .req_valid(dn_req_valid[0]), .req_ready(dn_req_ready[0]),
    .req(dn_req[0]), .resp_valid(dn_resp_valid[0]), .resp(dn_resp[0]));
  line_mem_model #(.LAT(5)) bank1 (.clk, .req_valid(dn_req_valid[1]), .req_ready(dn_req_ready[1]),
    .req(dn_req[1]), .resp_valid(dn_resp_valid[1]), .resp(dn_resp[1]));

  int grant_order[$];
  always @(posedge clk) for (int r = 0; r < NR; r++)
    if (up_req_valid[r] && up_req_ready[r]) grant_order.push_back(r);

  task automatic xact(int r, mem_op_e op, laddr_t a, line_data_t d, line_tags_t t, output mem_resp_t res);
    @(negedge clk);
    up_req[r] = '{op: op, laddr: a, data: d, bmask: '1, tags: t, tmask: '1};
    up_req_valid[r] = 1'b1;
    forever begin
      logic rdy;
      rdy = up_req_ready[r];
      @(posedge clk);
      if (rdy) break;
      @(negedge clk);
    end
    @(negedge clk);
    up_req_valid[r] = 1'b0;
    while (!up_resp_valid[r]) begin @(posedge clk); @(negedge clk); end
    res = up_resp;
  endtask

  task automatic requester(int r);
    line_data_t wd [4];
    line_tags_t wt [4];
    logic       w [4];
    mem_resp_t  res;
    for (int k = 0; k < 4; k++) w[k] = 0;
    for (int i = 0; i < 150; i++) begin
      int k;
      laddr_t a;
      k = $urandom_range(0, 3);
      a = laddr_t'(r * 16 + k);
      if (!w[k] || $urandom_range(0, 1)) begin
        wd[k] = {16{$urandom}}; wt[k] = 16'($urandom); w[k] = 1;
        xact(r, MEM_WRITE, a, wd[k], wt[k], res);
      end else begin
        xact(r, MEM_READ, a, '0, '0, res);
        checks++;
        if (res.data !== wd[k] || res.tags !== wt[k]) begin
          failures++; $display("FAIL requester %0d line %h read back wrong", r, a);
        end
      end
    end
    for (int k = 0; k < 4; k++) if (w[k]) begin
      laddr_t a;
      line_tags_t t;
      a = laddr_t'(r * 16 + k);
      t = a[0] ? bank1.peek_tags(a >> 1) : bank0.peek_tags(a >> 1);
      checks++;
      if (t !== wt[k]) begin failures++; $display("FAIL interleave: line %h not in bank %0d", a, a[0]); end
    end
  endtask

  initial begin
    #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int r = 0; r < NR; r++) begin up_req_valid[r] = 0; up_req[r] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    // round robin: all three ask at once
    @(negedge clk);
    for (int r = 0; r < NR; r++) begin
      up_req[r] = '{op: MEM_READ, laddr: laddr_t'(100 + r), default: '0};
      up_req_valid[r] = 1;
    end
    for (int n = 0; n < 3; n++) begin
      int g;
      g = -1;
      while (g < 0) begin
        @(posedge clk); #1;
        for (int r = 0; r < NR; r++) if (up_resp_valid[r]) g = r;
      end
      @(negedge clk);
    end
    for (int r = 0; r < NR; r++) up_req_valid[r] = 0;
    checks++;
    if (grant_order.size() < 3 || grant_order[0] != 0 || grant_order[1] != 1 || grant_order[2] != 2) begin
      failures++; $display("FAIL round robin order");
    end
    repeat (5) @(posedge clk);
    fork
      requester(0);
      requester(1);
      requester(2);
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
