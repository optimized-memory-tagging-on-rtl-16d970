// tb_store_buffer: self-checking test of the MTE store buffer.
// A reference queue in the testbench mirrors every enqueue, check and dequeue. After each
// operation the forwarding answer for random loads (same word, same granule, other lines,
// matching and non-matching address tags), the oldest-unchecked pointer with its tag
// override, and the head are compared with the reference. Directed cases first show each
// rule once: forward on equal tags, refuse on different tags, refuse across a tag store,
// youngest store wins, override from an older tag store, full buffer, checking off.
module tb_store_buffer;
  import mte_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  localparam int D = 4;
  logic chk_on;
  logic enq_valid, enq_ready, enq_stg;
  logic [63:0] enq_va, enq_data;
  logic chk_valid, chk_ovr_valid, chk_done, chk_fail;
  logic [63:0] chk_va;
  mtag_t chk_ovr_tag;
  logic head_valid, head_ready, head_stg, head_fail, deq;
  logic [63:0] head_va, head_data;
  logic [63:0] ld_va, fwd_data;
  logic fwd_hit, fwd_ok, fwd_tag_block, fwd_stg_block, empty;

  store_buffer #(.DEPTH(D)) dut (.*);

  typedef struct { logic stg; logic [63:0] va; logic [63:0] data; logic checked; logic fail; } ent_t;
  ent_t q[$];

  function automatic logic [63:0] mkva(mtag_t t, int line, int word);
    return {4'h0, t, 8'h0, 35'h1000, 6'(line), 1'b0, 3'(word), 3'b0} ;
  endfunction

  task automatic compare_fwd(logic [63:0] lva, string what);
    logic hit, tb_, sb_, ok;
    logic [63:0] d;
    hit = 0; sb_ = 0; d = '0; tb_ = 0;
    foreach (q[i]) begin
      if (!q[i].stg && q[i].va[47:3] == lva[47:3]) begin
        hit = 1; d = q[i].data; tb_ = (q[i].va[59:56] != lva[59:56]);
      end
      if (q[i].stg && q[i].va[47:4] == lva[47:4]) sb_ = 1;
    end
    tb_ = tb_ && chk_on && hit;
    sb_ = sb_ && chk_on;
    ok  = hit && !tb_ && !sb_;
    ld_va = lva;
    #1;
    checks++;
    if (fwd_hit !== hit || fwd_ok !== ok || fwd_tag_block !== tb_ || fwd_stg_block !== sb_ ||
        (hit && fwd_data !== d)) begin
      failures++;
      $display("FAIL %s: va %h hit %b/%b ok %b/%b tagblk %b/%b stgblk %b/%b", what, lva,
               fwd_hit, hit, fwd_ok, ok, fwd_tag_block, tb_, fwd_stg_block, sb_);
    end
  endtask

  task automatic compare_state(string what);
    int ci;
    logic ov;
    mtag_t ot;
    ci = -1;
    foreach (q[i]) if (ci < 0 && !q[i].checked) ci = i;
    ov = 0; ot = '0;
    if (ci >= 0) for (int i = 0; i < ci; i++)
      if (q[i].stg && q[i].va[47:4] == q[ci].va[47:4]) begin ov = 1; ot = q[i].va[59:56]; end
    #1;
    checks++;
    if (chk_valid !== (ci >= 0) || (ci >= 0 && (chk_va !== q[ci].va || chk_ovr_valid !== ov ||
        (ov && chk_ovr_tag !== ot))) || head_valid !== (q.size() > 0) ||
        (q.size() > 0 && (head_va !== q[0].va || head_ready !== q[0].checked ||
         head_stg !== q[0].stg)) || enq_ready !== (q.size() < D) || empty !== (q.size() == 0)) begin
      failures++;
      $display("FAIL %s: chk_valid %b ci %0d ovr %b/%b head_valid %b size %0d", what, chk_valid, ci,
               chk_ovr_valid, ov, head_valid, q.size());
    end
  endtask

  task automatic do_enq(logic stg, logic [63:0] va, logic [63:0] data);
    @(negedge clk);
    enq_valid = 1; enq_stg = stg; enq_va = va; enq_data = data;
    if (enq_ready) q.push_back('{stg, va, data, stg || !chk_on, 1'b0});
    @(posedge clk); @(negedge clk);
    enq_valid = 0;
  endtask
  task automatic do_check(logic fail);
    int ci;
    @(negedge clk);
    ci = -1;
    foreach (q[i]) if (ci < 0 && !q[i].checked) ci = i;
    chk_done = 1; chk_fail = fail;
    if (ci >= 0) begin q[ci].checked = 1; q[ci].fail = fail; end
    @(posedge clk); @(negedge clk);
    chk_done = 0;
  endtask
  task automatic do_deq();
    @(negedge clk);
    if (q.size() > 0 && q[0].checked) begin
      deq = 1; void'(q.pop_front());
      @(posedge clk); @(negedge clk);
      deq = 0;
    end
  endtask

  initial begin
    #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    chk_on = 1; enq_valid = 0; enq_stg = 0; enq_va = 0; enq_data = 0;
    chk_done = 0; chk_fail = 0; deq = 0; ld_va = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // directed
    do_enq(0, mkva(3, 1, 2), 64'hAAAA);
    compare_fwd(mkva(3, 1, 2), "equal tags forward");
    checks++; if (!fwd_ok || fwd_data != 64'hAAAA) begin failures++; $display("FAIL forward"); end
    compare_fwd(mkva(5, 1, 2), "different tags refused");
    checks++; if (fwd_ok || !fwd_tag_block) begin failures++; $display("FAIL tag refusal"); end
    do_enq(0, mkva(3, 1, 2), 64'hBBBB);
    compare_fwd(mkva(3, 1, 2), "youngest store wins");
    checks++; if (fwd_data != 64'hBBBB) begin failures++; $display("FAIL youngest"); end
    do_enq(1, mkva(9, 1, 0), 64'h0);        // tag store to granule 0 of line 1
    compare_fwd(mkva(3, 1, 1), "across tag store refused");
    checks++; if (fwd_ok || !fwd_stg_block) begin failures++; $display("FAIL stg refusal"); end
    compare_fwd(mkva(3, 1, 2), "other granule still forwards");
    checks++; if (!fwd_ok) begin failures++; $display("FAIL other granule"); end
    do_enq(0, mkva(9, 1, 1), 64'hCCCC);     // store behind the tag store, same granule
    checks++; if (enq_ready) begin failures++; $display("FAIL full not seen"); end
    compare_state("full");
    do_check(0); do_check(0);
    compare_state("override");
    checks++; if (!chk_ovr_valid || chk_ovr_tag != 4'd9) begin failures++; $display("FAIL override"); end
    do_check(1);
    compare_state("all checked");
    checks++; if (!head_ready) begin failures++; $display("FAIL head not ready"); end
    repeat (4) do_deq();
    compare_state("drained");
    // checking off: tags ignored, entries born checked
    chk_on = 0;
    do_enq(0, mkva(3, 2, 0), 64'h1111);
    compare_fwd(mkva(7, 2, 0), "checking off forwards");
    compare_state("checking off");
    do_deq();
    chk_on = 1;
    // random
    for (int i = 0; i < 3000; i++) begin
      case ($urandom_range(0, 3))
        0: do_enq($urandom_range(0, 4) == 0, mkva(4'($urandom_range(0, 2)), $urandom_range(0, 2),
                  $urandom_range(0, 7)), {$urandom, $urandom});
        1: do_check($urandom_range(0, 3) == 0);
        default: do_deq();
      endcase
      compare_state("random");
      for (int k = 0; k < 3; k++)
        compare_fwd(mkva(4'($urandom_range(0, 2)), $urandom_range(0, 2), $urandom_range(0, 7)), "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
