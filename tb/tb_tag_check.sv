// tb_tag_check: self-checking test of the MTE tag comparator.
// Part 1 replays the buffer-overflow example of the architecture: two adjacent heap
// allocations tagged 4 and 1 with untagged (0) headers; accesses through P (tag 4) inside P
// pass, the overflow through P into Q's granules mismatches. Part 2 compares against a
// reference model on random pointers, tags and modes.
module tb_tag_check;
  import mte_pkg::*;
  int checks = 0, failures = 0;
  tcf_e tcf;
  logic [63:0] va;
  line_tags_t tags;
  mtag_t addr_tag, alloc_tag;
  logic mismatch, sync_fault, async_flag;

  tag_check dut (.chk_valid(1'b1), .tcf, .va, .line_tags(tags), .addr_tag, .alloc_tag,
                 .mismatch, .sync_fault, .async_flag);

  // allocation tags of 16 consecutive granules: header(0), P x4 (4), header(0), Q x7 (1)
  mtag_t mem_tag [16] = '{0,4,4,4,4,0,1,1,1,1,1,1,1,0,0,0};
  localparam logic [55:0] BASE = 56'h0000_8184_4000_00;

  task automatic check(string what, logic exp_sync, logic exp_async);
    #1;
    checks++;
    if (sync_fault !== exp_sync || async_flag !== exp_async) begin
      failures++;
      $display("FAIL %s: va=%h sync=%0b async=%0b exp %0b %0b", what, va, sync_fault, async_flag, exp_sync, exp_async);
    end
  endtask

  task automatic access(mtag_t ptag, int granule, tcf_e mode, logic exp_mis, string what);
    logic [55:0] pa;
    pa  = BASE + 56'(granule * 16);
    va  = {4'h0, ptag, pa};
    tcf = mode;
    for (int g = 0; g < 4; g++) tags[g*4 +: 4] = mem_tag[(granule & ~3) + g];
    check(what, exp_mis && mode == TCF_SYNC, exp_mis && mode == TCF_ASYNC);
  endtask

  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int m = 0; m < 3; m++) begin
      tcf_e md;
      md = tcf_e'(m);
      for (int g = 1; g <= 4; g++) access(4'd4, g, md, 1'b0, "P in bounds");
      for (int g = 6; g <= 12; g++) access(4'd1, g, md, 1'b0, "Q in bounds");
      for (int g = 6; g <= 12; g++) access(4'd4, g, md, 1'b1, "P overflows into Q");
      access(4'd4, 5, md, 1'b1, "P into Q header");
    end
    for (int i = 0; i < 2000; i++) begin
      int g;
      mtag_t at, exp_alloc;
      logic mis;
      va   = {$urandom, $urandom};
      tags = 16'($urandom);
      tcf  = tcf_e'($urandom_range(0, 2));
      g = int'(va[5:4]);
      exp_alloc = tags[g*4 +: 4];
      at  = va[59:56];
      mis = (at != exp_alloc);
      check("random", mis && tcf == TCF_SYNC, mis && tcf == TCF_ASYNC);
      checks++;
      if (alloc_tag !== exp_alloc || addr_tag !== at || mismatch !== mis) begin
        failures++; $display("FAIL tags: va=%h", va);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
