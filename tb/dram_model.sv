// dram_model: behavioural stand-in for one DDR5 ECC DIMM channel, for testbenches.
// Stores one DRAM_W-bit beat per line address (unwritten lines read as zero, which is a
// valid all-zero SECDED codeword set), answers each request after LAT cycles, counts reads
// and writes, and can flip stored bits to inject memory faults.
module dram_model #(
  parameter int unsigned DRAM_W = 576,
  parameter int unsigned AW     = 42,
  parameter int unsigned LAT    = 4
) (
  input  logic              clk,
  input  logic              req_valid,
  output logic              req_ready,
  input  logic              we,
  input  logic [AW-1:0]     addr,
  input  logic [DRAM_W-1:0] wdata,
  output logic              resp_valid,
  output logic [DRAM_W-1:0] rdata
);
  logic [DRAM_W-1:0] mem [logic [AW-1:0]];
  int n_reads = 0, n_writes = 0;
  logic busy = 1'b0;
  int cnt = 0;
  logic            r_we;
  logic [AW-1:0]   r_addr;
  logic [DRAM_W-1:0] r_wdata;

  assign req_ready = !busy;
  initial resp_valid = 1'b0;

  function automatic logic [DRAM_W-1:0] peek(logic [AW-1:0] a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction

  // flip one stored bit (fault injection)
  function automatic void flip(logic [AW-1:0] a, int bitpos);
    logic [DRAM_W-1:0] v;
    v = peek(a);
    v[bitpos] = ~v[bitpos];
    mem[a] = v;
  endfunction

  always @(posedge clk) begin
    resp_valid <= 1'b0;
    if (busy) begin
      cnt = cnt - 1;
      if (cnt <= 0) begin
        if (r_we) begin
          n_writes++;
          mem[r_addr] = r_wdata;
          rdata <= '0;
        end else begin
          n_reads++;
          rdata <= peek(r_addr);
        end
        resp_valid <= 1'b1;
        busy       <= 1'b0;
      end
    end else if (req_valid) begin
      r_we    = we;
      r_addr  = addr;
      r_wdata = wdata;
      cnt     = int'(LAT);
      busy   <= 1'b1;
    end
  end
endmodule
