// line_mem_model: behavioural memory behind a line-bundle port, for testbenches.
// Holds data and tags per line in an associative array (unwritten lines read as a pattern
// derived from the address with tag = low 4 address bits per granule), merges writes with
// the byte and tag masks, answers every request after LAT cycles, and counts reads and
// writes so testbenches can check the traffic a block generates.
module line_mem_model
  import mte_pkg::*;
#(
  parameter int unsigned LAT = 3
) (
  input  logic      clk,
  input  logic      req_valid,
  output logic      req_ready,
  input  mem_req_t  req,
  output logic      resp_valid,
  output mem_resp_t resp
);
  line_data_t mdata [laddr_t];
  line_tags_t mtags [laddr_t];
  int n_reads = 0, n_writes = 0, n_tag_only = 0, n_data_only = 0;
  logic busy = 1'b0;

  function automatic line_data_t init_data(laddr_t a);
    line_data_t d;
    for (int w = 0; w < 16; w++) d[w*32 +: 32] = 32'(a) * 32'h9E37_79B9 + 32'(w);
    return d;
  endfunction
  function automatic line_tags_t init_tags(laddr_t a);
    return {4{4'(a)}};
  endfunction

  function automatic line_data_t peek_data(laddr_t a);
    return mdata.exists(a) ? mdata[a] : init_data(a);
  endfunction
  function automatic line_tags_t peek_tags(laddr_t a);
    return mtags.exists(a) ? mtags[a] : init_tags(a);
  endfunction

  mem_req_t r;
  int       cnt = 0;
  assign req_ready = !busy;
  initial resp_valid = 1'b0;

  always @(posedge clk) begin
    resp_valid <= 1'b0;
    if (busy) begin
      cnt = cnt - 1;
      if (cnt <= 0) begin
        if (r.op == MEM_READ) begin
          n_reads++;
          resp.data <= peek_data(r.laddr);
          resp.tags <= peek_tags(r.laddr);
        end else begin
          n_writes++;
          if (r.bmask == '0) n_tag_only++;
          if (r.tmask == '0) n_data_only++;
          mdata[r.laddr] = merge_data(peek_data(r.laddr), r.data, r.bmask);
          mtags[r.laddr] = merge_tags(peek_tags(r.laddr), r.tags, r.tmask);
          resp.data <= '0;
          resp.tags <= '0;
        end
        resp.err   <= 1'b0;
        resp_valid <= 1'b1;
        busy       <= 1'b0;
      end
    end else if (req_valid) begin
      r    = req;
      cnt  = int'(LAT);
      busy <= 1'b1;
    end
  end
endmodule
