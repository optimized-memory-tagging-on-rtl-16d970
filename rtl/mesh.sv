// mesh: coherent-interconnect model that carries tag + data bundles between the cores'
// private caches and the system-level cache banks.
//
// Every transfer moves the full bundle (512 data bits with their 16 tag bits, in what on a
// real mesh are reserved implementation-defined bits), so a tag always travels with its line
// and never as a separate transaction. The mesh itself holds no data and checks no tags.
// This model is deliberately simple and is this design's own: a round-robin arbiter grants
// one requester at a time, routes the request to the bank selected by the low BANK_W bits of
// the line address (line interleaving across memory channels), strips those bits so each
// bank sees a dense local line address, and returns the bank's single response to the
// granted requester. One transaction is in flight in the whole mesh. Coherence between the
// private caches is not modelled: the cores are expected to work on disjoint lines.
// The top log2(NBANK) bits of each bank's line address are therefore always zero.
//
// Timing: grant in the cycle a requester is seen in IDLE (up_req_ready pulses then), the
// bank request is presented the next cycle, the response is forwarded one cycle after the
// bank answers.
module mesh
  import mte_pkg::*;
#(
  parameter int unsigned NREQ  = 192,   // requesters (cores)
  parameter int unsigned NBANK = 8      // SLC banks / memory channels
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      up_req_valid  [NREQ],
  output logic      up_req_ready  [NREQ],
  input  mem_req_t  up_req        [NREQ],
  output logic      up_resp_valid [NREQ],
  output mem_resp_t up_resp,               // shared; valid for the requester whose up_resp_valid is set
  output logic      dn_req_valid  [NBANK],
  input  logic      dn_req_ready  [NBANK],
  output mem_req_t  dn_req        [NBANK],
  input  logic      dn_resp_valid [NBANK],
  input  mem_resp_t dn_resp       [NBANK],
  output logic      ev_xfer
);
  localparam int unsigned REQ_W  = (NREQ  > 1) ? $clog2(NREQ)  : 1;
  localparam int unsigned BANK_W = (NBANK > 1) ? $clog2(NBANK) : 1;

  typedef enum logic [1:0] {X_IDLE, X_REQ, X_RESP} state_e;
  state_e            state;
  logic [REQ_W-1:0]  ptr, grant, owner;
  logic              any;
  logic [BANK_W-1:0] bank;
  mem_req_t          rq;
  logic              bank_valid;

  // round-robin pick: the first valid requester at or above ptr, else the first one below
  always_comb begin
    logic hi_any;
    logic [REQ_W-1:0] hi_g, lo_g;
    hi_any = 1'b0;
    any    = 1'b0;
    hi_g   = '0;
    lo_g   = '0;
    for (int i = int'(NREQ) - 1; i >= 0; i--) begin
      if (up_req_valid[i]) begin
        any  = 1'b1;
        lo_g = REQ_W'(i);
        if (i >= int'(ptr)) begin
          hi_any = 1'b1;
          hi_g   = REQ_W'(i);
        end
      end
    end
    grant = hi_any ? hi_g : lo_g;
  end

  always_comb begin
    for (int unsigned r = 0; r < NREQ; r++) begin
      up_req_ready[r]  = (state == X_IDLE) && any && (grant == REQ_W'(r));
    end
    for (int unsigned b = 0; b < NBANK; b++) begin
      dn_req_valid[b] = bank_valid && (NBANK == 1 || bank == BANK_W'(b));
      dn_req[b]       = rq;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= X_IDLE;
      ptr        <= '0;
      owner      <= '0;
      bank       <= '0;
      rq         <= '0;
      bank_valid <= 1'b0;
      ev_xfer    <= 1'b0;
      up_resp    <= '0;
      for (int unsigned r = 0; r < NREQ; r++) up_resp_valid[r] <= 1'b0;
    end else begin
      ev_xfer <= 1'b0;
      for (int unsigned r = 0; r < NREQ; r++) up_resp_valid[r] <= 1'b0;
      unique case (state)
        X_IDLE: if (any) begin
          owner    <= grant;
          ptr      <= (int'(grant) == int'(NREQ) - 1) ? '0 : grant + 1'b1;
          rq       <= up_req[grant];
          if (NBANK > 1) begin
            bank     <= up_req[grant].laddr[BANK_W-1:0];
            rq.laddr <= up_req[grant].laddr >> BANK_W;
          end
          bank_valid <= 1'b1;
          ev_xfer    <= 1'b1;
          state      <= X_REQ;
        end
        X_REQ: if (dn_req_ready[bank]) begin
          bank_valid <= 1'b0;
          state      <= X_RESP;
        end
        X_RESP: if (dn_resp_valid[bank]) begin
          up_resp              <= dn_resp[bank];
          up_resp_valid[owner] <= 1'b1;
          state                <= X_IDLE;
        end
        default: state <= X_IDLE;
      endcase
    end
  end
endmodule
