// dnp_arbiter: the arbitration block (ARB). When more than one packet wants the same
// switch output, it picks one. The paper says the arbitration logic and the port priority
// scheme are chosen by software through the registers; the two policies offered here are
// this design's choice: round robin (fixed_mode=0; the requester after the last winner has
// priority) and fixed priority (fixed_mode=1; requester `prio` first, then prio+1, ...
// wrapping). The grant is combinational from `req`; `advance` (the grant was used) moves
// the round-robin pointer to just after the winner on the next clock edge.
module dnp_arbiter #(
  parameter int unsigned NREQ = 15,
  localparam int unsigned IW  = (NREQ > 1) ? $clog2(NREQ) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [NREQ-1:0] req,
  input  logic            fixed_mode,
  input  logic [IW-1:0]   prio,
  input  logic            advance,
  output logic [NREQ-1:0] grant,
  output logic [IW-1:0]   grant_idx,
  output logic            grant_valid
);
  logic [IW-1:0] rr_ptr;
  logic [IW-1:0] start;

  assign start = fixed_mode ? ((32'(prio) < NREQ) ? prio : '0) : rr_ptr;

  always_comb begin
    int unsigned j;
    grant       = '0;
    grant_idx   = '0;
    grant_valid = 1'b0;
    for (int unsigned k = 0; k < NREQ; k++) begin
      j = 32'(start) + k;
      if (j >= NREQ) j = j - NREQ;
      if (!grant_valid && req[j]) begin
        grant_valid = 1'b1;
        grant_idx   = IW'(j);
        grant[j]    = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rr_ptr <= '0;
    else if (advance && grant_valid)
      rr_ptr <= (32'(grant_idx) == NREQ - 1) ? '0 : grant_idx + 1'b1;
  end

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(grant));
endmodule
