// Round-robin arbiter of one SPM bank.
//
// req has one bit per master that addresses this bank in the current cycle. The winner is
// the first requesting master at or after the round-robin pointer (wrapping at NM); after a
// grant the pointer moves to the master after the winner, so every requester is served
// within NM grants. nlost is the number of requesters that were not granted this cycle.
// Interface: has / win / nlost are combinational in the request cycle; the pointer updates
// on the clock edge. Round-robin arbitration is this design's choice (not mentioned in the
// paper, which only calls the crossbar fully connected).
module spm_bank_arb #(
  parameter int unsigned NM = 26,
  localparam int unsigned MW = $clog2(NM)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [NM-1:0] req,
  output logic          has,
  output logic [MW-1:0] win,
  output logic [MW-1:0] nlost
);
  logic [MW-1:0] ptr;

  always_comb begin
    logic [MW:0] cnt;
    has = 1'b0;
    win = '0;
    cnt = '0;
    for (int k = 0; k < NM; k++) cnt = cnt + (MW+1)'(req[k]);
    // first requester at or after ptr, else the first one overall (wrap-around)
    for (int m = NM - 1; m >= 0; m--)
      if (req[m]) begin has = 1'b1; win = MW'(m); end
    for (int m = NM - 1; m >= 0; m--)
      if (req[m] && MW'(m) >= ptr) win = MW'(m);
    nlost = has ? MW'(cnt - 1'b1) : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   ptr <= '0;
    else if (has) ptr <= (32'(win) == NM - 1) ? '0 : win + 1'b1;
  end
endmodule
