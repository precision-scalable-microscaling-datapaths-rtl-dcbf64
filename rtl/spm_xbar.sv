// Fully connected crossbar between the memory access channels and the SPM banks.
//
// NM master channels (streamer channels and the external/DMA port), NB banks of 64-bit words.
// Word-interleaved mapping: bank = addr[3 +: log2(NB)], row = addr[3+log2(NB) +: ROW_W].
// Each bank grants one request per cycle, chosen round-robin among the masters addressing
// it by one spm_bank_arb per bank (the pointer moves past the last winner), so conflicting channels are served in turn;
// gnt is combinational in the request cycle. Read data returns to the master one cycle after
// the grant (rvalid), from the bank it was granted by. conflicts counts lost arbitrations.
// The paper gives the crossbar's function (fully connected, 32 banks); the round-robin
// arbitration, address interleaving and one-cycle read latency are this design's choices.
module spm_xbar
  import mx_pkg::*;
#(
  parameter int unsigned NM    = 26,
  parameter int unsigned NB    = mx_pkg::NBANKS,
  parameter int unsigned ROW_W = 9
) (
  input  logic             clk,
  input  logic             rst_n,
  input  mem_req_t         mreq [NM],
  output mem_rsp_t         mrsp [NM],
  output logic             b_req   [NB],
  output logic             b_we    [NB],
  output logic [ROW_W-1:0] b_row   [NB],
  output logic [CH_W-1:0]  b_wdata [NB],
  input  logic [CH_W-1:0]  b_rdata [NB],
  output logic [31:0]      conflicts
);
  localparam int unsigned BW = $clog2(NB);
  localparam int unsigned MW = $clog2(NM);

  logic [BW-1:0] mbank [NM];
  logic [MW-1:0] win   [NB];
  logic [MW-1:0] lost  [NB];
  logic          has   [NB];
  logic [NM-1:0] breq  [NB];
  logic [NM-1:0] gnt;
  logic [NM-1:0] rd_q;
  logic [BW-1:0] bank_q [NM];
  logic [31:0]   nlost;

  always_comb begin
    for (int m = 0; m < NM; m++) mbank[m] = mreq[m].addr[3 +: BW];
    for (int b = 0; b < NB; b++)
      for (int m = 0; m < NM; m++) breq[b][m] = mreq[m].req && (32'(mbank[m]) == b);
  end

  for (genvar b = 0; b < NB; b++) begin : g_bank
    spm_bank_arb #(.NM(NM)) u_arb (.clk(clk), .rst_n(rst_n), .req(breq[b]), .has(has[b]),
                                   .win(win[b]), .nlost(lost[b]));
    assign b_req[b]   = has[b];
    assign b_we[b]    = mreq[win[b]].we;
    assign b_row[b]   = mreq[win[b]].addr[3 + BW +: ROW_W];
    assign b_wdata[b] = mreq[win[b]].wdata;
  end

  always_comb begin
    gnt   = '0;
    nlost = '0;
    for (int b = 0; b < NB; b++) begin
      if (has[b]) gnt[win[b]] = 1'b1;
      nlost = nlost + 32'(lost[b]);
    end
  end

  always_comb begin
    for (int m = 0; m < NM; m++) begin
      mrsp[m].gnt    = gnt[m];
      mrsp[m].rvalid = rd_q[m];
      mrsp[m].rdata  = b_rdata[bank_q[m]];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int m = 0; m < NM; m++) bank_q[m] <= '0;
      rd_q      <= '0;
      conflicts <= '0;
    end else begin
      for (int m = 0; m < NM; m++) begin
        rd_q[m]   <= gnt[m] && !mreq[m].we;
        bank_q[m] <= mbank[m];
      end
      conflicts <= conflicts + 32'(nlost);
    end
  end

  for (genvar m = 0; m < NM; m++) begin : g_chk
    grant_needs_request: assert property (@(posedge clk) disable iff (!rst_n)
      mrsp[m].gnt |-> mreq[m].req);
  end
endmodule
