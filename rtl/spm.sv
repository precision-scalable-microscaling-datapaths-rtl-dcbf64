// Shared multi-banked scratchpad memory: NB = 32 banks of WORDS = 512 64-bit words (128 KiB).
//
// Each bank is a single-port synchronous memory: with b_req high it writes b_wdata to row
// b_row (b_we) or reads that row, the data appearing on b_rdata one cycle later (held until
// the next read). Contents are not reset.
// The bank count and total size follow the paper; the 64-bit bank width and single-port
// banks are this design's choice (the paper's SPM is a process macro; here it is a
// synthesizable array).
module spm
  import mx_pkg::*;
#(
  parameter int unsigned NB    = mx_pkg::NBANKS,
  parameter int unsigned WORDS = 512
) (
  input  logic                     clk,
  input  logic                     b_req   [NB],
  input  logic                     b_we    [NB],
  input  logic [$clog2(WORDS)-1:0] b_row   [NB],
  input  logic [CH_W-1:0]          b_wdata [NB],
  output logic [CH_W-1:0]          b_rdata [NB]
);
  for (genvar b = 0; b < NB; b++) begin : g_bank
    logic [CH_W-1:0] mem [WORDS];
    always_ff @(posedge clk) begin
      if (b_req[b]) begin
        if (b_we[b]) mem[b_row[b]] <= b_wdata[b];
        else         b_rdata[b]    <= mem[b_row[b]];
      end
    end
  end
endmodule
