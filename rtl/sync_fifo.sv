// Synchronous FIFO (helper of the data streamers' memory access channels).
// push/pop in the same cycle are allowed; data_o is the head (valid when !empty).
// Storage is not reset; the pointers are. DEPTH must be a power of two.
module sync_fifo #(
  parameter int unsigned W     = 64,
  parameter int unsigned DEPTH = 4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   push,
  input  logic [W-1:0]           data_i,
  input  logic                   pop,
  output logic [W-1:0]           data_o,
  output logic                   empty,
  output logic                   full,
  output logic [$clog2(DEPTH):0] count
);
  localparam int unsigned PW = $clog2(DEPTH);
  logic [W-1:0]  mem [DEPTH];
  logic [PW-1:0] wp, rp;

  assign empty  = (count == 0);
  assign full   = (count == (PW+1)'(DEPTH));
  assign data_o = mem[rp];

  always_ff @(posedge clk) if (push && !full) mem[wp] <= data_i;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (push && !full)  wp <= wp + 1'b1;
      if (pop && !empty)  rp <= rp + 1'b1;
      count <= count + (PW+1)'(push && !full) - (PW+1)'(pop && !empty);
    end
  end

  no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full && !pop));
  no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));
endmodule
