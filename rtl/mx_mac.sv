// Precision-scalable MX multiply-accumulate unit with the hybrid reduction tree.
//
// Per enabled cycle it multiplies one 32-bit A operand word with one 32-bit B operand word
// (1 INT8 product, 4 FP8/FP6 products or 8 FP4 products), reduces them through L1 and L2,
// and accumulates the un-normalized product sum into the stored partial result using early
// accumulation. The two 8-bit shared exponents xa and xb (E8M0, bias 127) are applied in the
// accumulation stage:  eps = emax - offset(fmt) + 11 + (xa - 127) + (xb - 127)  is the weight
// exponent of the product sum's MSB (see mx_l2_adder for the value of the sum).
// Interface: en accumulates this cycle's operands; clear (with en) starts a new result from
// zero instead of adding to the stored one. acc is the registered partial result
// {sign, exp[7:0], mant[MANT_W-1:0]}, updated at the clock edge after en. One cycle
// throughput, one cycle latency; reset clears the partial result.
// The structure (L1 -> L2 -> early accumulation with MUX -> normalization -> register) follows
// the paper; the single-cycle timing (no pipeline registers) is this design's choice.
// left_ext of the accumulator (the MUX setting) is left unconnected at this level: it exists
// for observation in simulation and drives no logic.
module mx_mac
  import mx_pkg::*;
#(
  parameter int unsigned MANT_W = mx_pkg::MANT_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  input  logic                 clear,
  input  logic [2:0]           fmt,
  input  logic [OP_W-1:0]      a,
  input  logic [OP_W-1:0]      b,
  input  logic [7:0]           xa,
  input  logic [7:0]           xb,
  output logic [MANT_W+8:0]    acc
);

  logic signed [9:0]        sig [4];
  logic [5:0]               exp [4];
  logic signed [MANT_W+4:0] psum;
  logic [5:0]               emax;
  logic signed [11:0]       eps;
  logic [MANT_W+8:0]        acc_next;
  logic                     left_ext;

  mx_mul_l1 u_l1 (.fmt(fmt), .a(a), .b(b), .sig(sig), .exp(exp));

  mx_l2_adder #(.MANT_W(MANT_W)) u_l2 (.sig(sig), .exp(exp), .psum(psum), .emax(emax));

  assign eps = 12'($signed({6'b0, emax})) - 12'(mode_offset(fmt)) + 12'sd11
             + 12'($signed({4'b0, xa})) + 12'($signed({4'b0, xb})) - 12'sd254;

  mx_accumulator #(.MANT_W(MANT_W)) u_acc (
    .psum(psum), .eps(eps), .part_in(acc), .clear(clear),
    .part_out(acc_next), .left_ext(left_ext)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  acc <= '0;
    else if (en) acc <= acc_next;
  end

endmodule
