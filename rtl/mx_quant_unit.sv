// SIMD MX quantization unit.
//
// Converts the N = 64 accumulated partial results of one output tile into one MX block: a
// shared 8-bit exponent (E8M0) and 64 elements of the output format. The shared exponent is
// the largest partial-result exponent (comparator tree) minus the largest exponent of the
// element format (INT8 0, E5M2 15, E4M3 8, E3M2 4, E2M3 2, E2M1 2), clamped to 0..254; each
// element exponent is its own exponent minus the shared one (one mx_quant_lane per element). FP elements
// keep the top mantissa bits (subnormals by a right shift of the significand, selected by a
// MUX); INT8 elements are the significand shifted to a 2^-6 fixed point. Values are
// truncated toward zero and saturated at the format's largest value (E4M3 avoids its NaN
// code). An all-zero tile gives shared exponent 0 and zero elements.
// Interface: capture loads the result register from acc (valid/ready output handshake; the
// unit captures only when the register is free, see ready_in). Output beat: element i in
// bits [8i +: 8] (low bits of the slot for 6- and 4-bit formats), shared exponent in bits
// [8N +: 8], the rest zero: 9 channels of 64 bits. One cycle latency.
// The structure (max tree, subtract, shift, MUX, 64 lanes) follows the paper's block diagram
// and its description of quantization per the MX standard; truncation instead of rounding
// and the 8-bit element slots are this design's choices.
module mx_quant_unit
  import mx_pkg::*;
#(
  parameter int unsigned N      = mx_pkg::ROWS * mx_pkg::COLS,
  parameter int unsigned MANT_W = mx_pkg::MANT_W,
  parameter int unsigned OUT_W  = mx_pkg::C_CH * mx_pkg::CH_W
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               capture,
  input  logic [2:0]         fmt,
  input  logic [MANT_W+8:0]  acc [N],
  output logic               ready_in,    // register free (or being drained this cycle)
  output logic               out_valid,
  input  logic               out_ready,
  output logic [OUT_W-1:0]   out_data
);

  logic [7:0]        emax_in;
  logic [7:0]        shared;
  logic [7:0]        elem [N];
  logic [OUT_W-1:0]  beat;


  // comparator tree over the N partial-result exponents (N rounded up to a power of two)
  localparam int unsigned NP = 1 << $clog2(N);
  logic [7:0] tree [2*NP-1];
  for (genvar i = 0; i < NP; i++) begin : g_leaf
    if (i < N) begin : g_in
      assign tree[NP-1+i] = acc[i][MANT_W+7:MANT_W];
    end else begin : g_pad
      assign tree[NP-1+i] = '0;
    end
  end
  for (genvar i = 0; i < NP - 1; i++) begin : g_node
    assign tree[i] = (tree[2*i+1] > tree[2*i+2]) ? tree[2*i+1] : tree[2*i+2];
  end
  assign emax_in = tree[0];

  logic signed [9:0] sdiff;
  assign sdiff = $signed({2'b0, emax_in}) - 10'(elem_emax(fmt));

  always_comb begin
    if (emax_in == 0)        shared = 8'd0;
    else if (sdiff < 0)      shared = 8'd0;
    else if (sdiff > 254)    shared = 8'd254;
    else                     shared = sdiff[7:0];
    beat = '0;
    for (int i = 0; i < N; i++) begin
      beat[8*i +: 8] = elem[i];
    end
    beat[8*N +: 8] = shared;
  end

  for (genvar i = 0; i < N; i++) begin : g_lane
    mx_quant_lane #(.MANT_W(MANT_W)) u_lane (.fmt(fmt), .x(acc[i]), .sx(shared), .q(elem[i]));
  end

  assign ready_in = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      if (capture && ready_in) begin
        out_valid <= 1'b1;
        out_data  <= beat;
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end
    end
  end

endmodule
