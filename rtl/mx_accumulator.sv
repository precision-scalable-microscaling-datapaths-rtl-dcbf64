// Early accumulation stage of the hybrid reduction tree (alignment, MUX, adder, normalization).
//
// Adds the un-normalized L2 product sum to the stored partial result and normalizes the result
// back into the partial-result format {sign, 8-bit exponent (bias 127), MANT_W-bit mantissa}.
// The product-sum exponent eps already includes both shared exponents; the product sum's MSB
// (its sign bit) has weight 2^eps. delta = (partial exponent) - eps decides the MUX:
//   delta >= 0  the partial result is the larger one: the product sum is extended on the LEFT
//               (it sits in the low PSUM_W bits) and the partial significand is shifted left
//               so that its integer bit lands at PSUM_W-1+delta. For delta > MANT_W+1 the
//               product sum lies entirely below the partial's last bit and is dropped.
//   delta <  0  the product sum is the larger one: it is extended on the RIGHT (it sits in the
//               top PSUM_W bits) and the partial significand is shifted right so its integer
//               bit lands at ACC_W-1+delta; bits below bit 0 are lost.
// Only one of the two MANT_W+1 bit extensions is ever needed, so the adder and the
// normalizer are ACC_W = PSUM_W+MANT_W+1 (+1 carry) bits wide instead of ACC_W+MANT_W+1.
// With MANT_W = 23 this gives the 28/52/53-bit widths of the FP32 version; with the 16-bit
// mantissa used here, 21/38/39 bits.
// Normalization truncates (rounds toward zero), flushes exponents below 1 to zero and
// saturates above 254; a zero partial (exponent 0) or clear starts a new accumulation.
// Purely combinational. The MUX scheme and the widths follow the paper; truncation, the
// flush/saturate rules and the drop rule for large delta are this design's choices.
// Only the top MANT_W bits below the leading one of the normalized sum are kept, and the
// bits of the shifted significand below the adder's bit 0 are dropped, so those bits of norm
// and pbx are deliberately unused (truncation).
module mx_accumulator #(
  parameter int unsigned MANT_W = mx_pkg::MANT_W
) (
  input  logic signed [MANT_W+4:0]  psum,
  input  logic signed [11:0]        eps,
  input  logic [MANT_W+8:0]         part_in,
  input  logic                      clear,
  output logic [MANT_W+8:0]         part_out,
  output logic                      left_ext   // MUX setting used (for observation)
);
  localparam int PW = MANT_W + 5;
  localparam int AW = PW + MANT_W + 1;
  localparam int SW = AW + 2;
  localparam int XW = SW + MANT_W + 1;        // significand shifter width (keeps bits below 0)
  localparam int NB = $clog2(AW + 1);         // shift-amount bits

  // barrel shifters built from constant shift stages
  function automatic logic [XW-1:0] shl_x(input logic [XW-1:0] x, input logic [NB-1:0] n);
    for (int i = 0; i < NB; i++) if (n[i]) x = x << (1 << i);
    return x;
  endfunction
  function automatic logic [SW-1:0] shl_s(input logic [SW-1:0] x, input logic [NB-1:0] n);
    for (int i = 0; i < NB; i++) if (n[i]) x = x << (1 << i);
    return x;
  endfunction

  logic              ps;
  logic [7:0]        pe;
  logic [MANT_W-1:0] pm;
  logic [MANT_W:0]   sigp;
  logic              pzero;
  logic signed [12:0] delta;
  logic signed [SW-1:0] sum, pa, pb;
  logic [SW-1:0]     mag, norm;
  logic [XW-1:0]     pbx;
  int                lead, refpos, shift;
  logic signed [13:0] eres;
  logic              bypass;

  assign {ps, pe, pm} = part_in;
  assign sigp  = {1'b1, pm};
  assign pzero = clear || (pe == 8'd0);
  assign delta = 13'($signed({5'b0, pe})) - 13'sd127 - 13'(eps);

  always_comb begin
    bypass   = 1'b0;
    left_ext = 1'b1;
    pa       = SW'(psum);
    pb       = '0;
    refpos   = PW - 1;
    shift    = 0;
    // shift (relative to bit 0 of the SW-bit adder) of the partial significand's LSB;
    // one left shifter over an extended field covers both MUX settings
    if (delta >= 0) shift = PW - 1 - MANT_W + int'(delta);
    else            shift = PW + int'(delta);
    pbx = (shift + int'(MANT_W) + 1 < 0) ? '0
                                          : shl_x(XW'({1'b0, sigp}), NB'(shift + int'(MANT_W) + 1));
    if (pzero) begin
      pb = '0;
    end else if (psum == 0) begin
      bypass = 1'b1;
    end else if (delta >= 0) begin
      if (delta > 13'(MANT_W + 1)) bypass = 1'b1;
      else                         pb = $signed(pbx[MANT_W+1 +: SW]);
    end else begin
      left_ext = 1'b0;
      pa       = SW'(psum) <<< (AW - PW);
      refpos   = AW - 1;
      pb       = $signed(pbx[MANT_W+1 +: SW]);
    end
    if (ps) pb = -pb;
    sum = pa + pb;

    mag  = sum[SW-1] ? SW'(-sum) : SW'(sum);
    lead = 0;
    for (int i = 0; i < SW; i++)
      if (mag[i]) lead = i;
    norm = shl_s(mag, NB'(SW - 1 - lead));
    eres = 14'(eps) + 14'(lead - refpos) + 14'sd127;

    if (bypass)
      part_out = part_in;
    else if (mag == 0 || eres <= 0)
      part_out = '0;
    else if (eres >= 255)
      part_out = {sum[SW-1], 8'd254, {MANT_W{1'b1}}};
    else
      part_out = {sum[SW-1], eres[7:0], norm[SW-2 -: MANT_W]};
  end

endmodule
