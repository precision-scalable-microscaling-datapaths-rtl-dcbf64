// One lane of the MX quantization unit: converts one accumulated partial result
// {sign, 8-bit exponent, MANT_W-bit mantissa} into an element of the output format, relative
// to the block's shared exponent sx.
// How: the element exponent is the partial exponent minus sx plus the format bias (one
// subtractor); normal values keep the top mantissa bits, subnormals shift the significand
// 1.m right first (MUX between the two), and values above the format's range saturate to its
// largest value (E4M3 avoids its NaN code S.1111.111). INT8 elements are the significand
// placed on a 2^-6 fixed-point grid and saturated at +-127. All rounding is truncation
// toward zero; a zero input (exponent 0) gives 0.
// Interface: purely combinational, fmt / x / sx in, q out (element in the low bits of the
// 8-bit slot: sign, exponent, mantissa).
// Quantizing per the MX standard with a shared exponent follows the paper; truncation and
// the 8-bit slot are this design's choices.
module mx_quant_lane
  import mx_pkg::*;
#(
  parameter int unsigned MANT_W = mx_pkg::MANT_W
) (
  input  logic [2:0]        fmt,
  input  logic [MANT_W+8:0] x,
  input  logic [7:0]        sx,
  output logic [7:0]        q
);
  localparam int NB = $clog2(MANT_W + 2);

  // right barrel shifter built from constant shift stages
  function automatic logic [MANT_W:0] shr(input logic [MANT_W:0] v, input logic [NB-1:0] n);
    for (int i = 0; i < NB; i++) if (n[i]) v = v >> (1 << i);
    return v;
  endfunction

  // top n of the three given mantissa bits (n = 1..3)
  function automatic int top_bits(input logic [2:0] t, input int n);
    return (n == 3) ? int'(t) : (n == 2) ? int'(t[2:1]) : int'(t[2]);
  endfunction

  function automatic logic [7:0] quant_elem(input logic [2:0] f, input logic [MANT_W+8:0] x,
                                            input logic [7:0] sx);
    logic              s;
    logic [7:0]        e;
    logic [MANT_W-1:0] m;
    logic [MANT_W:0]   sig, sh;
    int                ed, mb, bias, be, maxf, mval, rs, mag;
    logic [7:0]        r;
    {s, e, m} = x;
    sig  = {1'b1, m};
    ed   = int'(e) - int'(sx);
    mb   = elem_mbits(f);
    bias = elem_bias(f);
    be   = ed + bias;
    // one shifter serves INT8 (onto the 2^-6 grid) and FP subnormals (by 1-be)
    rs   = (f == FMT_INT8) ? MANT_W - 6 - ed : 1 - be;
    if (rs < 0) rs = 0;
    sh   = (rs > MANT_W) ? '0 : shr(sig, NB'(rs));
    if (e == 0) return 8'd0;
    if (f == FMT_INT8) begin
      mag = (ed > 0) ? 127 : int'(sh);
      if (mag > 127) mag = 127;
      r = s ? 8'(-mag) : 8'(mag);
      return r;
    end
    maxf = (f == FMT_E5M2) ? 30 : (f == FMT_E4M3) ? 15 : (f == FMT_E3M2) ? 7 : 3;
    if (be > maxf) begin
      be   = maxf;
      mval = (f == FMT_E4M3 || f == FMT_E2M3) ? ((f == FMT_E4M3) ? 6 : 7)
           : (f == FMT_E2M1) ? 1 : 3;
    end else if (be >= 1) begin
      mval = top_bits(m[MANT_W-1 -: 3], mb);
      if (f == FMT_E4M3 && be == 15 && mval == 7) mval = 6;
    end else begin
      // subnormal: significand 1.m shifted right by 1-be, top mb bits kept
      mval = top_bits(sh[MANT_W-1 -: 3], mb);
      be = 0;
    end
    case (f)
      FMT_E5M2: r = {s, 5'(be), 2'(mval)};
      FMT_E4M3: r = {s, 4'(be), 3'(mval)};
      FMT_E3M2: r = {2'b0, s, 3'(be), 2'(mval)};
      FMT_E2M3: r = {2'b0, s, 2'(be), 3'(mval)};
      default:  r = {4'b0, s, 2'(be), 1'(mval)};
    endcase
    return r;
  endfunction

  assign q = quant_elem(fmt, x, sx);
endmodule
