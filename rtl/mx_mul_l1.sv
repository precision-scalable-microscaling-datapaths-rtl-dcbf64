// Multiplication and L1 addition of one precision-scalable MX MAC.
//
// Takes one 32-bit operand word from A and one from B, decodes the elements of the selected
// format and produces four signed 10-bit significands, each with a 6-bit exponent, which are
// the inputs of the L2 adder. A significand s with exponent e is worth s * 2^(e - offset),
// offset given by mx_pkg::mode_offset.
//   INT8 mode   (1 product):  a[7:0]*b[7:0] split into four 4x4-bit sub-products
//                             (signed high nibble, unsigned low nibble); their exponents
//                             are the fixed shifts 8, 4, 4, 0 so that the L2 alignment
//                             performs the shift-and-add of the sub-products.
//   FP8/FP6     (4 products): element i is a[8i+:8] (FP8) or a[6i+:6] (FP6); product of the
//                             significands (1.M or 0.M), exponent = sum of the two effective
//                             exponents (a zero field counts as 1, subnormal).
//   FP4 E2M1    (8 products): element i is a[4i+:4]; products 2j and 2j+1 are aligned on their
//                             3-bit exponents and added (L1 addition) into output j, which
//                             carries the smaller exponent.
// Purely combinational. The three modes and the 2-level exponent handling follow the paper's
// description of the MAC it builds on; the exact split of INT8 into nibble products, the
// element packing and the exponent offsets are this design's own. Inf/NaN encodings are
// treated as ordinary numbers.
// Only the significand fields of the decoded operands enter fp_prod, and FP4 exponent gaps
// are at most 4, so the upper bits of those values are unused by design.
module mx_mul_l1
  import mx_pkg::*;
(
  input  logic [2:0]              fmt,
  input  logic [OP_W-1:0]         a,
  input  logic [OP_W-1:0]         b,
  output logic signed [9:0]       sig [4],
  output logic [5:0]              exp [4]
);

  typedef struct packed {
    logic       s;
    logic [4:0] e;    // effective exponent (1 for a zero field)
    logic [3:0] m;    // significand with hidden bit
  } fp_t;

  function automatic fp_t decode(input logic [2:0] f, input logic [7:0] x);
    fp_t r;
    logic [4:0] ef;
    r = '0;
    case (f)
      FMT_E5M2: begin r.s = x[7]; ef = x[6:2];         r.m = {1'b0, (ef != 0), x[1:0]}; end
      FMT_E4M3: begin r.s = x[7]; ef = {1'b0, x[6:3]}; r.m = {(ef != 0), x[2:0]}; end
      FMT_E3M2: begin r.s = x[5]; ef = {2'b0, x[4:2]}; r.m = {1'b0, (ef != 0), x[1:0]}; end
      FMT_E2M3: begin r.s = x[5]; ef = {3'b0, x[4:3]}; r.m = {(ef != 0), x[2:0]}; end
      default:  begin r.s = x[3]; ef = {3'b0, x[2:1]}; r.m = {2'b0, (ef != 0), x[0]}; end
    endcase
    r.e = (ef == 0) ? 5'd1 : ef;
    return r;
  endfunction

  // signed product of two decoded elements (|p| < 256)
  function automatic logic signed [9:0] fp_prod(input fp_t x, input fp_t y);
    logic [7:0] p;
    p = x.m * y.m;
    return (x.s ^ y.s) ? -$signed({2'b0, p}) : $signed({2'b0, p});
  endfunction

  // left barrel shifter for the FP4 pair alignment (exponent gap 0..4)
  function automatic logic signed [9:0] shl10(input logic signed [9:0] x, input logic [2:0] n);
    for (int i = 0; i < 3; i++) if (n[i]) x = x << (1 << i);
    return x;
  endfunction

  // INT8 nibble operands
  logic signed [9:0] ah, bh, al, bl;
  assign ah = 10'($signed(a[7:4]));
  assign bh = 10'($signed(b[7:4]));
  assign al = $signed({6'b0, a[3:0]});
  assign bl = $signed({6'b0, b[3:0]});

  // FP8 / FP6 products
  fp_t               xa8 [4], xb8 [4];
  logic signed [9:0] p8 [4];
  logic [5:0]        e8 [4];
  // FP4 products and their L1 sums
  fp_t               xa4 [8], xb4 [8];
  logic signed [9:0] p4 [8];
  logic [5:0]        e4 [8];
  logic signed [9:0] s4 [4];
  logic [5:0]        m4 [4];

  always_comb begin
    for (int i = 0; i < 4; i++) begin
      if (fmt == FMT_E3M2 || fmt == FMT_E2M3) begin
        xa8[i] = decode(fmt, {2'b0, a[6*i +: 6]});
        xb8[i] = decode(fmt, {2'b0, b[6*i +: 6]});
      end else begin
        xa8[i] = decode(fmt, a[8*i +: 8]);
        xb8[i] = decode(fmt, b[8*i +: 8]);
      end
      p8[i] = fp_prod(xa8[i], xb8[i]);
      e8[i] = 6'(xa8[i].e + xb8[i].e);
    end
    for (int i = 0; i < 8; i++) begin
      xa4[i] = decode(FMT_E2M1, {4'b0, a[4*i +: 4]});
      xb4[i] = decode(FMT_E2M1, {4'b0, b[4*i +: 4]});
      p4[i]  = fp_prod(xa4[i], xb4[i]);
      e4[i]  = 6'(xa4[i].e + xb4[i].e);
    end
    // L1 addition: align the pair on the smaller exponent (shift the larger one left)
    for (int j = 0; j < 4; j++) begin
      logic              ge;
      logic signed [9:0] larger, lesser;
      logic [5:0]        d;
      ge     = e4[2*j] >= e4[2*j+1];
      larger = ge ? p4[2*j]   : p4[2*j+1];
      lesser = ge ? p4[2*j+1] : p4[2*j];
      d      = ge ? e4[2*j] - e4[2*j+1] : e4[2*j+1] - e4[2*j];
      m4[j]  = ge ? e4[2*j+1] : e4[2*j];
      s4[j]  = shl10(larger, d[2:0]) + lesser;
    end
  end

  // mode selection: AND-OR of the three product sets
  logic is_int, is_fp4, is_fp8;
  logic signed [9:0] pint [4];
  localparam logic [5:0] INT_EXP [4] = '{6'd8, 6'd4, 6'd4, 6'd0};  // hi*hi, hi*lo, lo*hi, lo*lo
  assign is_int = (fmt == FMT_INT8);
  assign is_fp4 = (fmt == FMT_E2M1);
  assign is_fp8 = !is_int && !is_fp4;
  assign pint[0] = ah * bh;
  assign pint[1] = ah * bl;
  assign pint[2] = al * bh;
  assign pint[3] = al * bl;

  always_comb begin
    for (int i = 0; i < 4; i++) begin
      sig[i] = ({10{is_int}} & pint[i]) | ({10{is_fp4}} & s4[i]) | ({10{is_fp8}} & p8[i]);
      exp[i] = ({6{is_int}} & INT_EXP[i]) | ({6{is_fp4}} & m4[i]) | ({6{is_fp8}} & e8[i]);
    end
  end

endmodule
