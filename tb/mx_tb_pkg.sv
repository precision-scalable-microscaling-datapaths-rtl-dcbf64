// Reference arithmetic for the testbenches: real-valued decoding of MX elements and of the
// partial-result format, written from the MX format definitions and independent of the RTL.
package mx_tb_pkg;

  function automatic real p2(input int e);
    real r = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) r = r * 2.0;
    else        for (int i = 0; i < -e; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic real fabs(input real x);
    return (x < 0.0) ? -x : x;
  endfunction

  // {sign, exp[7:0] (bias 127), mant[m-1:0]}, exp 0 means zero
  function automatic real part_val(input logic [63:0] bits, input int m);
    logic s;
    int   e;
    real  f;
    s = bits[m+8];
    e = int'((bits >> m) & 64'hff);
    if (e == 0) return 0.0;
    f = 1.0 + real'(bits & ((64'd1 << m) - 1)) / p2(m);
    f = f * p2(e - 127);
    return s ? -f : f;
  endfunction

  // format codes as in the RTL: 0 INT8, 1 E5M2, 2 E4M3, 3 E3M2, 4 E2M3, 5 E2M1
  function automatic int ebits(input int fmt);
    case (fmt) 1: return 5; 2: return 4; 3: return 3; default: return 2; endcase
  endfunction
  function automatic int mbits(input int fmt);
    case (fmt) 1, 3: return 2; 2, 4: return 3; default: return 1; endcase
  endfunction
  function automatic int width(input int fmt);
    case (fmt) 0, 1, 2: return 8; 3, 4: return 6; default: return 4; endcase
  endfunction

  function automatic real elem_val(input int fmt, input logic [7:0] x);
    int eb, mb, bias, e, m;
    logic s;
    real v;
    if (fmt == 0) return real'($signed(x)) / 64.0;
    eb = ebits(fmt); mb = mbits(fmt);
    bias = (1 << (eb - 1)) - 1;
    s = x[eb + mb];
    e = int'(x >> mb) & ((1 << eb) - 1);
    m = int'(x) & ((1 << mb) - 1);
    if (e == 0) v = p2(1 - bias) * real'(m) / p2(mb);
    else        v = p2(e - bias) * (1.0 + real'(m) / p2(mb));
    return s ? -v : v;
  endfunction

  // products per cycle and element slot width inside the 32-bit operand word
  function automatic int nprod(input int fmt);
    case (fmt) 0: return 1; 5: return 8; default: return 4; endcase
  endfunction

  // dot product of one operand word pair (without shared exponents)
  function automatic real word_dot(input int fmt, input logic [31:0] a, input logic [31:0] b);
    real r = 0.0;
    int w = width(fmt);
    for (int i = 0; i < nprod(fmt); i++)
      r += elem_val(fmt, 8'((a >> (w * i)) & ((32'd1 << w) - 1))) *
           elem_val(fmt, 8'((b >> (w * i)) & ((32'd1 << w) - 1)));
    return r;
  endfunction

  function automatic real word_absdot(input int fmt, input logic [31:0] a, input logic [31:0] b);
    real r = 0.0;
    int w = width(fmt);
    for (int i = 0; i < nprod(fmt); i++)
      r += fabs(elem_val(fmt, 8'((a >> (w * i)) & ((32'd1 << w) - 1))) *
                elem_val(fmt, 8'((b >> (w * i)) & ((32'd1 << w) - 1))));
    return r;
  endfunction

  // largest product exponent (sum of effective element exponents) of a word pair
  function automatic int max_pexp(input int fmt, input logic [31:0] a, input logic [31:0] b);
    int w = width(fmt), mb = mbits(fmt), eb = ebits(fmt), r = 0, ea, ebb;
    if (fmt == 0) return 8;
    for (int i = 0; i < nprod(fmt); i++) begin
      ea  = int'(a >> (w * i + mb)) & ((1 << eb) - 1);
      ebb = int'(b >> (w * i + mb)) & ((1 << eb) - 1);
      if (ea == 0) ea = 1;
      if (ebb == 0) ebb = 1;
      if (ea + ebb > r) r = ea + ebb;
    end
    return r;
  endfunction

  // random operand word; E4M3 avoids its NaN code, E5M2 its Inf/NaN codes
  function automatic logic [31:0] rand_word(input int fmt);
    logic [31:0] r;
    int w;
    r = $urandom();
    w = width(fmt);
    if (fmt == 0) return {24'b0, r[7:0]};
    if (fmt == 3 || fmt == 4) r = {8'b0, r[23:0]};
    for (int i = 0; i < nprod(fmt); i++) begin
      if (fmt == 2 && ((r >> (8 * i)) & 32'h7f) == 32'h7f) r = r & ~(32'h1 << (8 * i));
      if (fmt == 1 && ((r >> (8 * i + 2)) & 32'h1f) == 32'h1f) r = r & ~(32'h4 << (8 * i));
    end
    return r;
  endfunction

endpackage
