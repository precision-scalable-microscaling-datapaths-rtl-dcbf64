// Self-checking testbench of mx_accumulator.
// 1) The two worked examples of the early-accumulation MUX (partial larger by 13 binades ->
//    product sum extended left; product sum larger by 11 -> extended right) at a 23-bit
//    mantissa, against the bit patterns of those examples.
// 2) Random product sums, exponents and partials at the default 16-bit mantissa, checked
//    against real arithmetic within the truncation bound.
module tb_mx_accumulator;
  import mx_tb_pkg::*;

  int checks = 0, failures = 0;
  int n_left = 0, n_right = 0;

  // 23-bit instance for the worked examples
  logic signed [27:0] psum23;
  logic signed [11:0] eps23;
  logic [31:0]        pin23, pout23;
  logic               le23;
  mx_accumulator #(.MANT_W(23)) dut23 (.psum(psum23), .eps(eps23), .part_in(pin23),
                                       .clear(1'b0), .part_out(pout23), .left_ext(le23));

  localparam int M = 16;
  logic signed [M+4:0] psum;
  logic signed [11:0]  eps;
  logic [M+8:0]        pin, pout;
  logic                clr, le;
  mx_accumulator dut (.psum(psum), .eps(eps), .part_in(pin), .clear(clr),
                      .part_out(pout), .left_ext(le));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // example c: partial exponent 120 (-7), product-sum exponent -20, delta 13
    psum23 = 28'b0011_0100_0000_1000_0100_0111_0000;
    pin23  = {1'b0, 8'b01111000, 23'b00100001000111001100000};
    eps23  = -12'sd20;
    #1;
    check(le23 == 1'b1, "example c uses left extension");
    check(pout23 == {1'b0, 8'd120, 23'h109000}, $sformatf("example c result %h", pout23));
    // example d: product-sum exponent 4, delta -11
    eps23  = 12'sd4;
    #1;
    check(le23 == 1'b0, "example d uses right extension");
    check(pout23 == {1'b0, 8'd129, 23'h506963}, $sformatf("example d result %h", pout23));

    // clear: result is the normalized product sum alone
    psum = 21'sd1 <<< 19; eps = 12'sd0; pin = {1'b0, 8'd130, 16'h1234}; clr = 1'b1;
    #1;
    check(pout == {1'b0, 8'd126, 16'h0}, $sformatf("clear: %h", pout));
    clr = 1'b0;

    for (int t = 0; t < 20000; t++) begin
      real ps_v, pa_v, exact, got, tol;
      int  pe;
      psum = $signed(21'($urandom()));
      if ($urandom_range(0, 7) == 0) psum = psum >>> $urandom_range(0, 18);
      if ($urandom_range(0, 31) == 0) psum = '0;
      eps  = 12'($signed($urandom_range(0, 80)) - 40);
      pe   = 127 + int'(eps) + $urandom_range(0, 110) - 70;
      pin  = {1'(($urandom() & 1)), 8'(pe), 16'($urandom())};
      if ($urandom_range(0, 15) == 0) pin = '0;
      #1;
      ps_v  = real'(psum) * p2(int'(eps) - (M + 4));
      pa_v  = part_val(64'(pin), M);
      exact = ps_v + pa_v;
      got   = part_val(64'(pout), M);
      tol   = fabs(exact) * p2(-(M - 1)) + p2(int'(eps) - (2 * M + 5)) +
              ((pe - 127 - int'(eps) > M + 1) ? fabs(ps_v) : 0.0);
      if (le) n_left++; else n_right++;
      check(fabs(got - exact) <= tol,
            $sformatf("psum=%0d eps=%0d part=%h -> %h (got %e exact %e)", psum, eps, pin, pout, got, exact));
    end
    check(n_left > 1000 && n_right > 1000, "both MUX settings exercised");
    $display("left extensions %0d, right extensions %0d", n_left, n_right);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
