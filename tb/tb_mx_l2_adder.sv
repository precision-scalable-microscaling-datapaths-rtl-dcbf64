// Self-checking testbench of mx_l2_adder at the default 16-bit mantissa (19-bit alignment,
// 21-bit sum): emax must be the largest exponent; the sum must equal the exact sum of the
// four terms when no shift exceeds the spare bits, and be within the truncation bound
// (4 LSBs of the aligned field) otherwise.
module tb_mx_l2_adder;
  import mx_tb_pkg::*;
  localparam int M = 16, AL = M + 3;
  int checks = 0, failures = 0;
  logic signed [9:0]   sig [4];
  logic [5:0]          exp [4];
  logic signed [M+4:0] psum;
  logic [5:0]          emax;

  mx_l2_adder dut (.sig(sig), .exp(exp), .psum(psum), .emax(emax));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 20000; t++) begin
      real exact, got, tol;
      int mx, spread;
      spread = (t % 2) ? 63 : AL - 10;
      mx = 0;
      for (int i = 0; i < 4; i++) begin
        sig[i] = $signed(10'($urandom()));
        exp[i] = 6'($urandom_range(0, spread));
        if (int'(exp[i]) > mx) mx = int'(exp[i]);
      end
      #1;
      exact = 0.0;
      for (int i = 0; i < 4; i++) exact += real'(sig[i]) * p2(int'(exp[i]));
      got = real'(psum) * p2(int'(emax) - AL + 10);
      tol = (t % 2) ? 4.0 * p2(int'(emax) - AL + 10) : 0.0;
      checks++;
      if (int'(emax) != mx) begin failures++; $display("FAIL emax %0d vs %0d", emax, mx); end
      checks++;
      if (fabs(got - exact) > tol) begin
        failures++;
        $display("FAIL sum got %e exact %e", got, exact);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
