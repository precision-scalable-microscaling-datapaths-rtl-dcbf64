// Self-checking testbench of mx_mul_l1: for random operand words of every format, the four
// significand/exponent outputs must represent the exact dot product of the word pair
// (sum of s*2^(e-offset)), computed here from the MX element definitions.
module tb_mx_mul_l1;
  import mx_tb_pkg::*;
  int checks = 0, failures = 0;
  logic [2:0]        fmt;
  logic [31:0]       a, b;
  logic signed [9:0] sig [4];
  logic [5:0]        exp [4];
  int offs [6] = '{12, 34, 20, 10, 8, 4};

  mx_mul_l1 dut (.fmt(fmt), .a(a), .b(b), .sig(sig), .exp(exp));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int f = 0; f < 6; f++) begin
      for (int t = 0; t < 3000; t++) begin
        real exact, got;
        fmt = 3'(f);
        a = rand_word(f);
        b = rand_word(f);
        if (t == 0) begin a = '0; b = '0; end
        if (t == 1 && f == 0) begin a = 32'h80; b = 32'h80; end   // -128 * -128
        #1;
        exact = word_dot(f, a, b);
        got = 0.0;
        for (int i = 0; i < 4; i++) got += real'(sig[i]) * p2(int'(exp[i]) - offs[f]);
        checks++;
        if (got != exact) begin
          failures++;
          $display("FAIL fmt %0d a=%h b=%h got %e exact %e", f, a, b, got, exact);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
