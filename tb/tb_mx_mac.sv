// Self-checking testbench of mx_mac: for every format, random operand words and shared
// exponents are accumulated over a random number of cycles (the first with clear) and the
// registered partial result is compared with the real-valued dot product, within a bound
// of 2^-(MANT_W-3) of the sum of the absolute products plus the L2 alignment truncation
// bound (4 LSBs of the aligned field per cycle). Also checks that the result updates
// one cycle after en and holds while en is low.
module tb_mx_mac;
  import mx_tb_pkg::*;
  localparam int M = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, en = 0, clear = 0;
  logic [2:0]   fmt;
  logic [31:0]  a, b;
  logic [7:0]   xa, xb;
  logic [M+8:0] acc;
  int offs [6] = '{12, 34, 20, 10, 8, 4};

  mx_mac dut (.clk(clk), .rst_n(rst_n), .en(en), .clear(clear), .fmt(fmt), .a(a), .b(b),
              .xa(xa), .xb(xb), .acc(acc));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fmt = 0; a = 0; b = 0; xa = 127; xb = 127;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 6; f++) begin
      for (int t = 0; t < 400; t++) begin
        real exact, absum, got, sc, l2tol;
        logic [M+8:0] held;
        int n;
        n = $urandom_range(1, 12);
        exact = 0.0; absum = 0.0; l2tol = 0.0;
        for (int c = 0; c < n; c++) begin
          @(negedge clk);
          fmt = 3'(f); en = 1; clear = (c == 0);
          a = rand_word(f); b = rand_word(f);
          xa = 8'($urandom_range(112, 142)); xb = 8'($urandom_range(112, 142));
          sc = p2(int'(xa) + int'(xb) - 254);
          exact += word_dot(f, a, b) * sc;
          absum += word_absdot(f, a, b) * sc;
          // L2 alignment drops bits below its (MANT_W+3)-bit field: up to 4 LSBs per cycle
          l2tol += 4.0 * p2(max_pexp(f, a, b) - offs[f] - (M + 3) + 10) * sc;
        end
        @(negedge clk);
        en = 0;
        got = part_val(64'(acc), M);
        checks++;
        if (fabs(got - exact) > absum * p2(-(M - 3)) + l2tol + 1e-30) begin
          failures++;
          $display("FAIL fmt %0d n %0d got %e exact %e", f, n, got, exact);
        end
        held = acc;
        @(negedge clk);
        a = rand_word(f);
        @(negedge clk);
        checks++;
        if (acc != held) begin failures++; $display("FAIL acc changed without en"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
