// Self-checking testbench of mx_spatial_array: random beats in all formats accumulated over a
// few cycles; every MAC (r,c) must hold the dot product of A row r and B column c (beat layout
// per format as documented in the module), within the accumulation error bound.
module tb_mx_spatial_array;
  import mx_tb_pkg::*;
  localparam int M = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, en = 0, clear = 0;
  logic [2:0]   fmt = 0;
  logic [255:0] a_beat, b_beat;
  logic [7:0]   xa, xb;
  logic [M+8:0] acc [64];
  int offs [6] = '{12, 34, 20, 10, 8, 4};

  mx_spatial_array dut (.clk(clk), .rst_n(rst_n), .en(en), .clear(clear), .fmt(fmt),
                        .a_beat(a_beat), .b_beat(b_beat), .xa(xa), .xb(xb), .acc(acc));
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a_beat = '0; b_beat = '0; xa = 127; xb = 127;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      int f, n, rw;
      real ex [64], ab [64], l2 [64];
      f = t % 6;
      rw = (f == 0) ? 8 : (f == 3 || f == 4) ? 24 : 32;
      n = $urandom_range(1, 4);
      for (int i = 0; i < 64; i++) begin ex[i] = 0.0; ab[i] = 0.0; l2[i] = 0.0; end
      for (int c = 0; c < n; c++) begin
        logic [31:0] aw [8], bw [8];
        real sc;
        @(negedge clk);
        fmt = 3'(f); en = 1; clear = (c == 0);
        xa = 8'($urandom_range(118, 136)); xb = 8'($urandom_range(118, 136));
        sc = p2(int'(xa) + int'(xb) - 254);
        a_beat = '0; b_beat = '0;
        for (int r = 0; r < 8; r++) begin
          aw[r] = rand_word(f); bw[r] = rand_word(f);
          a_beat = a_beat | (256'(aw[r]) << (rw * r));
          b_beat = b_beat | (256'(bw[r]) << (rw * r));
        end
        for (int r = 0; r < 8; r++) for (int q = 0; q < 8; q++) begin
          ex[r*8+q] += word_dot(f, aw[r], bw[q]) * sc;
          ab[r*8+q] += word_absdot(f, aw[r], bw[q]) * sc;
          l2[r*8+q] += 4.0 * p2(max_pexp(f, aw[r], bw[q]) - offs[f] - (M + 3) + 10) * sc;
        end
      end
      @(negedge clk);
      en = 0;
      for (int i = 0; i < 64; i++) begin
        real got;
        got = part_val(64'(acc[i]), M);
        checks++;
        if (fabs(got - ex[i]) > ab[i] * p2(-(M - 3)) + l2[i] + 1e-30) begin
          failures++;
          $display("FAIL fmt %0d mac %0d got %e exact %e", f, i, got, ex[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
