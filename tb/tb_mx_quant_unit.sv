// Self-checking testbench of mx_quant_unit: random tiles of 64 partial results in every output
// format. Checks the shared exponent (largest exponent minus the format's largest element
// exponent) and that each element, scaled back by the shared exponent, is the truncation of
// the input: same sign, |q| <= |x| < |q| + step, where step is the element's spacing at q
// (E4M3 may also saturate at 448). Also checks the output handshake (hold while not ready).
module tb_mx_quant_unit;
  import mx_tb_pkg::*;
  localparam int M = 16, N = 64;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, capture = 0, out_ready = 0, ready_in, out_valid;
  logic [2:0]      fmt;
  logic [M+8:0]    acc [N];
  logic [575:0]    out_data;
  int emaxe [6] = '{0, 15, 8, 4, 2, 2};

  mx_quant_unit dut (.clk(clk), .rst_n(rst_n), .capture(capture), .fmt(fmt), .acc(acc),
                     .ready_in(ready_in), .out_valid(out_valid), .out_ready(out_ready),
                     .out_data(out_data));
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    fmt = 0;
    for (int i = 0; i < N; i++) acc[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 600; t++) begin
      int f, emx, base, sx;
      f = t % 6;
      @(negedge clk);
      fmt = 3'(f);
      base = $urandom_range(60, 190);
      emx = 0;
      for (int i = 0; i < N; i++) begin
        int e;
        e = base - $urandom_range(0, 12);
        acc[i] = {1'($urandom()), 8'(e), 16'($urandom())};
        if ($urandom_range(0, 20) == 0) acc[i] = '0;
        if (int'(acc[i][23:16]) > emx) emx = int'(acc[i][23:16]);
      end
      capture = 1;
      @(negedge clk);
      capture = 0;
      chk(out_valid, "valid after capture");
      sx = (emx == 0) ? 0 : emx - emaxe[f];
      chk(int'(out_data[519:512]) == sx, $sformatf("shared exp %0d vs %0d", out_data[519:512], sx));
      for (int i = 0; i < N; i++) begin
        real x, q, step;
        logic [7:0] qe;
        int ef, bias;
        qe = out_data[8*i +: 8];
        x = part_val(64'(acc[i]), M);
        q = elem_val(f, qe) * p2(sx - 127);
        if (f == 0) step = p2(-6);
        else begin
          bias = (1 << (ebits(f) - 1)) - 1;
          ef = int'(qe >> mbits(f)) & ((1 << ebits(f)) - 1);
          if (ef == 0) ef = 1;
          step = p2(ef - bias - mbits(f));
        end
        step = step * p2(sx - 127);
        chk((fabs(q) <= fabs(x)) && (q == 0.0 || (q < 0.0) == (x < 0.0)) &&
            ((fabs(x) < fabs(q) + step) || (f == 2 && fabs(q) == 448.0 * p2(sx - 127))),
            $sformatf("fmt %0d elem %0d x=%e q=%e (%h)", f, i, x, q, qe));
      end
      // handshake: hold while not ready
      repeat (2) @(negedge clk);
      chk(out_valid && !ready_in, "hold while not ready");
      out_ready = 1;
      @(negedge clk);
      out_ready = 0;
      chk(!out_valid, "drained");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
