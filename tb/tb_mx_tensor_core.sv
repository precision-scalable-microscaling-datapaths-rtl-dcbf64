// Self-checking testbench of mx_tensor_core with the streams driven directly: programs the
// three CSRs, launches, and feeds A/B beats and one exponent word per tile, with random gaps
// and random output back-pressure, or none. Checks every quantized output tile against a
// real-valued GeMM (shared exponent within 1, elements within one step plus the accumulation
// bound), the number of output tiles, and the rate: without gaps, the run takes the
// M*N*K*beats_per_tile cycles of MAC work (8/2/1 per tile) plus at most 3 cycles.
module tb_mx_tensor_core;
  import mx_pkg::*;
  import mx_tb_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic csr_we = 0;
  logic [7:0] csr_addr = 0;
  logic [31:0] csr_wdata = 0, csr_rdata;
  logic [255:0] a_data, b_data;
  logic [63:0]  e_data;
  logic a_valid = 0, b_valid = 0, e_valid = 0, a_ready, b_ready, e_ready;
  logic [575:0] out_data;
  logic out_valid, out_ready = 0, writer_idle = 1;
  logic [2:0] fmt_act;
  logic busy, stall;

  mx_tensor_core dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  task automatic csr(input int a, input int d);
    @(negedge clk);
    csr_we = 1; csr_addr = 8'(a); csr_wdata = 32'(d);
    @(negedge clk);
    csr_we = 0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] aw [2][3][8][8], bw [2][3][8][8];
  int xa [2][3], xb [3][2];
  int emaxe [6] = '{0, 15, 8, 4, 2, 2};

  task automatic run(input int f, input int fo, input int MT, input int NT, input int KT,
                     input bit gaps);
    int bpt, rw, nout, cyc, first, lastout;
    int m, n, k, t, tile;
    logic [575:0] outs [$];
    bpt = int'(beats_per_tile(3'(f)));
    rw  = (f == 0) ? 8 : (f == 3 || f == 4) ? 24 : 32;
    for (int i = 0; i < MT; i++) for (int j = 0; j < KT; j++) begin
      xa[i][j] = $urandom_range(120, 134);
      for (int q = 0; q < bpt; q++) for (int r = 0; r < 8; r++) aw[i][j][q][r] = rand_word(f);
    end
    for (int i = 0; i < NT; i++) for (int j = 0; j < KT; j++) begin
      xb[j][i] = $urandom_range(120, 134);
      for (int q = 0; q < bpt; q++) for (int r = 0; r < 8; r++) bw[i][j][q][r] = rand_word(f);
    end
    csr(0, f | (fo << 4)); csr(1, KT); csr(2, MT | (NT << 16));
    csr(3, 1);
    m = 0; n = 0; k = 0; t = 0; tile = 0; nout = 0; first = -1; lastout = 0;
    for (cyc = 0; cyc < 5000 && (busy || cyc == 0); cyc++) begin
      @(negedge clk);
      out_ready = !gaps || ($urandom_range(0, 2) != 0);
      if (tile < MT * NT) begin
        a_data = '0; b_data = '0;
        for (int r = 0; r < 8; r++) begin
          a_data = a_data | (256'(aw[m][k][t][r]) << (rw * r));
          b_data = b_data | (256'(bw[n][k][t][r]) << (rw * r));
        end
        e_data = 64'({8'(xb[k][n]), 8'(xa[m][k])});
        a_valid = !gaps || ($urandom_range(0, 3) != 0);
        b_valid = !gaps || ($urandom_range(0, 3) != 0);
        e_valid = 1;
      end else begin
        a_valid = 0; b_valid = 0; e_valid = 0;
      end
      #1;
      if (out_valid && out_ready) begin outs.push_back(out_data); lastout = cyc; end
      if (a_ready) begin
        if (first < 0) first = cyc;
        chk(e_ready == (t == bpt - 1), "exponent word popped on the tile's last beat");
        t++;
        if (t == bpt) begin
          t = 0; k++;
          if (k == KT) begin
            k = 0; tile++;
            n++;
            if (n == NT) begin n = 0; m++; end
          end
        end
      end
    end
    @(negedge clk);
    a_valid = 0; b_valid = 0; e_valid = 0;
    chk(outs.size() == MT * NT, $sformatf("%0d output tiles", outs.size()));
    if (!gaps)
      chk(lastout - first <= MT*NT*KT*bpt + 3,
          $sformatf("rate: %0d cycles for %0d beats", lastout - first, MT*NT*KT*bpt));
    for (int i = 0; i < MT; i++) for (int j = 0; j < NT; j++) begin
      logic [575:0] o;
      real cref [64], cabs [64], mx;
      int sx, sx_exp;
      o = outs.pop_front();
      mx = 0.0;
      for (int r = 0; r < 8; r++) for (int c = 0; c < 8; c++) begin
        real s, sa, sc;
        s = 0.0; sa = 0.0;
        for (int kk = 0; kk < KT; kk++) begin
          sc = p2(xa[i][kk] + xb[kk][j] - 254);
          for (int q = 0; q < bpt; q++) begin
            s  += word_dot(f, aw[i][kk][q][r], bw[j][kk][q][c]) * sc;
            sa += word_absdot(f, aw[i][kk][q][r], bw[j][kk][q][c]) * sc;
          end
        end
        cref[r*8+c] = s; cabs[r*8+c] = sa;
        if (fabs(s) > mx) mx = fabs(s);
      end
      sx = int'(o[519:512]);
      sx_exp = 0;
      if (mx > 0.0) begin
        int e;
        e = 0;
        while (p2(e + 1) <= mx) e++;
        while (p2(e) > mx) e--;
        sx_exp = e + 127 - emaxe[fo];
      end
      chk(sx - sx_exp <= 1 && sx_exp - sx <= 1, "shared exponent");
      for (int e = 0; e < 64; e++) begin
        logic [7:0] q;
        real qv, step;
        int ef, bias;
        q = o[8*e +: 8];
        qv = elem_val(fo, q) * p2(sx - 127);
        if (fo == 0) step = p2(-6);
        else begin
          bias = (1 << (ebits(fo) - 1)) - 1;
          ef = int'(q >> mbits(fo)) & ((1 << ebits(fo)) - 1);
          if (ef == 0) ef = 1;
          step = p2(ef - bias - mbits(fo));
        end
        chk(fabs(qv - cref[e]) <= 2.0 * step * p2(sx - 127) + cabs[e] * p2(-10) ||
            (fo == 2 && fabs(qv) == 448.0 * p2(sx - 127)),
            $sformatf("fmt %0d elem %0d got %e expected %e", f, e, qv, cref[e]));
      end
    end
  endtask

  initial begin
    a_data = '0; b_data = '0; e_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(0, 0, 2, 2, 2, 0);
    run(2, 2, 2, 1, 3, 1);
    run(5, 5, 2, 2, 1, 0);
    run(3, 4, 1, 2, 2, 1);
    run(1, 5, 2, 2, 2, 0);
    run(5, 0, 1, 2, 3, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
