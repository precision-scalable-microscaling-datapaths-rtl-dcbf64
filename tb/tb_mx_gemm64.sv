// Workload testbench of mx_npu_top (all parameters at their defaults): 64x64x64 GeMMs, the
// matrix size of the mantissa-width error study, in the two formats of the evaluated
// workloads: MXFP8 E4M3 (training) and MXINT8 (inference).
//
// Each run writes random 64x64 A and B matrices (8x8 tiles of 8x8 elements, one shared
// exponent per tile) and their exponent words into the SPM through the external port,
// programs the four streamers and the tensor core, launches them, and reads the 64 quantized
// output tiles back. Every element is compared with a real-valued GeMM of the same operands
// (shared exponent within 1, element within one step plus the accumulation bound), the MAC
// beat count must be M*N*K*beats_per_tile (1024 for E4M3, 4096 for INT8), and the array
// utilization (MAC beats per busy cycle) must be at least 90%, the range the evaluated
// workloads reach. No gated channel may make a request.
module tb_mx_gemm64;
  import mx_pkg::*;
  import mx_tb_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic        csr_we = 0, scsr_we = 0;
  logic [7:0]  csr_addr = 0, scsr_addr = 0;
  logic [31:0] csr_wdata = 0, scsr_wdata = 0, csr_rdata, scsr_rdata;
  mem_req_t    ext_req [EXT_CH];
  mem_rsp_t    ext_rsp [EXT_CH];
  logic        busy, core_stall;
  logic [31:0] bank_conflicts;

  mx_npu_top dut (.clk(clk), .rst_n(rst_n), .csr_we(csr_we), .csr_addr(csr_addr),
                  .csr_wdata(csr_wdata), .csr_rdata(csr_rdata), .scsr_we(scsr_we),
                  .scsr_addr(scsr_addr), .scsr_wdata(scsr_wdata), .scsr_rdata(scsr_rdata),
                  .ext_req(ext_req), .ext_rsp(ext_rsp), .busy(busy), .core_stall(core_stall),
                  .bank_conflicts(bank_conflicts));

  always #5 clk = ~clk;

  // ---------------- mechanism counters ----------------
  int n_stall = 0, n_gate_violation = 0, n_left = 0, n_right = 0, n_mac_beats = 0;
  int n_mode_switch = 0, n_busy = 0;
  always @(posedge clk) if (rst_n) begin
    if (core_stall) n_stall++;
    if (dut.u_core.u_fsm.mac_en) n_mac_beats++;
    if (busy) n_busy++;
    for (int c = 0; c < AB_CH; c++)
      if (c >= int'(active_channels(dut.fmt_act)) &&
          (dut.u_port_a.mreq[c].req || dut.u_port_b.mreq[c].req)) n_gate_violation++;
    if (dut.u_core.u_fsm.mac_en && !dut.u_core.u_fsm.mac_clear) begin
      if (dut.u_core.u_array.g_row[0].g_col[0].u_mac.left_ext) n_left++;
      else n_right++;
    end
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  // ---------------- external port and CSR helpers ----------------
  task automatic ext_write(input int addr, input logic [63:0] d);
    @(negedge clk);
    ext_req[0] = '{req: 1'b1, we: 1'b1, addr: SPM_ADDR_W'(addr), wdata: d};
    #1;
    while (!ext_rsp[0].gnt) begin @(negedge clk); #1; end
    @(negedge clk);
    ext_req[0] = '0;
  endtask

  task automatic ext_read(input int addr, output logic [63:0] d);
    @(negedge clk);
    ext_req[0] = '{req: 1'b1, we: 1'b0, addr: SPM_ADDR_W'(addr), wdata: '0};
    #1;
    while (!ext_rsp[0].gnt) begin @(negedge clk); #1; end
    @(negedge clk);
    ext_req[0] = '0;
    d = ext_rsp[0].rdata;
  endtask

  task automatic csr(input int a, input int d);
    @(negedge clk);
    csr_we = 1; csr_addr = 8'(a); csr_wdata = 32'(d);
    @(negedge clk);
    csr_we = 0;
  endtask

  task automatic scsr(input int a, input int d);
    @(negedge clk);
    scsr_we = 1; scsr_addr = 8'(a); scsr_wdata = 32'(d);
    @(negedge clk);
    scsr_we = 0;
  endtask

  task automatic agu_cfg(input int p, input int base, input int b0, input int s0, input int b1,
                         input int s1, input int b2, input int s2);
    scsr(9*p, base);
    scsr(9*p+1, b0); scsr(9*p+5, s0);
    scsr(9*p+2, b1); scsr(9*p+6, s1);
    scsr(9*p+3, b2); scsr(9*p+7, s2);
    scsr(9*p+4, 1);  scsr(9*p+8, 0);
  endtask

  // ---------------- one GeMM run ----------------
  localparam int MAXT = 8;
  logic [31:0] aw [MAXT][MAXT][8][8];   // [m][k][beat][row]
  logic [31:0] bw [MAXT][MAXT][8][8];   // [n][k][beat][col]
  int          xa [MAXT][MAXT], xb [MAXT][MAXT];
  int          last_fmt = -1;
  int emaxe [6] = '{0, 15, 8, 4, 2, 2};

  task automatic run(input int f, input int fo, input int MT, input int NT, input int KT,
                     input int delay = 0);
    int bpt, nch, rw, sbeat, baseA, baseB, baseE, baseC, beats0, cyc0;
    real util;
    bpt = int'(beats_per_tile(3'(f)));
    nch = int'(active_channels(3'(f)));
    rw  = (f == 0) ? 8 : (f == 3 || f == 4) ? 24 : 32;   // operand bits per row per beat
    sbeat = 8 * nch;
    baseA = 0; baseB = 16'h4000; baseE = 16'h8000; baseC = 16'hA000;
    if (f != last_fmt && last_fmt >= 0) n_mode_switch++;
    last_fmt = f;
    // operands
    for (int m = 0; m < MT; m++) for (int k = 0; k < KT; k++) begin
      xa[m][k] = $urandom_range(120, 134);
      for (int t = 0; t < bpt; t++) begin
        logic [255:0] beat;
        beat = '0;
        for (int r = 0; r < 8; r++) begin
          aw[m][k][t][r] = rand_word(f);
          beat = beat | (256'(aw[m][k][t][r]) << (rw * r));
        end
        for (int c = 0; c < nch; c++)
          ext_write(baseA + ((m*KT + k)*bpt + t)*sbeat + 8*c, beat[64*c +: 64]);
      end
    end
    for (int n = 0; n < NT; n++) for (int k = 0; k < KT; k++) begin
      xb[k][n] = $urandom_range(120, 134);
      for (int t = 0; t < bpt; t++) begin
        logic [255:0] beat;
        beat = '0;
        for (int r = 0; r < 8; r++) begin
          bw[n][k][t][r] = rand_word(f);
          beat = beat | (256'(bw[n][k][t][r]) << (rw * r));
        end
        for (int c = 0; c < nch; c++)
          ext_write(baseB + ((n*KT + k)*bpt + t)*sbeat + 8*c, beat[64*c +: 64]);
      end
    end
    for (int m = 0; m < MT; m++) for (int n = 0; n < NT; n++) for (int k = 0; k < KT; k++)
      ext_write(baseE + ((m*NT + n)*KT + k)*8, 64'({8'(xb[k][n]), 8'(xa[m][k])}));
    // program: A (beats, reuse over n, rows of tiles), B, exponents, output
    agu_cfg(0, baseA, bpt*KT, sbeat, NT, 0, MT, bpt*KT*sbeat);
    agu_cfg(1, baseB, bpt*KT, sbeat, NT, bpt*KT*sbeat, MT, 0);
    agu_cfg(2, baseE, KT*NT*MT, 8, 1, 0, 1, 0);
    agu_cfg(3, baseC, NT*MT, 72, 1, 0, 1, 0);
    csr(0, f | (fo << 4));
    csr(1, KT);
    csr(2, MT | (NT << 16));
    beats0 = n_mac_beats;
    cyc0 = n_busy;
    scsr(36, 1);
    repeat (delay) @(negedge clk);   // let the input FIFOs fill
    csr(3, 1);
    @(negedge clk);
    while (busy) @(negedge clk);
    chk(n_mac_beats - beats0 == MT*NT*KT*bpt,
        $sformatf("fmt %0d: %0d MAC beats, expected %0d", f, n_mac_beats - beats0, MT*NT*KT*bpt));
    util = 100.0 * real'(n_mac_beats - beats0) / real'(n_busy - cyc0);
    $display("run fmt %0d->%0d M%0d N%0d K%0d: %0d beats in %0d busy cycles (%0.1f%% utilization)",
             f, fo, MT, NT, KT, n_mac_beats - beats0, n_busy - cyc0, util);
    chk(util >= 90.0, $sformatf("utilization %0.1f%% below 90%%", util));
    // check results
    for (int m = 0; m < MT; m++) for (int n = 0; n < NT; n++) begin
      logic [63:0] w [9];
      real cref [64], cabs [64], mx;
      int sx, sx_exp;
      for (int c = 0; c < 9; c++) ext_read(baseC + (m*NT + n)*72 + 8*c, w[c]);
      mx = 0.0;
      for (int i = 0; i < 8; i++) for (int j = 0; j < 8; j++) begin
        real s, sa, sc;
        s = 0.0; sa = 0.0;
        for (int k = 0; k < KT; k++) begin
          sc = p2(xa[m][k] + xb[k][n] - 254);
          for (int t = 0; t < bpt; t++) begin
            s  += word_dot(f, aw[m][k][t][i], bw[n][k][t][j]) * sc;
            sa += word_absdot(f, aw[m][k][t][i], bw[n][k][t][j]) * sc;
          end
        end
        cref[i*8+j] = s; cabs[i*8+j] = sa;
        if (fabs(s) > mx) mx = fabs(s);
      end
      sx = int'(w[8][7:0]);
      sx_exp = 0;
      if (mx > 0.0) begin
        int e;
        e = 0;
        while (p2(e + 1) <= mx) e++;
        while (p2(e) > mx) e--;
        sx_exp = e + 127 - emaxe[fo];
      end
      chk(sx - sx_exp <= 1 && sx_exp - sx <= 1,
          $sformatf("tile (%0d,%0d) shared exponent %0d, expected ~%0d", m, n, sx, sx_exp));
      for (int e = 0; e < 64; e++) begin
        logic [7:0] q;
        real qv, step, tol;
        int ef, bias;
        q = w[e / 8][8*(e % 8) +: 8];
        qv = elem_val(fo, q) * p2(sx - 127);
        if (fo == 0) step = p2(-6);
        else begin
          bias = (1 << (ebits(fo) - 1)) - 1;
          ef = int'(q >> mbits(fo)) & ((1 << ebits(fo)) - 1);
          if (ef == 0) ef = 1;
          step = p2(ef - bias - mbits(fo));
        end
        tol = 2.0 * step * p2(sx - 127) + cabs[e] * p2(-10);
        chk(fabs(qv - cref[e]) <= tol || (fo == 2 && fabs(qv) == 448.0 * p2(sx - 127)),
            $sformatf("fmt %0d tile (%0d,%0d) elem %0d: got %e (%h) expected %e", f, m, n, e,
                      qv, q, cref[e]));
      end
    end
  endtask

  initial begin
    for (int c = 0; c < EXT_CH; c++) ext_req[c] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(2, 2, 8, 8, 8);   // 64x64x64 MXFP8 E4M3
    run(0, 0, 8, 8, 8);   // 64x64x64 MXINT8
    chk(n_gate_violation == 0, "no gated channel made a request");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
