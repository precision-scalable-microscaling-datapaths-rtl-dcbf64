// Self-checking testbench of mx_fsm: runs with random formats, accumulation and tile counts
// and random stream/quantizer availability. Checks against a counter model: the number of
// MAC beats, clear on the first beat of each output tile only, the exponent pop on each
// tile's last beat, one capture per output tile, no beat while a result is pending and the
// quantizer is blocked, and busy falling only after everything is done. With always-valid
// inputs and a free quantizer, a run of B beats must take B cycles of MAC activity back to
// back (8/2/1 cycles per tile).
module tb_mx_fsm;
  import mx_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0;
  logic [2:0] fmt_in = 0, fmt;
  logic [15:0] k_tiles = 1;
  logic [31:0] tiles = 1;
  logic a_valid = 0, b_valid = 0, e_valid = 0, q_ready = 1, q_valid = 0, writer_idle = 1;
  logic a_ready, b_ready, e_ready, mac_en, mac_clear, q_capture, busy, stall;
  bit   always_on = 0;

  mx_fsm dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // random environment
  always @(negedge clk) begin
    a_valid <= always_on || ($urandom_range(0, 3) != 0);
    b_valid <= always_on || ($urandom_range(0, 3) != 0);
    e_valid <= always_on || ($urandom_range(0, 3) != 0);
    q_ready <= always_on || ($urandom_range(0, 2) != 0);
    q_valid <= !always_on && ($urandom_range(0, 3) == 0);
    writer_idle <= always_on || ($urandom_range(0, 1) != 0);
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      int bpt, nb, nclr, ne, ncap, beat_i, first, last, pend_blocked;
      bit pending;
      always_on = (t % 4 == 0);
      @(negedge clk);
      fmt_in = 3'((t % 3 == 0) ? 0 : (t % 3 == 1) ? 2 : 5);
      bpt = (fmt_in == 0) ? 8 : (fmt_in == 5) ? 1 : 2;
      k_tiles = 16'($urandom_range(1, 4));
      tiles = $urandom_range(1, 4);
      start = 1;
      @(negedge clk);
      start = 0;
      nb = 0; nclr = 0; ne = 0; ncap = 0; pending = 0; first = -1; last = -1;
      pend_blocked = 0;
      for (int cyc = 0; busy && cyc < 5000; cyc++) begin
        @(posedge clk);
        if (mac_en) begin
          if (first < 0) first = cyc;
          last = cyc;
          if (pending && !q_capture) pend_blocked++;
          beat_i = nb % bpt;
          chk(mac_clear == (nb % (bpt * int'(k_tiles)) == 0), "clear on the first beat of an output tile");
          chk(e_ready == (beat_i == bpt - 1), "exponent popped on the last beat");
          chk(a_ready && b_ready && a_valid && b_valid && e_valid, "fire only with valid inputs");
          nb++;
        end
        if (q_capture) begin ncap++; pending = 0; end
        if (mac_en && nb % (bpt * int'(k_tiles)) == 0) pending = 1;
        if (e_ready) ne++;
        @(negedge clk);
      end
      chk(!busy, "run ended");
      chk(nb == bpt * int'(k_tiles) * int'(tiles), $sformatf("beats %0d", nb));
      chk(ne == int'(k_tiles) * int'(tiles), "exponent pops");
      chk(ncap == int'(tiles), $sformatf("captures %0d of %0d", ncap, tiles));
      chk(pend_blocked == 0, "no beat while blocked");
      if (always_on) chk(last - first + 1 == nb, "back-to-back beats");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
