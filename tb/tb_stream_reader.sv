// Self-checking testbench of stream_reader (4 channels) against a memory model that grants
// requests at random (as bank conflicts would) and returns read data one cycle later. For
// 1, 3 and 4 active channels (the INT8, FP6 and FP8/FP4 gating) and random AGU patterns with
// random consumer back-pressure: every beat must carry memory[addr + 8c] in channel c and zero
// in gated channels, gated channels must never request, the beat count must equal the AGU
// length, and idle must return. With everything granted and no back-pressure, one beat per
// cycle must be delivered.
module tb_stream_reader;
  import mx_pkg::*;
  localparam int NCH = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0, out_valid, out_ready = 0, idle;
  agu_cfg_t cfg;
  logic [3:0] n_active = 4;
  mem_req_t mreq [NCH];
  mem_rsp_t mrsp [NCH];
  logic [NCH*64-1:0] out_data;
  bit   full_speed = 0;

  stream_reader #(.NCH(NCH)) dut (.*);
  always #5 clk = ~clk;

  function automatic logic [63:0] mem(input logic [SPM_ADDR_W-1:0] a);
    return {15'(a), 17'(a * 3), 15'(~a), 17'(a ^ 17'h1abc)};
  endfunction

  // memory model
  logic [NCH-1:0] gnt_q;
  logic [63:0]    rd_q [NCH];
  always_comb for (int c = 0; c < NCH; c++) begin
    mrsp[c].rvalid = gnt_q[c];
    mrsp[c].rdata  = rd_q[c];
  end
  always @(negedge clk) for (int c = 0; c < NCH; c++)
    mrsp[c].gnt <= full_speed || ($urandom_range(0, 2) != 0);
  always @(posedge clk) for (int c = 0; c < NCH; c++) begin
    gnt_q[c] <= mreq[c].req && mrsp[c].gnt;
    rd_q[c]  <= mem(mreq[c].addr);
  end
  always @(negedge clk) out_ready <= full_speed || ($urandom_range(0, 3) != 0);

  int gate_viol = 0;
  always @(posedge clk) for (int c = 0; c < NCH; c++)
    if (c >= int'(n_active) && mreq[c].req) gate_viol++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      int b0, b1, nb, got, first, last;
      logic [SPM_ADDR_W-1:0] exp_a [$];
      full_speed = (t % 5 == 0);
      @(negedge clk);
      n_active = (t % 3 == 0) ? 4'd1 : (t % 3 == 1) ? 4'd3 : 4'd4;
      b0 = $urandom_range(1, 6); b1 = $urandom_range(1, 3);
      cfg.base = SPM_ADDR_W'($urandom_range(0, 1000) * 8);
      cfg.bound[0] = CNT_W'(b0); cfg.stride[0] = 32;
      cfg.bound[1] = CNT_W'(b1); cfg.stride[1] = SPM_ADDR_W'($urandom_range(0, 4) * 256);
      cfg.bound[2] = 1; cfg.bound[3] = 1; cfg.stride[2] = 0; cfg.stride[3] = 0;
      for (int i1 = 0; i1 < b1; i1++) for (int i0 = 0; i0 < b0; i0++)
        exp_a.push_back(cfg.base + SPM_ADDR_W'(i0 * 32) + SPM_ADDR_W'(i1 * cfg.stride[1]));
      nb = b0 * b1;
      start = 1;
      @(negedge clk);
      start = 0;
      got = 0; first = -1; last = -1;
      for (int cyc = 0; cyc < 2000 && got < nb; cyc++) begin
        @(posedge clk);
        if (out_valid && out_ready) begin
          logic [SPM_ADDR_W-1:0] a;
          a = exp_a.pop_front();
          if (first < 0) first = cyc;
          last = cyc;
          for (int c = 0; c < NCH; c++) begin
            checks++;
            if (out_data[64*c +: 64] != ((c < int'(n_active)) ? mem(a + SPM_ADDR_W'(8*c)) : 64'd0)) begin
              failures++;
              $display("FAIL run %0d beat %0d channel %0d", t, got, c);
            end
          end
          got++;
        end
        @(negedge clk);
      end
      checks++;
      if (got != nb) begin failures++; $display("FAIL run %0d: %0d of %0d beats", t, got, nb); end
      if (full_speed) begin
        checks++;
        if (last - first + 1 != nb) begin failures++; $display("FAIL not one beat per cycle"); end
      end
      repeat (3) @(negedge clk);
      checks++;
      if (!idle) begin failures++; $display("FAIL not idle"); end
    end
    checks++;
    if (gate_viol != 0) begin failures++; $display("FAIL gated channel requested"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
