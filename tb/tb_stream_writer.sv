// Self-checking testbench of stream_writer (9 channels) against a memory model that grants
// writes at random: random beats are offered with random gaps; every word must be written
// once to beat address + 8c with the beat's slice c, in AGU order, and idle must return.
module tb_stream_writer;
  import mx_pkg::*;
  localparam int NCH = 9;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0, in_valid = 0, in_ready, idle;
  agu_cfg_t cfg;
  logic [3:0] n_active = 4'(NCH);
  mem_req_t mreq [NCH];
  mem_rsp_t mrsp [NCH];
  logic [NCH*64-1:0] in_data;
  logic [63:0] memw [int];
  int          nwrites [int];

  stream_writer #(.NCH(NCH)) dut (.*);
  always #5 clk = ~clk;

  always @(negedge clk) for (int c = 0; c < NCH; c++) begin
    mrsp[c].gnt <= ($urandom_range(0, 2) != 0);
    mrsp[c].rvalid <= 1'b0;
    mrsp[c].rdata <= '0;
  end
  always @(posedge clk) for (int c = 0; c < NCH; c++)
    if (mreq[c].req && mrsp[c].gnt) begin
      checks++;
      if (!mreq[c].we) begin failures++; $display("FAIL read request"); end
      memw[int'(mreq[c].addr)] = mreq[c].wdata;
      nwrites[int'(mreq[c].addr)] = nwrites.exists(int'(mreq[c].addr)) ? nwrites[int'(mreq[c].addr)] + 1 : 1;
    end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg = '0;
    in_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      int nb;
      logic [NCH*64-1:0] beats [$];
      memw.delete(); nwrites.delete(); beats.delete();
      nb = $urandom_range(1, 8);
      @(negedge clk);
      cfg.base = SPM_ADDR_W'($urandom_range(0, 500) * 8);
      cfg.bound[0] = CNT_W'(nb); cfg.stride[0] = 72;
      cfg.bound[1] = 1; cfg.bound[2] = 1; cfg.bound[3] = 1;
      start = 1;
      @(negedge clk);
      start = 0;
      for (int i = 0; i < nb; i++) begin
        logic [NCH*64-1:0] d;
        for (int c = 0; c < NCH; c++) d[64*c +: 64] = {$urandom(), $urandom()};
        beats.push_back(d);
        while ($urandom_range(0, 2) == 0) @(negedge clk);
        in_valid = 1; in_data = d;
        #1;
        while (!in_ready) begin @(negedge clk); #1; end
        @(negedge clk);   // accepted at the edge in between
        in_valid = 0;
      end
      while (!idle) @(negedge clk);
      for (int i = 0; i < nb; i++) for (int c = 0; c < NCH; c++) begin
        int a;
        a = int'(cfg.base) + 72 * i + 8 * c;
        checks++;
        if (!memw.exists(a) || memw[a] != beats[i][64*c +: 64] || nwrites[a] != 1) begin
          failures++;
          $display("FAIL run %0d beat %0d channel %0d exists %0d n %0d base %0d", t, i, c, memw.exists(a), nwrites.exists(a) ? nwrites[a] : -1, cfg.base);
        end
      end
      checks++;
      if (memw.num() != nb * NCH) begin failures++; $display("FAIL stray writes"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
