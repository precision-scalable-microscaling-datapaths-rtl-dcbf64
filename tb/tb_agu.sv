// Self-checking testbench of agu: random bounds and strides; the generated address sequence
// must match the nested-loop formula evaluated here, and valid must fall after exactly
// prod(bounds) addresses. next is asserted with random gaps.
module tb_agu;
  import mx_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0, next = 0, valid;
  agu_cfg_t cfg;
  logic [SPM_ADDR_W-1:0] addr;

  agu dut (.clk(clk), .rst_n(rst_n), .start(start), .cfg(cfg), .next(next), .addr(addr),
           .valid(valid));
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 100; t++) begin
      int b [4];
      @(negedge clk);
      cfg.base = SPM_ADDR_W'($urandom());
      for (int l = 0; l < 4; l++) begin
        b[l] = $urandom_range(0, 4);
        cfg.bound[l]  = CNT_W'(b[l]);
        cfg.stride[l] = SPM_ADDR_W'($urandom());
        if (b[l] == 0) b[l] = 1;
      end
      start = 1;
      @(negedge clk);
      start = 0;
      for (int i3 = 0; i3 < b[3]; i3++) for (int i2 = 0; i2 < b[2]; i2++)
      for (int i1 = 0; i1 < b[1]; i1++) for (int i0 = 0; i0 < b[0]; i0++) begin
        logic [SPM_ADDR_W-1:0] e;
        e = cfg.base + SPM_ADDR_W'(i0 * cfg.stride[0] + i1 * cfg.stride[1] +
                                   i2 * cfg.stride[2] + i3 * cfg.stride[3]);
        while ($urandom_range(0, 2) == 0) @(negedge clk);
        checks++;
        if (!valid || addr != e) begin
          failures++;
          $display("FAIL step (%0d,%0d,%0d,%0d): valid %b addr %h expected %h", i3, i2, i1, i0,
                   valid, addr, e);
        end
        next = 1;
        @(negedge clk);
        next = 0;
      end
      checks++;
      if (valid) begin failures++; $display("FAIL valid after last address"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
