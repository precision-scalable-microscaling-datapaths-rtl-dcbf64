// Self-checking testbench of csr_manager: register writes and read-back, out-of-range
// writes ignored, the launch address giving a one-cycle start pulse (and none while busy),
// and the status read.
module tb_csr_manager;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, we = 0, busy = 0;
  logic [7:0]  addr = 0;
  logic [31:0] wdata = 0, rdata;
  logic [31:0] regs [3];
  logic        start;
  logic [31:0] model [3];
  int          starts = 0;

  csr_manager #(.NREGS(3)) dut (.clk(clk), .rst_n(rst_n), .csr_we(we), .csr_addr(addr),
                                .csr_wdata(wdata), .csr_rdata(rdata), .busy(busy),
                                .regs(regs), .start(start));
  always #5 clk = ~clk;
  always @(posedge clk) if (start) starts++;

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    model = '{0, 0, 0};
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      int a;
      a = $urandom_range(0, 5);
      @(negedge clk);
      we = 1; addr = 8'(a); wdata = $urandom(); busy = 1'($urandom());
      if (a < 3) model[a] = wdata;
      @(negedge clk);
      we = 0;
      if (a == 3) chk(start == !busy, "start pulse on launch unless busy");
      else        chk(!start, "no start pulse");
      @(negedge clk);
      chk(!start, "start lasts one cycle");
      for (int i = 0; i < 3; i++) chk(regs[i] == model[i], $sformatf("reg %0d", i));
      addr = 8'($urandom_range(0, 3));
      #1;
      if (addr < 3) chk(rdata == model[addr], "read back");
      else          chk(rdata == {31'b0, busy}, "status read");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
