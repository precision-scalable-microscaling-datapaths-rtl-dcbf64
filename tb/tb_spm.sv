// Self-checking testbench of spm: random writes and reads on all banks in parallel, read data
// one cycle later compared with a model of the memory contents.
module tb_spm;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic        b_req [32], b_we [32];
  logic [8:0]  b_row [32];
  logic [63:0] b_wdata [32], b_rdata [32];
  logic [63:0] model [32][512];
  bit          known [32][512];

  spm dut (.clk(clk), .b_req(b_req), .b_we(b_we), .b_row(b_row), .b_wdata(b_wdata),
           .b_rdata(b_rdata));
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int b = 0; b < 32; b++) for (int r = 0; r < 512; r++) known[b][r] = 0;
    for (int t = 0; t < 4000; t++) begin
      int  rrow [32];
      bit  rd [32];
      @(negedge clk);
      for (int b = 0; b < 32; b++) begin
        b_req[b] = 1'($urandom());
        b_we[b]  = (t < 1500) ? 1'b1 : 1'($urandom());
        b_row[b] = 9'($urandom_range(0, 63));
        b_wdata[b] = {$urandom(), $urandom()};
        rd[b] = b_req[b] && !b_we[b] && known[b][b_row[b]];
        rrow[b] = int'(b_row[b]);
        if (b_req[b] && b_we[b]) begin model[b][b_row[b]] = b_wdata[b]; known[b][b_row[b]] = 1; end
      end
      @(negedge clk);
      for (int b = 0; b < 32; b++) begin
        if (rd[b]) begin
          checks++;
          if (b_rdata[b] != model[b][rrow[b]]) begin
            failures++;
            $display("FAIL bank %0d row %0d", b, rrow[b]);
          end
        end
        b_req[b] = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
