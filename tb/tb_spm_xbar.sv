// Self-checking testbench of spm_xbar (26 masters, 32 banks, with an spm behind it): every
// master issues random reads and writes to a few hot banks (forcing conflicts), each in its
// own rows, holding a request until granted. Checks: read data equals the master's last
// write to that word, a bank never grants two masters in one cycle, no master waits more
// than NM cycles (round-robin fairness), and conflicts were counted.
module tb_spm_xbar;
  import mx_pkg::*;
  localparam int NM = 26;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  mem_req_t mreq [NM];
  mem_rsp_t mrsp [NM];
  logic        b_req [32], b_we [32];
  logic [8:0]  b_row [32];
  logic [63:0] b_wdata [32], b_rdata [32];
  logic [31:0] conflicts;

  spm_xbar #(.NM(NM)) dut (.clk(clk), .rst_n(rst_n), .mreq(mreq), .mrsp(mrsp), .b_req(b_req),
                           .b_we(b_we), .b_row(b_row), .b_wdata(b_wdata), .b_rdata(b_rdata),
                           .conflicts(conflicts));
  spm u_spm (.clk(clk), .b_req(b_req), .b_we(b_we), .b_row(b_row), .b_wdata(b_wdata),
             .b_rdata(b_rdata));
  always #5 clk = ~clk;

  logic [63:0] model [NM][4];
  bit          known [NM][4];
  int          waitc [NM];
  bit          exp_rd [NM];
  logic [63:0] exp_d [NM];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int m = 0; m < NM; m++) begin
      mreq[m] = '0; waitc[m] = 0; exp_rd[m] = 0;
      for (int b = 0; b < 4; b++) known[m][b] = 0;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 5000; t++) begin
      int gnt_bank [32];
      @(negedge clk);
      // responses of last cycle's grants
      for (int m = 0; m < NM; m++) if (exp_rd[m]) begin
        checks++;
        if (!mrsp[m].rvalid || mrsp[m].rdata != exp_d[m]) begin
          failures++;
          $display("FAIL master %0d read data", m);
        end
        exp_rd[m] = 0;
      end
      // new requests for idle masters
      for (int m = 0; m < NM; m++) if (!mreq[m].req && $urandom_range(0, 1) == 1) begin
        int b;
        b = $urandom_range(0, 3);
        mreq[m].req = 1;
        mreq[m].we = !known[m][b] || $urandom_range(0, 1) == 1;
        mreq[m].addr = SPM_ADDR_W'((m << 8) | (b << 3));
        mreq[m].wdata = {$urandom(), $urandom()};
      end
      #1;
      for (int b = 0; b < 32; b++) gnt_bank[b] = 0;
      for (int m = 0; m < NM; m++) begin
        if (mrsp[m].gnt) begin
          int b;
          b = int'(mreq[m].addr[7:3]);
          gnt_bank[b]++;
          if (mreq[m].we) begin model[m][b] = mreq[m].wdata; known[m][b] = 1; end
          else begin exp_rd[m] = 1; exp_d[m] = model[m][b]; end
          waitc[m] = 0;
        end else if (mreq[m].req) begin
          waitc[m]++;
          checks++;
          if (waitc[m] > NM) begin failures++; $display("FAIL master %0d starved", m); end
        end
      end
      for (int b = 0; b < 32; b++) begin
        checks++;
        if (gnt_bank[b] > 1) begin failures++; $display("FAIL bank %0d double grant", b); end
      end
      @(posedge clk);
      #1;
      for (int m = 0; m < NM; m++) if (exp_rd[m] || (mreq[m].req && waitc[m] == 0)) mreq[m].req = 0;
    end
    checks++;
    if (conflicts == 0) begin failures++; $display("FAIL no conflicts counted"); end
    $display("conflicts %0d", conflicts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
