// CSR manager: register file written by the host core through plain CSR writes.
//
// A 32-bit write (csr_we, csr_addr, csr_wdata) lands in register csr_addr when
// csr_addr < NREGS (the address MUX of the block diagram). A write to address NREGS is the
// launch command: it produces a one-cycle start pulse and leaves the registers unchanged;
// launch is ignored while busy. Reads (combinational csr_rdata) return the register, or at
// address NREGS the status word {31'b0, busy}. One write per cycle (32 bits per cycle of
// configuration bandwidth); registers are reset to zero.
// The tensor core uses NREGS = 3: CSR0 precision mode, CSR1 accumulation count, CSR2 tile
// count, as in the paper. The launch/status address and the reuse of the same block for the
// streamer configuration registers are this design's own.
module csr_manager #(
  parameter int unsigned NREGS  = 3,
  parameter int unsigned ADDR_W = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              csr_we,
  input  logic [ADDR_W-1:0] csr_addr,
  input  logic [31:0]       csr_wdata,
  output logic [31:0]       csr_rdata,
  input  logic              busy,
  output logic [31:0]       regs [NREGS],
  output logic              start
);
  localparam int unsigned IW = (NREGS > 1) ? $clog2(NREGS) : 1;  // register index bits

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NREGS; i++) regs[i] <= '0;
      start <= 1'b0;
    end else begin
      start <= csr_we && (32'(csr_addr) == NREGS) && !busy;
      if (csr_we && 32'(csr_addr) < NREGS) regs[csr_addr[IW-1:0]] <= csr_wdata;
    end
  end

  always_comb begin
    if (32'(csr_addr) < NREGS)       csr_rdata = regs[csr_addr[IW-1:0]];
    else if (32'(csr_addr) == NREGS) csr_rdata = {31'b0, busy};
    else                             csr_rdata = '0;
  end

endmodule
