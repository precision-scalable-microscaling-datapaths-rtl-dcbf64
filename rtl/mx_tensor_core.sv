// MX tensor core: CSR manager, control FSM, 8x8 precision-scalable MX spatial array and SIMD
// quantization unit.
//
// Programming (32-bit CSR writes):
//   CSR0  [2:0] input (array) format, [6:4] output (quantizer) format; codes of mx_pkg::mx_fmt_e
//   CSR1  accumulation count: 8x8x8 tiles accumulated into one output tile (K / 8)
//   CSR2  block-matrix size in tiles: [15:0] rows of tiles (M / 8), [31:16] columns (N / 8)
//   address 3: write = launch, read = busy
// Streams (valid/ready, one beat per handshake):
//   A  ROWS*32 bits: one operand word per row of the A tile (layout in mx_spatial_array)
//   B  COLS*32 bits: one operand word per column of the B tile
//   E  64 bits: [7:0] shared exponent of the A tile, [15:8] of the B tile; one word per tile
//   out 9x64 bits: the quantized output tile, see mx_quant_unit
// A tile takes 8, 2 or 1 beats in INT8, FP8/FP6 and FP4 modes; the quantized result of an
// output tile leaves one cycle after its last beat. fmt_act (the programmed CSR0 input
// format) tells the streamers how many channels to enable.
// The three submodules and the meaning of CSR0-2 follow the paper; the bit fields of the
// CSRs, the launch address and the stream protocol are this design's own.
// Only bits [15:0] of the exponent word are used (XA, XB); the rest of the 64-bit channel
// word is reserved.
module mx_tensor_core
  import mx_pkg::*;
#(
  parameter int unsigned MANT_W = mx_pkg::MANT_W
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      csr_we,
  input  logic [7:0]                csr_addr,
  input  logic [31:0]               csr_wdata,
  output logic [31:0]               csr_rdata,
  input  logic [ROWS*OP_W-1:0]      a_data,
  input  logic                      a_valid,
  output logic                      a_ready,
  input  logic [COLS*OP_W-1:0]      b_data,
  input  logic                      b_valid,
  output logic                      b_ready,
  input  logic [CH_W-1:0]           e_data,
  input  logic                      e_valid,
  output logic                      e_ready,
  output logic [C_CH*CH_W-1:0]      out_data,
  output logic                      out_valid,
  input  logic                      out_ready,
  input  logic                      writer_idle,
  output logic [2:0]                fmt_act,      // programmed input format (CSR0)
  output logic                      busy,
  output logic                      stall
);

  logic [31:0]       regs [3];
  logic              start;
  logic              mac_en, mac_clear, q_capture, q_ready;
  logic [MANT_W+8:0] acc [ROWS*COLS];
  logic [2:0]        fmt_out;
  logic [31:0]       tiles;
  logic [2:0]        fmt_run;

  csr_manager #(.NREGS(3), .ADDR_W(8)) u_csr (
    .clk(clk), .rst_n(rst_n), .csr_we(csr_we), .csr_addr(csr_addr), .csr_wdata(csr_wdata),
    .csr_rdata(csr_rdata), .busy(busy), .regs(regs), .start(start)
  );

  assign tiles = 32'((regs[2][15:0] == 0) ? 16'd1 : regs[2][15:0]) *
                 32'((regs[2][31:16] == 0) ? 16'd1 : regs[2][31:16]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     fmt_out <= FMT_INT8;
    else if (start) fmt_out <= regs[0][6:4];
  end

  mx_fsm u_fsm (
    .clk(clk), .rst_n(rst_n), .start(start), .fmt_in(regs[0][2:0]),
    .k_tiles(regs[1][CNT_W-1:0]), .tiles(tiles),
    .a_valid(a_valid), .b_valid(b_valid), .e_valid(e_valid),
    .q_ready(q_ready), .q_valid(out_valid), .writer_idle(writer_idle),
    .a_ready(a_ready), .b_ready(b_ready), .e_ready(e_ready),
    .mac_en(mac_en), .mac_clear(mac_clear), .q_capture(q_capture),
    .fmt(fmt_run), .busy(busy), .stall(stall)
  );

  assign fmt_act = regs[0][2:0];

  mx_spatial_array #(.MANT_W(MANT_W)) u_array (
    .clk(clk), .rst_n(rst_n), .en(mac_en), .clear(mac_clear), .fmt(fmt_run),
    .a_beat(a_data), .b_beat(b_data), .xa(e_data[7:0]), .xb(e_data[15:8]), .acc(acc)
  );

  mx_quant_unit #(.MANT_W(MANT_W)) u_quant (
    .clk(clk), .rst_n(rst_n), .capture(q_capture), .fmt(fmt_out), .acc(acc),
    .ready_in(q_ready), .out_valid(out_valid), .out_ready(out_ready), .out_data(out_data)
  );

endmodule
