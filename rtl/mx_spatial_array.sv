// 8x8 precision-scalable MX spatial array.
//
// ROWS x COLS MX MACs in a 2-D mesh: MAC (r,c) takes the operand word of A row r (shared along
// its row, horizontal reuse) and of B column c (shared along its column, vertical reuse), so
// one beat computes an outer-product step of C = A * B. The beat layout depends on the input
// format: row r's operand word is a_beat[8r +: 8] in INT8 mode (one element per row, one 64-bit
// channel in all), a_beat[24r +: 24] in FP6 mode (three channels) and a_beat[32r +: 32] in FP8
// and FP4 modes (four channels); B likewise per column. A tile of 8x8x8 thus takes 8, 2 or 1
// beats. The shared exponents xa, xb of the current A and B blocks are broadcast to all MACs.
// en/clear are broadcast; outputs are the ROWS*COLS registered partial results, row-major
// (index r*COLS+c), one cycle after en.
// Array size and reuse scheme follow the paper; the beat layouts are this design's choice,
// sized so that each mode uses exactly the number of channels the paper gives.
module mx_spatial_array
  import mx_pkg::*;
#(
  parameter int unsigned R      = mx_pkg::ROWS,
  parameter int unsigned C      = mx_pkg::COLS,
  parameter int unsigned MANT_W = mx_pkg::MANT_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic                    clear,
  input  logic [2:0]              fmt,
  input  logic [R*OP_W-1:0]       a_beat,
  input  logic [C*OP_W-1:0]       b_beat,
  input  logic [7:0]              xa,
  input  logic [7:0]              xb,
  output logic [MANT_W+8:0]       acc [R*C]
);

  logic [OP_W-1:0] a_op [R];
  logic [OP_W-1:0] b_op [C];

  always_comb begin
    for (int r = 0; r < R; r++) begin
      case (fmt)
        FMT_INT8:           a_op[r] = {24'b0, a_beat[8*r +: 8]};
        FMT_E3M2, FMT_E2M3: a_op[r] = {8'b0, a_beat[24*r +: 24]};
        default:            a_op[r] = a_beat[32*r +: 32];
      endcase
    end
    for (int c = 0; c < C; c++) begin
      case (fmt)
        FMT_INT8:           b_op[c] = {24'b0, b_beat[8*c +: 8]};
        FMT_E3M2, FMT_E2M3: b_op[c] = {8'b0, b_beat[24*c +: 24]};
        default:            b_op[c] = b_beat[32*c +: 32];
      endcase
    end
  end

  for (genvar r = 0; r < R; r++) begin : g_row
    for (genvar c = 0; c < C; c++) begin : g_col
      mx_mac #(.MANT_W(MANT_W)) u_mac (
        .clk(clk), .rst_n(rst_n), .en(en), .clear(clear), .fmt(fmt),
        .a(a_op[r]), .b(b_op[c]), .xa(xa), .xb(xb), .acc(acc[r*C+c])
      );
    end
  end

endmodule
