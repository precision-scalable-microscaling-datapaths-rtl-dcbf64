// Write data streamer (Port C): splits each output beat over NCH = 9 memory channels.
//
// An accepted beat (in_valid && in_ready) is held in a one-beat buffer; each active channel c
// (c < n_active) writes its 64-bit slice [64c +: 64] to the AGU's beat address + 8c, each on
// its own crossbar port, so bank conflicts delay single channels. When every active channel's
// write has been granted, the buffer is freed and the AGU advances. in_ready is high while
// the buffer is empty; a beat needs at least one cycle to drain. idle: buffer empty.
// The 9-channel split (eight data channels and the shared-exponent channel) follows the
// paper's block diagram; the single-beat buffer is this design's own.
module stream_writer
  import mx_pkg::*;
#(
  parameter int unsigned NCH = mx_pkg::C_CH
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  agu_cfg_t            cfg,
  input  logic [3:0]          n_active,
  output mem_req_t            mreq [NCH],
  input  mem_rsp_t            mrsp [NCH],
  input  logic [NCH*CH_W-1:0] in_data,
  input  logic                in_valid,
  output logic                in_ready,
  output logic                idle
);
  logic [SPM_ADDR_W-1:0] baddr;
  logic                  bvalid, bnext;
  logic [NCH*CH_W-1:0]   buf_q;
  logic                  full;
  logic [NCH-1:0]        act, done, fin;

  agu u_agu (.clk(clk), .rst_n(rst_n), .start(start), .cfg(cfg), .next(bnext),
             .addr(baddr), .valid(bvalid));

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    assign act[c] = (c < n_active);
    always_comb begin
      mreq[c].req   = act[c] && full && bvalid && !done[c];
      mreq[c].we    = 1'b1;
      mreq[c].addr  = baddr + SPM_ADDR_W'(8 * c);
      mreq[c].wdata = buf_q[c*CH_W +: CH_W];
    end
    assign fin[c] = !act[c] || done[c] || (mreq[c].req && mrsp[c].gnt);
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)                            done[c] <= 1'b0;
      else if (bnext || start)               done[c] <= 1'b0;
      else if (mreq[c].req && mrsp[c].gnt)   done[c] <= 1'b1;
    end
  end

  assign bnext    = full && bvalid && (&fin);
  assign in_ready = !full;
  assign idle     = !full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full  <= 1'b0;
      buf_q <= '0;
    end else begin
      if (in_valid && in_ready) begin
        full  <= 1'b1;
        buf_q <= in_data;
      end else if (bnext || (full && !bvalid)) begin
        full  <= 1'b0;   // written, or no address left (beat dropped)
      end
    end
  end

endmodule
