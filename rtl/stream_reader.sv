// Read data streamer with dynamic channel gating (Port A, Port B and the shared-exponent port).
//
// Streams beats of n_active*64 bits from the SPM to the core. The AGU gives the beat address;
// active channel c (c < n_active, the EN of the block diagram) reads the 64-bit word at
// beat address + 8c. Channels issue independently (they may be delayed by bank conflicts in
// the crossbar); a channel issues only when its FIFO has room for the outstanding reads, and
// once every active channel has been granted its word of the current beat, the AGU moves to
// the next beat. Returned words enter per-channel FIFOs; a beat is presented (out_valid) when
// every active channel's FIFO holds a word, and all are popped together on out_ready (data
// concatenation: channel c in bits [64c +: 64]; gated channels read as zero and make no
// memory requests). Throughput one beat per cycle without conflicts; latency from grant to
// out_valid two cycles. idle: all addresses issued and all data delivered.
// Channel gating per mode, AGU, per-channel FIFOs and concatenation follow the paper's
// block diagram; the lockstep beat advance and FIFO depth are this design's own.
// The FIFOs' full flags are not used: a channel never has more requests in flight than its
// FIFO has free entries, so a FIFO cannot overflow.
module stream_reader
  import mx_pkg::*;
#(
  parameter int unsigned NCH   = mx_pkg::AB_CH,
  parameter int unsigned DEPTH = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  agu_cfg_t            cfg,
  input  logic [3:0]          n_active,
  output mem_req_t            mreq [NCH],
  input  mem_rsp_t            mrsp [NCH],
  output logic [NCH*CH_W-1:0] out_data,
  output logic                out_valid,
  input  logic                out_ready,
  output logic                idle
);
  localparam int unsigned CW = $clog2(DEPTH) + 1;

  logic [SPM_ADDR_W-1:0] baddr;
  logic                  bvalid, bnext;
  logic [NCH-1:0]        act, done, fin, empty;
  logic [CW-1:0]         cnt   [NCH];
  logic [CW-1:0]         outst [NCH];
  logic [CH_W-1:0]       head  [NCH];
  logic                  pop;
  logic [NCH-1:0]        ffull;   // never set: requests are credit-limited

  agu u_agu (.clk(clk), .rst_n(rst_n), .start(start), .cfg(cfg), .next(bnext),
             .addr(baddr), .valid(bvalid));

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    assign act[c] = (c < n_active);
    always_comb begin
      mreq[c].req   = act[c] && bvalid && !done[c] && (32'(cnt[c]) + 32'(outst[c]) < DEPTH);
      mreq[c].we    = 1'b0;
      mreq[c].addr  = baddr + SPM_ADDR_W'(8 * c);
      mreq[c].wdata = '0;
    end
    assign fin[c] = !act[c] || done[c] || (mreq[c].req && mrsp[c].gnt);

    sync_fifo #(.W(CH_W), .DEPTH(DEPTH)) u_fifo (
      .clk(clk), .rst_n(rst_n), .push(mrsp[c].rvalid), .data_i(mrsp[c].rdata),
      .pop(pop && act[c]), .data_o(head[c]), .empty(empty[c]), .full(ffull[c]), .count(cnt[c])
    );

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        done[c]  <= 1'b0;
        outst[c] <= '0;
      end else begin
        if (start || bnext)                    done[c] <= 1'b0;
        else if (mreq[c].req && mrsp[c].gnt)   done[c] <= 1'b1;
        outst[c] <= outst[c] + CW'(mreq[c].req && mrsp[c].gnt) - CW'(mrsp[c].rvalid);
      end
    end
    assign out_data[c*CH_W +: CH_W] = act[c] ? head[c] : '0;
  end

  assign bnext     = bvalid && (&fin) && (|act);
  assign out_valid = (|act) && ((empty & act) == '0);
  assign pop       = out_valid && out_ready;

  always_comb begin
    idle = !bvalid;
    for (int c = 0; c < NCH; c++)
      if (!empty[c] || outst[c] != 0) idle = 1'b0;
  end

endmodule
