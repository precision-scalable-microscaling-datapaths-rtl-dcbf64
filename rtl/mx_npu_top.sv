// Precision-scalable MX NPU: MX tensor core with customized data streamers on a shared
// multi-banked scratchpad.
//
// Blocks: the MX tensor core (CSR manager, FSM, 8x8 MX MAC array, SIMD quantizer); four data
// streamers (Port A and Port B with 4 channels each, the shared-exponent port with 1 channel,
// the output Port C with 9 channels), each with its own AGU; a fully connected crossbar; and
// a 32-bank 128 KiB SPM. The host core, its instruction cache, the peripherals and the DMA
// engine are not part of this RTL: the host's CSR writes arrive on the two CSR ports and the
// DMA side of the SPM is the external port (EXT_CH = 8 channels of 64 bits, 512 bits per
// cycle), a set of crossbar masters like the streamers.
// Crossbar masters: 0-3 Port A, 4-7 Port B, 8 shared exponents, 9-17 Port C, 18-25 external.
// Channel gating: ports A and B enable 1, 4, 3 or 4 channels for INT8, FP8, FP6 and FP4 input
// formats (CSR0 of the tensor core); the exponent port 1; Port C all 9.
// Tensor-core CSRs (csr_*): see mx_tensor_core. Streamer CSRs (scsr_*): for port p (0 A, 1 B,
// 2 exponents, 3 C) register 9p is the base byte address, 9p+1+l the bound and 9p+5+l the
// stride of AGU loop l (l = 0..3, loop 0 innermost); a write to address 36 launches all four
// streamers, a read there returns busy. Program the streamers and the core, then launch both.
// The system structure and the port/channel counts follow the paper's system figure; the
// register maps and the external port are this design's own.
// Lint note: rst_n is both the asynchronous reset of the flops and the disable condition of
// the handshake assertions in mx_fsm and spm_xbar, which sample it on the clock; the
// assertions are simulation checks, so the mixed use has no effect on the circuit.
module mx_npu_top
  import mx_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // tensor-core CSR port
  input  logic        csr_we,
  input  logic [7:0]  csr_addr,
  input  logic [31:0] csr_wdata,
  output logic [31:0] csr_rdata,
  // streamer CSR port
  input  logic        scsr_we,
  input  logic [7:0]  scsr_addr,
  input  logic [31:0] scsr_wdata,
  output logic [31:0] scsr_rdata,
  // external (DMA) port into the SPM
  input  mem_req_t    ext_req [EXT_CH],
  output mem_rsp_t    ext_rsp [EXT_CH],
  // status
  output logic        busy,
  output logic        core_stall,
  output logic [31:0] bank_conflicts
);
  localparam int unsigned NM   = 2 * AB_CH + 1 + C_CH + EXT_CH;   // 26
  localparam int unsigned NSR  = 36;
  localparam int unsigned WORDS = 512;

  // ---------------- streamer configuration ----------------
  logic [31:0] sregs [NSR];
  logic        s_start, s_busy;
  agu_cfg_t    cfg [4];

  csr_manager #(.NREGS(NSR), .ADDR_W(8)) u_scsr (
    .clk(clk), .rst_n(rst_n), .csr_we(scsr_we), .csr_addr(scsr_addr), .csr_wdata(scsr_wdata),
    .csr_rdata(scsr_rdata), .busy(s_busy), .regs(sregs), .start(s_start)
  );

  always_comb begin
    for (int p = 0; p < 4; p++) begin
      cfg[p].base = sregs[9*p][SPM_ADDR_W-1:0];
      for (int l = 0; l < NLOOPS; l++) begin
        cfg[p].bound[l]  = sregs[9*p + 1 + l][CNT_W-1:0];
        cfg[p].stride[l] = sregs[9*p + 5 + l][SPM_ADDR_W-1:0];
      end
    end
  end

  // ---------------- tensor core ----------------
  logic [ROWS*OP_W-1:0]  a_data;
  logic [COLS*OP_W-1:0]  b_data;
  logic [CH_W-1:0]       e_data;
  logic [C_CH*CH_W-1:0]  o_data;
  logic a_valid, a_ready, b_valid, b_ready, e_valid, e_ready, o_valid, o_ready;
  logic w_idle, ra_idle, rb_idle, re_idle;
  logic [2:0] fmt_act;
  logic [3:0] n_ab;
  logic       c_busy;

  mx_tensor_core u_core (
    .clk(clk), .rst_n(rst_n),
    .csr_we(csr_we), .csr_addr(csr_addr), .csr_wdata(csr_wdata), .csr_rdata(csr_rdata),
    .a_data(a_data), .a_valid(a_valid), .a_ready(a_ready),
    .b_data(b_data), .b_valid(b_valid), .b_ready(b_ready),
    .e_data(e_data), .e_valid(e_valid), .e_ready(e_ready),
    .out_data(o_data), .out_valid(o_valid), .out_ready(o_ready),
    .writer_idle(w_idle), .fmt_act(fmt_act), .busy(c_busy), .stall(core_stall)
  );

  assign n_ab = {1'b0, active_channels(fmt_act)};

  // ---------------- data streamers ----------------
  mem_req_t mreq [NM];
  mem_rsp_t mrsp [NM];
  mem_req_t a_req [AB_CH], b_req [AB_CH], e_req [1], c_req [C_CH];
  mem_rsp_t a_rsp [AB_CH], b_rsp [AB_CH], e_rsp [1], c_rsp [C_CH];

  stream_reader #(.NCH(AB_CH)) u_port_a (
    .clk(clk), .rst_n(rst_n), .start(s_start), .cfg(cfg[0]), .n_active(n_ab),
    .mreq(a_req), .mrsp(a_rsp), .out_data(a_data), .out_valid(a_valid), .out_ready(a_ready),
    .idle(ra_idle)
  );
  stream_reader #(.NCH(AB_CH)) u_port_b (
    .clk(clk), .rst_n(rst_n), .start(s_start), .cfg(cfg[1]), .n_active(n_ab),
    .mreq(b_req), .mrsp(b_rsp), .out_data(b_data), .out_valid(b_valid), .out_ready(b_ready),
    .idle(rb_idle)
  );
  stream_reader #(.NCH(1)) u_port_e (
    .clk(clk), .rst_n(rst_n), .start(s_start), .cfg(cfg[2]), .n_active(4'd1),
    .mreq(e_req), .mrsp(e_rsp), .out_data(e_data), .out_valid(e_valid), .out_ready(e_ready),
    .idle(re_idle)
  );
  stream_writer #(.NCH(C_CH)) u_port_c (
    .clk(clk), .rst_n(rst_n), .start(s_start), .cfg(cfg[3]), .n_active(4'(C_CH)),
    .mreq(c_req), .mrsp(c_rsp), .in_data(o_data), .in_valid(o_valid), .in_ready(o_ready),
    .idle(w_idle)
  );

  assign s_busy = !(ra_idle && rb_idle && re_idle && w_idle);
  assign busy   = c_busy || s_busy;

  always_comb begin
    for (int c = 0; c < AB_CH; c++) begin
      mreq[c]          = a_req[c];  a_rsp[c] = mrsp[c];
      mreq[AB_CH + c]  = b_req[c];  b_rsp[c] = mrsp[AB_CH + c];
    end
    mreq[2*AB_CH] = e_req[0];       e_rsp[0] = mrsp[2*AB_CH];
    for (int c = 0; c < C_CH; c++) begin
      mreq[2*AB_CH + 1 + c] = c_req[c];  c_rsp[c] = mrsp[2*AB_CH + 1 + c];
    end
    for (int c = 0; c < EXT_CH; c++) begin
      mreq[2*AB_CH + 1 + C_CH + c] = ext_req[c];  ext_rsp[c] = mrsp[2*AB_CH + 1 + C_CH + c];
    end
  end

  // ---------------- crossbar and SPM ----------------
  logic                     bk_req   [NBANKS];
  logic                     bk_we    [NBANKS];
  logic [$clog2(WORDS)-1:0] bk_row   [NBANKS];
  logic [CH_W-1:0]          bk_wdata [NBANKS];
  logic [CH_W-1:0]          bk_rdata [NBANKS];

  spm_xbar #(.NM(NM), .NB(NBANKS), .ROW_W($clog2(WORDS))) u_xbar (
    .clk(clk), .rst_n(rst_n), .mreq(mreq), .mrsp(mrsp),
    .b_req(bk_req), .b_we(bk_we), .b_row(bk_row), .b_wdata(bk_wdata), .b_rdata(bk_rdata),
    .conflicts(bank_conflicts)
  );

  spm #(.NB(NBANKS), .WORDS(WORDS)) u_spm (
    .clk(clk), .b_req(bk_req), .b_we(bk_we), .b_row(bk_row), .b_wdata(bk_wdata),
    .b_rdata(bk_rdata)
  );

endmodule
