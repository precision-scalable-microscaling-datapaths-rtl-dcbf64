// Programmable address-generation unit of a data streamer.
//
// Generates the base address of one beat per step of NLOOPS nested loops:
//   addr = base + sum_l count_l * stride_l,   count_l = 0 .. bound_l-1, loop 0 innermost,
// modulo the SPM address space (so a large stride acts as a negative one). A bound of 0
// counts as 1. start loads the configuration and restarts at count 0; next advances by one
// beat; valid is high until all prod(bound_l) addresses were taken. The address is a
// combinational function of the counters (zero-latency).
// The paper states only that the streamer has an AGU configurable at run time for the data
// layout and access pattern of each precision mode; the nested-loop form is this design's.
module agu
  import mx_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  agu_cfg_t              cfg,
  input  logic                  next,
  output logic [SPM_ADDR_W-1:0] addr,
  output logic                  valid
);
  agu_cfg_t                     c;
  logic [NLOOPS-1:0][CNT_W-1:0] cnt;

  always_comb begin
    addr = c.base;
    for (int l = 0; l < NLOOPS; l++)
      addr = addr + SPM_ADDR_W'(cnt[l] * c.stride[l]);
  end

  function automatic logic [CNT_W-1:0] last(input logic [CNT_W-1:0] b);
    return (b == 0) ? '0 : b - 1'b1;
  endfunction

  // Odometer step: the innermost loop counts first; a loop wraps to zero and carries into the
  // next one when it reaches its bound; a carry out of the outermost loop ends the stream.
  logic [NLOOPS-1:0][CNT_W-1:0] cnt_nxt;
  logic             carry_out;
  always_comb begin
    logic carry;
    carry = 1'b1;
    for (int l = 0; l < NLOOPS; l++) begin
      cnt_nxt[l] = cnt[l];
      if (carry) begin
        if (cnt[l] == last(c.bound[l])) cnt_nxt[l] = '0;
        else begin
          cnt_nxt[l] = cnt[l] + 1'b1;
          carry = 1'b0;
        end
      end
    end
    carry_out = carry;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c     <= '0;
      cnt   <= '0;
      valid <= 1'b0;
    end else if (start) begin
      c     <= cfg;
      cnt   <= '0;
      valid <= 1'b1;
    end else if (next && valid) begin
      cnt <= cnt_nxt;
      if (carry_out) valid <= 1'b0;
    end
  end
endmodule
