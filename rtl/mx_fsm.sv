// Control FSM of the MX tensor core.
//
// After start it runs `tiles` output tiles; each output tile accumulates `k_tiles` 8x8x8
// tiles, and each tile takes beats_per_tile(fmt) = 8 / 2 / 1 beats (INT8 / FP8,FP6 / FP4).
// One beat is consumed ("fire") when the A, B and shared-exponent streams are all valid;
// the exponent word stays at the head of its stream for all beats of a tile and is popped
// with the tile's last beat. The first beat of an output tile clears the accumulators. After
// the last beat of an output tile the result is pending in the array's accumulator registers;
// it is moved into the quantizer's output register (capture) as soon as that register is
// free. A capture can happen in the same cycle as the first beat of the next output tile, so
// the array does not idle; if the quantizer output is still blocked, the next tile's first
// beat stalls. busy falls when all tiles are consumed, quantized and written (writer_idle).
// Counters are 16 bits (k_tiles, tiles >= 1; 0 counts as 1).
// What is the paper's: an FSM that sets the array's precision mode and generates the
// control and handshakes of the GeMM from the matrix size. The exact counters, the
// zero-bubble capture and the exponent-per-tile protocol are this design's own.
// The assertions at the end sample rst_n on the clock (disable iff) while the flops use it as
// an asynchronous reset; this only affects the checks, not the logic.
module mx_fsm
  import mx_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [2:0]       fmt_in,
  input  logic [CNT_W-1:0] k_tiles,
  input  logic [31:0]      tiles,
  input  logic             a_valid,
  input  logic             b_valid,
  input  logic             e_valid,
  input  logic             q_ready,      // quantizer output register free
  input  logic             q_valid,
  input  logic             writer_idle,
  output logic             a_ready,
  output logic             b_ready,
  output logic             e_ready,
  output logic             mac_en,
  output logic             mac_clear,
  output logic             q_capture,
  output logic [2:0]       fmt,
  output logic             busy,
  output logic             stall         // operands ready but blocked by the quantizer
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_FLUSH} state_e;
  state_e state;

  logic [3:0]       beat, bpt;
  logic [CNT_W-1:0] kcnt, klast;
  logic [31:0]      tcnt, tlast;
  logic             pending, fire, in_avail, last_beat, last_k, last_t;

  assign bpt       = beats_per_tile(fmt);
  assign last_beat = (beat == bpt - 4'd1);
  assign last_k    = (kcnt == klast);
  assign last_t    = (tcnt == tlast);
  assign in_avail  = a_valid && b_valid && e_valid;
  assign q_capture = pending && q_ready;
  assign fire      = (state == S_RUN) && in_avail && (!pending || q_ready);
  assign stall     = (state == S_RUN) && in_avail && pending && !q_ready;

  assign a_ready   = fire;
  assign b_ready   = fire;
  assign e_ready   = fire && last_beat;
  assign mac_en    = fire;
  assign mac_clear = fire && (beat == 0) && (kcnt == 0);
  assign busy      = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      fmt     <= FMT_INT8;
      beat    <= '0;
      kcnt    <= '0;
      tcnt    <= '0;
      klast   <= '0;
      tlast   <= '0;
      pending <= 1'b0;
    end else begin
      case (state)
        S_IDLE: if (start) begin
          state   <= S_RUN;
          fmt     <= fmt_in;
          klast   <= (k_tiles == 0) ? '0 : k_tiles - 1'b1;
          tlast   <= (tiles == 0) ? '0 : tiles - 1;
          beat    <= '0;
          kcnt    <= '0;
          tcnt    <= '0;
          pending <= 1'b0;
        end
        S_RUN: begin
          if (fire) begin
            if (!last_beat) beat <= beat + 4'd1;
            else begin
              beat <= '0;
              if (!last_k) kcnt <= kcnt + 1'b1;
              else begin
                kcnt <= '0;
                if (!last_t) tcnt <= tcnt + 1;
                else         state <= S_FLUSH;
              end
            end
          end
          pending <= (pending && !q_capture) || (fire && last_beat && last_k);
        end
        default: begin  // S_FLUSH: last result to quantizer and writer
          if (q_capture) pending <= 1'b0;
          if (!pending && !q_valid && writer_idle) state <= S_IDLE;
        end
      endcase
    end
  end

  // handshake rules
  a_ready_only_when_fire: assert property (@(posedge clk) disable iff (!rst_n)
    a_ready |-> (a_valid && b_valid && e_valid));
  capture_only_pending: assert property (@(posedge clk) disable iff (!rst_n)
    q_capture |-> q_ready);

endmodule
