// Shared types, sizes and per-format constants of the precision-scalable MX NPU.
//
// Element formats follow the OCP Microscaling (MX) set: MXINT8, MXFP8 (E5M2, E4M3),
// MXFP6 (E3M2, E2M3) and MXFP4 (E2M1), each with an 8-bit shared exponent (E8M0, bias 127).
// The MAC has three array modes: INT8 (1 product per MAC per cycle), FP8/FP6 (4 products)
// and FP4 (8 products), so one 8x8x8 tile takes 8, 2 or 1 cycles.
//
// What follows the paper: the six formats, the three modes and their products per cycle,
// the 8x8 array, the 16-bit accumulation mantissa, the channel counts per mode (1/4/3/4)
// and the 32-bank 128 KiB scratchpad. This design's own choices: the 3-bit format codes, the
// 32-bit MAC operand word and its element packing (element i in the i-th slice from bit 0),
// 64-bit memory channels, and the exponent offsets that relate the L1 significands to their
// real value (see mode_offset).
package mx_pkg;

  typedef enum logic [2:0] {
    FMT_INT8 = 3'd0,
    FMT_E5M2 = 3'd1,
    FMT_E4M3 = 3'd2,
    FMT_E3M2 = 3'd3,
    FMT_E2M3 = 3'd4,
    FMT_E2M1 = 3'd5
  } mx_fmt_e;

  // Mantissa bits of the stored partial result (16 instead of FP32's 23).
  parameter int unsigned MANT_W  = 16;
  parameter int unsigned ACC_BITS = MANT_W + 9;   // sign, 8-bit exponent, mantissa
  parameter int unsigned ROWS    = 8;
  parameter int unsigned COLS    = 8;
  parameter int unsigned OP_W    = 32;            // MAC operand bits per cycle
  parameter int unsigned CH_W    = 64;            // memory channel width
  parameter int unsigned SPM_ADDR_W = 17;         // byte address of the 128 KiB SPM
  parameter int unsigned NBANKS  = 32;
  parameter int unsigned AB_CH   = 4;             // channels of the A and B read ports
  parameter int unsigned C_CH    = 9;             // channels of the output write port
  parameter int unsigned EXT_CH  = 8;             // 512-bit external (DMA side) port
  parameter int unsigned NLOOPS  = 4;             // AGU loop levels
  parameter int unsigned CNT_W   = 16;            // loop bound / tile counter width

  // One memory access channel of a streamer (or of the external port) towards the crossbar.
  // A request is granted in the cycle it is made (gnt); read data returns one cycle later.
  typedef struct packed {
    logic                  req;
    logic                  we;
    logic [SPM_ADDR_W-1:0] addr;    // byte address, 8-byte aligned
    logic [CH_W-1:0]       wdata;
  } mem_req_t;

  typedef struct packed {
    logic            gnt;
    logic            rvalid;
    logic [CH_W-1:0] rdata;
  } mem_rsp_t;

  // Streamer address-generation configuration: base + sum(count_l * stride_l), loop 0 inner.
  typedef struct packed {
    logic [SPM_ADDR_W-1:0]             base;
    logic [NLOOPS-1:0][CNT_W-1:0]      bound;
    logic [NLOOPS-1:0][SPM_ADDR_W-1:0] stride;
  } agu_cfg_t;

  // Active memory channels of ports A and B for an input format (dynamic channel gating).
  function automatic logic [2:0] active_channels(input logic [2:0] fmt);
    case (fmt)
      FMT_INT8:           return 3'd1;
      FMT_E5M2, FMT_E4M3: return 3'd4;
      FMT_E3M2, FMT_E2M3: return 3'd3;
      default:            return 3'd4;  // E2M1
    endcase
  endfunction

  // Array cycles per 8x8x8 tile.
  function automatic logic [3:0] beats_per_tile(input logic [2:0] fmt);
    case (fmt)
      FMT_INT8: return 4'd8;
      FMT_E2M1: return 4'd1;
      default:  return 4'd2;
    endcase
  endfunction

  // Exponent offset of a product: a 10-bit L1 significand s with 6-bit exponent e is worth
  // s * 2^(e - mode_offset). For FP formats it is 2*bias + 2*mantissa_bits; for INT8 it is
  // 12 (two 2^-6 element scales).
  function automatic int mode_offset(input logic [2:0] fmt);
    case (fmt)
      FMT_INT8: return 12;
      FMT_E5M2: return 34;
      FMT_E4M3: return 20;
      FMT_E3M2: return 10;
      FMT_E2M3: return 8;
      default:  return 4;   // E2M1
    endcase
  endfunction

  // Largest element exponent (unbiased) of an output format, used for the shared scale.
  function automatic int elem_emax(input logic [2:0] fmt);
    case (fmt)
      FMT_INT8: return 0;
      FMT_E5M2: return 15;
      FMT_E4M3: return 8;
      FMT_E3M2: return 4;
      default:  return 2;   // E2M3, E2M1
    endcase
  endfunction

  function automatic int elem_ebits(input logic [2:0] fmt);
    case (fmt)
      FMT_E5M2: return 5;
      FMT_E4M3: return 4;
      FMT_E3M2: return 3;
      default:  return 2;   // E2M3, E2M1 (INT8 unused)
    endcase
  endfunction

  function automatic int elem_mbits(input logic [2:0] fmt);
    case (fmt)
      FMT_E5M2, FMT_E3M2: return 2;
      FMT_E4M3, FMT_E2M3: return 3;
      default:            return 1;   // E2M1 (INT8 unused)
    endcase
  endfunction

  function automatic int elem_bias(input logic [2:0] fmt);
    case (fmt)
      FMT_E5M2: return 15;
      FMT_E4M3: return 7;
      FMT_E3M2: return 3;
      default:  return 1;
    endcase
  endfunction

endpackage
