// L2 addition of the hybrid reduction tree.
//
// Aligns four signed 10-bit significands to the largest of their 6-bit exponents and adds
// them. Each significand is placed at the top of an ALIGN_W = MANT_W+3 bit field (26 bits for
// a 23-bit mantissa, 19 bits for the 16-bit mantissa used here) and shifted right
// arithmetically by (emax - exp); bits shifted below the field are dropped. The sum is
// PSUM_W = MANT_W+5 bits wide (28 / 21 bits) and is handed to the accumulation stage together
// with emax, without normalization (early accumulation). Value of the sum:
//   psum * 2^(emax - offset - ALIGN_W + 10).
// Purely combinational. The widths, their scaling with the mantissa width and the
// align-to-largest-exponent scheme follow the paper; two's-complement significands are this
// design's choice (the paper leaves sign handling out of its figures).
module mx_l2_adder #(
  parameter int unsigned MANT_W = mx_pkg::MANT_W
) (
  input  logic signed [9:0]          sig [4],
  input  logic [5:0]                 exp [4],
  output logic signed [MANT_W+4:0]   psum,
  output logic [5:0]                 emax
);
  localparam int unsigned ALIGN_W = MANT_W + 3;
  localparam int unsigned PSUM_W  = MANT_W + 5;

  logic signed [ALIGN_W-1:0] aligned [4];

  // arithmetic right barrel shifter built from constant shift stages
  function automatic logic signed [ALIGN_W-1:0] sra(input logic signed [ALIGN_W-1:0] x,
                                                    input logic [5:0] n);
    for (int i = 0; i < 6; i++) if (n[i]) x = x >>> (1 << i);
    return x;
  endfunction

  always_comb begin
    emax = exp[0];
    for (int i = 1; i < 4; i++)
      if (exp[i] > emax) emax = exp[i];
    psum = '0;
    for (int i = 0; i < 4; i++) begin
      aligned[i] = sra($signed({sig[i], {(ALIGN_W-10){1'b0}}}), emax - exp[i]);
      psum = psum + PSUM_W'(aligned[i]);
    end
  end

endmodule
