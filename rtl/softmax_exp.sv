// softmax_exp: exponential stage of the LUT-based softmax.
// For an unpruned score s it forms e = 2^(x) with x = (s - Th) / 2^shift,
// read as a fixed-point number with 9 fractional bits. The 9-bit fraction
// indexes a 512 x 16-bit table (1KB, the paper's LUT size) of
// round(2^(f/512) * 2^15); the integer part becomes a power-of-two exponent.
// The result is the 16-bit mantissa and a 4-bit shift: e = mant * 2^ex / 2^15.
// Because every surviving score is at or above the threshold, x >= 0 and the
// threshold serves as the softmax reference point; the shift input folds the
// 1/sqrt(d) scale, the quantisation scales and log2(e) into one power of
// two. x is limited to E_MAX + 511/512 (saturation). The paper gives the
// LUT approach (after A^3), the 24-bit input, 16-bit output and 1KB table;
// the base-2 form, the threshold reference and the saturation are this
// design's. Table formula: entry f = round(2^(f/512) * 32768), f = 0..511.
// Timing: purely combinational.
module softmax_exp
  import leopard_pkg::*;
#(
  parameter int E_MAX = 15
) (
  input  score_t      score,
  input  score_t      thr,
  input  logic [4:0]  shift,
  output logic [P_W-1:0] mant,
  output logic [3:0]  ex
);
  logic [P_W-1:0] lut [512];
  initial $readmemh("rtl/exp2_lut.hex", lut);

  logic signed [SCORE_W:0] diff;
  logic [SCORE_W:0]        x;

  assign diff = (SCORE_W+1)'(score) - (SCORE_W+1)'(thr);
  assign x    = diff[SCORE_W] ? '0 : (SCORE_W+1)'(diff) >> shift;

  always_comb begin
    if ((x >> 9) > (SCORE_W+1)'(E_MAX)) begin
      ex   = 4'(E_MAX);
      mant = lut[511];
    end else begin
      ex   = 4'(x >> 9);
      mant = lut[x[8:0]];
    end
  end
endmodule
