// atms_unit: adaptive temperature multiply splitting (ATMS) for one CBM neuron.
//
// The chaotic Boltzmann machine moves the internal state X of a neuron by
//   dX = 1 + exp((1-2S) * Z / T)
// each step. With T = T0/alpha (T0 a power of two, alpha a 6-bit integer) the
// exponent becomes (1-2S) * (Z >> log2 T0) * alpha, so the 19-bit divider or
// multiplier shrinks to a barrel shifter and a 6-bit multiplier, and exp() is
// replaced by a power-of-two shift:
//   y  = ((1-2S) * Z) >>> log2T0
//   if y >= 8 the neuron flips this step whatever alpha is (flip_det)
//   else e = sat6(y) * alpha, dX = 1 + (e < 0 ? 0 : 2^min(e,8))
// The split (shift, the >= 8 test, 6-bit multiply, shift instead of exp)
// follows the published scheme. The saturation of y to [-32,7], the clamp of
// e at 8 (2^8 = T_CBM, enough to flip at once) and dropping fractions for
// negative e are this design's own choices.
//
// Purely combinational: z, s, log2_t0 and alpha in, dx and flip_det out.
module atms_unit
  import cbm_pkg::*;
#(
  parameter int ZW = Z_BITS,
  parameter int XW = X_BITS
) (
  input  logic signed [ZW-1:0]        z,
  input  logic                        s,
  input  logic [LOG2T0_BITS-1:0]      log2_t0,
  input  logic [ALPHA_BITS-1:0]       alpha,
  output logic [XW-1:0]               dx,
  output logic                        flip_det
);

  logic signed [ZW-1:0] zs;        // (1-2S) * Z
  logic signed [ZW-1:0] y;         // barrel shifter output
  logic signed [5:0]    y6;        // 6-bit multiplier operand
  logic signed [12:0]   e;         // exponent y6 * alpha
  logic [8:0]           pow2;

  always_comb begin
    zs       = s ? -z : z;
    y        = zs >>> log2_t0;
    flip_det = (y >= ZW'(8));
    if (y < -ZW'(32))    y6 = -6'sd32;
    else if (y > ZW'(7)) y6 = 6'sd7;
    else                 y6 = y[5:0];
    e = 13'(y6) * $signed({7'd0, alpha});
    if (flip_det || e >= 13'sd8) pow2 = 9'd256;
    else if (e < 0)              pow2 = 9'd0;
    else                         pow2 = 9'd1 << e[2:0];
    dx = XW'(1) + XW'(pow2);
  end

endmodule
