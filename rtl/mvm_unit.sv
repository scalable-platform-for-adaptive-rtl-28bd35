// mvm_unit: the MVM operation, an array of 2*LANES multipliers (the DSP
// blocks) and LANES adders that performs one multiply-accumulate step for
// LANES consecutive rows of the reconstruction matrix at once:
//
//   phase_out[l] = phase_in[l] + A[l]*x + B[l]*y
//
// A[l] is the bank-A (x-slope) element and B[l] the bank-B (y-slope) element
// of matrix row k*LANES+l for the current slope column, x and y that column's
// slopes.  Matrix elements are signed 16-bit with MAT_FRAC fraction bits,
// slopes and phases signed 32-bit.  Each 48-bit product is shifted right
// arithmetically by MAT_FRAC and truncated to 32 bits; the sum wraps.  The
// unit is purely combinational: the published prototype uses a non-pipelined
// multiply-accumulate at 50 MHz.
//
// With the defaults LANES = 128, i.e. 256 multipliers, as in the published
// prototype (2 x D.W x nCK x nfifo).  The product scaling and wrap-around are
// this implementation's choices.
module mvm_unit
  import sparc_pkg::*;
#(
  parameter int unsigned LANES = lanes_of(MIG_W_D, NFIFO_D)
) (
  input  logic signed [LANES-1:0][MAT_W-1:0]   mat_a,
  input  logic signed [LANES-1:0][MAT_W-1:0]   mat_b,
  input  logic signed [SLOPE_W-1:0]            x_slope,
  input  logic signed [SLOPE_W-1:0]            y_slope,
  input  logic signed [LANES-1:0][PHASE_W-1:0] phase_in,
  output logic signed [LANES-1:0][PHASE_W-1:0] phase_out
);
  localparam int unsigned PW = MAT_W + SLOPE_W;

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      logic signed [PW-1:0] px, py;
      px = PW'(signed'(mat_a[l])) * PW'(x_slope);
      py = PW'(signed'(mat_b[l])) * PW'(y_slope);
      phase_out[l] = phase_in[l] + PHASE_W'(px >>> MAT_FRAC) + PHASE_W'(py >>> MAT_FRAC);
    end
  end
endmodule
