// cog_unit: centre-of-gravity slope of one Shack-Hartmann subaperture,
// computed combinationally within one slope-clock cycle.
//
// Pixel (px,py) sits at offset (2*px-(PIX-1))/2 from the subaperture centre.
// With S = sum of all pixels and Nx = sum of I(px,py)*(2*px-(PIX-1)) (Ny alike
// with py), the slopes in pixels are Nx/(2S) and Ny/(2S).  They are returned
// as signed numbers with SLOPE_FRAC fraction bits, truncated toward zero:
// x_slope = (Nx * 2^SLOPE_FRAC) / (2S).  A subaperture with S = 0 gives zero.
// pixels[py*PIX+px] is the pixel in line py, column px.
//
// Each division is an unrolled restoring divider: a cascade of compare and
// subtract stages, one per quotient bit.  This long carry chain is what limits
// the slope clock (12.5 MHz in the published prototype); the design makes up
// for it by running ITER of these units side by side.
//
// Following the published design: centre of gravity, one result per cycle,
// division by cascaded subtraction, 32-bit slopes.  The centre convention,
// the fixed-point scaling and the zero-intensity rule are this
// implementation's choices.
module cog_unit
  import sparc_pkg::*;
#(
  parameter int unsigned PIX = PIX_D
) (
  input  logic [PIX*PIX-1:0][PIX_W-1:0] pixels,
  output logic signed [SLOPE_W-1:0]     x_slope,
  output logic signed [SLOPE_W-1:0]     y_slope
);
  localparam int unsigned SW = PIX_W + $clog2(PIX * PIX) + 1;  // sum width (+1 for 2S)
  localparam int unsigned NW = SW + $clog2(PIX) + 1;           // |numerator| width
  localparam int unsigned DW = NW + SLOPE_FRAC;                // dividend width

  function automatic logic [DW-1:0] udiv(logic [DW-1:0] dvd, logic [SW-1:0] dvs);
    logic [DW-1:0] q;
    logic [SW:0]   rem;
    rem = '0;
    for (int i = DW - 1; i >= 0; i--) begin
      rem = {rem[SW-1:0], dvd[i]};
      if (rem >= {1'b0, dvs}) begin
        rem  = rem - {1'b0, dvs};
        q[i] = 1'b1;
      end else begin
        q[i] = 1'b0;
      end
    end
    return q;
  endfunction

  logic        [SW-1:0] sum2;
  logic signed [NW:0]   nx, ny;
  logic        [NW-1:0] ax, ay;
  logic        [DW-1:0] qx, qy;   // quotients; only SLOPE_W bits can be non-zero

  always_comb begin
    logic [SW-1:0] s;
    s  = '0;
    nx = '0;
    ny = '0;
    for (int py = 0; py < PIX; py++) begin
      for (int px = 0; px < PIX; px++) begin
        s  = s + SW'(pixels[py*PIX+px]);
        nx = nx + (NW+1)'(signed'({1'b0, pixels[py*PIX+px]})) * (NW+1)'(2 * px - (PIX - 1));
        ny = ny + (NW+1)'(signed'({1'b0, pixels[py*PIX+px]})) * (NW+1)'(2 * py - (PIX - 1));
      end
    end
    sum2 = s << 1;
    ax   = nx[NW] ? NW'(-nx) : NW'(nx);
    ay   = ny[NW] ? NW'(-ny) : NW'(ny);
    qx   = udiv(DW'(ax) << SLOPE_FRAC, sum2);
    qy   = udiv(DW'(ay) << SLOPE_FRAC, sum2);
    if (sum2 == '0) begin
      x_slope = '0;
      y_slope = '0;
    end else begin
      x_slope = nx[NW] ? -qx[SLOPE_W-1:0] : qx[SLOPE_W-1:0];
      y_slope = ny[NW] ? -qy[SLOPE_W-1:0] : qy[SLOPE_W-1:0];
    end
  end
endmodule
