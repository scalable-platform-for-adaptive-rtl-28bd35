// sparc_pkg: constants and helper functions shared by every block of the
// adaptive-optics real-time controller.
//
// The defaults describe the main configuration: a 50 x 50 Shack-Hartmann
// subaperture grid, 4 x 4 pixels per subaperture, 16 slopes computed per
// slope-clock cycle, a 64-bit DDR3 bank seen through a memory controller that
// delivers 512-bit words at 200 MHz, and a 50 MHz reconstructor, so
// nfifo = 4 and every reconstructor cycle consumes 2048 bits (128 matrix
// elements of 16 bits) from each of the two banks.  The 16-bit matrix element
// and the 32-bit slope and phase widths follow the published design; the split
// of the matrix element into 4 integer and 12 fraction bits and the 16 fraction
// bits of a slope are choices of this implementation.
//
// Cross-clock progress counters (rows of pixels stored, slope words written,
// rows of the matrix requested and finished) are free running and cross clock
// domains in Gray code; they change by at most one per source clock.
package sparc_pkg;

  localparam int unsigned N_SUB_D    = 50;   // subapertures along a row
  localparam int unsigned PIX_D      = 4;    // pixels along a subaperture side
  localparam int unsigned ITER_D     = 16;   // slopes computed per clk_slope cycle
  localparam int unsigned PIX_W      = 16;   // camera pixel width
  localparam int unsigned SLOPE_W    = 32;   // slope width
  localparam int unsigned SLOPE_FRAC = 16;   // fraction bits of a slope (in pixels)
  localparam int unsigned PHASE_W    = 32;   // phase width
  localparam int unsigned MAT_W      = 16;   // reconstruction matrix element width
  localparam int unsigned MAT_FRAC   = 12;   // fraction bits of a matrix element
  localparam int unsigned MIG_W_D    = 512;  // D.W * nCK: memory controller word
  localparam int unsigned NFIFO_D    = 4;    // ddr_clk / (nCK * recon_clk)
  localparam int unsigned CNT_W      = 16;   // width of free-running progress counters

  // Matrix elements delivered per bank per reconstructor cycle: D.W*nCK*nfifo / 16.
  function automatic int unsigned lanes_of(int unsigned mig_w, int unsigned nfifo);
    return (mig_w * nfifo) / MAT_W;
  endfunction

  // Phase-memory words (chunks) per matrix column: ceil((n+1)^2 / lanes).
  function automatic int unsigned chunks_of(int unsigned n_sub, int unsigned lanes);
    return ((n_sub + 1) * (n_sub + 1) + lanes - 1) / lanes;
  endfunction

  // Slope-buffer words per row of subapertures: ceil(n / iter).
  function automatic int unsigned words_of(int unsigned n_sub, int unsigned iter);
    return (n_sub + iter - 1) / iter;
  endfunction

  // One subaperture's slope pair as it travels from the centroid units through
  // the slope buffer to the multiply-accumulate array.
  typedef struct packed {
    logic signed [SLOPE_W-1:0] x;
    logic signed [SLOPE_W-1:0] y;
  } slope_pair_t;

  // Width of an index into n items, at least one bit.
  function automatic int unsigned idx_w(int unsigned n);
    return (n <= 2) ? 1 : $clog2(n);
  endfunction

  function automatic logic [CNT_W-1:0] bin2gray(logic [CNT_W-1:0] b);
    return b ^ (b >> 1);
  endfunction

  function automatic logic [CNT_W-1:0] gray2bin(logic [CNT_W-1:0] g);
    logic [CNT_W-1:0] b;
    b[CNT_W-1] = g[CNT_W-1];
    for (int i = CNT_W - 2; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

endpackage
