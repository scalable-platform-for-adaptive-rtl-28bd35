// slope_buffer: the slope buffer between the slope clock (write) and the
// reconstructor clock (read).
//
// It holds the slopes of a whole frame: N_SUB rows of WORDS words, each word
// carrying ITER (x, y) slope pairs as written in one slope-clock cycle by the
// WPU state machine.  The reader gives a word address and a lane; one
// reconstructor clock later rd_pair holds that subaperture's slope pair.
// Whether a word has been written is known from the Gray-synchronised
// words_written count, so the memory itself needs no handshake.
//
// Following the published design: a buffer between the WPU and the core
// reconstructor holding x and y slopes in on-chip memory.  The frame-deep size
// and the word layout are this implementation's choices.
module slope_buffer
  import sparc_pkg::*;
#(
  parameter int unsigned N_SUB = N_SUB_D,
  parameter int unsigned ITER  = ITER_D,
  localparam int unsigned WORDS = words_of(N_SUB, ITER),
  localparam int unsigned SAW   = idx_w(N_SUB * WORDS),
  localparam int unsigned BW    = idx_w(ITER)
) (
  input  logic                   wclk,
  input  logic                   we,
  input  logic [SAW-1:0]         waddr,
  input  slope_pair_t [ITER-1:0] wdata,
  input  logic                   rclk,
  input  logic [SAW-1:0]         raddr,
  input  logic [BW-1:0]          rlane,
  output slope_pair_t            rd_pair
);
  slope_pair_t [ITER-1:0] mem [N_SUB * WORDS];
  slope_pair_t [ITER-1:0] word_q;
  logic [BW-1:0]          lane_q;

  always_ff @(posedge wclk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge rclk) begin
    word_q <= mem[raddr];
    lane_q <= rlane;
  end

  assign rd_pair = word_q[lane_q];
endmodule
