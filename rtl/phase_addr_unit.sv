// phase_addr_unit: the phase memory addressing unit.  It walks the
// multiply-accumulate loop of one frame: for every slope column
// ncol = sy*N_SUB + sx (subaperture row sy, column sx) it visits phase-memory
// words (chunks) 0 .. CHUNKS-1, each chunk covering LANES matrix rows.  The
// chunk index is the inner loop, so a column's slope pair is fetched once and
// used for all (n+1)^2 rows.
//
// Each step advances by one chunk.  The unit also gives the slope-buffer word
// (sy*WORDS + sx div ITER) and lane (sx mod ITER) of the current column, and
// the same values as they will be after a step ("nxt_"), which lets the slope
// buffer be read one cycle ahead.  col_last, row_last and frame_last flag the
// last chunk of a column, of a row of subapertures and of the frame.  clear
// returns to the start of a frame.
//
// The published design names this unit; the loop order is this
// implementation's choice.
module phase_addr_unit
  import sparc_pkg::*;
#(
  parameter int unsigned N_SUB = N_SUB_D,
  parameter int unsigned ITER  = ITER_D,
  parameter int unsigned LANES = lanes_of(MIG_W_D, NFIFO_D),
  localparam int unsigned CHUNKS = chunks_of(N_SUB, LANES),
  localparam int unsigned WORDS  = words_of(N_SUB, ITER),
  localparam int unsigned CW     = idx_w(CHUNKS),
  localparam int unsigned SAW    = idx_w(N_SUB * WORDS),
  localparam int unsigned BW     = idx_w(ITER)
) (
  input  logic           clk,
  input  logic           rst,
  input  logic           clear,
  input  logic           step,
  output logic [CW-1:0]  chunk,
  output logic [SAW-1:0] slope_addr,
  output logic [BW-1:0]  slope_lane,
  output logic [SAW-1:0] nxt_slope_addr,
  output logic [BW-1:0]  nxt_slope_lane,
  output logic           col_last,
  output logic           row_last,
  output logic           frame_last
);
  localparam int unsigned SXW = idx_w(N_SUB);
  localparam int unsigned WW  = idx_w(WORDS);

  typedef struct packed {
    logic [CW-1:0]  chunk;
    logic [SXW-1:0] sx;
    logic [SXW-1:0] sy;
    logic [WW-1:0]  sword;  // sx div ITER
    logic [BW-1:0]  lane;   // sx mod ITER
  } pos_t;

  pos_t cur, nxt;

  always_comb begin
    nxt = cur;
    if (cur.chunk != CW'(CHUNKS - 1)) begin
      nxt.chunk = cur.chunk + 1'b1;
    end else begin
      nxt.chunk = '0;
      if (cur.sx != SXW'(N_SUB - 1)) begin
        nxt.sx = cur.sx + 1'b1;
        if (cur.lane == BW'(ITER - 1)) begin
          nxt.lane  = '0;
          nxt.sword = cur.sword + 1'b1;
        end else begin
          nxt.lane = cur.lane + 1'b1;
        end
      end else begin
        nxt.sx    = '0;
        nxt.lane  = '0;
        nxt.sword = '0;
        nxt.sy    = (cur.sy == SXW'(N_SUB - 1)) ? '0 : cur.sy + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst || clear) cur <= '0;
    else if (step)    cur <= nxt;
  end

  assign chunk          = cur.chunk;
  assign slope_addr     = SAW'(32'(cur.sy) * WORDS + 32'(cur.sword));
  assign slope_lane     = cur.lane;
  assign nxt_slope_addr = step ? SAW'(32'(nxt.sy) * WORDS + 32'(nxt.sword)) : slope_addr;
  assign nxt_slope_lane = step ? nxt.lane : cur.lane;
  assign col_last       = (cur.chunk == CW'(CHUNKS - 1));
  assign row_last       = col_last && (cur.sx == SXW'(N_SUB - 1));
  assign frame_last     = row_last && (cur.sy == SXW'(N_SUB - 1));
endmodule
