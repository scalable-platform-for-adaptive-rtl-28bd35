// wpu_sm: the wavefront processing unit state machine (slope clock domain).
//
// It waits in INITIALIZE until the pixel side reports a stored row of
// subapertures that has not yet been processed (rows_written, synchronised,
// ahead of its own rows_done).  It then enters CENTROID_COMPUTATION and reads
// the WPU buffer half of that row one word per cycle: each word brings the
// pixels of ITER subapertures, which ITER cog_unit instances turn into slopes
// in the following cycle.  The ITER slope pairs are written as one word of
// the slope buffer at address (row within frame)*WORDS + word, and the
// free-running count words_written is advanced so the reconstructor can start
// on them at once.  After the last word of the row ("subaperture row done")
// it returns to INITIALIZE.  A row of N_SUB subapertures therefore takes
// ceil(N_SUB/ITER) + 1 slope clocks.
//
// Lanes beyond N_SUB in the last word of a row carry meaningless slopes that
// the reconstructor never reads.
//
// Following the published design: the state names, the start of centroid
// computation once a whole row of subapertures is buffered, and ITER slopes
// per clock.  The counters and the one-cycle read pipeline are this
// implementation's choices.
module wpu_sm
  import sparc_pkg::*;
#(
  parameter int unsigned N_SUB = N_SUB_D,
  parameter int unsigned PIX   = PIX_D,
  parameter int unsigned ITER  = ITER_D,
  localparam int unsigned WORDS = words_of(N_SUB, ITER),
  localparam int unsigned WW    = idx_w(WORDS),
  localparam int unsigned SAW   = idx_w(N_SUB * WORDS)
) (
  input  logic                                  clk,
  input  logic                                  rst,
  input  logic [CNT_W-1:0]                      rows_written,   // synchronised
  output logic                                  buf_rhalf,
  output logic [WW-1:0]                         buf_rword,
  input  logic [ITER-1:0][PIX*PIX-1:0][PIX_W-1:0] buf_rdata,
  output logic                                  sl_we,
  output logic [SAW-1:0]                        sl_waddr,
  output slope_pair_t [ITER-1:0]                sl_wdata,
  output logic [CNT_W-1:0]                      words_written,
  output logic [CNT_W-1:0]                      rows_done,
  output logic                                  busy
);
  typedef enum logic [0:0] {INITIALIZE, CENTROID_COMPUTATION} state_t;
  localparam int unsigned SXW = idx_w(N_SUB);

  state_t           state;
  logic [SXW-1:0]   row_in_frame;
  logic [WW-1:0]    word;
  logic             rd_valid;
  logic [SAW-1:0]   rd_addr;

  assign busy      = (state == CENTROID_COMPUTATION);
  assign buf_rhalf = rows_done[0];
  assign buf_rword = word;

  for (genvar i = 0; i < ITER; i++) begin : g_cog
    cog_unit #(.PIX(PIX)) u_cog (
      .pixels (buf_rdata[i]),
      .x_slope(sl_wdata[i].x),
      .y_slope(sl_wdata[i].y)
    );
  end

  assign sl_we    = rd_valid;
  assign sl_waddr = rd_addr;

  always_ff @(posedge clk) begin
    if (rst) begin
      state         <= INITIALIZE;
      rows_done     <= '0;
      row_in_frame  <= '0;
      word          <= '0;
      rd_valid      <= 1'b0;
      rd_addr       <= '0;
      words_written <= '0;
    end else begin
      rd_valid <= 1'b0;
      if (rd_valid) words_written <= words_written + 1'b1;
      unique case (state)
        INITIALIZE: begin
          word <= '0;
          if (rows_written != rows_done) state <= CENTROID_COMPUTATION;
        end
        CENTROID_COMPUTATION: begin
          rd_valid <= 1'b1;
          rd_addr  <= SAW'(32'(row_in_frame) * WORDS + 32'(word));
          if (word == WW'(WORDS - 1)) begin
            // subaperture row done
            state        <= INITIALIZE;
            rows_done    <= rows_done + 1'b1;
            row_in_frame <= (row_in_frame == SXW'(N_SUB - 1)) ? '0 : row_in_frame + 1'b1;
          end else begin
            word <= word + 1'b1;
          end
        end
        default: state <= INITIALIZE;
      endcase
    end
  end
endmodule
