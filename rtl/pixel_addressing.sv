// pixel_addressing: the pixel addressing module of the wavefront processing
// unit (pixel clock domain).  It follows each pixel's position on the sensor
// and tells the WPU buffer where to store it.
//
// Pixels arrive in raster order over the whole sensor: N_SUB*PIX pixels per
// line, PIX lines per row of subapertures, N_SUB rows per frame.  For pixel
// (px,py) of subaperture sx in subaperture row sy the module writes buffer
// bank sx mod ITER, word sx div ITER of half (rows_written mod 2), lane
// py*PIX+px.  When the last pixel of a row of subapertures has been stored,
// rows_written increments; the slope side sees that count through a Gray
// synchroniser.  The two halves let row n be written while row n-1 is being
// turned into slopes.
//
// The WPU buffer has two halves, so the slope side must have finished row
// n-2 before row n starts.  rows_freed (the slope side's count of processed
// rows, synchronised into this domain) is checked at the first pixel of each
// row: if two rows are still waiting, the row overwrites unread pixels and the
// sticky overrun flag is set.  Slope computation of a row takes
// ceil(N_SUB/ITER)+1 slope clocks, far less than a row of pixels in any
// sensible configuration; the flag shows a configuration that breaks this.
//
// A frame is accepted only when frame_req (the reconstructor's count of frames
// started, already synchronised into this domain) is ahead of the number of
// frames this module has taken; pixels arriving between frames are ignored.
//
// Following the published design: the module's name and role, the single
// pixel channel in an order arranged by the camera controller, and the
// arrangement for parallel readout of a row.  The raster order, the two
// halves and the frame handshake are choices of this implementation.
// wr_data is the incoming pixel itself; only its address is computed here.
module pixel_addressing
  import sparc_pkg::*;
#(
  parameter int unsigned N_SUB = N_SUB_D,
  parameter int unsigned PIX   = PIX_D,
  parameter int unsigned ITER  = ITER_D,
  localparam int unsigned WORDS = words_of(N_SUB, ITER),
  localparam int unsigned BW    = idx_w(ITER),
  localparam int unsigned WW    = idx_w(WORDS),
  localparam int unsigned LW    = idx_w(PIX * PIX)
) (
  input  logic             clk,
  input  logic             rst,
  input  logic [CNT_W-1:0] frame_req,
  input  logic [CNT_W-1:0] rows_freed,
  input  logic             in_valid,
  input  logic [PIX_W-1:0] in_pixel,
  output logic             wr_en,
  output logic [BW-1:0]    wr_bank,
  output logic             wr_half,
  output logic [WW-1:0]    wr_word,
  output logic [LW-1:0]    wr_lane,
  output logic [PIX_W-1:0] wr_data,
  output logic [CNT_W-1:0] rows_written,
  output logic             busy,
  output logic             overrun
);
  localparam int unsigned PXW = idx_w(PIX);
  localparam int unsigned SXW = idx_w(N_SUB);

  logic [CNT_W-1:0] frames_taken;
  logic [PXW-1:0]   px, py;
  logic [SXW-1:0]   sx, sy;
  logic [BW-1:0]    bank;
  logic [WW-1:0]    word;

  assign wr_en   = busy && in_valid;
  assign wr_bank = bank;
  assign wr_word = word;
  assign wr_half = rows_written[0];
  assign wr_lane = LW'(py * PIX + px);
  assign wr_data = in_pixel;

  always_ff @(posedge clk) begin
    if (rst) begin
      busy         <= 1'b0;
      overrun      <= 1'b0;
      frames_taken <= '0;
      rows_written <= '0;
      px <= '0; py <= '0; sx <= '0; sy <= '0; bank <= '0; word <= '0;
    end else if (!busy) begin
      if (frame_req != frames_taken) begin
        busy         <= 1'b1;
        frames_taken <= frames_taken + 1'b1;
        px <= '0; py <= '0; sx <= '0; sy <= '0; bank <= '0; word <= '0;
      end
    end else if (in_valid) begin
      if (px == '0 && py == '0 && sx == '0 && (rows_written - rows_freed) >= CNT_W'(2))
        overrun <= 1'b1;
      if (px != PXW'(PIX - 1)) begin
        px <= px + 1'b1;
      end else begin
        px <= '0;
        if (sx != SXW'(N_SUB - 1)) begin
          sx <= sx + 1'b1;
          if (bank == BW'(ITER - 1)) begin
            bank <= '0;
            word <= word + 1'b1;
          end else begin
            bank <= bank + 1'b1;
          end
        end else begin
          // end of a pixel line
          sx <= '0; bank <= '0; word <= '0;
          if (py != PXW'(PIX - 1)) begin
            py <= py + 1'b1;
          end else begin
            // end of a row of subapertures
            py           <= '0;
            rows_written <= rows_written + 1'b1;
            if (sy != SXW'(N_SUB - 1)) begin
              sy <= sy + 1'b1;
            end else begin
              sy   <= '0;
              busy <= 1'b0;
            end
          end
        end
      end
    end
  end
endmodule
