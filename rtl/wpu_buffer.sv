// wpu_buffer: the WPU buffer, a bank of ITER block memories that sits between
// the pixel clock (write) and the slope clock (read).
//
// Bank b holds the subapertures whose column index is b modulo ITER; one
// memory word holds all PIX*PIX pixels of one subaperture, and each bank has
// two halves of WORDS words (one half per row of subapertures, used in turn).
// A write stores one 16-bit pixel into one lane of one word.  A read presents
// the same word address to all banks and returns, one slope clock later, the
// complete pixels of ITER neighbouring subapertures, so ITER centroids can be
// computed in the same cycle.
//
// The published design gives the buffer's purpose (arranging the pixels for
// parallel readout), shows it as a stack of block memories spanning the pixel
// and slope clock regions, and leaves the arrangement open; the bank / word /
// lane mapping is this implementation's.
module wpu_buffer
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
  input  logic             wclk,
  input  logic             we,
  input  logic [BW-1:0]    wbank,
  input  logic             whalf,
  input  logic [WW-1:0]    wword,
  input  logic [LW-1:0]    wlane,
  input  logic [PIX_W-1:0] wdata,
  input  logic             rclk,
  input  logic             rhalf,
  input  logic [WW-1:0]    rword,
  output logic [ITER-1:0][PIX*PIX-1:0][PIX_W-1:0] rdata
);
  for (genvar b = 0; b < ITER; b++) begin : g_bank
    logic [PIX*PIX-1:0][PIX_W-1:0] mem [2*WORDS];

    always_ff @(posedge wclk) begin
      if (we && wbank == BW'(b)) mem[32'(whalf) * WORDS + 32'(wword)][wlane] <= wdata;
    end

    always_ff @(posedge rclk) begin
      rdata[b] <= mem[32'(rhalf) * WORDS + 32'(rword)];
    end
  end
endmodule
