// wfs_pixel_buffer: the temporary buffer between the wavefront-sensor camera
// interface and the pixel addressing logic, in the pixel clock domain.
//
// The camera delivers one 16-bit pixel per cycle qualified by a pixel enable
// and cannot be stalled.  The buffer is a small synchronous first-in first-out
// memory: a pixel is pushed whenever pix_en is high and popped whenever the
// reader asserts out_ready.  out_valid/out_pixel show the oldest pixel
// (first-word fall-through, no read latency).  A push into a full buffer is
// lost and sets the sticky overflow flag, which only reset clears.
//
// The published design names this buffer and its purpose (isolating the camera
// interface from the wavefront processing unit) and places it in the pixel
// clock region; its depth and the overflow flag are choices of this
// implementation.
module wfs_pixel_buffer
  import sparc_pkg::*;
#(
  parameter int unsigned DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst,
  input  logic [PIX_W-1:0] pix_in,
  input  logic             pix_en,
  output logic [PIX_W-1:0] out_pixel,
  output logic             out_valid,
  input  logic             out_ready,
  output logic             overflow
);
  localparam int unsigned AW = idx_w(DEPTH);

  logic [PIX_W-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;
  logic [AW:0]      count;
  logic             push, pop;

  assign out_valid = (count != 0);
  assign pop       = out_valid && out_ready;
  assign push      = pix_en && ((count != (AW+1)'(DEPTH)) || pop);
  assign out_pixel = mem[rptr];

  always_ff @(posedge clk) begin
    if (push) mem[wptr] <= pix_in;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wptr     <= '0;
      rptr     <= '0;
      count    <= '0;
      overflow <= 1'b0;
    end else begin
      if (push) wptr <= (wptr == AW'(DEPTH - 1)) ? '0 : wptr + 1'b1;
      if (pop)  rptr <= (rptr == AW'(DEPTH - 1)) ? '0 : rptr + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
      if (pix_en && !push) overflow <= 1'b1;
    end
  end

  // A pop never happens from an empty buffer and the count never exceeds the depth.
  a_count: assert property (@(posedge clk) disable iff (rst) count <= (AW+1)'(DEPTH));
endmodule
