// level_sync: two-flip-flop synchroniser for a slowly changing single-bit
// level (for example "matrix written, DDR ready").  Latency two destination
// clocks.
// Interface: d in any domain, q in the clk domain, reset to 0.  Used for the
// ready flags that cross between clock regions, a choice of this design.
module level_sync (
  input  logic clk,
  input  logic rst,
  input  logic d,
  output logic q
);
  logic m;
  always_ff @(posedge clk) begin
    if (rst) begin
      m <= 1'b0;
      q <= 1'b0;
    end else begin
      m <= d;
      q <= m;
    end
  end
endmodule
