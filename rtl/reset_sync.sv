// reset_sync: turns the asynchronous, active-low board reset into an
// active-high reset for one clock domain.  Assertion is immediate; release is
// synchronised through two flip-flops so every register of the domain leaves
// reset on the same edge.  One instance per clock region (pixel, slope,
// reconstructor, memory A, memory B).  The per-region reset scheme is a choice
// of this implementation; the published design does not describe resets.
module reset_sync (
  input  logic clk,
  input  logic arst_n,
  output logic rst
);
  logic [1:0] q;
  always_ff @(posedge clk or negedge arst_n) begin
    if (!arst_n) q <= 2'b11;
    else         q <= {q[0], 1'b0};
  end
  assign rst = q[1];
endmodule
