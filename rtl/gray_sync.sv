// gray_sync: carries a free-running progress counter from one clock domain to
// another.  The source domain registers the Gray code of its counter; the
// destination passes it through two flip-flops and converts it back to binary.
// Because the counter changes by at most one per source clock, exactly one Gray
// bit changes at a time and the destination always sees a value the counter
// really held (possibly a little old, never ahead).  Latency: one source clock
// plus two to three destination clocks.
// Interface: src_count in, dst_count out, each with its own clock and reset.
// The published design only says that its clock regions meet at buffers; this
// counter-based handshake between them is this implementation's choice.
module gray_sync
  import sparc_pkg::*;
(
  input  logic             src_clk,
  input  logic             src_rst,
  input  logic [CNT_W-1:0] src_count,
  input  logic             dst_clk,
  input  logic             dst_rst,
  output logic [CNT_W-1:0] dst_count
);
  logic [CNT_W-1:0] g_src, g_m, g_d;
  always_ff @(posedge src_clk) begin
    if (src_rst) g_src <= '0;
    else         g_src <= bin2gray(src_count);
  end
  always_ff @(posedge dst_clk) begin
    if (dst_rst) begin
      g_m <= '0;
      g_d <= '0;
    end else begin
      g_m <= g_src;
      g_d <= g_m;
    end
  end
  assign dst_count = gray2bin(g_d);
endmodule
