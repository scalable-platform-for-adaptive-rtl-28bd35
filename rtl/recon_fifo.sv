// recon_fifo: one reconstructor FIFO (there is one per DDR bank).  It turns
// the memory controller's stream of IN_W-bit words at the memory clock into a
// stream of IN_W*NFIFO-bit words at the reconstructor clock.
//
// Write side (wclk, the bank's memory clock): in_valid/in_data deliver read
// data from the memory controller; NFIFO consecutive words are gathered (the
// first in the least significant bits) and pushed as one wide word into an
// asynchronous FIFO of DEPTH wide words.  wr_free_beats tells the DDR state
// machine how many more IN_W words are certain to fit; it uses a synchronised,
// hence conservative, copy of the read pointer.  The controller cannot be
// stalled, so a push into a full FIFO would lose data: the sticky overflow flag
// records it, and an assertion checks that flow control never lets it happen.
//
// Read side (rclk): rd_valid/rd_data show the oldest wide word
// (first-word fall-through); rd_en pops it.
//
// Pointers are free-running counters crossed in Gray code.  With the default
// numbers (512-bit words at 200 MHz, nfifo = 4) the read side takes one
// 2048-bit word per 50 MHz cycle, the full bandwidth of the bank.
//
// Following the published design: the width conversion D.W*nCK to
// D.W*nCK*nfifo, one FIFO per bank, and the role of crossing from the memory
// clock to the reconstructor clock.  Depth, pointer scheme and the overflow
// flag are this implementation's choices.
module recon_fifo
  import sparc_pkg::*;
#(
  parameter int unsigned IN_W  = MIG_W_D,
  parameter int unsigned NFIFO = NFIFO_D,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned OUT_W = IN_W * NFIFO,
  localparam int unsigned FBW   = idx_w(DEPTH * NFIFO + 1) + 1
) (
  input  logic             wclk,
  input  logic             wrst,
  input  logic             in_valid,
  input  logic [IN_W-1:0]  in_data,
  output logic [FBW-1:0]   wr_free_beats,
  output logic             overflow,
  input  logic             rclk,
  input  logic             rrst,
  input  logic             rd_en,
  output logic             rd_valid,
  output logic [OUT_W-1:0] rd_data
);
  localparam int unsigned AW = idx_w(DEPTH);
  localparam int unsigned GW = idx_w(NFIFO);

  logic [OUT_W-1:0]           mem [DEPTH];
  logic [NFIFO-1:0][IN_W-1:0] gather;
  logic [GW-1:0]              beat;
  logic [CNT_W-1:0]           wcnt, rcnt, rcnt_w, wcnt_r;
  logic [CNT_W-1:0]           used_w;
  logic                       push;

  // ---------------- write side ----------------
  assign used_w = wcnt - rcnt_w;
  assign push   = in_valid && (beat == GW'(NFIFO - 1)) && (used_w != CNT_W'(DEPTH));
  assign wr_free_beats = FBW'((DEPTH - 32'(used_w)) * NFIFO - 32'(beat));

  always_ff @(posedge wclk) begin
    if (push) begin
      for (int i = 0; i < NFIFO; i++) begin
        mem[wcnt[AW-1:0]][i*IN_W +: IN_W] <= (i == NFIFO - 1) ? in_data : gather[i];
      end
    end
  end

  always_ff @(posedge wclk) begin
    if (wrst) begin
      beat     <= '0;
      wcnt     <= '0;
      overflow <= 1'b0;
    end else if (in_valid) begin
      gather[beat] <= in_data;
      if (beat == GW'(NFIFO - 1)) begin
        beat <= '0;
        if (push) wcnt <= wcnt + 1'b1;
        else      overflow <= 1'b1;
      end else begin
        beat <= beat + 1'b1;
      end
    end
  end

  gray_sync u_rptr_sync (
    .src_clk(rclk), .src_rst(rrst), .src_count(rcnt),
    .dst_clk(wclk), .dst_rst(wrst), .dst_count(rcnt_w)
  );

  // ---------------- read side ----------------
  gray_sync u_wptr_sync (
    .src_clk(wclk), .src_rst(wrst), .src_count(wcnt),
    .dst_clk(rclk), .dst_rst(rrst), .dst_count(wcnt_r)
  );

  assign rd_valid = (wcnt_r != rcnt);
  assign rd_data  = mem[rcnt[AW-1:0]];

  always_ff @(posedge rclk) begin
    if (rrst)                  rcnt <= '0;
    else if (rd_en && rd_valid) rcnt <= rcnt + 1'b1;
  end

  a_no_overflow: assert property (@(posedge wclk) disable iff (wrst)
    !(in_valid && beat == GW'(NFIFO - 1) && used_w == CNT_W'(DEPTH)));
  a_no_underflow: assert property (@(posedge rclk) disable iff (rrst) rd_en |-> rd_valid);
endmodule
