// phase_memory: the phase memory, an on-chip block memory holding the
// (n+1)^2 intermediate phase values of the matrix-vector product, LANES
// values per word (DEPTH words).
//
// Simple dual port, one clock.  A read returns its word one clock after the
// address.  A write takes effect at the clock edge.  When a read and a write
// address the same word at the same edge, the read returns the data being
// written (write-first bypass), and bypass_hit is high for that cycle.  The
// bypass matters when one matrix column fits in a single word, so that the
// reconstructor reads a word again in the cycle its update is written back.
//
// Following the published design: intermediate phases held in block RAM and
// read and rewritten at every multiply-accumulate step.  The word width and the
// bypass are this implementation's choices.
module phase_memory
  import sparc_pkg::*;
#(
  parameter int unsigned LANES = lanes_of(MIG_W_D, NFIFO_D),
  parameter int unsigned DEPTH = chunks_of(N_SUB_D, lanes_of(MIG_W_D, NFIFO_D)),
  localparam int unsigned AW = idx_w(DEPTH)
) (
  input  logic                              clk,
  input  logic                              we,
  input  logic [AW-1:0]                     waddr,
  input  logic [LANES-1:0][PHASE_W-1:0]     wdata,
  input  logic [AW-1:0]                     raddr,
  output logic [LANES-1:0][PHASE_W-1:0]     rdata,
  output logic                              bypass_hit
);
  logic [LANES-1:0][PHASE_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (we && waddr == raddr) rdata <= wdata;
    else                      rdata <= mem[raddr];
  end

  assign bypass_hit = we && (waddr == raddr);
endmodule
