// tb_phase_memory: random writes and reads against a model, including reads
// of the word written at the same edge, which must return the new data and
// raise bypass_hit.
// Four lanes of 32 bits, 5 words, one clock; read data is checked one clock
// after its address.
`timescale 1ns / 1ps
module tb_phase_memory;
  import sparc_pkg::*;
  localparam int unsigned LANES = 4, DEPTH = 5;
  localparam int unsigned AW = idx_w(DEPTH);
  int checks = 0, failures = 0, hits = 0;

  logic clk = 0, we, bypass_hit;
  logic [AW-1:0] waddr, raddr;
  logic [LANES-1:0][PHASE_W-1:0] wdata, rdata, exp_q;
  logic [LANES-1:0][PHASE_W-1:0] model [DEPTH];
  bit exp_hit;

  always #10 clk = ~clk;

  phase_memory #(.LANES(LANES), .DEPTH(DEPTH)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata, .bypass_hit);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int a = 0; a < int'(DEPTH); a++) begin
      @(negedge clk); we = 1; waddr = AW'(a); wdata = {LANES{32'($urandom)}};
      @(posedge clk); model[a] = wdata;
    end
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      we = ($urandom % 2);
      waddr = AW'($urandom % DEPTH);
      raddr = (t % 3 == 0) ? waddr : AW'($urandom % DEPTH);
      for (int l = 0; l < int'(LANES); l++) wdata[l] = 32'($urandom);
      exp_hit = we && (waddr == raddr);
      exp_q = exp_hit ? wdata : model[raddr];
      #1;
      checks++; if (bypass_hit != exp_hit) begin failures++; $display("FAIL hit flag"); end
      if (exp_hit) hits++;
      @(posedge clk);
      if (we) model[waddr] = wdata;
      #1;
      checks++;
      if (rdata != exp_q) begin failures++; $display("FAIL read %0d", raddr); end
    end
    checks++; if (hits == 0) begin failures++; $display("FAIL no bypass case"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
