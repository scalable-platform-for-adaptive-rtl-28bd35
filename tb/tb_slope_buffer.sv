// tb_slope_buffer: writes random slope words on an 80 ns clock, reads random
// (word, lane) pairs on a 20 ns clock and checks each read, one read clock
// after its address, against a model of the memory.
// The two clocks are those of the slope and reconstruction regions; the sizes
// are reduced (5 x 5 subapertures, ITER = 4).
`timescale 1ns / 1ps
module tb_slope_buffer;
  import sparc_pkg::*;
  localparam int unsigned N = 5, IT = 4;
  localparam int unsigned WORDS = words_of(N, IT);
  localparam int unsigned SAW = idx_w(N * WORDS);
  int checks = 0, failures = 0;

  logic wclk = 0, rclk = 0, we;
  logic [SAW-1:0] waddr, raddr;
  logic [idx_w(IT)-1:0] rlane;
  slope_pair_t [IT-1:0] wdata;
  slope_pair_t rd_pair;
  slope_pair_t [IT-1:0] model [N * WORDS];

  always #40 wclk = ~wclk;
  always #10 rclk = ~rclk;

  slope_buffer #(.N_SUB(N), .ITER(IT)) dut (.wclk, .we, .waddr, .wdata, .rclk, .raddr, .rlane, .rd_pair);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; waddr = 0; raddr = 0; rlane = 0;
    for (int a = 0; a < int'(N * WORDS); a++) begin
      @(posedge wclk);
      we <= 1; waddr <= SAW'(a);
      for (int l = 0; l < IT; l++) begin
        wdata[l].x <= 32'($urandom);
        wdata[l].y <= 32'($urandom);
      end
      #1; model[a] = wdata;
    end
    @(posedge wclk); we <= 0;
    for (int t = 0; t < 300; t++) begin
      int a, l;
      a = $urandom % (N * WORDS); l = $urandom % IT;
      @(posedge rclk); raddr <= SAW'(a); rlane <= 2'(l);
      @(posedge rclk); #1;
      checks++;
      if (rd_pair != model[a][l]) begin
        failures++; $display("FAIL word %0d lane %0d", a, l);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
