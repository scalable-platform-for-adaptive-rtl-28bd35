// tb_wpu_buffer: writes random pixels one at a time on a 10 ns clock into
// every bank, half, word and lane of a small WPU buffer, then reads every
// word address on a separate 80 ns clock and checks that each bank returns
// the complete subaperture stored for it.
// Sizes are reduced (5 x 5 subapertures, 2 x 2 pixels, ITER = 2); read data
// is checked one read clock after its address.
`timescale 1ns / 1ps
module tb_wpu_buffer;
  import sparc_pkg::*;
  localparam int unsigned N = 5, P = 2, IT = 2;
  localparam int unsigned WORDS = words_of(N, IT);
  int checks = 0, failures = 0;

  logic wclk = 0, rclk = 0;
  logic we, whalf, rhalf;
  logic [idx_w(IT)-1:0] wbank;
  logic [idx_w(WORDS)-1:0] wword, rword;
  logic [idx_w(P*P)-1:0] wlane;
  logic [PIX_W-1:0] wdata;
  logic [IT-1:0][P*P-1:0][PIX_W-1:0] rdata;
  logic [PIX_W-1:0] model [IT][2][WORDS][P*P];

  always #5 wclk = ~wclk;
  always #40 rclk = ~rclk;

  wpu_buffer #(.N_SUB(N), .PIX(P), .ITER(IT)) dut (.wclk, .we, .wbank, .whalf, .wword, .wlane, .wdata,
                                                   .rclk, .rhalf, .rword, .rdata);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; whalf = 0; wbank = 0; wword = 0; wlane = 0; wdata = 0; rhalf = 0; rword = 0;
    for (int pass = 0; pass < 2; pass++) begin
      for (int b = 0; b < IT; b++)
        for (int h = 0; h < 2; h++)
          for (int w = 0; w < WORDS; w++)
            for (int l = 0; l < P * P; l++) begin
              @(posedge wclk);
              we <= 1; wbank <= b[0:0]; whalf <= h[0]; wword <= w[1:0]; wlane <= l[1:0];
              wdata <= 16'($urandom);
              #1;
              model[b][h][w][l] = wdata;
            end
      @(posedge wclk); we <= 0;
      for (int h = 0; h < 2; h++)
        for (int w = 0; w < WORDS; w++) begin
          @(posedge rclk); rhalf <= h[0]; rword <= w[1:0];
          @(posedge rclk); #1;
          for (int b = 0; b < IT; b++)
            for (int l = 0; l < P * P; l++) begin
              checks++;
              if (rdata[b][l] != model[b][h][w][l]) begin
                failures++;
                $display("FAIL b%0d h%0d w%0d l%0d: %h vs %h", b, h, w, l, rdata[b][l], model[b][h][w][l]);
              end
            end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
