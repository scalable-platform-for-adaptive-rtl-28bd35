// tb_wfs_pixel_buffer: pushes a pixel stream while the reader accepts at
// random, checks that pixels come out complete and in order, then fills the
// buffer with the reader stopped and checks that the overflow flag is set
// exactly when a pixel is lost.
// One 10 ns clock (the pixel clock), depth 8; every output pixel and the
// overflow flag are compared with a clocked reference FIFO each cycle.
`timescale 1ns / 1ps
module tb_wfs_pixel_buffer;
  import sparc_pkg::*;
  localparam int unsigned DEPTH = 8;
  int checks = 0, failures = 0;

  logic clk = 0, rst = 1;
  logic [PIX_W-1:0] pix_in, out_pixel;
  logic pix_en, out_valid, out_ready, overflow;
  logic [PIX_W-1:0] exp_q[$];

  always #5 clk = ~clk;

  wfs_pixel_buffer #(.DEPTH(DEPTH)) dut (.clk, .rst, .pix_in, .pix_en, .out_pixel, .out_valid, .out_ready, .overflow);

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference queue (pops before pushes, a push into a full queue is lost)
  // and output checker
  bit model_ovf = 0;
  always @(posedge clk) begin
    if (!rst) begin
      checks++;
      if (overflow != model_ovf) begin failures++; $display("FAIL overflow flag %0d", overflow); end
      if (out_valid && out_ready) begin
        checks++;
        if (exp_q.size() == 0 || exp_q[0] != out_pixel) begin
          failures++;
          $display("FAIL pixel %h", out_pixel);
        end
        if (exp_q.size() > 0) void'(exp_q.pop_front());
      end
      if (pix_en) begin
        if (exp_q.size() < DEPTH) exp_q.push_back(pix_in);
        else model_ovf = 1;
      end
    end
  end

  initial begin
    pix_en = 0; pix_in = 0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    for (int i = 0; i < 2000; i++) begin
      pix_en    <= ($urandom % 2) != 0;
      pix_in    <= 16'($urandom);
      out_ready <= ($urandom % 4) != 0;
      @(posedge clk);
    end
    pix_en <= 0; out_ready <= 1;
    repeat (DEPTH + 4) @(posedge clk);
    checks++; if (exp_q.size() != 0) begin failures++; $display("FAIL drain %0d", exp_q.size()); end
    rst <= 1; model_ovf = 0; @(posedge clk); rst <= 0; @(posedge clk);
    // fill with the reader stopped: DEPTH pushes fit, the next sets overflow
    out_ready <= 0;
    for (int i = 0; i < DEPTH; i++) begin pix_en <= 1; pix_in <= 16'(i); @(posedge clk); end
    pix_en <= 0; @(posedge clk);
    checks++; if (overflow) begin failures++; $display("FAIL overflow too early"); end
    pix_en <= 1; @(posedge clk); pix_en <= 0; @(posedge clk);
    checks++; if (!overflow) begin failures++; $display("FAIL no overflow"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
