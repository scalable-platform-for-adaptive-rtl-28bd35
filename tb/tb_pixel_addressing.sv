// tb_pixel_addressing: streams two raster-order frames (with gaps) into a
// 5 x 5 subaperture, 2 x 2 pixel, ITER = 2 configuration and checks bank,
// word, lane and half of every write against positions computed from the
// pixel's index, the row counter after every row of subapertures, and that
// pixels outside a frame are ignored.
`timescale 1ns / 1ps
module tb_pixel_addressing;
  import sparc_pkg::*;
  localparam int unsigned N = 5, P = 2, IT = 2;
  localparam int unsigned WORDS = words_of(N, IT);
  int checks = 0, failures = 0;

  logic clk = 0, rst = 1;
  logic [CNT_W-1:0] frame_req, rows_written, rows_freed;
  logic overrun;
  logic in_valid;
  logic [PIX_W-1:0] in_pixel, wr_data;
  logic wr_en, wr_half, busy;
  logic [idx_w(IT)-1:0] wr_bank;
  logic [idx_w(WORDS)-1:0] wr_word;
  logic [idx_w(P*P)-1:0] wr_lane;

  always #5 clk = ~clk;

  pixel_addressing #(.N_SUB(N), .PIX(P), .ITER(IT)) dut (
    .clk, .rst, .frame_req, .rows_freed, .in_valid, .in_pixel, .wr_en, .wr_bank, .wr_half,
    .wr_word, .wr_lane, .wr_data, .rows_written, .busy, .overrun);

  // the slope side keeps up: it frees each row as soon as it is written
  always_ff @(posedge clk) rows_freed <= rows_written;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    frame_req = 0; in_valid = 0; in_pixel = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    // pixels before any frame request are ignored
    in_valid <= 1; @(posedge clk); #1;
    chk(!wr_en && !busy, "pixel accepted outside a frame");
    in_valid <= 0;
    for (int f = 0; f < 2; f++) begin
      frame_req <= CNT_W'(f + 1);
      @(posedge clk); @(posedge clk); #1;
      chk(busy, "frame not started");
      for (int i = 0; i < N * P * N * P; i++) begin
        int x, y, sx, sy, px, py;
        while ($urandom % 5 == 0) begin in_valid <= 0; @(posedge clk); end
        x = i % (N * P); y = i / (N * P);
        sx = x / P; px = x % P; sy = y / P; py = y % P;
        in_valid <= 1; in_pixel <= 16'(i);
        #1;
        chk(wr_en, "no write");
        chk(int'(wr_bank) == sx % IT && int'(wr_word) == sx / IT && int'(wr_lane) == py * P + px,
            $sformatf("pixel %0d at bank %0d word %0d lane %0d", i, wr_bank, wr_word, wr_lane));
        chk(int'(wr_half) == (f * N + sy) % 2, "half");
        chk(int'(rows_written) == f * N + sy, "rows_written during row");
        chk(wr_data == 16'(i), "data");
        @(posedge clk);
      end
      in_valid <= 0;
      @(posedge clk); #1;
      chk(int'(rows_written) == (f + 1) * N, $sformatf("rows_written %0d after frame", rows_written));
      chk(!busy, "still busy after frame");
      in_valid <= 1; @(posedge clk); #1;
      chk(!wr_en, "pixel accepted after frame");
      in_valid <= 0;
    end
    checks++; if (overrun) begin failures++; $display("FAIL overrun while slope side kept up"); end
    // a third frame while the slope side is stuck: the third row must flag an overrun
    force rows_freed = CNT_W'(2 * N);
    frame_req <= 3;
    @(posedge clk); @(posedge clk);
    for (int i = 0; i < 3 * int'(N * P * P); i++) begin
      in_valid <= 1; @(posedge clk);
      #1;
      if (i < 2 * int'(N * P * P)) begin checks++; if (overrun) begin failures++; $display("FAIL early overrun at %0d rw %0d busy %0d", i, rows_written, busy); end end
    end
    in_valid <= 0; @(posedge clk); #1;
    checks++; if (!overrun) begin failures++; $display("FAIL no overrun"); end
    release rows_freed;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
