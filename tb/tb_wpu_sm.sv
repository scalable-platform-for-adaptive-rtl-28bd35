// tb_wpu_sm: feeds the WPU state machine (5 x 5 subapertures, 2 x 2 pixels,
// ITER = 2) from a modelled WPU buffer with registered reads, announces rows
// one at a time and checks every slope-buffer write (address, x and y slopes
// of each lane against an integer centre-of-gravity model), the words_written
// count, and that a row takes WORDS + 1 slope clocks.
`timescale 1ns / 1ps
module tb_wpu_sm;
  import sparc_pkg::*;
  localparam int unsigned N = 5, P = 2, IT = 2;
  localparam int unsigned WORDS = words_of(N, IT);
  localparam int unsigned SAW = idx_w(N * WORDS);
  int checks = 0, failures = 0;

  logic clk = 0, rst = 1;
  logic [CNT_W-1:0] rows_written, words_written, rows_done;
  logic buf_rhalf, sl_we, busy;
  logic [idx_w(WORDS)-1:0] buf_rword;
  logic [IT-1:0][P*P-1:0][PIX_W-1:0] buf_rdata;
  logic [SAW-1:0] sl_waddr;
  slope_pair_t [IT-1:0] sl_wdata;
  logic [P*P-1:0][PIX_W-1:0] pix [2][WORDS][IT];

  always #40 clk = ~clk;

  wpu_sm #(.N_SUB(N), .PIX(P), .ITER(IT)) dut (.clk, .rst, .rows_written, .buf_rhalf, .buf_rword, .buf_rdata,
                                             .sl_we, .sl_waddr, .sl_wdata, .words_written, .rows_done, .busy);

  always_ff @(posedge clk) for (int b = 0; b < IT; b++) buf_rdata[b] <= pix[buf_rhalf][buf_rword][b];

  function automatic longint ref_slope(logic [P*P-1:0][PIX_W-1:0] p, bit y_dir);
    longint s, n;
    s = 0; n = 0;
    for (int yy = 0; yy < P; yy++)
      for (int xx = 0; xx < P; xx++) begin
        s += longint'(p[yy*P+xx]);
        n += longint'(p[yy*P+xx]) * (y_dir ? (2 * yy - (P - 1)) : (2 * xx - (P - 1)));
      end
    return (s == 0) ? 0 : (n * 65536) / (2 * s);
  endfunction

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int writes_seen;
  initial begin
    rows_written = 0;
    for (int h = 0; h < 2; h++) for (int w = 0; w < WORDS; w++) for (int b = 0; b < IT; b++)
      for (int l = 0; l < P * P; l++) pix[h][w][b][l] = 16'($urandom % 4096);
    repeat (3) @(posedge clk);
    rst <= 0;
    repeat (3) @(posedge clk);
    for (int r = 0; r < 2 * N; r++) begin
      int half, t0, row;
      half = r % 2; row = r % N;
      for (int w = 0; w < WORDS; w++) for (int b = 0; b < IT; b++)
        for (int l = 0; l < P * P; l++) pix[half][w][b][l] = 16'($urandom % 4096);
      rows_written <= CNT_W'(r + 1);
      writes_seen = 0; t0 = 0;
      while (writes_seen < int'(WORDS)) begin
        @(posedge clk); #1; t0++;
        if (sl_we) begin
          checks++;
          if (int'(sl_waddr) != row * int'(WORDS) + writes_seen) begin
            failures++; $display("FAIL addr %0d row %0d", sl_waddr, row);
          end
          for (int b = 0; b < IT; b++) begin
            if (writes_seen * IT + b < N) begin
              checks++;
              if (longint'(sl_wdata[b].x) != ref_slope(pix[half][writes_seen][b], 0) ||
                  longint'(sl_wdata[b].y) != ref_slope(pix[half][writes_seen][b], 1)) begin
                failures++;
                $display("FAIL slope r%0d w%0d b%0d: %0d,%0d", r, writes_seen, b, sl_wdata[b].x, sl_wdata[b].y);
              end
            end
          end
          writes_seen++;
        end
        if (t0 > 20) break;
      end
      // announcement -> last write: sync-free here, so state change + WORDS reads + 1
      checks++;
      if (t0 != int'(WORDS) + 1) begin failures++; $display("FAIL row took %0d clocks", t0); end
      @(posedge clk); #1;
      checks++;
      if (int'(words_written) != (r + 1) * int'(WORDS) || int'(rows_done) != r + 1 || busy) begin
        failures++; $display("FAIL words_written %0d", words_written);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
