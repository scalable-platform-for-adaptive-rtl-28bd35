// tb_phase_addr_unit: steps the phase memory addressing unit (3 x 3
// subapertures, ITER = 2, LANES = 8, so CHUNKS = 2 and WORDS = 2) through two
// frames with random idle cycles and checks chunk, slope word and lane, the
// look-ahead outputs and the last-of-column/row/frame flags against nested
// loops.
`timescale 1ns / 1ps
module tb_phase_addr_unit;
  import sparc_pkg::*;
  localparam int unsigned N = 3, IT = 2, LANES = 8;
  localparam int unsigned CHUNKS = chunks_of(N, LANES), WORDS = words_of(N, IT);
  int checks = 0, failures = 0;

  logic clk = 0, rst = 1, clear, step;
  logic [idx_w(CHUNKS)-1:0] chunk;
  logic [idx_w(N*WORDS)-1:0] slope_addr, nxt_slope_addr;
  logic [idx_w(IT)-1:0] slope_lane, nxt_slope_lane;
  logic col_last, row_last, frame_last;

  always #10 clk = ~clk;

  phase_addr_unit #(.N_SUB(N), .ITER(IT), .LANES(LANES)) dut (.clk, .rst, .clear, .step, .chunk, .slope_addr,
    .slope_lane, .nxt_slope_addr, .nxt_slope_lane, .col_last, .row_last, .frame_last);

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int seq_addr[$], seq_lane[$];
    clear = 0; step = 0;
    repeat (2) @(posedge clk);
    rst <= 0;
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    for (int f = 0; f < 2; f++)
      for (int sy = 0; sy < int'(N); sy++)
        for (int sx = 0; sx < int'(N); sx++)
          for (int k = 0; k < int'(CHUNKS); k++) begin
            int na, nl;
            // idle cycles: look-ahead equals current position
            while ($urandom % 3 == 0) begin
              step = 0; #1;
              chk(nxt_slope_addr == slope_addr && nxt_slope_lane == slope_lane, "look-ahead while idle");
              @(negedge clk);
            end
            step = 1; #1;
            chk(int'(chunk) == k, $sformatf("chunk %0d vs %0d", chunk, k));
            chk(int'(slope_addr) == sy * int'(WORDS) + sx / int'(IT) && int'(slope_lane) == sx % int'(IT), "slope position");
            chk(col_last == (k == int'(CHUNKS) - 1), "col_last");
            chk(row_last == (k == int'(CHUNKS) - 1 && sx == int'(N) - 1), "row_last");
            chk(frame_last == (k == int'(CHUNKS) - 1 && sx == int'(N) - 1 && sy == int'(N) - 1), "frame_last");
            // look-ahead: the position after this step
            begin
              int nsx, nsy;
              nsx = sx; nsy = sy;
              if (k == int'(CHUNKS) - 1) begin
                nsx = sx + 1;
                if (nsx == int'(N)) begin nsx = 0; nsy = (sy + 1) % int'(N); end
              end
              chk(int'(nxt_slope_addr) == nsy * int'(WORDS) + nsx / int'(IT) && int'(nxt_slope_lane) == nsx % int'(IT), "look-ahead");
            end
            @(negedge clk);
          end
    step = 0; #1;
    chk(chunk == 0 && slope_addr == 0, "wrapped to frame start");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
