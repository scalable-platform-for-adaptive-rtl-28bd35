// tb_ddr3_sm: runs one bank's DDR3 state machine against the behavioural
// memory-controller model (random ready, random read latency) for 3 x 3
// subapertures with 64-bit controller words and nfifo = 2 (LANES = 8,
// CHUNKS = 2, so 12 words per row of subapertures, 36 in all).  Checks that
// ddr_ready stays low until the whole matrix is written, that the memory holds
// exactly the host stream, that each requested row returns its 12 words in
// order from the right place (rows 0,1,2 then 0 again for the next frame),
// that reads never outrun the modelled FIFO space, and that no new row is
// read before the previous one is reported done.
`timescale 1ns / 1ps
module tb_ddr3_sm;
  import sparc_pkg::*;
  localparam int unsigned N = 3, DW = 64, NF = 2, AW = 12, FBW = 8, CAP = 6;
  localparam int unsigned ROW_BEATS = 12, TOTAL = 36;
  int checks = 0, failures = 0;

  logic clk = 0, rst = 1;
  logic calib_done, mw_valid, mw_ready, app_en, app_cmd, app_rdy, app_wdf_wren, app_wdf_rdy;
  logic app_rd_data_valid, ddr_ready;
  logic [DW-1:0] mw_data, app_wdf_data, app_rd_data;
  logic [AW-1:0] app_addr;
  logic [CNT_W-1:0] rows_req, rows_mult_done;
  logic [FBW-1:0] wr_free_beats;
  int unsigned n_writes, n_reads, bad_cmds;
  int occupancy = 0, max_occ = 0, got = 0;

  always #2.5 clk = ~clk;

  function automatic logic [DW-1:0] host_word(int i);
    return {32'(i * 2654435761), 32'(i) ^ 32'h5A5A0000};
  endfunction

  ddr3_sm #(.N_SUB(N), .DATA_W(DW), .NFIFO(NF), .ADDR_W(AW), .FBW(FBW)) dut (
    .clk, .rst, .calib_done, .mw_valid, .mw_data, .mw_ready,
    .app_en, .app_cmd, .app_addr, .app_rdy, .app_wdf_wren, .app_wdf_data, .app_wdf_rdy,
    .app_rd_data_valid, .rows_req, .rows_mult_done, .wr_free_beats, .ddr_ready);

  ddr_mig_model #(.DATA_W(DW), .ADDR_W(AW), .WORDS(64), .SEED(7)) mig (
    .clk, .rst, .calib_done, .app_en, .app_cmd, .app_addr, .app_rdy, .app_wdf_wren, .app_wdf_data,
    .app_wdf_rdy, .app_rd_data, .app_rd_data_valid, .n_writes, .n_reads, .bad_cmds);

  // modelled FIFO: CAP words of space, drained at random
  assign wr_free_beats = FBW'(CAP - occupancy);
  always @(posedge clk) begin
    automatic int drain = (occupancy > 0 && ($urandom % 3 == 0)) ? 1 : 0;
    occupancy = occupancy + int'(app_rd_data_valid) - drain;
    if (occupancy > max_occ) max_occ = occupancy;
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int expect_base;
  always @(posedge clk) begin
    if (app_rd_data_valid) begin
      checks++;
      if (app_rd_data != host_word(expect_base + got)) begin
        failures++; $display("FAIL read %0d of row at %0d", got, expect_base);
      end
      got++;
    end
  end

  initial begin
    int sent;
    mw_valid = 0; mw_data = 0; rows_req = 0; rows_mult_done = 0;
    repeat (4) @(posedge clk);
    rst <= 0;
    sent = 0;
    while (sent < int'(TOTAL)) begin
      @(negedge clk);
      checks++; if (ddr_ready) begin failures++; $display("FAIL ready before matrix written"); end
      mw_valid = ($urandom % 4) != 0; mw_data = host_word(sent);
      @(posedge clk);
      if (mw_valid && mw_ready) sent++;
    end
    @(negedge clk); mw_valid = 0;
    repeat (3) @(posedge clk);
    checks++; if (!ddr_ready) begin failures++; $display("FAIL not ready"); end
    checks++; if (mig.n_writes != TOTAL || bad_cmds != 0) begin failures++; $display("FAIL writes %0d bad %0d", mig.n_writes, bad_cmds); end
    for (int i = 0; i < int'(TOTAL); i++) begin
      checks++; if (mig.mem[i] != host_word(i)) begin failures++; $display("FAIL mem %0d", i); end
    end
    for (int r = 0; r < 4; r++) begin
      expect_base = (r % int'(N)) * int'(ROW_BEATS); got = 0;
      @(negedge clk); rows_req = CNT_W'(r + 1);
      wait (got == int'(ROW_BEATS));
      // a further request must wait until the row is reported done
      @(negedge clk); rows_req = CNT_W'(r + 2);
      repeat (60) @(posedge clk);
      checks++; if (got != int'(ROW_BEATS)) begin failures++; $display("FAIL read beyond row %0d", got); end
      @(negedge clk); rows_req = CNT_W'(r + 1); rows_mult_done = CNT_W'(r + 1);
      repeat (4) @(posedge clk);
    end
    checks++; if (max_occ > int'(CAP)) begin failures++; $display("FAIL FIFO overrun %0d", max_occ); end
    checks++; if (mig.n_reads != 4 * ROW_BEATS) begin failures++; $display("FAIL reads %0d", mig.n_reads); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
