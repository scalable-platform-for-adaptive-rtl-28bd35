// tb_sparc_top_full: end-to-end test of the whole controller with
// every parameter at its default (50 x 50 subapertures, 4 x 4 pixels,
// ITER = 16, 512-bit controller words at 200 MHz, nfifo = 4, 128 lanes per
// bank), one complete frame.  The frame time, from first pixel to last
// phase, must lie between the bandwidth bound (N_SUB^2 * CHUNKS recon clocks)
// and the 1.283 ms measured on the published prototype.
//
// The host stream writes both banks' halves of a reconstruction matrix given
// by a formula; behavioural memory-controller models with random latency hold
// them.  The camera stream sends frames of pixels given by another formula.
// The expected phases are computed independently in the testbench: the
// centre-of-gravity slopes of every subaperture, then
// phase[r] = sum over columns c of (A[r][c]*x[c] >>> 12) + (B[r][c]*y[c] >>> 12)
// with 32-bit wrap.  Every phase that comes out is compared, in order.
// The test also counts how often the design waited for slopes (the matrix
// stream ahead of slope computation), how often slopes of a new row were
// complete while the multiply-accumulate was still behind (slope computation
// ahead), waits for memory, bank skew, phase-memory bypass and frames looped,
// and fails a mechanism that never happened.
`timescale 1ns / 1ps
module tb_sparc_top_full;
  import sparc_pkg::*;
  localparam int unsigned N = N_SUB_D, P = PIX_D, IT = ITER_D, MIGW = MIG_W_D, NF = NFIFO_D, FRAMES = 1;
  localparam int unsigned LAT_MIN = 8, LAT_MAX = 24;
  localparam int unsigned LANES  = lanes_of(MIGW, NF);
  localparam int unsigned CHUNKS = chunks_of(N, LANES);
  localparam int unsigned NPH    = (N + 1) * (N + 1);
  localparam int unsigned NCOL   = N * N;
  localparam int unsigned EPB    = MIGW / MAT_W;
  localparam int unsigned TOTAL  = NCOL * CHUNKS * NF;
  localparam int unsigned AW     = 28;
  int checks = 0, failures = 0;

  logic clk_pixel = 0, clk_slope = 0, clk_recon = 0, clk_mem_a = 0, clk_mem_b = 0;
  logic arst_n = 1, loop_enable = 0;
  initial #1 arst_n = 0;  // a falling edge, so every reset synchroniser asserts
  always #5     clk_pixel = ~clk_pixel;   // 100 MHz
  always #40    clk_slope = ~clk_slope;   // 12.5 MHz
  always #10    clk_recon = ~clk_recon;   // 50 MHz
  always #2.5   clk_mem_a = ~clk_mem_a;   // 200 MHz
  always #2.55  clk_mem_b = ~clk_mem_b;   // slightly different, unrelated clock

  logic [PIX_W-1:0] pix_data;
  logic pix_en;
  logic mwa_valid, mwa_ready, mwb_valid, mwb_ready;
  logic [MIGW-1:0] mwa_data, mwb_data;
  logic a_calib_done, a_app_en, a_app_cmd, a_app_rdy, a_app_wdf_wren, a_app_wdf_rdy, a_app_rd_data_valid;
  logic b_calib_done, b_app_en, b_app_cmd, b_app_rdy, b_app_wdf_wren, b_app_wdf_rdy, b_app_rd_data_valid;
  logic [AW-1:0] a_app_addr, b_app_addr;
  logic [MIGW-1:0] a_app_wdf_data, a_app_rd_data, b_app_wdf_data, b_app_rd_data;
  logic phase_valid, frame_done, ddr_ready, pixel_overflow, pixel_overrun, fifo_overflow;
  logic stall_slope, stall_mem, bank_skew, phase_bypass, acquiring, computing_slopes;
  logic [idx_w(NPH)-1:0] phase_index;
  logic signed [PHASE_W-1:0] phase_data;
  int unsigned a_nw, a_nr, a_bad, b_nw, b_nr, b_bad;

  sparc_top dut (
    .clk_pixel, .clk_slope, .clk_recon, .clk_mem_a, .clk_mem_b, .arst_n, .loop_enable,
    .pix_data, .pix_en,
    .mwa_valid, .mwa_data, .mwa_ready, .mwb_valid, .mwb_data, .mwb_ready,
    .a_calib_done, .a_app_en, .a_app_cmd, .a_app_addr, .a_app_rdy, .a_app_wdf_wren, .a_app_wdf_data,
    .a_app_wdf_rdy, .a_app_rd_data, .a_app_rd_data_valid,
    .b_calib_done, .b_app_en, .b_app_cmd, .b_app_addr, .b_app_rdy, .b_app_wdf_wren, .b_app_wdf_data,
    .b_app_wdf_rdy, .b_app_rd_data, .b_app_rd_data_valid,
    .phase_valid, .phase_index, .phase_data, .frame_done,
    .ddr_ready, .pixel_overflow, .pixel_overrun, .fifo_overflow, .stall_slope, .stall_mem, .bank_skew, .phase_bypass,
    .acquiring, .computing_slopes
  );

  logic rst_a, rst_b;
  assign rst_a = !arst_n;
  assign rst_b = !arst_n;

  ddr_mig_model #(.DATA_W(MIGW), .ADDR_W(AW), .WORDS(TOTAL), .MIN_LAT(LAT_MIN), .MAX_LAT(LAT_MAX), .SEED(11)) mig_a (
    .clk(clk_mem_a), .rst(rst_a), .calib_done(a_calib_done), .app_en(a_app_en), .app_cmd(a_app_cmd),
    .app_addr(a_app_addr), .app_rdy(a_app_rdy), .app_wdf_wren(a_app_wdf_wren), .app_wdf_data(a_app_wdf_data),
    .app_wdf_rdy(a_app_wdf_rdy), .app_rd_data(a_app_rd_data), .app_rd_data_valid(a_app_rd_data_valid),
    .n_writes(a_nw), .n_reads(a_nr), .bad_cmds(a_bad));
  ddr_mig_model #(.DATA_W(MIGW), .ADDR_W(AW), .WORDS(TOTAL), .MIN_LAT(LAT_MIN), .MAX_LAT(LAT_MAX), .SEED(23)) mig_b (
    .clk(clk_mem_b), .rst(rst_b), .calib_done(b_calib_done), .app_en(b_app_en), .app_cmd(b_app_cmd),
    .app_addr(b_app_addr), .app_rdy(b_app_rdy), .app_wdf_wren(b_app_wdf_wren), .app_wdf_data(b_app_wdf_data),
    .app_wdf_rdy(b_app_wdf_rdy), .app_rd_data(b_app_rd_data), .app_rd_data_valid(b_app_rd_data_valid),
    .n_writes(b_nw), .n_reads(b_nr), .bad_cmds(b_bad));

  // ---------------- test data ----------------
  // matrix element of matrix row r (actuator) and slope column c, bank 0 = x, 1 = y
  function automatic logic signed [MAT_W-1:0] mat_elem(int bank, int r, int c);
    return MAT_W'(((r * 131 + c * 71 + bank * 17 + (r * c) % 97) % 8191) - 4095);
  endfunction

  function automatic logic [PIX_W-1:0] pix_val(int f, int x, int y);
    return PIX_W'((x * 37 + y * 91 + f * 53 + x * y * 7) % 1021 + ((x + y + f) % 5) * 100);
  endfunction

  function automatic logic [MIGW-1:0] host_word(int bank, int w);
    logic [MIGW-1:0] d;
    int c, inner, k, beat;
    c = w / int'(CHUNKS * NF); inner = w % int'(CHUNKS * NF); k = inner / int'(NF); beat = inner % int'(NF);
    for (int j = 0; j < int'(EPB); j++) begin
      int r;
      r = k * int'(LANES) + beat * int'(EPB) + j;
      d[j*MAT_W +: MAT_W] = (r < int'(NPH)) ? mat_elem(bank, r, c) : '0;
    end
    return d;
  endfunction

  function automatic longint cog(int f, int sx, int sy, bit ydir);
    longint s, n;
    s = 0; n = 0;
    for (int py = 0; py < int'(P); py++)
      for (int px = 0; px < int'(P); px++) begin
        longint v;
        v = longint'(pix_val(f, sx * int'(P) + px, sy * int'(P) + py));
        s += v;
        n += v * (ydir ? (2 * py - (int'(P) - 1)) : (2 * px - (int'(P) - 1)));
      end
    return (s == 0) ? 0 : (n * 65536) / (2 * s);
  endfunction

  int expected [NPH];
  task automatic compute_expected(int f);
    int xs [NCOL], ys [NCOL];
    for (int c = 0; c < int'(NCOL); c++) begin
      xs[c] = int'(cog(f, c % int'(N), c / int'(N), 0));
      ys[c] = int'(cog(f, c % int'(N), c / int'(N), 1));
    end
    for (int r = 0; r < int'(NPH); r++) begin
      int acc;
      acc = 0;
      for (int c = 0; c < int'(NCOL); c++) begin
        acc += int'((longint'(mat_elem(0, r, c)) * longint'(xs[c])) >>> 12);
        acc += int'((longint'(mat_elem(1, r, c)) * longint'(ys[c])) >>> 12);
      end
      expected[r] = acc;
    end
  endtask

  // ---------------- host matrix streams ----------------
  int wa = 0, wb = 0;
  always @(posedge clk_mem_a) begin
    automatic int nxt = wa + ((mwa_valid && mwa_ready) ? 1 : 0);
    wa <= nxt;
    mwa_valid <= arst_n && (nxt < int'(TOTAL));
    mwa_data  <= host_word(0, nxt);
  end
  always @(posedge clk_mem_b) begin
    automatic int nxt = wb + ((mwb_valid && mwb_ready) ? 1 : 0);
    wb <= nxt;
    mwb_valid <= arst_n && (nxt < int'(TOTAL));
    mwb_data  <= host_word(1, nxt);
  end

  // ---------------- event counters and output checker ----------------
  int n_wait_slopes = 0, n_slopes_ahead = 0, n_stall_mem = 0, n_skew = 0, n_bypass = 0;
  int n_out = 0, n_frames = 0, frame = 0;
  logic [CNT_W-1:0] rows_written_q = 0;
  always @(posedge clk_recon) begin
    if (arst_n) begin
      // waiting for slopes in the middle of a frame: the matrix stream is ahead
      if (stall_slope && (int'(dut.rows_done) % int'(N)) != 0) n_wait_slopes++;
      if (stall_mem) n_stall_mem++;
      if (bank_skew) n_skew++;
      if (phase_bypass) n_bypass++;
      if (phase_valid) begin
        checks++;
        if (int'(phase_index) != n_out || phase_data != expected[n_out]) begin
          failures++;
          if (failures < 10) $display("FAIL frame %0d phase %0d (idx %0d): %0d vs %0d", frame, n_out, phase_index, phase_data, expected[n_out]);
        end
        n_out++;
      end
      if (frame_done) n_frames++;
    end
  end
  // a row of pixels completed while the multiply-accumulate is more than one row behind
  always @(posedge clk_pixel) begin
    if (arst_n && dut.rows_written != rows_written_q) begin
      rows_written_q <= dut.rows_written;
      if ((int'(dut.rows_written) % int'(N)) > 1 &&
          int'(dut.rows_done) + 1 < int'(dut.rows_written)) n_slopes_ahead++;
    end
  end

  initial begin
    #(6000000);
    failures++;
    $display("watchdog: frame %0d, %0d phases out", frame, n_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint t_start, t_end;
  initial begin
    pix_en = 0; pix_data = 0;
    mwa_valid = 0; mwb_valid = 0; mwa_data = 0; mwb_data = 0;
    repeat (5) @(posedge clk_slope);
    arst_n = 1;
    loop_enable = 1;
    wait (ddr_ready);
    $display("matrix written at %0d ns", $time);
    checks++;
    if (a_nw != TOTAL || b_nw != TOTAL || a_bad != 0 || b_bad != 0) begin
      failures++; $display("FAIL matrix write %0d %0d", a_nw, b_nw);
    end
    for (int f = 0; f < int'(FRAMES); f++) begin
      frame = f;
      compute_expected(f);
      n_out = 0;
      wait (acquiring);
      t_start = $time;
      for (int y = 0; y < int'(N * P); y++)
        for (int x = 0; x < int'(N * P); x++) begin
          // frame 0 of the multi-frame test is sent slowly (one pixel per 8 clocks)
          if (FRAMES > 1 && f == 0) begin
            @(posedge clk_pixel); pix_en <= 0;
            repeat (6) @(posedge clk_pixel);
          end
          @(posedge clk_pixel);
          pix_en <= 1; pix_data <= pix_val(f, x, y);
        end
      @(posedge clk_pixel); pix_en <= 0;
      if (f == int'(FRAMES) - 1) loop_enable <= 0;
      wait (n_frames == f + 1);
      t_end = $time;
      $display("frame %0d: first pixel to last phase %0d ns", f, t_end - t_start);
      checks++;
      if (n_out != int'(NPH)) begin failures++; $display("FAIL frame %0d: %0d phases", f, n_out); end
    end
    repeat (20) @(posedge clk_recon);
    checks++; if (pixel_overflow || pixel_overrun || fifo_overflow) begin failures++; $display("FAIL overflow"); end
    checks++; if (a_nr != int'(FRAMES) * TOTAL || b_nr != int'(FRAMES) * TOTAL) begin
      failures++; $display("FAIL reads %0d %0d", a_nr, b_nr); end
    $display("waits for slopes %0d, rows with slopes ahead %0d, waits for memory %0d, bank skew %0d, bypass %0d, frames %0d",
             n_wait_slopes, n_slopes_ahead, n_stall_mem, n_skew, n_bypass, n_frames);
    // at full size the matrix stream is the bottleneck (slopes run ahead)
    checks++; if (n_slopes_ahead == 0) begin failures++; $display("FAIL slopes never ahead of the MVM"); end
    checks++; if (n_stall_mem == 0) begin failures++; $display("FAIL never waited for memory"); end
    checks++; if (n_skew == 0) begin failures++; $display("FAIL banks never skewed"); end
    // frame latency: no faster than one MAC step per recon clock allows, and no
    // slower than the 1.283 ms the published prototype reports for 50 x 50
    checks++; if (t_end - t_start < longint'(NCOL * CHUNKS) * 20 || t_end - t_start > 1283000) begin
      failures++; $display("FAIL frame took %0d ns", t_end - t_start); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
