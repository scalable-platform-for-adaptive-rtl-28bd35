// tb_core_reconstructor: drives the core reconstructor (3 x 3 subapertures,
// ITER = 2, LANES = 16, so one phase-memory word per column) with a modelled
// slope buffer and two modelled reconstructor FIFOs, for two frames.
// Frame 1: slopes appear slowly and the two banks deliver with different
// random delays, so the MVM waits for slopes, for memory, and for one bank
// while the other has data.  Frame 2: all slopes and matrix words are there
// at once, and each row must run at one step per clock.  Checks every output
// phase against an integer model of sum_c (A*x >>> 12) + (B*y >>> 12), the
// output order and count, the row request / row done counters, the number of
// steps, and that each of the waits and the phase-memory bypass happened.
`timescale 1ns / 1ps
module tb_core_reconstructor;
  import sparc_pkg::*;
  localparam int unsigned N = 3, IT = 2, LANES = 16;
  localparam int unsigned CHUNKS = chunks_of(N, LANES), WORDS = words_of(N, IT);
  localparam int unsigned NPH = (N + 1) * (N + 1), NCOL = N * N;
  localparam int unsigned SAW = idx_w(N * WORDS);
  int checks = 0, failures = 0;

  logic clk = 0, rst = 1;
  logic loop_enable, ddr_ready_a, ddr_ready_b;
  logic [CNT_W-1:0] frames_started, words_written, rows_req, rows_done;
  logic fifo_a_valid, fifo_b_valid, fifo_a_rd, fifo_b_rd;
  logic [LANES*MAT_W-1:0] fifo_a_data, fifo_b_data;
  logic [SAW-1:0] sl_raddr;
  logic [idx_w(IT)-1:0] sl_rlane;
  slope_pair_t sl_pair;
  logic phase_valid, frame_done, stall_slope, stall_mem, bank_skew, bypass_hit;
  logic [idx_w(NPH)-1:0] phase_index;
  logic signed [PHASE_W-1:0] phase_data;

  always #10 clk = ~clk;

  core_reconstructor #(.N_SUB(N), .ITER(IT), .LANES(LANES)) dut (
    .clk, .rst, .loop_enable, .ddr_ready_a, .ddr_ready_b, .frames_started, .words_written,
    .rows_req, .rows_done, .fifo_a_valid, .fifo_a_data, .fifo_a_rd, .fifo_b_valid, .fifo_b_data,
    .fifo_b_rd, .sl_raddr, .sl_rlane, .sl_pair, .phase_valid, .phase_index, .phase_data,
    .frame_done, .stall_slope, .stall_mem, .bank_skew, .bypass_hit);

  // test data of the current frame
  logic signed [MAT_W-1:0]   mat_a [NCOL][CHUNKS*LANES];
  logic signed [MAT_W-1:0]   mat_b [NCOL][CHUNKS*LANES];
  slope_pair_t               slopes [NCOL];
  int                        expected [NPH];
  int frame = 0;

  // slope buffer model (registered read)
  always_ff @(posedge clk) begin
    automatic int sy = int'(sl_raddr) / int'(WORDS);
    automatic int sx = (int'(sl_raddr) % int'(WORDS)) * int'(IT) + int'(sl_rlane);
    if (sy < int'(N) && sx < int'(N)) sl_pair <= slopes[sy * N + sx];
    else                              sl_pair <= '0;
  end

  // FIFO models: a row's words are queued some time after its request
  logic [LANES*MAT_W-1:0] qa[$], qb[$];
  int pend_a = 0, pend_b = 0, delay_a = 0, delay_b = 0, rows_seen = 0;
  logic gate_a, gate_b;
  assign fifo_a_valid = qa.size() > 0 && gate_a;
  assign fifo_b_valid = qb.size() > 0 && gate_b;
  assign fifo_a_data  = (qa.size() > 0) ? qa[0] : '0;
  assign fifo_b_data  = (qb.size() > 0) ? qb[0] : '0;

  function automatic logic [LANES*MAT_W-1:0] word_of(bit bank_b, int col, int k);
    logic [LANES*MAT_W-1:0] w;
    for (int l = 0; l < int'(LANES); l++)
      w[l*MAT_W +: MAT_W] = bank_b ? mat_b[col][k*LANES+l] : mat_a[col][k*LANES+l];
    return w;
  endfunction

  int row_q_a[$], row_q_b[$];
  // pops are applied just after the edge so the design samples the old head
  always @(posedge clk) begin
    automatic bit pop_a = fifo_a_rd, pop_b = fifo_b_rd;
    #1;
    if (!rst) begin
      if (pop_a) void'(qa.pop_front());
      if (pop_b) void'(qb.pop_front());
      if (int'(rows_req) != rows_seen) begin
        row_q_a.push_back(rows_seen % N); row_q_b.push_back(rows_seen % N);
        rows_seen++;
      end
      if (delay_a > 0) delay_a--;
      else if (row_q_a.size() > 0) begin
        automatic int r = row_q_a.pop_front();
        for (int c = r * N; c < (r + 1) * N; c++) for (int k = 0; k < int'(CHUNKS); k++) qa.push_back(word_of(0, c, k));
        delay_a = (frame == 1) ? int'($urandom % 30) : 0;
      end
      if (delay_b > 0) delay_b--;
      else if (row_q_b.size() > 0) begin
        automatic int r = row_q_b.pop_front();
        for (int c = r * N; c < (r + 1) * N; c++) for (int k = 0; k < int'(CHUNKS); k++) qb.push_back(word_of(1, c, k));
        delay_b = (frame == 1) ? int'($urandom % 30) : 0;
      end
      gate_a <= (frame == 1) ? ($urandom % 4 != 0) : 1'b1;
      gate_b <= (frame == 1) ? ($urandom % 4 != 0) : 1'b1;
    end
  end

  // event counters
  int n_stall_slope = 0, n_stall_mem = 0, n_skew = 0, n_bypass = 0, n_steps = 0, n_out = 0;
  int last_fire = -10, cyc = 0, row_gaps = 0, in_row = 0;
  always @(posedge clk) begin
    cyc++;
    if (stall_slope) n_stall_slope++;
    if (stall_mem) n_stall_mem++;
    if (bank_skew) n_skew++;
    if (bypass_hit) n_bypass++;
    if (fifo_a_rd) begin
      n_steps++;
      if (frame == 2 && in_row > 0 && last_fire != cyc - 1) row_gaps++;
      in_row = (in_row + 1) % int'(N * CHUNKS);
      last_fire = cyc;
    end
    if (phase_valid && !rst) begin
      checks++;
      if (int'(phase_index) != n_out || phase_data != expected[n_out]) begin
        failures++;
        if (failures < 10) $display("FAIL phase %0d (idx %0d): %0d vs %0d", n_out, phase_index, phase_data, expected[n_out]);
      end
      n_out++;
    end
  end

  task automatic make_frame();
    for (int c = 0; c < int'(NCOL); c++) begin
      slopes[c].x = 32'(int'($urandom % 400000) - 200000);
      slopes[c].y = 32'(int'($urandom % 400000) - 200000);
      for (int r = 0; r < int'(CHUNKS * LANES); r++) begin
        mat_a[c][r] = (r < int'(NPH)) ? 16'($urandom) : 16'd0;
        mat_b[c][r] = (r < int'(NPH)) ? 16'($urandom) : 16'd0;
      end
    end
    for (int r = 0; r < int'(NPH); r++) begin
      int acc;
      acc = 0;
      for (int c = 0; c < int'(NCOL); c++) begin
        acc += int'((longint'(mat_a[c][r]) * longint'(slopes[c].x)) >>> 12);
        acc += int'((longint'(mat_b[c][r]) * longint'(slopes[c].y)) >>> 12);
      end
      expected[r] = acc;
    end
  endtask

  initial begin
    #4000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    loop_enable = 0; ddr_ready_a = 0; ddr_ready_b = 0; words_written = 0;
    gate_a = 0; gate_b = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    repeat (10) @(posedge clk);
    loop_enable <= 1;
    repeat (10) @(posedge clk);
    checks++; if (frames_started != 0) begin failures++; $display("FAIL started before DDR ready"); end
    ddr_ready_a <= 1; ddr_ready_b <= 1;
    for (int f = 1; f <= 2; f++) begin
      frame = f;
      make_frame();
      n_out = 0;
      wait (int'(frames_started) == f);
      if (f == 1) begin
        // slopes trickle in: one word every 25 clocks
        for (int w = 1; w <= int'(N * WORDS); w++) begin
          repeat (25) @(posedge clk);
          words_written <= CNT_W'(w);
        end
      end else begin
        words_written <= CNT_W'(2 * N * WORDS);
      end
      @(posedge frame_done);
      @(posedge clk);
      checks++; if (n_out != int'(NPH)) begin failures++; $display("FAIL %0d phases out", n_out); end
      checks++; if (int'(rows_req) != f * int'(N) || int'(rows_done) != f * int'(N)) begin
        failures++; $display("FAIL rows req %0d done %0d", rows_req, rows_done); end
      checks++; if (n_steps != f * int'(NCOL * CHUNKS)) begin failures++; $display("FAIL steps %0d", n_steps); end
      if (f == 2) loop_enable <= 0;
    end
    repeat (50) @(posedge clk);
    checks++; if (frames_started != 2) begin failures++; $display("FAIL frame started with loop disabled"); end
    checks++; if (row_gaps != 0) begin failures++; $display("FAIL %0d idle clocks inside rows with all data present", row_gaps); end
    checks++; if (n_stall_slope == 0) begin failures++; $display("FAIL never waited for slopes"); end
    checks++; if (n_stall_mem == 0) begin failures++; $display("FAIL never waited for memory"); end
    checks++; if (n_skew == 0) begin failures++; $display("FAIL banks never skewed"); end
    checks++; if (n_bypass == 0) begin failures++; $display("FAIL phase bypass never used"); end
    $display("stall_slope %0d stall_mem %0d skew %0d bypass %0d", n_stall_slope, n_stall_mem, n_skew, n_bypass);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
