// core_reconstructor: the core reconstructor of the reconstructor clock
// domain.  It holds the state machine that controls the rest of the platform,
// the phase memory and its addressing unit, and the array of multipliers that
// performs the matrix-vector multiplication.
//
// States (names as in the published design):
//   INITIALIZE      clear the phase memory; wait until both DDR banks hold the
//                   matrix (ddr_ready_a/b) and loop_enable is high; then start
//                   one frame of pixel acquisition (frames_started + 1).
//   SLOPE_TRANSFER  wait until the first slopes of the next row of
//                   subapertures are in the slope buffer, then ask both DDR
//                   state machines for that row's matrix section
//                   (rows_req + 1).
//   MVM_CONTROL     one multiply-accumulate step per cycle: each step takes
//                   one wide word from each reconstructor FIFO, the slope pair
//                   of the current column and one phase-memory word, and
//                   writes back phase + A*x + B*y.  A step waits (stall) while
//                   the column's slope has not been computed yet or either
//                   FIFO is empty; the latter also absorbs the different
//                   delays of the two banks.  After a row's last step it
//                   reports the row done (rows_done + 1) and goes back to
//                   SLOPE_TRANSFER, or to PHASE_OUTPUT after the last row.
//   PHASE_OUTPUT    stream the (n+1)^2 phases out, one per cycle, on
//                   phase_valid/phase_index/phase_data, clearing the memory
//                   behind them, pulse frame_done and return to INITIALIZE.
//
// Because a step waits only for the data it needs, the same control works
// whether slope computation is ahead of the matrix stream (large systems) or
// behind it (small systems, where the MVM of a row waits for the next row's
// pixels).
//
// Pipeline: in the step cycle the FIFO words and slopes are registered and
// the phase word is read; in the next cycle mvm_unit adds the products and the
// result is written back.  The phase memory's write-first bypass covers a
// read of the word being written in the same cycle.  The slope buffer is
// addressed one cycle ahead from the addressing unit's next position.
// Throughput: one step (LANES matrix rows of one column, from each bank) per
// clock when data is there; a frame needs N_SUB^2 * CHUNKS steps.
//
// Following the published design: the four states and their roles, the
// multiply-accumulate equation, LANES parallel lanes per bank, phases held in
// block RAM.  The counters, the handshakes through Gray-coded counters, the
// pipeline and the output stream format are this implementation's choices.
module core_reconstructor
  import sparc_pkg::*;
#(
  parameter int unsigned N_SUB = N_SUB_D,
  parameter int unsigned ITER  = ITER_D,
  parameter int unsigned LANES = lanes_of(MIG_W_D, NFIFO_D),
  localparam int unsigned CHUNKS = chunks_of(N_SUB, LANES),
  localparam int unsigned WORDS  = words_of(N_SUB, ITER),
  localparam int unsigned SAW    = idx_w(N_SUB * WORDS),
  localparam int unsigned BW     = idx_w(ITER),
  localparam int unsigned NPH    = (N_SUB + 1) * (N_SUB + 1),
  localparam int unsigned PIW    = idx_w(NPH)
) (
  input  logic                            clk,
  input  logic                            rst,
  input  logic                            loop_enable,
  input  logic                            ddr_ready_a,     // synchronised
  input  logic                            ddr_ready_b,     // synchronised
  output logic [CNT_W-1:0]                frames_started,
  input  logic [CNT_W-1:0]                words_written,   // synchronised
  output logic [CNT_W-1:0]                rows_req,
  output logic [CNT_W-1:0]                rows_done,
  // reconstructor FIFOs
  input  logic                            fifo_a_valid,
  input  logic [LANES*MAT_W-1:0]          fifo_a_data,
  output logic                            fifo_a_rd,
  input  logic                            fifo_b_valid,
  input  logic [LANES*MAT_W-1:0]          fifo_b_data,
  output logic                            fifo_b_rd,
  // slope buffer read port
  output logic [SAW-1:0]                  sl_raddr,
  output logic [BW-1:0]                   sl_rlane,
  input  slope_pair_t                     sl_pair,
  // phase output stream
  output logic                            phase_valid,
  output logic [PIW-1:0]                  phase_index,
  output logic signed [PHASE_W-1:0]       phase_data,
  output logic                            frame_done,
  // status
  output logic                            stall_slope,
  output logic                            stall_mem,
  output logic                            bank_skew,
  output logic                            bypass_hit
);
  typedef enum logic [1:0] {INITIALIZE, SLOPE_TRANSFER, MVM_CONTROL, PHASE_OUTPUT} state_t;
  localparam int unsigned CW = idx_w(CHUNKS);

  state_t state;

  // addressing unit
  logic           pa_clear, pa_step;
  logic [CW-1:0]  chunk;
  logic [SAW-1:0] slope_addr, nxt_slope_addr;
  logic [BW-1:0]  nxt_slope_lane;
  logic           row_last, frame_last;

  // phase memory
  logic                              pm_we;
  logic [CW-1:0]                     pm_waddr, pm_raddr;
  logic [LANES-1:0][PHASE_W-1:0]     pm_wdata, pm_rdata, mac_out;

  // MAC pipeline stage
  logic                              s1_valid;
  logic [CW-1:0]                     s1_chunk;
  logic [LANES*MAT_W-1:0]            s1_a, s1_b;
  slope_pair_t                       s1_slope;

  // slopes
  logic [CNT_W-1:0] frame_base, words_avail;
  logic             slope_ok_q;
  logic             fire;

  // init / output counters
  logic [CW-1:0]    clr_cnt;
  logic             clr_done;
  logic [PIW-1:0]   out_idx, out_idx_q;
  logic             out_valid_q, out_run;

  phase_addr_unit #(.N_SUB(N_SUB), .ITER(ITER), .LANES(LANES)) u_addr (
    .clk, .rst, .clear(pa_clear), .step(pa_step),
    .chunk, .slope_addr, .slope_lane(), .nxt_slope_addr, .nxt_slope_lane,
    .col_last(), .row_last, .frame_last
  );

  phase_memory #(.LANES(LANES), .DEPTH(CHUNKS)) u_pmem (
    .clk, .we(pm_we), .waddr(pm_waddr), .wdata(pm_wdata),
    .raddr(pm_raddr), .rdata(pm_rdata), .bypass_hit
  );

  mvm_unit #(.LANES(LANES)) u_mvm (
    .mat_a(s1_a), .mat_b(s1_b), .x_slope(s1_slope.x), .y_slope(s1_slope.y),
    .phase_in(pm_rdata), .phase_out(mac_out)
  );

  assign words_avail = words_written - frame_base;

  // a step fires when the slope, bank A and bank B data are all present
  assign fire      = (state == MVM_CONTROL) && slope_ok_q && fifo_a_valid && fifo_b_valid;
  assign fifo_a_rd = fire;
  assign fifo_b_rd = fire;
  assign pa_step   = fire;
  assign pa_clear  = (state == INITIALIZE);

  assign sl_raddr  = nxt_slope_addr;
  assign sl_rlane  = nxt_slope_lane;

  assign stall_slope = ((state == MVM_CONTROL) && !slope_ok_q) ||
                       ((state == SLOPE_TRANSFER) && !(words_avail > CNT_W'(slope_addr)));
  assign stall_mem   = (state == MVM_CONTROL) && slope_ok_q && !(fifo_a_valid && fifo_b_valid);
  assign bank_skew   = (state == MVM_CONTROL) && (fifo_a_valid != fifo_b_valid);

  // phase memory ports
  always_comb begin
    pm_raddr = chunk;
    pm_we    = 1'b0;
    pm_waddr = s1_chunk;
    pm_wdata = mac_out;
    if (state == PHASE_OUTPUT) pm_raddr = CW'(out_idx / LANES);
    if (s1_valid) begin
      pm_we = 1'b1;
    end else if (state == INITIALIZE && !clr_done) begin
      pm_we    = 1'b1;
      pm_waddr = clr_cnt;
      pm_wdata = '0;
    end else if (out_valid_q && ((32'(out_idx_q) % LANES) == LANES - 1 || 32'(out_idx_q) == NPH - 1)) begin
      pm_we    = 1'b1;
      pm_waddr = CW'(out_idx_q / LANES);
      pm_wdata = '0;
    end
  end

  assign phase_valid = out_valid_q;
  assign phase_index = out_idx_q;
  assign phase_data  = pm_rdata[32'(out_idx_q) % LANES];

  always_ff @(posedge clk) begin
    if (rst) begin
      state          <= INITIALIZE;
      frames_started <= '0;
      rows_req       <= '0;
      rows_done      <= '0;
      frame_base     <= '0;
      slope_ok_q     <= 1'b0;
      s1_valid       <= 1'b0;
      s1_chunk       <= '0;
      clr_cnt        <= '0;
      clr_done       <= 1'b0;
      out_idx        <= '0;
      out_idx_q      <= '0;
      out_valid_q    <= 1'b0;
      out_run        <= 1'b0;
      frame_done     <= 1'b0;
    end else begin
      frame_done  <= 1'b0;
      // slope for the column of the next step: the word has been written
      slope_ok_q  <= (words_avail > CNT_W'(nxt_slope_addr));
      // MAC pipeline
      s1_valid    <= fire;
      if (fire) begin
        s1_chunk <= chunk;
        s1_a     <= fifo_a_data;
        s1_b     <= fifo_b_data;
        s1_slope <= sl_pair;
      end
      // phase output pipeline
      out_valid_q <= out_run;
      out_idx_q   <= out_idx;

      unique case (state)
        INITIALIZE: begin
          if (!clr_done) begin
            clr_cnt <= clr_cnt + 1'b1;
            if (clr_cnt == CW'(CHUNKS - 1)) clr_done <= 1'b1;
          end else if (ddr_ready_a && ddr_ready_b && loop_enable) begin
            frames_started <= frames_started + 1'b1;
            state          <= SLOPE_TRANSFER;
          end
        end
        SLOPE_TRANSFER: begin
          if (words_avail > CNT_W'(slope_addr)) begin
            rows_req <= rows_req + 1'b1;
            state    <= MVM_CONTROL;
          end
        end
        MVM_CONTROL: begin
          if (fire && row_last) begin
            rows_done <= rows_done + 1'b1;
            if (frame_last) begin
              state   <= PHASE_OUTPUT;
              out_idx <= '0;
              out_run <= 1'b0;
            end else begin
              state <= SLOPE_TRANSFER;
            end
          end
        end
        PHASE_OUTPUT: begin
          // the first cycle lets the last write-back land
          if (!s1_valid) begin
            if (!out_run && out_idx == '0) begin
              out_run <= 1'b1;
            end else if (out_run) begin
              if (out_idx == PIW'(NPH - 1)) out_run <= 1'b0;
              else                          out_idx <= out_idx + 1'b1;
            end
          end
          if (out_valid_q && out_idx_q == PIW'(NPH - 1)) begin
            frame_done <= 1'b1;
            frame_base <= frame_base + CNT_W'(N_SUB * WORDS);
            state      <= INITIALIZE;
            clr_cnt    <= '0;
            clr_done   <= 1'b0;
            out_idx    <= '0;
          end
        end
        default: state <= INITIALIZE;
      endcase
    end
  end

  a_fifo_a: assert property (@(posedge clk) disable iff (rst) fifo_a_rd |-> fifo_a_valid);
  a_fifo_b: assert property (@(posedge clk) disable iff (rst) fifo_b_rd |-> fifo_b_valid);
endmodule
