// ddr3_sm: the DDR3 state machine of one memory bank (one instance per bank,
// each running on its bank's memory clock).
//
// INITIALIZE     wait for the memory controller's calibration to complete.
// WRITE_MATRIX   copy the reconstruction matrix section of this bank, as it
//                arrives from the host (mw_valid/mw_data/mw_ready), to
//                consecutive controller addresses 0 .. TOTAL_BEATS-1.
// DDR_READY      ddr_ready is high; wait until the reconstructor has requested
//                a new row of subapertures (rows_req ahead of rows served).
// READ_MATRIX    issue ROW_BEATS read commands for that row, never more than
//                the reconstructor FIFO has room for (wr_free_beats minus the
//                reads still in flight); then wait until the reconstructor
//                reports the multiplication for the row done (rows_mult_done)
//                and return to DDR_READY.
//
// Matrix layout in each bank, in IN_W-bit controller words: column c
// (subaperture c of the slope vector) occupies CHUNKS*NFIFO words starting at
// c*CHUNKS*NFIFO; within it, element row r = k*LANES + l sits in wide word k,
// lane l (lanes beyond (n+1)^2 are zero padding).  Bank A holds the part
// multiplied by x slopes, bank B the part multiplied by y slopes, so one row of
// subapertures is one contiguous block of ROW_BEATS words in each bank.
//
// The controller interface is a simplified memory-controller user interface:
// a command (app_en, app_cmd 0 = write / 1 = read, app_addr in controller
// words) is taken when app_rdy is high; a write carries its data in the same
// cycle (app_wdf_wren/app_wdf_data, needing app_wdf_rdy).  Read data returns
// in order on app_rd_data_valid after an unknown delay.  The host's matrix
// words go to app_wdf_data unregistered: this machine only steers the
// handshake, so those output bits are wired straight to mw_data.
//
// Following the published design: the four state names and the "slopes of a
// row available" / "multiplication for a row done" events, one bank per slope
// direction, matrix written from the host then read row by row.  The layout,
// the controller handshake and the flow control are this implementation's.
module ddr3_sm
  import sparc_pkg::*;
#(
  parameter int unsigned N_SUB  = N_SUB_D,
  parameter int unsigned DATA_W = MIG_W_D,
  parameter int unsigned NFIFO  = NFIFO_D,
  parameter int unsigned ADDR_W = 28,
  parameter int unsigned FBW    = 8,
  localparam int unsigned LANES      = lanes_of(DATA_W, NFIFO),
  localparam int unsigned CHUNKS     = chunks_of(N_SUB, LANES),
  localparam int unsigned ROW_BEATS  = N_SUB * CHUNKS * NFIFO,
  localparam int unsigned TOTAL_BEATS = N_SUB * ROW_BEATS
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              calib_done,
  // matrix from the host
  input  logic              mw_valid,
  input  logic [DATA_W-1:0] mw_data,
  output logic              mw_ready,
  // memory controller user interface
  output logic              app_en,
  output logic              app_cmd,
  output logic [ADDR_W-1:0] app_addr,
  input  logic              app_rdy,
  output logic              app_wdf_wren,
  output logic [DATA_W-1:0] app_wdf_data,
  input  logic              app_wdf_rdy,
  input  logic              app_rd_data_valid,
  // reconstructor side (counters already synchronised into this clock)
  input  logic [CNT_W-1:0]  rows_req,
  input  logic [CNT_W-1:0]  rows_mult_done,
  input  logic [FBW-1:0]    wr_free_beats,
  output logic              ddr_ready
);
  typedef enum logic [1:0] {INITIALIZE, WRITE_MATRIX, DDR_READY, READ_MATRIX} state_t;
  localparam int unsigned SXW = idx_w(N_SUB);
  localparam int unsigned RBW = idx_w(ROW_BEATS + 1);

  state_t            state;
  logic [ADDR_W-1:0] waddr;
  logic [ADDR_W-1:0] rbase;
  logic [RBW-1:0]    issued;
  logic [FBW-1:0]    inflight;
  logic [CNT_W-1:0]  rows_served;
  logic [SXW-1:0]    row_in_frame;
  logic              rd_issue, wr_issue;

  assign ddr_ready = (state == DDR_READY) || (state == READ_MATRIX);

  assign wr_issue = (state == WRITE_MATRIX) && mw_valid && app_rdy && app_wdf_rdy;
  assign rd_issue = (state == READ_MATRIX) && (issued != RBW'(ROW_BEATS)) &&
                    (inflight < wr_free_beats) && app_rdy;

  assign mw_ready     = (state == WRITE_MATRIX) && app_rdy && app_wdf_rdy;
  assign app_en       = wr_issue || rd_issue;
  assign app_cmd      = rd_issue;
  assign app_addr     = rd_issue ? rbase + ADDR_W'(issued) : waddr;
  assign app_wdf_wren = wr_issue;
  assign app_wdf_data = mw_data;

  always_ff @(posedge clk) begin
    if (rst) begin
      state        <= INITIALIZE;
      waddr        <= '0;
      rbase        <= '0;
      issued       <= '0;
      inflight     <= '0;
      rows_served  <= '0;
      row_in_frame <= '0;
    end else begin
      inflight <= inflight + FBW'(rd_issue) - FBW'(app_rd_data_valid);
      unique case (state)
        INITIALIZE: begin
          waddr <= '0;
          if (calib_done) state <= WRITE_MATRIX;
        end
        WRITE_MATRIX: begin
          if (wr_issue) begin
            waddr <= waddr + 1'b1;
            if (waddr == ADDR_W'(TOTAL_BEATS - 1)) state <= DDR_READY;
          end
        end
        DDR_READY: begin
          // slopes of a row available
          if (rows_req != rows_served) begin
            state  <= READ_MATRIX;
            issued <= '0;
            rbase  <= ADDR_W'(32'(row_in_frame) * ROW_BEATS);
          end
        end
        READ_MATRIX: begin
          if (rd_issue) issued <= issued + 1'b1;
          // multiplication for a row done
          if (issued == RBW'(ROW_BEATS) && rows_mult_done != rows_served) begin
            state        <= DDR_READY;
            rows_served  <= rows_served + 1'b1;
            row_in_frame <= (row_in_frame == SXW'(N_SUB - 1)) ? '0 : row_in_frame + 1'b1;
          end
        end
        default: state <= INITIALIZE;
      endcase
    end
  end

  a_inflight: assert property (@(posedge clk) disable iff (rst)
    !(app_rd_data_valid && inflight == '0));
endmodule
