// ddr_mig_model: behavioural model of one DDR3 memory controller together
// with its memory, for simulation only (not synthesizable intent).
//
// It reports calibration done CALIB_CYCLES clocks after reset, accepts
// commands on the simplified user interface used by ddr3_sm (app_en,
// app_cmd 0 = write / 1 = read, app_addr in DATA_W-bit words; write data in the
// same cycle as its command), drops app_rdy at random to model refresh and
// bank conflicts, and returns read data in order after a random latency of
// MIN_LAT..MAX_LAT clocks, one word per clock.  The real part is a vendor
// memory controller and an external DDR3 module.
`timescale 1ns / 1ps
module ddr_mig_model #(
  parameter int unsigned DATA_W       = 512,
  parameter int unsigned ADDR_W       = 28,
  parameter int unsigned WORDS        = 1024,
  parameter int unsigned CALIB_CYCLES = 20,
  parameter int unsigned MIN_LAT      = 8,
  parameter int unsigned MAX_LAT      = 24,
  parameter int unsigned BUSY_PCT     = 10,
  parameter int unsigned SEED         = 1
) (
  input  logic              clk,
  input  logic              rst,
  output logic              calib_done,
  input  logic              app_en,
  input  logic              app_cmd,
  input  logic [ADDR_W-1:0] app_addr,
  output logic              app_rdy,
  input  logic              app_wdf_wren,
  input  logic [DATA_W-1:0] app_wdf_data,
  output logic              app_wdf_rdy,
  output logic [DATA_W-1:0] app_rd_data,
  output logic              app_rd_data_valid,
  output int unsigned       n_writes,
  output int unsigned       n_reads,
  output int unsigned       bad_cmds
);
  logic [DATA_W-1:0] mem [WORDS];
  longint unsigned   cyc;
  longint unsigned   due_q[$];
  int unsigned       addr_q[$];
  longint unsigned   last_due;
  int unsigned       calib_cnt;

  initial void'($urandom(SEED));

  assign app_wdf_rdy = app_rdy;

  always_ff @(posedge clk) begin
    if (rst) begin
      cyc               <= 0;
      calib_cnt         <= 0;
      calib_done        <= 1'b0;
      app_rdy           <= 1'b0;
      app_rd_data_valid <= 1'b0;
      app_rd_data       <= '0;
      last_due          <= 0;
      n_writes          <= 0;
      n_reads           <= 0;
      bad_cmds          <= 0;
      due_q.delete();
      addr_q.delete();
    end else begin
      cyc <= cyc + 1;
      if (calib_cnt < CALIB_CYCLES) calib_cnt <= calib_cnt + 1;
      else                          calib_done <= 1'b1;
      app_rdy <= calib_done && (($urandom % 100) >= BUSY_PCT);
      if (app_en && app_rdy) begin
        if (app_addr >= ADDR_W'(WORDS)) begin
          bad_cmds <= bad_cmds + 1;
        end else if (app_cmd == 1'b0) begin
          if (!app_wdf_wren) bad_cmds <= bad_cmds + 1;
          mem[app_addr] <= app_wdf_data;
          n_writes      <= n_writes + 1;
        end else begin
          longint unsigned d;
          d = cyc + MIN_LAT + ($urandom % (MAX_LAT - MIN_LAT + 1));
          if (d <= last_due) d = last_due + 1;
          last_due <= d;
          due_q.push_back(d);
          addr_q.push_back(int'(app_addr));
          n_reads <= n_reads + 1;
        end
      end
      app_rd_data_valid <= 1'b0;
      if (due_q.size() > 0 && due_q[0] <= cyc) begin
        app_rd_data_valid <= 1'b1;
        app_rd_data       <= mem[addr_q[0]];
        void'(due_q.pop_front());
        void'(addr_q.pop_front());
      end
    end
  end
endmodule
