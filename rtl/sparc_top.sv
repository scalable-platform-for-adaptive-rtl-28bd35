// sparc_top: the scalable adaptive-optics real-time controller.  A
// Shack-Hartmann wavefront sensor's pixels go in; a reconstructed phase for
// every actuator of a Fried-geometry deformable mirror ((n+1)^2 values for
// n x n subapertures) comes out, computed as the product of a reconstruction
// matrix held in two external DDR banks with the vector of x and y slopes.
//
// Five clock regions, which meet only at buffers or Gray-coded counters:
//   clk_pixel  (100 MHz)  camera pixel buffer, pixel addressing, WPU buffer write
//   clk_slope  (12.5 MHz) WPU state machine with ITER centre-of-gravity units,
//                         WPU buffer read, slope buffer write
//   clk_recon  (50 MHz)   core reconstructor: state machine, MVM array, phase
//                         memory; slope buffer and reconstructor FIFO reads
//   clk_mem_a, clk_mem_b  (200 MHz) DDR3 state machine and reconstructor FIFO
//                         write side of bank A (x slopes) and bank B (y slopes)
// The frequencies are those of the published prototype (the slope clock is
// slow because of the centroid divider); the logic does not depend on them,
// but NFIFO must equal the memory-side rate over the reconstruction rate for
// the memory bandwidth to be used in full.
//
// Operation: after reset each DDR3 state machine waits for its memory
// controller's calibration and copies its half of the matrix from the host
// stream (mwa_*/mwb_*) into DDR.  The core reconstructor then starts a frame:
// pixels are accepted in raster order, each completed row of subapertures is
// turned into slopes ITER at a time, and as soon as a row's first slopes exist
// the core asks both DDR state machines for that row's matrix section and
// multiplies it in, LANES matrix rows per bank per clk_recon cycle.  After the
// last row the phases stream out on phase_valid/phase_index/phase_data and, if
// loop_enable is high, the next frame begins.
//
// External parts brought out as ports: the camera (pix_*), the two DDR3
// memory controllers with their memories (a_*/b_*), the host link that
// delivers the matrix (mwa_*/mwb_*) and the deformable-mirror interface
// (phase_*).  The matrix write data reaches a_app_wdf_data/b_app_wdf_data
// without a register (the DDR3 state machine only steers the handshake), so
// these output bits are wired straight to mwa_data/mwb_data.
//
// Two unconnected outputs of the phase addressing unit inside the core
// (slope_lane, col_last) are deliberate: the core uses the look-ahead slope
// lane and only needs the end-of-row and end-of-frame flags.
module sparc_top
  import sparc_pkg::*;
#(
  parameter int unsigned N_SUB  = N_SUB_D,
  parameter int unsigned PIX    = PIX_D,
  parameter int unsigned ITER   = ITER_D,
  parameter int unsigned MIG_W  = MIG_W_D,
  parameter int unsigned NFIFO  = NFIFO_D,
  parameter int unsigned ADDR_W = 28,
  parameter int unsigned FIFO_DEPTH = 16,
  localparam int unsigned LANES = lanes_of(MIG_W, NFIFO),
  localparam int unsigned PIW   = idx_w((N_SUB + 1) * (N_SUB + 1))
) (
  input  logic              clk_pixel,
  input  logic              clk_slope,
  input  logic              clk_recon,
  input  logic              clk_mem_a,
  input  logic              clk_mem_b,
  input  logic              arst_n,
  input  logic              loop_enable,
  // wavefront sensor camera
  input  logic [PIX_W-1:0]  pix_data,
  input  logic              pix_en,
  // reconstruction matrix from the host, bank A (x) and bank B (y)
  input  logic              mwa_valid,
  input  logic [MIG_W-1:0]  mwa_data,
  output logic              mwa_ready,
  input  logic              mwb_valid,
  input  logic [MIG_W-1:0]  mwb_data,
  output logic              mwb_ready,
  // memory controller, bank A
  input  logic              a_calib_done,
  output logic              a_app_en,
  output logic              a_app_cmd,
  output logic [ADDR_W-1:0] a_app_addr,
  input  logic              a_app_rdy,
  output logic              a_app_wdf_wren,
  output logic [MIG_W-1:0]  a_app_wdf_data,
  input  logic              a_app_wdf_rdy,
  input  logic [MIG_W-1:0]  a_app_rd_data,
  input  logic              a_app_rd_data_valid,
  // memory controller, bank B
  input  logic              b_calib_done,
  output logic              b_app_en,
  output logic              b_app_cmd,
  output logic [ADDR_W-1:0] b_app_addr,
  input  logic              b_app_rdy,
  output logic              b_app_wdf_wren,
  output logic [MIG_W-1:0]  b_app_wdf_data,
  input  logic              b_app_wdf_rdy,
  input  logic [MIG_W-1:0]  b_app_rd_data,
  input  logic              b_app_rd_data_valid,
  // phases to the deformable-mirror interface
  output logic              phase_valid,
  output logic [PIW-1:0]    phase_index,
  output logic signed [PHASE_W-1:0] phase_data,
  output logic              frame_done,
  // status
  output logic              ddr_ready,
  output logic              pixel_overflow,
  output logic              pixel_overrun,
  output logic              fifo_overflow,
  output logic              stall_slope,
  output logic              stall_mem,
  output logic              bank_skew,
  output logic              phase_bypass,
  output logic              acquiring,      // clk_pixel: a frame's pixels are being taken
  output logic              computing_slopes // clk_slope: centroid computation running
);
  localparam int unsigned WORDS = words_of(N_SUB, ITER);
  localparam int unsigned BW    = idx_w(ITER);
  localparam int unsigned WW    = idx_w(WORDS);
  localparam int unsigned LW    = idx_w(PIX * PIX);
  localparam int unsigned SAW   = idx_w(N_SUB * WORDS);
  localparam int unsigned FBW   = idx_w(FIFO_DEPTH * NFIFO + 1) + 1;

  // ---------------- resets ----------------
  logic rst_pixel, rst_slope, rst_recon, rst_mem_a, rst_mem_b;
  reset_sync u_rs_pixel (.clk(clk_pixel), .arst_n, .rst(rst_pixel));
  reset_sync u_rs_slope (.clk(clk_slope), .arst_n, .rst(rst_slope));
  reset_sync u_rs_recon (.clk(clk_recon), .arst_n, .rst(rst_recon));
  reset_sync u_rs_mem_a (.clk(clk_mem_a), .arst_n, .rst(rst_mem_a));
  reset_sync u_rs_mem_b (.clk(clk_mem_b), .arst_n, .rst(rst_mem_b));

  // ---------------- cross-domain progress counters ----------------
  logic [CNT_W-1:0] frames_started, frames_started_px;
  logic [CNT_W-1:0] rows_written, rows_written_sl;
  logic [CNT_W-1:0] words_written, words_written_rc;
  logic [CNT_W-1:0] rows_sloped, rows_sloped_px;
  logic [CNT_W-1:0] rows_req, rows_req_a, rows_req_b;
  logic [CNT_W-1:0] rows_done, rows_done_a, rows_done_b;
  logic             ddr_ready_a, ddr_ready_b, ddr_ready_a_rc, ddr_ready_b_rc;

  gray_sync u_gs_frames (.src_clk(clk_recon), .src_rst(rst_recon), .src_count(frames_started),
                         .dst_clk(clk_pixel), .dst_rst(rst_pixel), .dst_count(frames_started_px));
  gray_sync u_gs_rows   (.src_clk(clk_pixel), .src_rst(rst_pixel), .src_count(rows_written),
                         .dst_clk(clk_slope), .dst_rst(rst_slope), .dst_count(rows_written_sl));
  gray_sync u_gs_freed  (.src_clk(clk_slope), .src_rst(rst_slope), .src_count(rows_sloped),
                         .dst_clk(clk_pixel), .dst_rst(rst_pixel), .dst_count(rows_sloped_px));
  gray_sync u_gs_words  (.src_clk(clk_slope), .src_rst(rst_slope), .src_count(words_written),
                         .dst_clk(clk_recon), .dst_rst(rst_recon), .dst_count(words_written_rc));
  gray_sync u_gs_req_a  (.src_clk(clk_recon), .src_rst(rst_recon), .src_count(rows_req),
                         .dst_clk(clk_mem_a), .dst_rst(rst_mem_a), .dst_count(rows_req_a));
  gray_sync u_gs_req_b  (.src_clk(clk_recon), .src_rst(rst_recon), .src_count(rows_req),
                         .dst_clk(clk_mem_b), .dst_rst(rst_mem_b), .dst_count(rows_req_b));
  gray_sync u_gs_done_a (.src_clk(clk_recon), .src_rst(rst_recon), .src_count(rows_done),
                         .dst_clk(clk_mem_a), .dst_rst(rst_mem_a), .dst_count(rows_done_a));
  gray_sync u_gs_done_b (.src_clk(clk_recon), .src_rst(rst_recon), .src_count(rows_done),
                         .dst_clk(clk_mem_b), .dst_rst(rst_mem_b), .dst_count(rows_done_b));
  level_sync u_ls_rdy_a (.clk(clk_recon), .rst(rst_recon), .d(ddr_ready_a), .q(ddr_ready_a_rc));
  level_sync u_ls_rdy_b (.clk(clk_recon), .rst(rst_recon), .d(ddr_ready_b), .q(ddr_ready_b_rc));

  // ---------------- pixel clock: wavefront processing unit input ----------------
  logic [PIX_W-1:0] buf_pixel;
  logic             buf_valid;
  logic             wb_we, wb_whalf;
  logic [BW-1:0]    wb_wbank;
  logic [WW-1:0]    wb_wword;
  logic [LW-1:0]    wb_wlane;
  logic [PIX_W-1:0] wb_wdata;

  wfs_pixel_buffer u_pixbuf (
    .clk(clk_pixel), .rst(rst_pixel), .pix_in(pix_data), .pix_en,
    .out_pixel(buf_pixel), .out_valid(buf_valid), .out_ready(1'b1), .overflow(pixel_overflow)
  );

  pixel_addressing #(.N_SUB(N_SUB), .PIX(PIX), .ITER(ITER)) u_pixaddr (
    .clk(clk_pixel), .rst(rst_pixel), .frame_req(frames_started_px), .rows_freed(rows_sloped_px),
    .in_valid(buf_valid), .in_pixel(buf_pixel),
    .wr_en(wb_we), .wr_bank(wb_wbank), .wr_half(wb_whalf), .wr_word(wb_wword),
    .wr_lane(wb_wlane), .wr_data(wb_wdata), .rows_written, .busy(acquiring), .overrun(pixel_overrun)
  );

  // ---------------- slope clock: WPU buffer, WPU state machine ----------------
  logic                                    wb_rhalf;
  logic [WW-1:0]                           wb_rword;
  logic [ITER-1:0][PIX*PIX-1:0][PIX_W-1:0] wb_rdata;
  logic                                    sl_we;
  logic [SAW-1:0]                          sl_waddr;
  slope_pair_t [ITER-1:0]                  sl_wdata;

  wpu_buffer #(.N_SUB(N_SUB), .PIX(PIX), .ITER(ITER)) u_wpubuf (
    .wclk(clk_pixel), .we(wb_we), .wbank(wb_wbank), .whalf(wb_whalf), .wword(wb_wword),
    .wlane(wb_wlane), .wdata(wb_wdata),
    .rclk(clk_slope), .rhalf(wb_rhalf), .rword(wb_rword), .rdata(wb_rdata)
  );

  wpu_sm #(.N_SUB(N_SUB), .PIX(PIX), .ITER(ITER)) u_wpu (
    .clk(clk_slope), .rst(rst_slope), .rows_written(rows_written_sl),
    .buf_rhalf(wb_rhalf), .buf_rword(wb_rword), .buf_rdata(wb_rdata),
    .sl_we, .sl_waddr, .sl_wdata, .words_written, .rows_done(rows_sloped), .busy(computing_slopes)
  );

  // ---------------- slope buffer (slope -> recon) ----------------
  logic [SAW-1:0] sl_raddr;
  logic [BW-1:0]  sl_rlane;
  slope_pair_t    sl_pair;

  slope_buffer #(.N_SUB(N_SUB), .ITER(ITER)) u_slopebuf (
    .wclk(clk_slope), .we(sl_we), .waddr(sl_waddr), .wdata(sl_wdata),
    .rclk(clk_recon), .raddr(sl_raddr), .rlane(sl_rlane), .rd_pair(sl_pair)
  );

  // ---------------- memory clocks: DDR3 state machines and FIFOs ----------------
  logic [FBW-1:0]         free_a, free_b;
  logic                   fa_valid, fb_valid, fa_rd, fb_rd, ovf_a, ovf_b;
  logic [LANES*MAT_W-1:0] fa_data, fb_data;

  ddr3_sm #(.N_SUB(N_SUB), .DATA_W(MIG_W), .NFIFO(NFIFO), .ADDR_W(ADDR_W), .FBW(FBW)) u_ddr_a (
    .clk(clk_mem_a), .rst(rst_mem_a), .calib_done(a_calib_done),
    .mw_valid(mwa_valid), .mw_data(mwa_data), .mw_ready(mwa_ready),
    .app_en(a_app_en), .app_cmd(a_app_cmd), .app_addr(a_app_addr), .app_rdy(a_app_rdy),
    .app_wdf_wren(a_app_wdf_wren), .app_wdf_data(a_app_wdf_data), .app_wdf_rdy(a_app_wdf_rdy),
    .app_rd_data_valid(a_app_rd_data_valid),
    .rows_req(rows_req_a), .rows_mult_done(rows_done_a), .wr_free_beats(free_a),
    .ddr_ready(ddr_ready_a)
  );

  ddr3_sm #(.N_SUB(N_SUB), .DATA_W(MIG_W), .NFIFO(NFIFO), .ADDR_W(ADDR_W), .FBW(FBW)) u_ddr_b (
    .clk(clk_mem_b), .rst(rst_mem_b), .calib_done(b_calib_done),
    .mw_valid(mwb_valid), .mw_data(mwb_data), .mw_ready(mwb_ready),
    .app_en(b_app_en), .app_cmd(b_app_cmd), .app_addr(b_app_addr), .app_rdy(b_app_rdy),
    .app_wdf_wren(b_app_wdf_wren), .app_wdf_data(b_app_wdf_data), .app_wdf_rdy(b_app_wdf_rdy),
    .app_rd_data_valid(b_app_rd_data_valid),
    .rows_req(rows_req_b), .rows_mult_done(rows_done_b), .wr_free_beats(free_b),
    .ddr_ready(ddr_ready_b)
  );

  recon_fifo #(.IN_W(MIG_W), .NFIFO(NFIFO), .DEPTH(FIFO_DEPTH)) u_fifo_a (
    .wclk(clk_mem_a), .wrst(rst_mem_a), .in_valid(a_app_rd_data_valid), .in_data(a_app_rd_data),
    .wr_free_beats(free_a), .overflow(ovf_a),
    .rclk(clk_recon), .rrst(rst_recon), .rd_en(fa_rd), .rd_valid(fa_valid), .rd_data(fa_data)
  );

  recon_fifo #(.IN_W(MIG_W), .NFIFO(NFIFO), .DEPTH(FIFO_DEPTH)) u_fifo_b (
    .wclk(clk_mem_b), .wrst(rst_mem_b), .in_valid(b_app_rd_data_valid), .in_data(b_app_rd_data),
    .wr_free_beats(free_b), .overflow(ovf_b),
    .rclk(clk_recon), .rrst(rst_recon), .rd_en(fb_rd), .rd_valid(fb_valid), .rd_data(fb_data)
  );

  assign fifo_overflow = ovf_a || ovf_b;
  assign ddr_ready     = ddr_ready_a_rc && ddr_ready_b_rc;

  // ---------------- reconstructor clock: core reconstructor ----------------
  core_reconstructor #(.N_SUB(N_SUB), .ITER(ITER), .LANES(LANES)) u_core (
    .clk(clk_recon), .rst(rst_recon), .loop_enable,
    .ddr_ready_a(ddr_ready_a_rc), .ddr_ready_b(ddr_ready_b_rc),
    .frames_started, .words_written(words_written_rc), .rows_req, .rows_done,
    .fifo_a_valid(fa_valid), .fifo_a_data(fa_data), .fifo_a_rd(fa_rd),
    .fifo_b_valid(fb_valid), .fifo_b_data(fb_data), .fifo_b_rd(fb_rd),
    .sl_raddr, .sl_rlane, .sl_pair,
    .phase_valid, .phase_index, .phase_data, .frame_done,
    .stall_slope, .stall_mem, .bank_skew, .bypass_hit(phase_bypass)
  );
endmodule
