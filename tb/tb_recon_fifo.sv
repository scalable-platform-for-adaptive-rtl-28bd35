// tb_recon_fifo: a producer on a 5 ns clock sends a numbered stream of 32-bit
// words, never more than wr_free_beats allows; a consumer on a 20 ns clock
// pops 128-bit words at random.  Checks that every wide word is the next four
// words in order (first in the low bits), that the flow-control count lets
// the FIFO become full, that rd_valid drops when it is empty, and that no
// overflow occurs.
`timescale 1ns / 1ps
module tb_recon_fifo;
  import sparc_pkg::*;
  localparam int unsigned IN_W = 32, NF = 4, DEPTH = 4;
  localparam int unsigned FBW = idx_w(DEPTH * NF + 1) + 1;
  localparam int unsigned TOTAL = 400;
  int checks = 0, failures = 0;

  logic wclk = 0, rclk = 0, wrst = 1, rrst = 1;
  logic in_valid, overflow, rd_en, rd_valid;
  logic [IN_W-1:0] in_data;
  logic [FBW-1:0] wr_free_beats;
  logic [IN_W*NF-1:0] rd_data;
  int sent = 0, got = 0, full_seen = 0, empty_seen = 0;
  logic want;

  assign rd_en = rd_valid && want;

  always #2.5 wclk = ~wclk;
  always #10 rclk = ~rclk;

  recon_fifo #(.IN_W(IN_W), .NFIFO(NF), .DEPTH(DEPTH)) dut (
    .wclk, .wrst, .in_valid, .in_data, .wr_free_beats, .overflow,
    .rclk, .rrst, .rd_en, .rd_valid, .rd_data);

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // producer: one word per clock while the free count allows
  always @(posedge wclk) begin
    if (wrst) begin
      in_valid <= 0; in_data <= 0;
    end else begin
      automatic int unsigned free_now = int'(wr_free_beats) - int'(in_valid);
      if (wr_free_beats == 0 && !in_valid) full_seen++;
      if (sent < int'(TOTAL) && free_now > 0 && ($urandom % 8) != 0) begin
        in_valid <= 1; in_data <= 32'(sent) ^ 32'hA5000000; sent++;
      end else begin
        in_valid <= 0;
      end
    end
  end

  // consumer
  always @(posedge rclk) begin
    if (rrst) begin
      want <= 0;
    end else begin
      if (rd_en) begin
        for (int i = 0; i < int'(NF); i++) begin
          checks++;
          if (rd_data[i*IN_W +: IN_W] != (32'(got * NF + i) ^ 32'hA5000000)) begin
            failures++; $display("FAIL word %0d part %0d: %h", got, i, rd_data[i*IN_W +: IN_W]);
          end
        end
        got++;
      end
      if (!rd_valid && got > 0 && got < int'(TOTAL / NF)) empty_seen++;
      // slow phase first (FIFO fills), then fast
      want <= (got < 20) ? (($urandom % 6) == 0) : (($urandom % 3) != 0);
    end
  end

  initial begin
    repeat (4) @(posedge rclk);
    wrst = 0; rrst = 0;
    wait (got == int'(TOTAL / NF));
    repeat (4) @(posedge rclk);
    checks++; if (full_seen == 0) begin failures++; $display("FAIL FIFO never full"); end
    checks++; if (empty_seen == 0) begin failures++; $display("FAIL FIFO never empty"); end
    checks++; if (overflow) begin failures++; $display("FAIL overflow"); end
    checks++; if (rd_valid) begin failures++; $display("FAIL data left"); end
    $display("full %0d empty %0d", full_seen, empty_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
