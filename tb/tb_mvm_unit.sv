// tb_mvm_unit: checks every lane of the multiply-accumulate array,
// phase + ((A*x) >>> 12) + ((B*y) >>> 12) with 32-bit wrap, against a
// 64-bit integer model on random and extreme operands.
// Eight lanes; the array is combinational, so each case is checked 1 ns after
// it is applied.  The 12 fraction bits of the matrix are this design's format.
`timescale 1ns / 1ps
module tb_mvm_unit;
  import sparc_pkg::*;
  localparam int unsigned LANES = 8;
  int checks = 0, failures = 0;

  logic signed [LANES-1:0][MAT_W-1:0]   a, b;
  logic signed [SLOPE_W-1:0]            x, y;
  logic signed [LANES-1:0][PHASE_W-1:0] pin, pout;

  mvm_unit #(.LANES(LANES)) dut (.mat_a(a), .mat_b(b), .x_slope(x), .y_slope(y), .phase_in(pin), .phase_out(pout));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 400; t++) begin
      for (int l = 0; l < LANES; l++) begin
        a[l]   = 16'($urandom);
        b[l]   = 16'($urandom);
        pin[l] = 32'($urandom);
      end
      x = (t < 4) ? ((t % 2) ? 32'sh7FFFFFFF : 32'sh80000000) : 32'($urandom);
      y = (t % 5 == 0) ? 32'sd0 : 32'($urandom);
      if (t == 1) a = '1;
      #1;
      for (int l = 0; l < LANES; l++) begin
        longint pa, pb;
        int exp_v;
        pa = (longint'(signed'(a[l])) * longint'(x)) >>> 12;
        pb = (longint'(signed'(b[l])) * longint'(y)) >>> 12;
        exp_v = int'(longint'(pin[l]) + longint'(int'(pa)) + longint'(int'(pb)));
        checks++;
        if (int'(pout[l]) != exp_v) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d lane %0d: %0d vs %0d", t, l, pout[l], exp_v);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
