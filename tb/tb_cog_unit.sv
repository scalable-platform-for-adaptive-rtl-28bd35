// tb_cog_unit: checks the centre-of-gravity unit against an integer model of
// x = (sum I*(2px-(PIX-1)) * 2^16) / (2 * sum I), truncated toward zero, on
// hand-picked and random subapertures.
// The hand-picked cases cover a dark subaperture, a uniform one, a single
// bright corner pixel (exactly +1.5 / -1.5 pixels), two opposite full-scale
// corners and a nearly saturated subaperture; dark gives slope 0 by this
// design's definition.
// The unit is combinational: each case is applied and checked after 1 ns.
`timescale 1ns / 1ps
module tb_cog_unit;
  import sparc_pkg::*;
  localparam int unsigned PIX = 4;
  int checks = 0, failures = 0;

  logic [PIX*PIX-1:0][PIX_W-1:0] pixels;
  logic signed [SLOPE_W-1:0]     xs, ys;

  cog_unit #(.PIX(PIX)) dut (.pixels, .x_slope(xs), .y_slope(ys));

  function automatic void ref_cog(input logic [PIX*PIX-1:0][PIX_W-1:0] p, output longint rx, output longint ry);
    longint s, nx, ny;
    s = 0; nx = 0; ny = 0;
    for (int y = 0; y < PIX; y++)
      for (int x = 0; x < PIX; x++) begin
        s  += longint'(p[y*PIX+x]);
        nx += longint'(p[y*PIX+x]) * (2 * x - (PIX - 1));
        ny += longint'(p[y*PIX+x]) * (2 * y - (PIX - 1));
      end
    if (s == 0) begin rx = 0; ry = 0; end
    else begin rx = (nx * 65536) / (2 * s); ry = (ny * 65536) / (2 * s); end
  endfunction

  task automatic run_case(string name);
    longint rx, ry;
    #1;
    ref_cog(pixels, rx, ry);
    checks++;
    if (longint'(xs) != rx || longint'(ys) != ry) begin
      failures++;
      $display("FAIL %s: got (%0d,%0d) expected (%0d,%0d)", name, xs, ys, rx, ry);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pixels = '0; run_case("dark");
    checks++; if (xs != 0 || ys != 0) begin failures++; $display("FAIL dark not zero"); end
    for (int i = 0; i < PIX * PIX; i++) pixels[i] = 16'd100;
    run_case("flat");
    checks++; if (xs != 0 || ys != 0) begin failures++; $display("FAIL flat not zero"); end
    // single bright pixel in corner (3,0): x = +1.5 pixels, y = -1.5 pixels
    pixels = '0; pixels[0*PIX+3] = 16'd500; run_case("corner");
    checks++; if (xs != 32'sd98304 || ys != -32'sd98304) begin failures++; $display("FAIL corner %0d %0d", xs, ys); end
    pixels = '0; pixels[PIX*PIX-1] = 16'hFFFF; pixels[0] = 16'hFFFF; run_case("diag");
    for (int i = 0; i < PIX * PIX; i++) pixels[i] = 16'hFFFF;
    pixels[5] = 0; run_case("saturated");
    for (int t = 0; t < 500; t++) begin
      for (int i = 0; i < PIX * PIX; i++) pixels[i] = (t % 3 == 0) ? 16'($urandom) : 16'($urandom % 64);
      run_case("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
