// tb_butterfly: checks the radix-2 butterfly against floating point.
// Random inputs below half scale and random unit twiddles must give
// (a +/- w*b)/2 within 1 LSB; a full-scale case must saturate.
module tb_butterfly;
  import opsd_pkg::*;
  import opsd_ref_pkg::*;
  localparam int DW = 16, TWW = 18;
  logic [2*DW-1:0] a, b, x, y;
  logic [2*TWW-1:0] w;
  int checks = 0, failures = 0;

  butterfly #(.DW(DW), .TWW(TWW)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input real er, input real gr, input real tol, input string what);
    checks++;
    if (rabs(er - gr) > tol) begin
      failures++;
      if (failures < 10) $display("%s: got %f expected %f", what, gr, er);
    end
  endtask

  initial begin
    real ar, ai, br, bi, wr, wi, th, xr, xi, yr, yi;
    for (int n = 0; n < 2000; n++) begin
      a  = {16'($urandom_range(0, 32767) - 16384), 16'($urandom_range(0, 32767) - 16384)};
      b  = {16'($urandom_range(0, 32767) - 16384), 16'($urandom_range(0, 32767) - 16384)};
      th = 2.0 * PI * $urandom_range(0, 1023) / 1024.0;
      w  = {18'(r2q($sin(-th) / 2.0, 18)), 18'(r2q($cos(th) / 2.0, 18))};  // Q2.16
      #1;
      ar = q2r(a[15:0], 16); ai = q2r(a[31:16], 16);
      br = q2r(b[15:0], 16); bi = q2r(b[31:16], 16);
      wr = q2r(w[17:0], 18) * 2.0; wi = q2r(w[35:18], 18) * 2.0;
      xr = (ar + br * wr - bi * wi) / 2.0; xi = (ai + br * wi + bi * wr) / 2.0;
      yr = (ar - br * wr + bi * wi) / 2.0; yi = (ai - br * wi - bi * wr) / 2.0;
      check(xr, q2r(x[15:0], 16), 1.01 / 32768, "x.re");
      check(xi, q2r(x[31:16], 16), 1.01 / 32768, "x.im");
      check(yr, q2r(y[15:0], 16), 1.01 / 32768, "y.re");
      check(yi, q2r(y[31:16], 16), 1.01 / 32768, "y.im");
    end
    // saturation: a = 1, b = 1 - i, w = exp(i pi/4): Re(a + w b)/2 = (1 + 1.414)/2
    a = {16'sd0, 16'sd32767};
    b = {-16'sd32767, 16'sd32767};
    w = {18'(46341), 18'(46341)};
    #1;
    checks++;
    if (x[15:0] != 16'sd32767) begin failures++; $display("no positive saturation: %0d", $signed(x[15:0])); end
    checks++;
    if ($signed(y[15:0]) > -16'sd1) begin failures++; $display("y.re sign wrong"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
