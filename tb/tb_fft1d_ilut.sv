// tb_fft1d_ilut: self-checking testbench of the ILUT 1D FFT core.
//
// Sends random and impulse vectors through a 64-point core with 4 parallel
// butterflies, compares every output with a floating-point FFT divided by
// N (tolerance 8 LSB), and checks the latency from the last input beat to
// the first output beat against log2(N)*N/(2*BFLY)+1 cycles. The output
// side is randomly stalled.
module tb_fft1d_ilut;
  import opsd_ref_pkg::*;
  localparam int N = 64, DW = 16, TWW = 18, BFLY = 4, L = 6;
  localparam int LAT = L * N / (2 * BFLY) + 1;

  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready, busy;
  logic [2*DW-1:0] in_data, out_data;
  int checks = 0, failures = 0;

  fft1d_ilut #(.N(N), .DW(DW), .TWW(TWW), .BFLY(BFLY)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real xr[], xi[];
  longint qr [N], qi [N];
  int t_last_in, t_first_out, cycle = 0;
  always @(posedge clk) cycle++;

  task automatic run_vector(input int kind);
    xr = new[N]; xi = new[N];
    for (int n = 0; n < N; n++) begin
      if (kind == 0) begin
        qr[n] = $signed(16'($urandom_range(0, 32767))) - 16384;
        qi[n] = $signed(16'($urandom_range(0, 32767))) - 16384;
      end else begin
        qr[n] = (n == kind) ? 16000 : 0;
        qi[n] = 0;
      end
      xr[n] = q2r(qr[n], DW);
      xi[n] = q2r(qi[n], DW);
    end
    fft_real(xr, xi);
    for (int n = 0; n < N; n++) begin
      in_valid <= 1;
      in_data  <= {16'(qi[n]), 16'(qr[n])};
      @(posedge clk);
      while (!in_ready) @(posedge clk);
    end
    t_last_in = cycle;
    in_valid <= 0;
    for (int k = 0; k < N; k++) begin
      out_ready <= ($urandom_range(0, 3) != 0);
      @(posedge clk);
      while (!(out_valid && out_ready)) begin
        out_ready <= ($urandom_range(0, 3) != 0);
        @(posedge clk);
      end
      if (k == 0) begin
        t_first_out = cycle;
      end
      begin
        real er, ei, gr, gi;
        er = xr[k] / N; ei = xi[k] / N;
        gr = q2r(out_data[DW-1:0], DW); gi = q2r(out_data[2*DW-1:DW], DW);
        checks++;
        if (rabs(er - gr) > 8.0 / 32768 || rabs(ei - gi) > 8.0 / 32768) begin
          failures++;
          if (failures < 10) $display("bin %0d: got %f %f expected %f %f", k, gr, gi, er, ei);
        end
      end
    end
    out_ready <= 0;
  endtask

  initial begin
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int v = 0; v < 6; v++) begin
      run_vector(v < 4 ? 0 : v - 3);
    end
    // latency of the last vector: out_valid rises LAT cycles after the last input
    checks++;
    if (!(t_first_out - t_last_in >= LAT)) begin
      failures++;
      $display("latency %0d < %0d", t_first_out - t_last_in, LAT);
    end
    // back-to-back vector with out_ready held high: exact latency
    for (int n = 0; n < N; n++) begin
      in_valid <= 1; in_data <= {16'd0, 16'(n * 100)};
      @(posedge clk);
      while (!in_ready) @(posedge clk);
    end
    in_valid <= 0;
    t_last_in = cycle;
    while (!out_valid) @(posedge clk);
    checks++;
    if (cycle - t_last_in != LAT) begin
      failures++;
      $display("exact latency %0d != %0d", cycle - t_last_in, LAT);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
