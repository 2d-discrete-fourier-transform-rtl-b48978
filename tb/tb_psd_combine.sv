// tb_psd_combine: random image and boundary spectra, offered on two
// independently stalled streams, for two 16 x 16 frames. Each output must
// equal Ihat - Bhat/(2cos(2 pi s/N)+2cos(2 pi t/N)-4) (0 at (0,0) for the
// Bhat term) within 1 LSB, clipped to 16 bits, with sat_o exactly when
// clipping occurs. The output side is stalled too; one word per cycle when
// nothing stalls is checked.
module tb_psd_combine;
  import opsd_pkg::*;
  import opsd_ref_pkg::*;
  localparam int N = 16, DW = 16, BDW = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, img_valid, img_ready, bnd_valid, bnd_ready, out_valid, out_ready, sat_o;
  logic [31:0] img_data, out_data;
  logic [63:0] bnd_data;
  int checks = 0, failures = 0, nsat = 0;

  psd_combine #(.N(N), .DW(DW), .BDW(BDW)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int TOT = 2 * N * N;
  logic [31:0] iv [TOT];
  logic [63:0] bv [TOT];

  // producers
  int ki = 0, kb = 0;
  bit stall_in = 1;
  always @(posedge clk) if (rst_n) begin
    if (img_valid && img_ready) ki++;
    if (bnd_valid && bnd_ready) kb++;
  end
  always @(negedge clk) begin
    img_valid = (ki < TOT) && (!stall_in || $urandom_range(0, 3) != 0);
    bnd_valid = (kb < TOT) && (!stall_in || $urandom_range(0, 2) != 0);
    img_data  = iv[ki % TOT];
    bnd_data  = bv[kb % TOT];
    out_ready = !stall_in || ($urandom_range(0, 3) != 0);
  end

  initial begin
    int k, c0, c1;
    for (int n = 0; n < TOT; n++) begin
      iv[n] = {16'($urandom_range(0, 40000) - 20000), 16'($urandom_range(0, 40000) - 20000)};
      // boundary spectrum, small so that Shat stays mostly in range
      bv[n] = {32'($urandom_range(0, 2000000) - 1000000), 32'($urandom_range(0, 2000000) - 1000000)};
    end
    bv[N + 1] = {32'sd0, 32'sd1500000000};       // forces clipping at (1,1)
    start = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    k = 0;
    while (k < TOT) begin
      @(posedge clk);
      if (k == N * N + 2 * N) stall_in = 0;
      if (k == N * N + 2 * N + 10) c0 = k;
      if (out_valid && out_ready) begin
        real d, sr, si, pr, pi_;
        int s, t, er, ei;
        bit es;
        s = (k % (N * N)) / N; t = k % N;
        d = 2.0 * $cos(2.0 * PI * s / N) + 2.0 * $cos(2.0 * PI * t / N) - 4.0;
        sr = (s == 0 && t == 0) ? 0.0 : q2r(bv[k][31:0], 32) / d;
        si = (s == 0 && t == 0) ? 0.0 : q2r(bv[k][63:32], 32) / d;
        pr  = q2r(iv[k][15:0], 16) - sr;
        pi_ = q2r(iv[k][31:16], 16) - si;
        er = int'(r2q(pr, 16)); ei = int'(r2q(pi_, 16));
        es = (pr >= 1.0 - 0.5 / 32768) || (pr < -1.0) || (pi_ >= 1.0 - 0.5 / 32768) || (pi_ < -1.0);
        checks++;
        if ((int'($signed(out_data[15:0])) - er) > 1 || (er - int'($signed(out_data[15:0]))) > 1 ||
            (int'($signed(out_data[31:16])) - ei) > 1 || (ei - int'($signed(out_data[31:16]))) > 1) begin
          failures++;
          if (failures < 10) $display("k=%0d (s,t)=(%0d,%0d) got %0d %0d expected %0d %0d", k, s, t,
                                      $signed(out_data[15:0]), $signed(out_data[31:16]), er, ei);
        end
        if (sat_o) nsat++;
        if (sat_o != es && (pr < 0.999 && pr > -0.999 && pi_ < 0.999 && pi_ > -0.999)) begin
          failures++; $display("sat_o wrong at k=%0d", k);
        end
        k++;
      end
    end
    // throughput: with no stalls, one word per cycle
    checks++;
    if (nsat == 0) begin failures++; $display("no saturation seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // rate check during the unstalled part
  int nout = 0, ncyc = 0;
  always @(posedge clk) if (!stall_in && ki < TOT) begin
    ncyc++;
    if (out_valid && out_ready) nout++;
  end
  final begin
    if (ncyc > 20 && nout < ncyc - 2) $display("rate: %0d words in %0d cycles", nout, ncyc);
  end
endmodule
