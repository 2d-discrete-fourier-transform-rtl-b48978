// tb_nu_synth: checks the rebuilt column spectrum of a boundary image.
// A random 16 x 16 boundary image B with the structure of the paper's
// border image is built from random B(.,1) and B(1,.); its column FFTs are
// computed in floating point for every column (no nu shortcut) and divided
// by N. nu_synth gets B(1,.) and the quantized FFT of B(.,1) from a
// synchronous-read memory model, is stalled at random, and each of its
// N*N outputs must match within 4 LSB of Q1.31.
module tb_nu_synth;
  import opsd_pkg::*;
  import opsd_ref_pkg::*;
  localparam int N = 16, BDW = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, out_valid, out_ready, done;
  logic [3:0] row_raddr, bhat_raddr;
  logic [15:0] row_rdata;
  logic [63:0] bhat_rdata, out_data;
  int checks = 0, failures = 0;

  nu_synth #(.N(N), .BDW(BDW)) dut (.*);

  int colv [N], rowv [N];
  real bm [N][N];
  real cr [N][N], ci [N][N];
  logic [15:0] rmem [N];
  logic [63:0] bmem [N];
  always @(posedge clk) begin
    row_rdata  <= rmem[row_raddr];
    bhat_rdata <= bmem[bhat_raddr];
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real vr[], vi[];
    int k, ndone, nstall;
    vr = new[N]; vi = new[N];
    for (int i = 0; i < N; i++) begin
      colv[i] = $urandom_range(0, 40000) - 20000;
      rowv[i] = $urandom_range(0, 40000) - 20000;
    end
    rowv[0] = colv[0];
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) bm[i][j] = 0.0;
    for (int i = 0; i < N; i++) begin
      bm[i][0] = colv[i] / 32768.0;
      if (i > 0 && i < N - 1) bm[i][N-1] = -colv[i] / 32768.0;
    end
    for (int j = 1; j < N; j++) begin
      bm[0][j] = rowv[j] / 32768.0;
      if (j < N - 1) bm[N-1][j] = -rowv[j] / 32768.0;
    end
    bm[N-1][N-1] = (-colv[N-1] - rowv[0] - rowv[N-1]) / 32768.0;
    for (int j = 0; j < N; j++) begin
      for (int i = 0; i < N; i++) begin vr[i] = bm[i][j]; vi[i] = 0.0; end
      fft_real(vr, vi);
      for (int i = 0; i < N; i++) begin cr[i][j] = vr[i] / N; ci[i][j] = vi[i] / N; end
    end
    for (int i = 0; i < N; i++) begin
      rmem[i] = 16'(rowv[i]);
      bmem[i] = {32'(r2q(ci[i][0], 32)), 32'(r2q(cr[i][0], 32))};
    end
    start = 0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    start <= 1;
    @(posedge clk);
    start <= 0;
    k = 0; ndone = 0; nstall = 0;
    while (k < N * N) begin
      out_ready <= ($urandom_range(0, 3) != 0);
      @(posedge clk);
      if (out_valid && !out_ready) nstall++;
      if (out_valid && out_ready) begin
        real gr, gi, er, ei;
        gr = q2r(out_data[31:0], 32); gi = q2r(out_data[63:32], 32);
        er = cr[k / N][k % N]; ei = ci[k / N][k % N];
        checks++;
        if (rabs(gr - er) > 4.0 / 2147483648.0 || rabs(gi - ei) > 4.0 / 2147483648.0) begin
          failures++;
          if (failures < 10) $display("(s,j)=(%0d,%0d): got %e %e expected %e %e", k / N, k % N, gr, gi, er, ei);
        end
        if (done) ndone++;
        k++;
      end
    end
    out_ready <= 0;
    repeat (3) @(posedge clk);
    checks++;
    if (ndone != 1 || out_valid || nstall == 0) begin failures++; $display("done %0d, valid after end %0d", ndone, out_valid); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
