// opsd_frame_checker: end-to-end test harness for opsd_fft2d.
//
// Plays the host and the board: it builds a non-periodic test image,
// computes the boundary image B from it exactly as the host would (border
// differences of opposite edges), sends the frame (pixels, B(.,1), B(1,.))
// into the design, and reads back the result spectrum. Two frames are
// sent back to back, so the second waits in the DMA FIFO. The external DRAM
// is ext_mem_model with random grant stalls; the result stream is randomly
// back-pressured.
// The reference is computed independently in floating point: the full 2D
// FFT of the image and of the whole boundary matrix B (no shortcut), then
// Shat = Bhat/(2cos+2cos-4), Shat(0,0)=0, Phat = Ihat - Shat, divided by
// N*N and clipped to 16 bits. Frame 1 is a real image; frame 2 sends
// boundary vectors that do not belong to the image and are large, so that
// the output saturates, and its reference is built from those vectors.
// The total cycle count is checked against the stall-free schedule
// (at most 1.6 times it). Counted mechanisms: DRAM stalls, host input
// back-pressure, result back-pressure, local-memory credit stalls, the
// boundary column FFT, the nu rebuild, saturation, and every phase.
// FULL=1 instantiates the design with its default parameters.
module opsd_frame_checker #(
  parameter int N    = 16,
  parameter int BFLY = 2,
  parameter bit FULL = 0
) ();
  import opsd_pkg::*;
  import opsd_ref_pkg::*;

  localparam int L       = $clog2(N);
  localparam int NN      = N * N;
  localparam int TOL     = 6 + 2 * L;           // LSB of Q1.15
  localparam longint IDEAL = longint'(NN + 2 * N) + 2 * longint'(N) * (2 * N + L * N / (2 * BFLY)) + NN;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        host_in_valid, host_in_ready, host_out_valid, host_out_ready;
  logic [15:0] host_in_data;
  logic [31:0] host_out_data;
  logic        mem_req, mem_we, mem_gnt, mem_rvalid;
  logic [31:0] mem_addr, mem_wdata, mem_rdata;
  phase_e      phase;
  logic        frame_done, sat_event;
  logic [1:0]  cores_busy;
  logic [6:0]  host_in_level;

  logic pr_credit, pr_bhat, pr_nu;     // internal probes
  if (FULL) begin : g_full
    opsd_fft2d dut (.*);
    assign pr_credit = dut.u_lm.rd_credit;
    assign pr_bhat   = dut.bhat_we;
    assign pr_nu     = dut.nu_valid && dut.nu_ready;
  end else begin : g_small
    opsd_fft2d #(.N(N), .BFLY(BFLY)) dut (.*);
    assign pr_credit = dut.u_lm.rd_credit;
    assign pr_bhat   = dut.bhat_we;
    assign pr_nu     = dut.nu_valid && dut.nu_ready;
  end

  ext_mem_model #(.DEPTH(2 * NN), .LAT(6), .STALL_PCT(10)) u_mem (
    .clk, .req(mem_req), .we(mem_we), .addr(mem_addr), .wdata(mem_wdata),
    .gnt(mem_gnt), .rvalid(mem_rvalid), .rdata(mem_rdata)
  );

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle++;

  // mechanism counters
  int n_done = 0, n_in_bp = 0, n_out_bp = 0, n_credit = 0, n_sat = 0, n_bhat = 0, n_nu = 0;
  int n_phase [5];
  longint t_done [2];
  phase_e last_phase = PH_IDLE;
  initial foreach (n_phase[i]) n_phase[i] = 0;
  always @(posedge clk) if (rst_n) begin
    if (host_in_valid && !host_in_ready) n_in_bp++;
    if (host_out_valid && !host_out_ready) n_out_bp++;
    if ((phase == PH_COL || phase == PH_ROW) && !pr_credit) n_credit++;
    if (sat_event) n_sat++;
    if (frame_done) begin
      if (n_done < FR) t_done[n_done] = cycle;
      n_done++;
    end
    if (pr_bhat) n_bhat++;
    if (pr_nu) n_nu++;
    if (phase != last_phase) n_phase[int'(phase)]++;
    last_phase <= phase;
  end

  initial begin
    longint limit;
    limit = 16 * (IDEAL + 1000) + 20000;
    $display("watchdog limit %0d cycles", limit);
    for (longint i = 0; i < limit; i++) @(posedge clk);
    failures++;
    $display("watchdog expired in phase %0d", phase);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // image and boundary data, per frame
  localparam int FR = 2;
  int  img  [FR][N][N];
  int  bmat [N][N];
  int  colv [FR][N];
  int  rowv [FR][N];
  real pre  [FR][N][N];
  real pim  [FR][N][N];

  // 2D FFT (unscaled) of an integer Q1.15 matrix
  task automatic fft2(input int m [N][N], output real ore [N][N], output real oim [N][N]);
    real vr[], vi[];
    vr = new[N]; vi = new[N];
    for (int i = 0; i < N; i++) begin
      for (int j = 0; j < N; j++) begin vr[j] = q2r(m[i][j], 16); vi[j] = 0.0; end
      fft_real(vr, vi);
      for (int j = 0; j < N; j++) begin ore[i][j] = vr[j]; oim[i][j] = vi[j]; end
    end
    for (int j = 0; j < N; j++) begin
      for (int i = 0; i < N; i++) begin vr[i] = ore[i][j]; vi[i] = oim[i][j]; end
      fft_real(vr, vi);
      for (int i = 0; i < N; i++) begin ore[i][j] = vr[i]; oim[i][j] = vi[i]; end
    end
  endtask

  real ir [N][N], ii [N][N], br [N][N], bi [N][N];
  task automatic make_reference(input int f);
    real d;
    fft2(img[f], ir, ii);
    fft2(bmat, br, bi);
    for (int s = 0; s < N; s++)
      for (int t = 0; t < N; t++) begin
        d = 2.0 * $cos(2.0 * PI * s / N) + 2.0 * $cos(2.0 * PI * t / N) - 4.0;
        if (s == 0 && t == 0) begin
          pre[f][s][t] = ir[s][t] / NN;
          pim[f][s][t] = ii[s][t] / NN;
        end else begin
          pre[f][s][t] = (ir[s][t] - br[s][t] / d) / NN;
          pim[f][s][t] = (ii[s][t] - bi[s][t] / d) / NN;
        end
      end
  endtask

  // Host side: all frames back to back
  task automatic send_frames();
    for (int f = 0; f < FR; f++)
      for (int k = 0; k < NN + 2 * N; k++) begin
        host_in_valid <= 1'b1;
        host_in_data  <= (k < NN) ? 16'(img[f][k / N][k % N]) :
                         (k < NN + N) ? 16'(colv[f][k - NN]) : 16'(rowv[f][k - NN - N]);
        @(posedge clk);
        while (!host_in_ready) @(posedge clk);
      end
    host_in_valid <= 1'b0;
  endtask

  task automatic receive_frames();
    int maxerr, got_r, got_i, exp_r, exp_i, e;
    for (int f = 0; f < FR; f++) begin
      maxerr = 0;
      for (int k = 0; k < NN; k++) begin
        host_out_ready <= ($urandom_range(0, 9) != 0);
        @(posedge clk);
        while (!(host_out_valid && host_out_ready)) begin
          host_out_ready <= ($urandom_range(0, 9) != 0);
          @(posedge clk);
        end
        got_r = int'($signed(host_out_data[15:0]));
        got_i = int'($signed(host_out_data[31:16]));
        exp_r = int'(r2q(pre[f][k / N][k % N], 16));
        exp_i = int'(r2q(pim[f][k / N][k % N], 16));
        e = (got_r > exp_r) ? got_r - exp_r : exp_r - got_r;
        if (((got_i > exp_i) ? got_i - exp_i : exp_i - got_i) > e)
          e = (got_i > exp_i) ? got_i - exp_i : exp_i - got_i;
        if (e > maxerr) maxerr = e;
        checks++;
        if (e > TOL) begin
          failures++;
          if (failures < 10)
            $display("frame %0d (s,t)=(%0d,%0d): got %0d %0d expected %0d %0d", f + 1, k / N, k % N,
                     got_r, got_i, exp_r, exp_i);
        end
      end
      $display("frame %0d: max error %0d LSB over %0d bins", f + 1, maxerr, NN);
    end
    host_out_ready <= 1'b0;
  endtask


  initial begin
    host_in_valid = 0; host_in_data = '0; host_out_ready = 0;

    // Frame 1: non-periodic image, pixels in [0, 0.5): 8-bit value << 6,
    // boundary image per the definition B = R + C
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++)
        img[0][i][j] = (20 + (150 * j) / N + (60 * i) / N + int'($urandom_range(0, 25))) << 6;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        bmat[i][j] = 0;
        if (i == 0 || i == N - 1) bmat[i][j] += img[0][N - 1 - i][j] - img[0][i][j];
        if (j == 0 || j == N - 1) bmat[i][j] += img[0][i][N - 1 - j] - img[0][i][j];
      end
    for (int k = 0; k < N; k++) begin colv[0][k] = bmat[k][0]; rowv[0][k] = bmat[0][k]; end
    make_reference(0);

    // Frame 2: full-scale checkerboard with alternating boundary vectors that
    // do not belong to it; Phat(N/2,N/2) then exceeds the 16-bit range.
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) img[1][i][j] = ((i + j) % 2 == 0) ? 32767 : -32767;
    for (int k = 0; k < N; k++) begin
      colv[1][k] = (k % 2 == 0) ? 29000 : -29000;
      rowv[1][k] = (k % 2 == 0) ? 29000 : -29000;
    end
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) bmat[i][j] = 0;
    for (int i = 0; i < N; i++) begin
      bmat[i][0] = colv[1][i];
      if (i > 0 && i < N - 1) bmat[i][N-1] = -colv[1][i];
    end
    for (int j = 1; j < N; j++) begin
      bmat[0][j] = rowv[1][j];
      if (j < N - 1) bmat[N-1][j] = -rowv[1][j];
    end
    bmat[N-1][N-1] = -colv[1][N-1] - (rowv[1][0] + rowv[1][N-1]);
    make_reference(1);

    repeat (5) @(posedge clk);
    rst_n = 1;
    fork
      send_frames();
      receive_frames();
    join
    while (n_done < FR) @(posedge clk);
    $display("frame cycles: %0d and %0d (stall-free schedule %0d per frame)",
             t_done[0], t_done[1] - t_done[0], IDEAL);
    checks++;
    if (real'(t_done[FR-1]) > 1.6 * FR * real'(IDEAL)) begin
      failures++;
      $display("frames took %0d cycles, more than 1.6 x %0d", t_done[FR-1], FR * IDEAL);
    end

    $display("mechanisms: dram stalls %0d, host-in backpressure %0d, result backpressure %0d, local-memory credit stalls %0d, Bhat(.,1) writes %0d, nu words %0d, saturated words %0d, phases load %0d col %0d row %0d unload %0d",
             u_mem.stalls, n_in_bp, n_out_bp, n_credit, n_bhat, n_nu, n_sat,
             n_phase[1], n_phase[2], n_phase[3], n_phase[4]);
    checks++; if (u_mem.stalls == 0) begin failures++; $display("no DRAM stall seen"); end
    checks++; if (n_in_bp == 0) begin failures++; $display("no host-in backpressure seen"); end
    checks++; if (n_out_bp == 0) begin failures++; $display("no result backpressure seen"); end
    checks++; if (n_credit == 0) begin failures++; $display("no local-memory credit stall seen"); end
    checks++; if (n_bhat != FR * N) begin failures++; $display("Bhat(.,1) writes %0d != %0d", n_bhat, FR * N); end
    checks++; if (n_nu != FR * NN) begin failures++; $display("nu words %0d != %0d", n_nu, FR * NN); end
    checks++; if (n_sat == 0) begin failures++; $display("no saturation seen"); end
    for (int p = 2; p <= 4; p++) begin
      checks++;
      if (n_phase[p] != FR) begin failures++; $display("phase %0d entered %0d times", p, n_phase[p]); end
    end
    checks++;
    if (n_phase[1] != FR + 1) begin failures++; $display("load phase entered %0d times", n_phase[1]); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
