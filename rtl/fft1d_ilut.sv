// fft1d_ilut: N-point 1D FFT core using inner loop unrolling (ILUT).
//
// The core computes X[k] = (1/N) * sum_n x[n] exp(-i 2 pi n k / N) for one
// vector at a time. It works in place on a register array of N complex
// words in three phases:
//   LOAD    one sample per accepted in_valid/in_ready beat, natural order,
//           written at its bit-reversed address;
//   CALC    log2(N) radix-2 stages; each stage has N/2 butterflies and the
//           inner loop over them is unrolled BFLY times, so BFLY butterflies
//           (butterfly.sv) update the array every cycle and a stage takes
//           N/(2*BFLY) cycles;
//   UNLOAD  one spectrum value per out_valid/out_ready beat, natural order.
// Latency from the last input beat to the first output beat is
// log2(N)*N/(2*BFLY) + 1 cycles; a vector occupies the core for
// N + log2(N)*N/(2*BFLY) + N cycles when neither side stalls.
// Each stage halves its results, so the output is the DFT divided by N.
// Samples are {imag, real}, each Q1.(DW-1). Twiddles W^k = exp(-i 2 pi k/N),
// Q2.(TWW-2), are constants computed at elaboration (opsd_pkg).
// The paper specifies only that ILUT runs several butterfly units of one
// stage in parallel; radix-2 DIT, the value of BFLY, the register storage
// and the non-overlapped load/compute/unload are this design's choices.
module fft1d_ilut
  import opsd_pkg::*;
#(
  parameter int N    = 512,
  parameter int DW   = 16,
  parameter int TWW  = 18,
  parameter int BFLY = 4
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  output logic            in_ready,
  input  logic [2*DW-1:0] in_data,
  output logic            out_valid,
  input  logic            out_ready,
  output logic [2*DW-1:0] out_data,
  output logic            busy        // high from first loaded sample to last output
);
  localparam int L   = $clog2(N);
  localparam int TF  = TWW - 2;
  localparam int NCY = N / (2 * BFLY);           // cycles per stage
  localparam int CW  = (NCY > 1) ? $clog2(NCY) : 1;
  localparam int SW  = (L > 1) ? $clog2(L) : 1;

  typedef enum logic [1:0] {S_LOAD, S_CALC, S_UNLOAD} state_e;
  state_e state;

  logic [2*DW-1:0]  mem [N];
  logic [2*TWW-1:0] tw  [N/2];

  // Twiddle table W^k, k = 0..N/2-1
  for (genvar k = 0; k < N/2; k++) begin : g_tw
    localparam longint C = q30_to(cos_q30(k, N), TF);
    localparam longint S = q30_to(sin_q30(k, N), TF);
    localparam logic [TWW-1:0] CR = TWW'(C);
    localparam logic [TWW-1:0] CI = TWW'(-S);
    assign tw[k] = {CI, CR};
  end

  function automatic logic [L-1:0] bitrev(input logic [L-1:0] v);
    for (int i = 0; i < L; i++) bitrev[i] = v[L-1-i];
  endfunction

  logic [L-1:0]  cnt;      // load / unload index
  logic [SW-1:0] stage;
  logic [CW-1:0] cyc;

  // Butterfly addressing for this cycle
  logic [L-1:0]     top_a [BFLY];
  logic [L-1:0]     bot_a [BFLY];
  logic [L-2:0]     tw_a  [BFLY];
  logic [2*DW-1:0]  bx    [BFLY];
  logic [2*DW-1:0]  by    [BFLY];

  always_comb begin
    for (int u = 0; u < BFLY; u++) begin
      logic [L-1:0] b, lowmask, low, high;
      b       = L'(cyc) * L'(BFLY) + L'(u);
      lowmask = (L'(1) << stage) - L'(1);
      low     = b & lowmask;
      high    = (b & ~lowmask) << 1;
      top_a[u] = high | low;
      bot_a[u] = (high | low) | (L'(1) << stage);
      tw_a[u]  = (L-1)'(low << (L - 1 - int'(stage)));
    end
  end

  for (genvar u = 0; u < BFLY; u++) begin : g_bf
    butterfly #(.DW(DW), .TWW(TWW)) u_bf (
      .a (mem[top_a[u]]),
      .b (mem[bot_a[u]]),
      .w (tw[tw_a[u]]),
      .x (bx[u]),
      .y (by[u])
    );
  end

  assign in_ready  = (state == S_LOAD);
  assign out_valid = (state == S_UNLOAD);
  assign out_data  = mem[cnt];
  assign busy      = (state != S_LOAD) || (cnt != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_LOAD;
      cnt   <= '0;
      stage <= '0;
      cyc   <= '0;
    end else begin
      unique case (state)
        S_LOAD: if (in_valid) begin
          cnt <= cnt + 1'b1;
          if (cnt == L'(N - 1)) begin
            state <= S_CALC;
            stage <= '0;
            cyc   <= '0;
          end
        end
        S_CALC: begin
          if (cyc == CW'(NCY - 1)) begin
            cyc <= '0;
            if (stage == SW'(L - 1)) begin
              state <= S_UNLOAD;
              cnt   <= '0;
            end else begin
              stage <= stage + 1'b1;
            end
          end else begin
            cyc <= cyc + 1'b1;
          end
        end
        S_UNLOAD: if (out_ready) begin
          cnt <= cnt + 1'b1;
          if (cnt == L'(N - 1)) state <= S_LOAD;
        end
        default: state <= S_LOAD;
      endcase
    end
  end

  // Data array: no reset, every word is written before it is read.
  always_ff @(posedge clk) begin
    if (state == S_LOAD && in_valid) mem[bitrev(cnt)] <= in_data;
    if (state == S_CALC) begin
      for (int u = 0; u < BFLY; u++) begin
        mem[top_a[u]] <= bx[u];
        mem[bot_a[u]] <= by[u];
      end
    end
  end

  initial begin
    assert (N >= 4 && (1 << L) == N) else $error("fft1d_ilut: N must be a power of two >= 4");
    assert (BFLY >= 1 && NCY * 2 * BFLY == N) else $error("fft1d_ilut: BFLY must divide N/2");
  end
endmodule
