// nu_synth: rebuilds the column-wise FFT of the boundary image.
//
// The boundary image B is zero except on its border, and its interior
// columns are b(1,j) at the top and -b(1,j) at the bottom. Their column
// FFTs are therefore all multiples of one vector
//     nu_s = 1 - w^(N-s) = (1 - cos(2 pi s/N)) - i sin(2 pi s/N),
// and the column-wise FFT of B is, for column j (0-based):
//     j = 0        : Bhat1(s)                      (FFT of B(.,1))
//     0 < j < N-1  : b(1,j) * nu_s
//     j = N-1      : -Bhat1(s) + (b(1,0) + b(1,N-1)) * nu_s
// Only Bhat1 (one 1D FFT) and the row vector b(1,.) are needed; both are
// read from boundary_bram. The unit emits the matrix row by row (s outer,
// j inner), N*N complex words, ready for the row FFTs of the boundary
// image. The b*nu terms are divided by N to match Bhat1, which the FFT
// core delivers divided by N.
// Interface: start (one cycle) begins a frame; it first reads b(1,0) and
// b(1,N-1), then (2 cycles later) streams on out_valid/out_ready, one word per
// cycle when not stalled. done pulses with the last word.
// Outputs are {imag, real}, each Q1.(BDW-1); nu uses Q2.30 constants.
// The formulas are the paper's (its eqs. 9-12); the row-major emission
// order, the formats and the rounding are this design's choices.
module nu_synth
  import opsd_pkg::*;
#(
  parameter int N   = 512,
  parameter int BDW = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  // boundary_bram read ports (synchronous read)
  output logic [$clog2(N)-1:0] row_raddr,
  input  logic [15:0]          row_rdata,
  output logic [$clog2(N)-1:0] bhat_raddr,
  input  logic [2*BDW-1:0]     bhat_rdata,
  // column-FFT of B, row-major
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [2*BDW-1:0]     out_data,
  output logic                 done
);
  localparam int L  = $clog2(N);
  localparam int NF = 30;                 // nu fraction bits
  localparam int SH = 15 + NF - (BDW - 1) + L;  // b(Q.15)*nu(Q.30) -> Q.(BDW-1), /N

  typedef enum logic [1:0] {S_IDLE, S_PRE0, S_PRE1, S_RUN} state_e;
  state_e state;

  // nu table
  logic signed [32:0] nu_re [N];     // reaches 2.0 at s = N/2
  logic signed [32:0] nu_im [N];
  for (genvar k = 0; k < N; k++) begin : g_nu
    localparam longint C = cos_q30(k, N);
    localparam longint S = sin_q30(k, N);
    assign nu_re[k] = 33'(ONE_Q30 - C);
    assign nu_im[k] = 33'(-S);
  end

  logic [L-1:0]        s_cur, j_cur, s_nxt, j_nxt;
  logic                adv;
  logic signed [16:0]  corner;            // b(1,0) + b(1,N-1)

  assign out_valid = (state == S_RUN);
  assign adv       = out_valid && out_ready;
  assign done      = adv && (s_cur == L'(N - 1)) && (j_cur == L'(N - 1));

  always_comb begin
    j_nxt = j_cur + 1'b1;
    s_nxt = (j_cur == L'(N - 1)) ? s_cur + 1'b1 : s_cur;
  end

  // Read address: hold the current element, step when it is taken.
  always_comb begin
    row_raddr  = j_cur;
    bhat_raddr = s_cur;
    unique case (state)
      S_IDLE:  row_raddr = '0;
      S_PRE0:  row_raddr = L'(N - 1);
      S_PRE1:  row_raddr = '0;
      S_RUN:   if (adv) begin row_raddr = j_nxt; bhat_raddr = s_nxt; end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      s_cur  <= '0;
      j_cur  <= '0;
      corner <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin                 // address 0 presented
          s_cur <= '0;
          j_cur <= '0;
          state <= S_PRE0;
        end
        S_PRE0: begin
          corner <= 17'(signed'(row_rdata));     // b(1,0)
          state  <= S_PRE1;
        end
        S_PRE1: begin
          corner <= corner + 17'(signed'(row_rdata));  // + b(1,N-1)
          state  <= S_RUN;
        end
        S_RUN: if (adv) begin
          j_cur <= j_nxt;
          s_cur <= s_nxt;
          if (done) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Output arithmetic
  logic signed [BDW-1:0] bh_re, bh_im;
  logic signed [16:0]    coef;
  logic signed [63:0]    pr, pi_;
  logic signed [63:0]    o_re, o_im;

  always_comb begin
    bh_re = bhat_rdata[BDW-1:0];
    bh_im = bhat_rdata[2*BDW-1:BDW];
    coef  = (j_cur == L'(N - 1)) ? corner : 17'(signed'(row_rdata));
    pr    = (64'(coef) * 64'(nu_re[s_cur]) + (64'sd1 <<< (SH - 1))) >>> SH;
    pi_   = (64'(coef) * 64'(nu_im[s_cur]) + (64'sd1 <<< (SH - 1))) >>> SH;
    if (j_cur == '0) begin
      o_re = 64'(bh_re);
      o_im = 64'(bh_im);
    end else if (j_cur == L'(N - 1)) begin
      o_re = pr  - 64'(bh_re);
      o_im = pi_ - 64'(bh_im);
    end else begin
      o_re = pr;
      o_im = pi_;
    end
    out_data = {BDW'(sat(o_im, BDW)), BDW'(sat(o_re, BDW))};
  end
endmodule
