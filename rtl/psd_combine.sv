// psd_combine: removes the smooth component from the image spectrum.
//
// For each frequency (s,t), taken in row-major order, it pairs the image
// spectrum Ihat(s,t) with the boundary-image spectrum Bhat(s,t) and forms
//     Shat(s,t) = Bhat(s,t) / (2 cos(2 pi s/N) + 2 cos(2 pi t/N) - 4)
//     Phat(s,t) = Ihat(s,t) - Shat(s,t),        Shat(0,0) = 0,
// i.e. the spectrum of the periodic component of the image, free of the
// cross-shaped edge artifacts.
// Inputs are two valid/ready streams that are joined: a pair is taken when
// both are valid and the output register is free. img is {imag, real}
// Q1.(DW-1), bnd is {imag, real} Q1.(BDW-1), both already divided by N*N
// by the FFT cores, so the ratio needs no further scaling. The denominator
// is built from a cosine table in Q2.28 (Q4.28 after the sum). The divider
// is written as one combinational division followed by the output
// register (latency 1 cycle, one result per cycle); a timing-driven
// implementation would pipeline it. Results saturate to DW bits; sat_o
// flags a saturated word. start (one cycle) resets (s,t) to (0,0).
// The formula and the (0,0) exclusion are the paper's; doing the division
// on the FPGA, the formats and the saturation are this design's choices.
module psd_combine
  import opsd_pkg::*;
#(
  parameter int N   = 512,
  parameter int DW  = 16,
  parameter int BDW = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic              img_valid,
  output logic              img_ready,
  input  logic [2*DW-1:0]   img_data,
  input  logic              bnd_valid,
  output logic              bnd_ready,
  input  logic [2*BDW-1:0]  bnd_data,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [2*DW-1:0]   out_data,
  output logic              sat_o
);
  localparam int L  = $clog2(N);
  localparam int DF = 28;                       // denominator fraction bits

  logic signed [31:0] cosv [N];                 // cos(2 pi k/N), Q2.28 in 32 bits
  for (genvar k = 0; k < N; k++) begin : g_cos
    localparam longint C = q30_to(cos_q30(k, N), DF);
    assign cosv[k] = 32'(C);
  end

  logic [L-1:0] s, t;
  logic         take, free;

  assign free      = !out_valid || out_ready;
  assign take      = img_valid && bnd_valid && free;
  assign img_ready = bnd_valid && free;
  assign bnd_ready = img_valid && free;

  logic signed [DW-1:0]  ir, ii;
  logic signed [BDW-1:0] br, bi;
  logic signed [35:0]    den;
  logic signed [63:0]    qr, qi, pr, pi_;
  logic                  zero_bin, sat_r, sat_i;

  always_comb begin
    ir  = img_data[DW-1:0];
    ii  = img_data[2*DW-1:DW];
    br  = bnd_data[BDW-1:0];
    bi  = bnd_data[2*BDW-1:BDW];
    den = 36'(cosv[s]) * 36'sd2 + 36'(cosv[t]) * 36'sd2 - (36'sd4 <<< DF);
    zero_bin = (s == '0) && (t == '0);
    if (zero_bin) begin
      qr = '0;
      qi = '0;
    end else begin
      // Shat in Q.(BDW-1): (B << DF) / den
      qr = (64'(br) <<< DF) / 64'(den);
      qi = (64'(bi) <<< DF) / 64'(den);
    end
    // Phat = Ihat - Shat in Q.(DW-1), Shat rounded
    pr  = (64'(ir) <<< (BDW - DW)) - qr;
    pi_ = (64'(ii) <<< (BDW - DW)) - qi;
    pr  = (pr  + (64'sd1 <<< (BDW - DW - 1))) >>> (BDW - DW);
    pi_ = (pi_ + (64'sd1 <<< (BDW - DW - 1))) >>> (BDW - DW);
    sat_r = (sat(pr, DW) != pr);
    sat_i = (sat(pi_, DW) != pi_);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
      sat_o     <= 1'b0;
      s         <= '0;
      t         <= '0;
    end else begin
      if (start) begin
        s <= '0;
        t <= '0;
      end else if (take) begin
        t <= t + 1'b1;
        if (t == L'(N - 1)) s <= s + 1'b1;
      end
      if (take) begin
        out_valid <= 1'b1;
        out_data  <= {DW'(sat(pi_, DW)), DW'(sat(pr, DW))};
        sat_o     <= sat_r || sat_i;
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end
    end
  end
endmodule
