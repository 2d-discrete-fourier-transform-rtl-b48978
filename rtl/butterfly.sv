// butterfly: radix-2 decimation-in-time butterfly of the 1D FFT core.
//
//   x = (a + w*b) / 2,   y = (a - w*b) / 2
//
// a, b, x, y are complex Q1.(DW-1) numbers packed {imag, real}; the twiddle
// w is complex Q2.(TWW-2) so that 1.0 is exact. The product w*b is rounded
// back to DW-1 fraction bits, the sums are halved with rounding (one halving
// per FFT stage keeps a log2(N)-stage transform inside the word, so the core
// returns DFT/N) and the results are saturated to DW bits.
// Purely combinational; the core that uses it registers the results.
// The paper only names butterfly units; radix-2 DIT, the per-stage halving,
// round-half-up and saturation are this design's choices.
module butterfly #(
  parameter int DW  = 16,
  parameter int TWW = 18
) (
  input  logic [2*DW-1:0]  a,
  input  logic [2*DW-1:0]  b,
  input  logic [2*TWW-1:0] w,
  output logic [2*DW-1:0]  x,
  output logic [2*DW-1:0]  y
);
  localparam int TF = TWW - 2;          // twiddle fraction bits
  localparam int PW = DW + TWW + 1;     // product width

  logic signed [DW-1:0]  ar, ai, br, bi;
  logic signed [TWW-1:0] wr, wi;
  logic signed [PW-1:0]  pr, pi_;       // w*b, full precision
  logic signed [DW+2:0]  tr, ti;        // w*b rounded to DW-1 fraction bits
  logic signed [DW+3:0]  sxr, sxi, syr, syi;
  logic signed [DW+3:0]  hxr, hxi, hyr, hyi;

  function automatic logic signed [DW-1:0] sat_dw(input logic signed [DW+3:0] v);
    if (v > $signed({{4{1'b0}}, 1'b0, {(DW-1){1'b1}}}))      return {1'b0, {(DW-1){1'b1}}};
    else if (v < $signed({{4{1'b1}}, 1'b1, {(DW-1){1'b0}}})) return {1'b1, {(DW-1){1'b0}}};
    else                                                     return v[DW-1:0];
  endfunction

  always_comb begin
    ar = a[DW-1:0];  ai = a[2*DW-1:DW];
    br = b[DW-1:0];  bi = b[2*DW-1:DW];
    wr = w[TWW-1:0]; wi = w[2*TWW-1:TWW];
    pr  = PW'(br) * PW'(wr) - PW'(bi) * PW'(wi);
    pi_ = PW'(br) * PW'(wi) + PW'(bi) * PW'(wr);
    tr  = (DW+3)'((pr  + (PW'(1) <<< (TF-1))) >>> TF);
    ti  = (DW+3)'((pi_ + (PW'(1) <<< (TF-1))) >>> TF);
    sxr = (DW+4)'(ar) + (DW+4)'(tr);
    sxi = (DW+4)'(ai) + (DW+4)'(ti);
    syr = (DW+4)'(ar) - (DW+4)'(tr);
    syi = (DW+4)'(ai) - (DW+4)'(ti);
    hxr = (sxr + 1) >>> 1;
    hxi = (sxi + 1) >>> 1;
    hyr = (syr + 1) >>> 1;
    hyi = (syi + 1) >>> 1;
    x = {sat_dw(hxi), sat_dw(hxr)};
    y = {sat_dw(hyi), sat_dw(hyr)};
  end
endmodule
