// boundary_bram: on-chip storage for the boundary vectors of one frame.
//
// Three arrays, each with one write port and one synchronous read port
// (read data appears the cycle after the address, block-RAM style):
//   col   B(.,1), the first column of the boundary image, 16-bit Q1.15;
//   row   B(1,.), the first row of the boundary image, 16-bit Q1.15;
//   bhat  the column FFT of B(.,1) divided by N, complex {imag, real},
//         each Q1.(BDW-1).
// Only these 3N words of the boundary image are kept: every other column
// of its column-wise FFT is rebuilt from them (see nu_synth). Keeping the
// boundary vectors in block RAM, and the image in external memory, follows
// the paper; the port arrangement is this design's choice.
module boundary_bram #(
  parameter int N   = 512,
  parameter int BDW = 32
) (
  input  logic                 clk,
  input  logic                 col_we,
  input  logic [$clog2(N)-1:0] col_waddr,
  input  logic [15:0]          col_wdata,
  input  logic [$clog2(N)-1:0] col_raddr,
  output logic [15:0]          col_rdata,
  input  logic                 row_we,
  input  logic [$clog2(N)-1:0] row_waddr,
  input  logic [15:0]          row_wdata,
  input  logic [$clog2(N)-1:0] row_raddr,
  output logic [15:0]          row_rdata,
  input  logic                 bhat_we,
  input  logic [$clog2(N)-1:0] bhat_waddr,
  input  logic [2*BDW-1:0]     bhat_wdata,
  input  logic [$clog2(N)-1:0] bhat_raddr,
  output logic [2*BDW-1:0]     bhat_rdata
);
  logic [15:0]      col_mem  [N];
  logic [15:0]      row_mem  [N];
  logic [2*BDW-1:0] bhat_mem [N];

  always_ff @(posedge clk) begin
    if (col_we)  col_mem[col_waddr]   <= col_wdata;
    if (row_we)  row_mem[row_waddr]   <= row_wdata;
    if (bhat_we) bhat_mem[bhat_waddr] <= bhat_wdata;
    col_rdata  <= col_mem[col_raddr];
    row_rdata  <= row_mem[row_raddr];
    bhat_rdata <= bhat_mem[bhat_raddr];
  end
endmodule
