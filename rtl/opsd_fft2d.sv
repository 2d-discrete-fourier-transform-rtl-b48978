// opsd_fft2d: 2D FFT of an N x N image with simultaneous edge-artifact
// removal by optimized periodic-plus-smooth decomposition (OPSD).
//
// For each frame the host sends the image and two boundary vectors of the
// boundary image B (first column B(.,1) and first row B(1,.)); the design
// returns Phat = Ihat - Shat, the 2D DFT of the image with the spectrum of
// its smooth component removed (the cross-shaped artifacts of a
// non-periodic image), divided by N*N.
//
// Structure:
//   dma_fifo       host word stream in (16-bit) and result stream out (32-bit)
//   control_unit   phases LOAD, COL, ROW, UNLOAD; external memory addresses
//   local_memory   FIFO OUT (memory -> image core), FIFO IN (results -> memory)
//   u_fft_img      ILUT 1D FFT core for the image, DW-bit samples; column
//                  FFTs in COL, row FFTs in ROW (row-column decomposition)
//   u_fft_bnd      ILUT 1D FFT core for the boundary image, BDW-bit samples;
//                  its one column FFT, of B(.,1), in COL, its row FFTs in ROW
//   boundary_bram  B(.,1), B(1,.) and Bhat(.,1)
//   nu_synth       the other N-1 column FFTs of B, rebuilt from Bhat(.,1),
//                  B(1,.) and the vector nu, without an FFT
//   psd_combine    Shat = Bhat / (2cos + 2cos - 4) and Phat = Ihat - Shat
// External memory (a DRAM on the board, not part of this design) is reached
// through the mem_* port: region 0 at word 0 and region 1 at word N*N, one
// 32-bit word per request, read data in order (see control_unit).
// Host words per frame: N*N pixels (row-major, 16-bit two's complement,
// Q1.15), then N words of B(.,1), then N words of B(1,.). Results: N*N words
// {imag, real}, Q1.15 each, row-major in (s,t). Saturation of a result word
// is flagged on sat_event.
// The split into blocks, the 16-bit image precision, the boundary vectors
// in block RAM and the column FFT shortcut follow the paper; the two-core
// arrangement, the boundary path width BDW, the butterfly count and the
// sequencing are this design's choices.
module opsd_fft2d
  import opsd_pkg::*;
#(
  parameter int N         = 512,
  parameter int BFLY      = 4,
  parameter int BDW       = 32,
  parameter int DMA_DEPTH = 64,
  parameter int LM_DEPTH  = 32
) (
  input  logic        clk,
  input  logic        rst_n,
  // host -> FPGA
  input  logic        host_in_valid,
  output logic        host_in_ready,
  input  logic [15:0] host_in_data,
  // FPGA -> host
  output logic        host_out_valid,
  input  logic        host_out_ready,
  output logic [31:0] host_out_data,
  // external memory
  output logic        mem_req,
  output logic        mem_we,
  output logic [31:0] mem_addr,
  output logic [31:0] mem_wdata,
  input  logic        mem_gnt,
  input  logic        mem_rvalid,
  input  logic [31:0] mem_rdata,
  // status
  output phase_e      phase,
  output logic        frame_done,
  output logic        sat_event,
  output logic [1:0]  cores_busy,    // {boundary core, image core}
  output logic [$clog2(DMA_DEPTH+1)-1:0] host_in_level
);
  localparam int DW = 16;
  localparam int L  = $clog2(N);
  localparam int DC = $clog2(DMA_DEPTH + 1);

  // DMA FIFO
  logic            h2f_valid, h2f_ready;
  logic [15:0]     h2f_data;
  logic [DC-1:0]   f2h_count;
  logic            f2h_valid, f2h_ready;
  logic [31:0]     f2h_data;

  dma_fifo #(.DEPTH(DMA_DEPTH)) u_dma (
    .clk, .rst_n,
    .h2f_in_valid (host_in_valid), .h2f_in_ready (host_in_ready), .h2f_in_data (host_in_data),
    .h2f_out_valid(h2f_valid),     .h2f_out_ready(h2f_ready),     .h2f_out_data(h2f_data),
    .h2f_count    (host_in_level),
    .f2h_in_valid (f2h_valid),     .f2h_in_ready (f2h_ready),     .f2h_in_data (f2h_data),
    .f2h_count    (f2h_count),
    .f2h_out_valid(host_out_valid), .f2h_out_ready(host_out_ready), .f2h_out_data(host_out_data)
  );

  // Control unit <-> local memory, boundary BRAM, boundary core
  logic                lm_rd_issue, lm_rd_credit, lm_ext_rvalid;
  logic                lm_wr_out_valid, lm_wr_out_ready;
  logic [31:0]         lm_wr_out_data;
  logic                col_we, row_we, bhat_we;
  logic [L-1:0]        col_waddr, col_raddr, row_waddr, row_raddr, bhat_waddr, bhat_raddr;
  logic [15:0]         col_wdata, col_rdata, row_wdata, row_rdata;
  logic [2*BDW-1:0]    bhat_wdata, bhat_rdata;
  logic                cu_b_valid, cu_b_ready;
  logic [2*BDW-1:0]    cu_b_data;
  logic                row_start;

  // Cores
  logic                img_in_valid, img_in_ready, img_out_valid, img_out_ready, img_busy;
  logic [2*DW-1:0]     img_in_data, img_out_data;
  logic                bnd_in_valid, bnd_in_ready, bnd_out_valid, bnd_out_ready, bnd_busy;
  logic [2*BDW-1:0]    bnd_in_data, bnd_out_data;
  logic                nu_valid, nu_ready;
  logic [2*BDW-1:0]    nu_data;
  logic                cmb_img_ready, cmb_bnd_ready, cmb_valid, cmb_ready, cmb_sat;
  logic [2*DW-1:0]     cmb_data;
  logic                wr_in_valid, wr_in_ready;
  logic [31:0]         wr_in_data;

  control_unit #(.N(N), .BDW(BDW), .DMA_DEPTH(DMA_DEPTH)) u_cu (
    .clk, .rst_n, .phase, .frame_done,
    .hin_valid(h2f_valid), .hin_ready(h2f_ready), .hin_data(h2f_data),
    .hout_valid(f2h_valid), .hout_data(f2h_data), .hout_count(f2h_count),
    .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_gnt, .mem_rvalid, .mem_rdata,
    .lm_rd_issue, .lm_rd_credit, .lm_ext_rvalid,
    .lm_wr_valid(lm_wr_out_valid), .lm_wr_ready(lm_wr_out_ready), .lm_wr_data(lm_wr_out_data),
    .col_we, .col_waddr, .col_wdata, .col_raddr, .col_rdata,
    .row_we, .row_waddr, .row_wdata,
    .bhat_we, .bhat_waddr, .bhat_wdata,
    .bcore_in_valid(cu_b_valid), .bcore_in_ready(cu_b_ready), .bcore_in_data(cu_b_data),
    .bcore_out_valid(bnd_out_valid), .bcore_out_data(bnd_out_data),
    .row_start
  );

  local_memory #(.DEPTH(LM_DEPTH)) u_lm (
    .clk, .rst_n,
    .rd_issue(lm_rd_issue), .rd_credit(lm_rd_credit),
    .ext_rvalid(lm_ext_rvalid), .ext_rdata(mem_rdata),
    .rd_valid(img_in_valid), .rd_ready(img_in_ready), .rd_data(img_in_data),
    .wr_in_valid, .wr_in_ready, .wr_in_data,
    .wr_out_valid(lm_wr_out_valid), .wr_out_ready(lm_wr_out_ready), .wr_out_data(lm_wr_out_data),
    .wr_level()
  );

  fft1d_ilut #(.N(N), .DW(DW), .TWW(18), .BFLY(BFLY)) u_fft_img (
    .clk, .rst_n,
    .in_valid(img_in_valid), .in_ready(img_in_ready), .in_data(img_in_data),
    .out_valid(img_out_valid), .out_ready(img_out_ready), .out_data(img_out_data),
    .busy(img_busy)
  );

  fft1d_ilut #(.N(N), .DW(BDW), .TWW(32), .BFLY(BFLY)) u_fft_bnd (
    .clk, .rst_n,
    .in_valid(bnd_in_valid), .in_ready(bnd_in_ready), .in_data(bnd_in_data),
    .out_valid(bnd_out_valid), .out_ready(bnd_out_ready), .out_data(bnd_out_data),
    .busy(bnd_busy)
  );

  boundary_bram #(.N(N), .BDW(BDW)) u_bram (
    .clk,
    .col_we, .col_waddr, .col_wdata, .col_raddr, .col_rdata,
    .row_we, .row_waddr, .row_wdata, .row_raddr, .row_rdata,
    .bhat_we, .bhat_waddr, .bhat_wdata, .bhat_raddr, .bhat_rdata
  );

  nu_synth #(.N(N), .BDW(BDW)) u_nu (
    .clk, .rst_n, .start(row_start),
    .row_raddr, .row_rdata, .bhat_raddr, .bhat_rdata,
    .out_valid(nu_valid), .out_ready(nu_ready), .out_data(nu_data), .done()
  );

  psd_combine #(.N(N), .DW(DW), .BDW(BDW)) u_comb (
    .clk, .rst_n, .start(row_start),
    .img_valid(img_out_valid && phase == PH_ROW), .img_ready(cmb_img_ready), .img_data(img_out_data),
    .bnd_valid(bnd_out_valid && phase == PH_ROW), .bnd_ready(cmb_bnd_ready), .bnd_data(bnd_out_data),
    .out_valid(cmb_valid), .out_ready(cmb_ready), .out_data(cmb_data), .sat_o(cmb_sat)
  );

  // Phase-dependent steering
  always_comb begin
    // boundary core input: B(.,1) in COL, rebuilt column spectra in ROW
    if (phase == PH_COL) begin
      bnd_in_valid = cu_b_valid;
      bnd_in_data  = cu_b_data;
    end else begin
      bnd_in_valid = nu_valid;
      bnd_in_data  = nu_data;
    end
    cu_b_ready = (phase == PH_COL) && bnd_in_ready;
    nu_ready   = (phase != PH_COL) && bnd_in_ready;
    // boundary core output: to boundary_bram in COL, to psd_combine in ROW
    bnd_out_ready = (phase == PH_COL) ? 1'b1 : cmb_bnd_ready;
    // image core output: straight to FIFO IN in COL, through psd_combine in ROW
    if (phase == PH_ROW) begin
      wr_in_valid   = cmb_valid;
      wr_in_data    = cmb_data;
      cmb_ready     = wr_in_ready;
      img_out_ready = cmb_img_ready;
    end else begin
      wr_in_valid   = img_out_valid;
      wr_in_data    = img_out_data;
      cmb_ready     = 1'b0;
      img_out_ready = wr_in_ready;
    end
  end

  assign sat_event  = cmb_valid && cmb_ready && cmb_sat;
  assign cores_busy = {bnd_busy, img_busy};

  // The control unit reserves DMA FIFO space before it reads results back.
  assert property (@(posedge clk) disable iff (!rst_n) f2h_valid |-> f2h_ready);

endmodule
