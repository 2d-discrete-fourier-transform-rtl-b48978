// control_unit: frame scheduler and external-memory address generator.
//
// One frame of an N x N image goes through five phases (opsd_pkg::phase_e):
//   LOAD    host words arrive through the DMA FIFO: N*N pixels are written
//           to external memory region 0 (row-major, {16'b0, pixel}), then
//           B(.,1) and B(1,.) (N words each) go to boundary_bram.
//   COL     image column FFTs: column j is read from region 0 (address
//           i*N + j) into the read part of the local memory, the image core
//           transforms it, and the write part is drained to region 1 at
//           s*N + j, so region 1 holds the column spectra row-major. At the
//           same time the boundary core gets B(.,1) from boundary_bram and
//           its result, Bhat(.,1), is written back to boundary_bram.
//   ROW     rows of region 1 are read in order and transformed by the image
//           core, while nu_synth feeds the boundary core the matching rows of
//           the boundary image's column spectrum. psd_combine joins both
//           and its result Phat is written row-major to region 0.
//   UNLOAD  region 0 is read in order and sent to the host through the DMA
//           FIFO.
//   IDLE    one cycle between frames; frame_done pulses on leaving UNLOAD.
// External memory port: a request (mem_req, mem_we, mem_addr, mem_wdata) is
// taken in a cycle with mem_gnt high; read data returns later, in order,
// with mem_rvalid. Writes have priority over reads; reads are issued only
// while the destination (local memory, or the DMA FIFO in UNLOAD) has
// reserved room, so returning data is never refused.
// The paper gives the CU's role (scheduling transfers between local and
// external memory) and the data placement (image in external memory,
// boundary vectors in block RAM); the phase sequence, address map and
// arbitration are this design's choices.
module control_unit
  import opsd_pkg::*;
#(
  parameter int N         = 512,
  parameter int BDW       = 32,
  parameter int DMA_DEPTH = 64
) (
  input  logic                           clk,
  input  logic                           rst_n,
  output phase_e                         phase,
  output logic                           frame_done,
  // host -> FPGA words from the DMA FIFO
  input  logic                           hin_valid,
  output logic                           hin_ready,
  input  logic [15:0]                    hin_data,
  // FPGA -> host results into the DMA FIFO
  output logic                           hout_valid,
  output logic [31:0]                    hout_data,
  input  logic [$clog2(DMA_DEPTH+1)-1:0] hout_count,
  // external memory
  output logic                           mem_req,
  output logic                           mem_we,
  output logic [31:0]                    mem_addr,
  output logic [31:0]                    mem_wdata,
  input  logic                           mem_gnt,
  input  logic                           mem_rvalid,
  input  logic [31:0]                    mem_rdata,
  // local memory
  output logic                           lm_rd_issue,
  input  logic                           lm_rd_credit,
  output logic                           lm_ext_rvalid,
  input  logic                           lm_wr_valid,
  output logic                           lm_wr_ready,
  input  logic [31:0]                    lm_wr_data,
  // boundary_bram
  output logic                           col_we,
  output logic [$clog2(N)-1:0]           col_waddr,
  output logic [15:0]                    col_wdata,
  output logic [$clog2(N)-1:0]           col_raddr,
  input  logic [15:0]                    col_rdata,
  output logic                           row_we,
  output logic [$clog2(N)-1:0]           row_waddr,
  output logic [15:0]                    row_wdata,
  output logic                           bhat_we,
  output logic [$clog2(N)-1:0]           bhat_waddr,
  output logic [2*BDW-1:0]               bhat_wdata,
  // boundary core during COL (B(.,1) in, Bhat(.,1) out)
  output logic                           bcore_in_valid,
  input  logic                           bcore_in_ready,
  output logic [2*BDW-1:0]               bcore_in_data,
  input  logic                           bcore_out_valid,
  input  logic [2*BDW-1:0]               bcore_out_data,
  // one-cycle start pulses for the ROW phase units
  output logic                           row_start
);
  localparam int L   = $clog2(N);
  localparam int NN  = N * N;
  localparam int CW  = 2 * L + 1;
  localparam int DCW = $clog2(DMA_DEPTH + 1);
  localparam logic [31:0] REGION1 = 32'(NN);

  logic [CW-1:0] ld_cnt, rd_cnt, wr_cnt, ret_cnt;
  logic [L:0]    bin_cnt, bout_cnt;
  logic [DCW:0]  un_inflight;
  logic          rd_more, wr_more, do_wr, do_rd, rd_credit;
  logic [L-1:0]  rd_hi, rd_lo, wr_hi, wr_lo;

  assign rd_hi = rd_cnt[2*L-1:L];
  assign rd_lo = rd_cnt[L-1:0];
  assign wr_hi = wr_cnt[2*L-1:L];
  assign wr_lo = wr_cnt[L-1:0];

  assign rd_more = (rd_cnt != CW'(NN));
  assign wr_more = (wr_cnt != CW'(NN));

  // ---------------------------------------------------------------- LOAD
  logic ld_img, ld_col, ld_row;
  assign ld_img = (phase == PH_LOAD) && (ld_cnt < CW'(NN));
  assign ld_col = (phase == PH_LOAD) && (ld_cnt >= CW'(NN)) && (ld_cnt < CW'(NN + N));
  assign ld_row = (phase == PH_LOAD) && (ld_cnt >= CW'(NN + N));

  assign col_we    = ld_col && hin_valid;
  assign col_waddr = ld_cnt[L-1:0];          // NN is a multiple of N
  assign col_wdata = hin_data;
  assign row_we    = ld_row && hin_valid;
  assign row_waddr = ld_cnt[L-1:0];
  assign row_wdata = hin_data;

  // ------------------------------------------- external memory arbitration
  always_comb begin
    rd_credit = 1'b0;
    unique case (phase)
      PH_COL, PH_ROW: rd_credit = lm_rd_credit;
      PH_UNLOAD:      rd_credit = (DCW + 1)'(hout_count) + un_inflight < (DCW + 1)'(DMA_DEPTH);
      default:        rd_credit = 1'b0;
    endcase
  end

  always_comb begin
    mem_req     = 1'b0;
    mem_we      = 1'b0;
    mem_addr    = '0;
    mem_wdata   = '0;
    hin_ready   = 1'b0;
    lm_wr_ready = 1'b0;
    do_wr       = 1'b0;
    do_rd       = 1'b0;
    if (phase == PH_LOAD) begin
      if (ld_img) begin
        mem_req   = hin_valid;
        mem_we    = 1'b1;
        mem_addr  = 32'(ld_cnt);
        mem_wdata = {16'b0, hin_data};
        hin_ready = mem_gnt;
      end else begin
        hin_ready = 1'b1;                    // boundary vectors go to BRAM
      end
    end else if ((phase == PH_COL || phase == PH_ROW) && lm_wr_valid) begin
      mem_req     = 1'b1;
      mem_we      = 1'b1;
      mem_wdata   = lm_wr_data;
      // COL: result s of column j -> region 1 at s*N + j; ROW: row-major, region 0
      mem_addr    = (phase == PH_COL) ? REGION1 + 32'({wr_lo, wr_hi}) : 32'(wr_cnt);
      lm_wr_ready = mem_gnt;
      do_wr       = mem_gnt;
    end else if (phase inside {PH_COL, PH_ROW, PH_UNLOAD} && rd_more && rd_credit) begin
      mem_req  = 1'b1;
      // COL: element i of column j at i*N + j; ROW: region 1 row-major; UNLOAD: region 0
      unique case (phase)
        PH_COL:  mem_addr = 32'({rd_lo, rd_hi});
        PH_ROW:  mem_addr = REGION1 + 32'(rd_cnt);
        default: mem_addr = 32'(rd_cnt);
      endcase
      do_rd = mem_gnt;
    end
  end

  assign lm_rd_issue   = do_rd && (phase != PH_UNLOAD);
  assign lm_ext_rvalid = mem_rvalid && (phase != PH_UNLOAD);
  assign hout_valid    = mem_rvalid && (phase == PH_UNLOAD);
  assign hout_data     = mem_rdata;

  // --------------------------------- boundary column FFT during COL phase
  // col_raddr holds the element on offer and steps when it is taken, so
  // col_rdata always matches bin_cnt once primed.
  logic bprimed, badv;
  assign bcore_in_valid = (phase == PH_COL) && bprimed && (bin_cnt != (L+1)'(N));
  assign bcore_in_data  = {BDW'(0), BDW'(signed'(col_rdata)) <<< (BDW - 16)};
  assign badv           = bcore_in_valid && bcore_in_ready;
  assign col_raddr      = badv ? L'(bin_cnt + 1'b1) : L'(bin_cnt);

  assign bhat_we    = (phase == PH_COL) && bcore_out_valid;
  assign bhat_waddr = L'(bout_cnt);
  assign bhat_wdata = bcore_out_data;

  // ----------------------------------------------------------- sequencing
  logic col_done, row_done, un_done;
  assign col_done = !wr_more && (bout_cnt == (L+1)'(N));
  assign row_done = !wr_more;
  assign un_done  = (ret_cnt == CW'(NN));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase       <= PH_IDLE;
      ld_cnt      <= '0;
      rd_cnt      <= '0;
      wr_cnt      <= '0;
      ret_cnt     <= '0;
      bin_cnt     <= '0;
      bout_cnt    <= '0;
      bprimed     <= 1'b0;
      un_inflight <= '0;
      frame_done  <= 1'b0;
      row_start   <= 1'b0;
    end else begin
      frame_done <= 1'b0;
      row_start  <= 1'b0;
      if (do_rd) rd_cnt <= rd_cnt + 1'b1;
      if (do_wr) wr_cnt <= wr_cnt + 1'b1;
      unique case (phase)
        PH_IDLE: begin
          ld_cnt <= '0;
          phase  <= PH_LOAD;
        end
        PH_LOAD: if (hin_valid && hin_ready) begin
          ld_cnt <= ld_cnt + 1'b1;
          if (ld_cnt == CW'(NN + 2 * N - 1)) begin
            phase    <= PH_COL;
            rd_cnt   <= '0;
            wr_cnt   <= '0;
            bin_cnt  <= '0;
            bout_cnt <= '0;
            bprimed  <= 1'b0;
          end
        end
        PH_COL: begin
          bprimed <= 1'b1;                   // col_raddr = 0 was presented
          if (badv) bin_cnt <= bin_cnt + 1'b1;
          if (bhat_we) bout_cnt <= bout_cnt + 1'b1;
          if (col_done) begin
            phase     <= PH_ROW;
            rd_cnt    <= '0;
            wr_cnt    <= '0;
            row_start <= 1'b1;
          end
        end
        PH_ROW: if (row_done) begin
          phase       <= PH_UNLOAD;
          rd_cnt      <= '0;
          ret_cnt     <= '0;
          un_inflight <= '0;
        end
        PH_UNLOAD: begin
          un_inflight <= un_inflight + (DCW + 1)'(do_rd) - (DCW + 1)'(mem_rvalid);
          if (mem_rvalid) ret_cnt <= ret_cnt + 1'b1;
          if (un_done) begin
            phase      <= PH_IDLE;
            frame_done <= 1'b1;
          end
        end
        default: phase <= PH_IDLE;
      endcase
    end
  end

  // Read data only returns for reads this unit issued.
  assert property (@(posedge clk) disable iff (!rst_n)
                   mem_rvalid |-> phase inside {PH_COL, PH_ROW, PH_UNLOAD});
endmodule
