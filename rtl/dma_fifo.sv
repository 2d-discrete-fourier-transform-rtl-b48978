// dma_fifo: the DMA FIFO between the host link and the FPGA logic.
//
// Two independent FIFOs, one per direction:
//   h2f  host-to-FPGA, 16-bit words: for each frame the N*N image pixels
//        (row-major), then the boundary column vector B(.,1) (N words),
//        then the boundary row vector B(1,.) (N words);
//   f2h  FPGA-to-host, 32-bit complex results {imag, real}.
// Both are valid/ready streams with their fill levels; f2h_count lets the control unit reserve
// space for external-memory reads still in flight.
// The paper shows a DMA FIFO between the host bus and the FPGA logic and
// external memory; the word formats and depths are this design's choices.
module dma_fifo #(
  parameter int DEPTH = 64
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // host -> FPGA
  input  logic                       h2f_in_valid,
  output logic                       h2f_in_ready,
  input  logic [15:0]                h2f_in_data,
  output logic                       h2f_out_valid,
  input  logic                       h2f_out_ready,
  output logic [15:0]                h2f_out_data,
  output logic [$clog2(DEPTH+1)-1:0] h2f_count,
  // FPGA -> host
  input  logic                       f2h_in_valid,
  output logic                       f2h_in_ready,
  input  logic [31:0]                f2h_in_data,
  output logic [$clog2(DEPTH+1)-1:0] f2h_count,
  output logic                       f2h_out_valid,
  input  logic                       f2h_out_ready,
  output logic [31:0]                f2h_out_data
);
  sync_fifo #(.W(16), .DEPTH(DEPTH)) u_h2f (
    .clk, .rst_n,
    .push_valid(h2f_in_valid),  .push_ready(h2f_in_ready),  .push_data(h2f_in_data),
    .pop_valid (h2f_out_valid), .pop_ready (h2f_out_ready), .pop_data (h2f_out_data),
    .count(h2f_count)
  );

  sync_fifo #(.W(32), .DEPTH(DEPTH)) u_f2h (
    .clk, .rst_n,
    .push_valid(f2h_in_valid),  .push_ready(f2h_in_ready),  .push_data(f2h_in_data),
    .pop_valid (f2h_out_valid), .pop_ready (f2h_out_ready), .pop_data (f2h_out_data),
    .count(f2h_count)
  );
endmodule
