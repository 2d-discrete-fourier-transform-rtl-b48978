// local_memory: slice-based buffers between external memory and FFT cores.
//
// FIFO OUT (local memory, read part) receives words read from external
// memory (ext_rvalid/ext_rdata) and feeds them to an FFT core (rd_*). The
// control unit may issue a read only while rd_credit is high: the words
// already stored plus the reads still in flight (counted from rd_issue to
// ext_rvalid) must leave room for one more, so read data is never dropped.
// FIFO IN (local memory, write part) takes FFT results (wr_in_*) and
// presents them to the control unit for writing to external memory
// (wr_out_*).
// Words are 32-bit complex {imag, real}. The split into a read and a write
// part follows the paper; the depth and the credit scheme are this
// design's choices.
module local_memory #(
  parameter int DEPTH = 32
) (
  input  logic        clk,
  input  logic        rst_n,
  // read part: external memory -> core
  input  logic        rd_issue,      // a read request was accepted by external memory
  output logic        rd_credit,     // room for one more read request
  input  logic        ext_rvalid,
  input  logic [31:0] ext_rdata,
  output logic        rd_valid,
  input  logic        rd_ready,
  output logic [31:0] rd_data,
  // write part: core -> external memory
  input  logic        wr_in_valid,
  output logic        wr_in_ready,
  input  logic [31:0] wr_in_data,
  output logic        wr_out_valid,
  input  logic        wr_out_ready,
  output logic [31:0] wr_out_data,
  output logic [$clog2(DEPTH+1)-1:0] wr_level   // words waiting in FIFO IN
);
  localparam int CW = $clog2(DEPTH + 1);
  logic [CW-1:0] rd_count, inflight;
  logic          rd_push_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) inflight <= '0;
    else        inflight <= inflight + CW'(rd_issue) - CW'(ext_rvalid);
  end

  assign rd_credit = (CW + 1)'(rd_count) + (CW + 1)'(inflight) < (CW + 1)'(DEPTH);

  sync_fifo #(.W(32), .DEPTH(DEPTH)) u_fifo_out (
    .clk, .rst_n,
    .push_valid(ext_rvalid), .push_ready(rd_push_ready), .push_data(ext_rdata),
    .pop_valid (rd_valid),   .pop_ready (rd_ready),      .pop_data (rd_data),
    .count(rd_count)
  );

  sync_fifo #(.W(32), .DEPTH(DEPTH)) u_fifo_in (
    .clk, .rst_n,
    .push_valid(wr_in_valid),  .push_ready(wr_in_ready),  .push_data(wr_in_data),
    .pop_valid (wr_out_valid), .pop_ready (wr_out_ready), .pop_data (wr_out_data),
    .count(wr_level)
  );

  // Credits guarantee that returning read data always finds room.
  assert property (@(posedge clk) disable iff (!rst_n) ext_rvalid |-> rd_push_ready);
  assert property (@(posedge clk) disable iff (!rst_n) rd_issue |-> rd_credit);
endmodule
