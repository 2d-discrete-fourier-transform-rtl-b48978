// sync_fifo: single-clock first-in first-out buffer with valid/ready ports.
//
// DEPTH words of W bits held in a register array. A word is written on a
// cycle with push_valid && push_ready and leaves on pop_valid && pop_ready;
// both may happen in the same cycle. pop_data shows the oldest word
// combinationally (first-word fall-through), so a write becomes visible on
// the pop side one cycle later. count is the number of stored words.
// Used for the DMA FIFO and for both parts of the local memory.
module sync_fifo #(
  parameter int W     = 32,
  parameter int DEPTH = 32
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push_valid,
  output logic                       push_ready,
  input  logic [W-1:0]               push_data,
  output logic                       pop_valid,
  input  logic                       pop_ready,
  output logic [W-1:0]               pop_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int CW = $clog2(DEPTH + 1);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic          do_push, do_pop;

  assign push_ready = (count != CW'(DEPTH));
  assign pop_valid  = (count != '0);
  assign pop_data   = mem[rp];
  assign do_push    = push_valid && push_ready;
  assign do_pop     = pop_valid && pop_ready;

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (do_push) wp <= inc(wp);
      if (do_pop)  rp <= inc(rp);
      count <= count + CW'(do_push) - CW'(do_pop);
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wp] <= push_data;
  end

  // A push into a full FIFO or a pop from an empty one is refused, never lost.
  assert property (@(posedge clk) disable iff (!rst_n) count <= CW'(DEPTH));
endmodule
