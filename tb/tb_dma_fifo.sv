// tb_dma_fifo: streams random words through both directions of the DMA
// FIFO with random valid/ready on each side; checks order, data, the fill
// level against a scoreboard, and that a full FIFO refuses input.
module tb_dma_fifo;
  localparam int DEPTH = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic h2f_in_valid, h2f_in_ready, h2f_out_valid, h2f_out_ready;
  logic [15:0] h2f_in_data, h2f_out_data;
  logic [$clog2(DEPTH+1)-1:0] h2f_count, f2h_count;
  logic f2h_in_valid, f2h_in_ready, f2h_out_valid, f2h_out_ready;
  logic [31:0] f2h_in_data, f2h_out_data;
  int checks = 0, failures = 0;

  dma_fifo #(.DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [15:0] q16 [$];
  logic [31:0] q32 [$];
  int nin16 = 0, nout16 = 0, nin32 = 0, nout32 = 0, nfull = 0;

  always @(posedge clk) if (rst_n) begin
    checks++;
    if (int'(h2f_count) != q16.size() || int'(f2h_count) != q32.size()) begin
      failures++; $display("fill level mismatch");
    end
    if (h2f_in_valid && h2f_in_ready) begin q16.push_back(h2f_in_data); nin16++; end
    if (f2h_in_valid && f2h_in_ready) begin q32.push_back(f2h_in_data); nin32++; end
    if (h2f_out_valid && h2f_out_ready) begin
      checks++;
      if (h2f_out_data != q16.pop_front()) begin failures++; $display("h2f data mismatch"); end
      nout16++;
    end
    if (f2h_out_valid && f2h_out_ready) begin
      checks++;
      if (f2h_out_data != q32.pop_front()) begin failures++; $display("f2h data mismatch"); end
      nout32++;
    end
    if (h2f_count == DEPTH) begin
      nfull++;
      checks++;
      if (h2f_in_ready) begin failures++; $display("full FIFO accepts input"); end
    end
  end

  initial begin
    h2f_in_valid = 0; f2h_in_valid = 0; h2f_out_ready = 0; f2h_out_ready = 0;
    h2f_in_data = 0; f2h_in_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 4000; c++) begin
      h2f_in_valid  <= ($urandom_range(0, 3) != 0);
      h2f_in_data   <= 16'($urandom);
      f2h_in_valid  <= ($urandom_range(0, 3) != 0);
      f2h_in_data   <= $urandom;
      h2f_out_ready <= (c < 2000) ? ($urandom_range(0, 3) == 0) : ($urandom_range(0, 3) != 0);
      f2h_out_ready <= ($urandom_range(0, 1) != 0);
      @(posedge clk);
    end
    h2f_in_valid <= 0; f2h_in_valid <= 0; h2f_out_ready <= 1; f2h_out_ready <= 1;
    repeat (50) @(posedge clk);
    checks++;
    if (nout16 != nin16 || nout32 != nin32 || nin16 < 1000 || nfull == 0) begin
      failures++; $display("counts %0d/%0d %0d/%0d full %0d", nin16, nout16, nin32, nout32, nfull);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
