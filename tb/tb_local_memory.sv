// tb_local_memory: the read part is fed by a memory model with a fixed
// 5-cycle latency that issues a read whenever rd_credit allows; the core
// side drains slowly and at random. Checks that every word arrives in
// order, that credits run out (so the FIFO fills without overflowing) and
// that the write part keeps order under random stalls.
module tb_local_memory;
  localparam int DEPTH = 8, LAT = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic rd_issue, rd_credit, ext_rvalid, rd_valid, rd_ready;
  logic [31:0] ext_rdata, rd_data;
  logic wr_in_valid, wr_in_ready, wr_out_valid, wr_out_ready;
  logic [31:0] wr_in_data, wr_out_data;
  logic [$clog2(DEPTH+1)-1:0] wr_level;
  int checks = 0, failures = 0;

  local_memory #(.DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic        pv [LAT];
  logic [31:0] pd [LAT];
  int issued = 0, got = 0, nocredit = 0;
  assign ext_rvalid = pv[LAT-1];
  assign ext_rdata  = pd[LAT-1];
  assign rd_issue   = rd_credit && (issued < 3000) && rst_n;

  always @(posedge clk) begin
    for (int i = LAT - 1; i > 0; i--) begin pv[i] <= pv[i-1]; pd[i] <= pd[i-1]; end
    pv[0] <= rd_issue;
    pd[0] <= 32'(issued) * 32'd7 + 32'd3;
    if (rd_issue) issued++;
    if (rst_n && !rd_credit) nocredit++;
    if (rd_valid && rd_ready) begin
      checks++;
      if (rd_data != 32'(got) * 32'd7 + 32'd3) begin failures++; $display("read word %0d wrong", got); end
      got++;
    end
  end

  logic [31:0] wq [$];
  int nw = 0;
  always @(posedge clk) if (rst_n) begin
    if (wr_in_valid && wr_in_ready) wq.push_back(wr_in_data);
    if (wr_out_valid && wr_out_ready) begin
      checks++;
      if (wr_out_data != wq.pop_front()) begin failures++; $display("write part order wrong"); end
      nw++;
    end
  end

  initial begin
    for (int i = 0; i < LAT; i++) begin pv[i] = 0; pd[i] = 0; end
    rd_ready = 0; wr_in_valid = 0; wr_in_data = 0; wr_out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (got < 3000) begin
      rd_ready     <= ($urandom_range(0, 2) == 0);
      wr_in_valid  <= ($urandom_range(0, 1) == 0);
      wr_in_data   <= $urandom;
      wr_out_ready <= ($urandom_range(0, 2) == 0);
      @(posedge clk);
    end
    checks++;
    if (nocredit == 0 || nw < 100) begin failures++; $display("credit never ran out or too few writes"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
