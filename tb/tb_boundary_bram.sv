// tb_boundary_bram: fills the three arrays with random words and reads
// them back in random order, checking the one-cycle read latency.
module tb_boundary_bram;
  localparam int N = 32, BDW = 32;
  logic clk = 0;
  always #5 clk = ~clk;
  logic col_we, row_we, bhat_we;
  logic [4:0] col_waddr, col_raddr, row_waddr, row_raddr, bhat_waddr, bhat_raddr;
  logic [15:0] col_wdata, col_rdata, row_wdata, row_rdata;
  logic [63:0] bhat_wdata, bhat_rdata;
  int checks = 0, failures = 0;
  logic [15:0] mc [N], mr [N];
  logic [63:0] mb [N];

  boundary_bram #(.N(N), .BDW(BDW)) dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a, b2, c;
    col_we = 0; row_we = 0; bhat_we = 0;
    col_raddr = 0; row_raddr = 0; bhat_raddr = 0;
    for (int k = 0; k < N; k++) begin
      mc[k] = 16'($urandom); mr[k] = 16'($urandom); mb[k] = {$urandom, $urandom};
    end
    for (int k = 0; k < N; k++) begin
      @(negedge clk);
      col_we = 1; row_we = 1; bhat_we = 1;
      col_waddr = 5'(k); row_waddr = 5'(N - 1 - k); bhat_waddr = 5'(k);
      col_wdata = mc[k]; row_wdata = mr[N - 1 - k]; bhat_wdata = mb[k];
    end
    @(negedge clk);
    col_we = 0; row_we = 0; bhat_we = 0;
    // row array was written in reverse with mr[N-1-k], so row[k] = mr[k]
    for (int n = 0; n < 200; n++) begin
      a = $urandom_range(0, N - 1); b2 = $urandom_range(0, N - 1); c = $urandom_range(0, N - 1);
      col_raddr = 5'(a); row_raddr = 5'(b2); bhat_raddr = 5'(c);
      @(negedge clk);
      checks += 3;
      if (col_rdata != mc[a])  begin failures++; $display("col[%0d] wrong", a); end
      if (row_rdata != mr[b2]) begin failures++; $display("row[%0d] wrong", b2); end
      if (bhat_rdata != mb[c]) begin failures++; $display("bhat[%0d] wrong", c); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
