// tb_control_unit: checks the control unit's schedule and address map.
//
// The control unit is surrounded by the real local_memory, boundary_bram
// and an external memory model, but both FFT cores are replaced by
// identity models (collect N words, return them unchanged), and in the ROW
// phase the image core's output goes straight to the write part. With
// identity transforms the column pass must store the transpose of the
// column reads, i.e. the image itself in region 1, the row pass copies it
// back to region 0, and the host must receive exactly the pixels it sent.
// Also checked: the COL-phase read address order (i*N + j), that
// Bhat(.,1) in boundary_bram equals B(.,1) widened to Q1.31, that the row
// vector is stored, one row_start pulse per frame, and the phase order.
module tb_control_unit;
  import opsd_pkg::*;
  localparam int N = 8, NN = 64, BDW = 32, DMA_DEPTH = 8, L = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  phase_e phase;
  logic frame_done, hin_valid, hin_ready, hout_valid, row_start;
  logic [15:0] hin_data;
  logic [31:0] hout_data;
  logic [3:0] hout_count;
  logic mem_req, mem_we, mem_gnt, mem_rvalid;
  logic [31:0] mem_addr, mem_wdata, mem_rdata;
  logic lm_rd_issue, lm_rd_credit, lm_ext_rvalid, lm_wr_valid, lm_wr_ready;
  logic [31:0] lm_wr_data;
  logic col_we, row_we, bhat_we;
  logic [L-1:0] col_waddr, col_raddr, row_waddr, bhat_waddr;
  logic [15:0] col_wdata, col_rdata, row_wdata, row_rdata;
  logic [63:0] bhat_wdata, bhat_rdata;
  logic bcore_in_valid, bcore_in_ready, bcore_out_valid;
  logic [63:0] bcore_in_data, bcore_out_data;

  control_unit #(.N(N), .BDW(BDW), .DMA_DEPTH(DMA_DEPTH)) dut (.*);

  ext_mem_model #(.DEPTH(2 * NN), .LAT(4), .STALL_PCT(20)) u_mem (
    .clk, .req(mem_req), .we(mem_we), .addr(mem_addr), .wdata(mem_wdata),
    .gnt(mem_gnt), .rvalid(mem_rvalid), .rdata(mem_rdata));

  // local memory, image core identity model between its two parts
  logic rd_valid, rd_ready, wr_in_valid, wr_in_ready;
  logic [31:0] rd_data, wr_in_data;
  local_memory #(.DEPTH(8)) u_lm (
    .clk, .rst_n, .rd_issue(lm_rd_issue), .rd_credit(lm_rd_credit),
    .ext_rvalid(lm_ext_rvalid), .ext_rdata(mem_rdata),
    .rd_valid, .rd_ready, .rd_data,
    .wr_in_valid, .wr_in_ready, .wr_in_data,
    .wr_out_valid(lm_wr_valid), .wr_out_ready(lm_wr_ready), .wr_out_data(lm_wr_data),
    .wr_level());

  logic [31:0] cbuf [N];
  int cin, cout;
  bit cfull;
  assign rd_ready    = !cfull;
  assign wr_in_valid = cfull;
  assign wr_in_data  = cbuf[cout];
  always @(posedge clk) if (!rst_n) begin
    cin <= 0; cout <= 0; cfull <= 0;
  end else begin
    if (rd_valid && rd_ready) begin
      cbuf[cin] <= rd_data;
      if (cin == N - 1) begin cin <= 0; cfull <= 1; end else cin <= cin + 1;
    end
    if (wr_in_valid && wr_in_ready) begin
      if (cout == N - 1) begin cout <= 0; cfull <= 0; end else cout <= cout + 1;
    end
  end

  // boundary core identity model: return each accepted word 3 cycles later
  logic [63:0] bq [$];
  int bdelay;
  assign bcore_in_ready = 1'b1;
  always @(posedge clk) begin
    if (bcore_in_valid && bcore_in_ready) bq.push_back(bcore_in_data);
  end
  always @(negedge clk) begin
    bcore_out_valid = (bq.size() > 0) && (bdelay >= 3);
    bcore_out_data  = (bq.size() > 0) ? bq[0] : '0;
  end
  always @(posedge clk) begin
    if (!rst_n) bdelay <= 0;
    else if (bcore_out_valid) begin void'(bq.pop_front()); bdelay <= 0; end
    else if (bq.size() > 0) bdelay <= bdelay + 1;
  end

  boundary_bram #(.N(N), .BDW(BDW)) u_bram (
    .clk, .col_we, .col_waddr, .col_wdata, .col_raddr, .col_rdata,
    .row_we, .row_waddr, .row_wdata, .row_raddr(3'd0), .row_rdata,
    .bhat_we, .bhat_waddr, .bhat_wdata, .bhat_raddr(3'd0), .bhat_rdata);

  // DMA FIFO for the result stream
  logic f2h_valid, f2h_ready;
  logic [31:0] f2h_data;
  sync_fifo #(.W(32), .DEPTH(DMA_DEPTH)) u_f2h (
    .clk, .rst_n, .push_valid(hout_valid), .push_ready(), .push_data(hout_data),
    .pop_valid(f2h_valid), .pop_ready(f2h_ready), .pop_data(f2h_data), .count(hout_count));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog, phase %0d", phase);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // COL-phase read order
  int rd_k = 0, nstart = 0;
  always @(posedge clk) if (rst_n) begin
    if (row_start) nstart++;
    if (phase == PH_COL && mem_req && mem_gnt && !mem_we) begin
      checks++;
      if (mem_addr != 32'((rd_k % N) * N + rd_k / N)) begin
        failures++; $display("COL read %0d at %0d", rd_k, mem_addr);
      end
      rd_k++;
    end
  end

  int img [NN], colv [N], rowv [N];
  initial begin
    int k;
    for (int i = 0; i < NN; i++) img[i] = $urandom_range(0, 65535);
    for (int i = 0; i < N; i++) begin colv[i] = $urandom_range(0, 65535); rowv[i] = $urandom_range(0, 65535); end
    hin_valid = 0; hin_data = 0; f2h_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      for (int n = 0; n < NN + 2 * N; n++) begin
        hin_valid <= 1;
        hin_data  <= 16'((n < NN) ? img[n] : (n < NN + N) ? colv[n - NN] : rowv[n - NN - N]);
        @(posedge clk);
        while (!hin_ready) @(posedge clk);
      end
      begin
        k = 0;
        while (k < NN) begin
          f2h_ready <= ($urandom_range(0, 3) == 0);
          @(posedge clk);
          if (f2h_valid && f2h_ready) begin
            checks++;
            if (f2h_data != {16'd0, 16'(img[k])}) begin
              failures++; $display("result %0d: %h expected %h", k, f2h_data, img[k]);
            end
            k++;
          end
        end
      end
    join_any
    hin_valid <= 0;
    wait (k == NN);
    @(posedge clk);
    for (int i = 0; i < N; i++) begin
      checks += 2;
      if (u_bram.bhat_mem[i] != {32'd0, 32'(signed'(16'(colv[i]))) <<< 16}) begin
        failures++; $display("bhat[%0d] wrong", i);
      end
      if (u_bram.row_mem[i] != 16'(rowv[i])) begin failures++; $display("row[%0d] wrong", i); end
    end
    checks++;
    if (nstart != 1 || rd_k != NN) begin failures++; $display("row_start %0d, col reads %0d", nstart, rd_k); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
