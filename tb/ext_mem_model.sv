// ext_mem_model: behavioural model of the board's external DRAM.
//
// Not synthesizable logic of the design: it stands in for the off-chip
// memory in simulation. One request per cycle is accepted when gnt is high;
// gnt is dropped at random (STALL_PCT percent of cycles) to imitate refresh
// and bank conflicts. Read data returns in order LAT cycles after the
// request. Words are 32 bits; DEPTH words are held.
module ext_mem_model #(
  parameter int DEPTH     = 512,
  parameter int LAT       = 6,
  parameter int STALL_PCT = 10
) (
  input  logic        clk,
  input  logic        req,
  input  logic        we,
  input  logic [31:0] addr,
  input  logic [31:0] wdata,
  output logic        gnt,
  output logic        rvalid,
  output logic [31:0] rdata
);
  logic [31:0] mem [DEPTH];
  logic        pv [LAT];
  logic [31:0] pd [LAT];
  int stalls = 0;

  initial begin
    gnt = 1'b0;
    for (int i = 0; i < LAT; i++) begin pv[i] = 1'b0; pd[i] = '0; end
    for (int i = 0; i < DEPTH; i++) mem[i] = '0;
  end

  assign rvalid = pv[LAT-1];
  assign rdata  = pd[LAT-1];

  always @(posedge clk) begin
    if (req && !gnt) stalls++;
    for (int i = LAT - 1; i > 0; i--) begin
      pv[i] <= pv[i-1];
      pd[i] <= pd[i-1];
    end
    pv[0] <= req && gnt && !we;
    pd[0] <= (addr < DEPTH) ? mem[addr] : 32'hdead_beef;
    if (req && gnt && we && addr < DEPTH) mem[addr] <= wdata;
    if (req && gnt && addr >= DEPTH) $error("ext_mem_model: address %0d out of range", addr);
    gnt <= ($urandom_range(0, 99) >= STALL_PCT);
  end
endmodule
