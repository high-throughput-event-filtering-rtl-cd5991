// feature_bram: one simple-dual-port block RAM bank holding one feature
// (filtered timestamp or filtered interval) for every subarea.
//
// One port writes, the other reads. A write presented in a cycle takes
// effect at the end of that cycle. A read has two cycles of latency (address
// register inside the RAM, then an output register), as a block RAM
// configured for the highest clock rate; a read sees the memory as it was
// before any write presented in the same cycle (read-first). Contents start
// at zero, as an FPGA block RAM does after configuration.
module feature_bram #(
  parameter int DEPTH = 3600,
  parameter int W     = 32,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [DEPTH];
  logic [W-1:0] rd_q;

  initial for (int i = 0; i < DEPTH; i++) mem[i] = '0;

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rd_q  <= mem[raddr];
    rdata <= rd_q;
  end
endmodule
