// feature_memory: storage for one area feature (timestamps or intervals)
// with four parallel read ports and a write-back cache.
//
// Four feature_bram banks hold identical copies of the feature of every
// subarea, so the four areas around an event are read in the same cycle.
// All banks share one write port: the update unit writes the new value of
// the event's own area to all four at once, which keeps the copies (and the
// timestamp and interval memories) consistent.
//
// Writing goes through a register (cache stage D1) and reaches the banks one
// cycle later; a read takes two cycles. A value read therefore lacks the
// writes of the three most recent cycles. Those writes are kept in the cache
// registers D1, D2, D3 (address and data); the read data of every port is
// compared against them and replaced by the newest matching entry. With this
// an event can be processed every cycle even when consecutive events update
// the same area.
//
// Timing: raddr[i] presented in cycle c gives rdata[i] in cycle c+2, and
// rdata[i] reflects every write presented up to and including cycle c+1.
// rdata is combinational from the bank outputs and the cache registers.
module feature_memory #(
  parameter int DEPTH = 3600,
  parameter int W     = 32,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic [AW-1:0] raddr [4],
  output logic [W-1:0]  rdata [4]
);
  typedef struct packed {
    logic          v;
    logic [AW-1:0] a;
    logic [W-1:0]  d;
  } wr_t;

  wr_t d1, d2, d3;               // D1 newest; D1 also drives the bank write port
  logic [W-1:0]  bank_q [4];
  logic [AW-1:0] ra_q1 [4], ra_q2 [4];   // read addresses aligned with the bank output

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d1 <= '0; d2 <= '0; d3 <= '0;
    end else begin
      d1 <= '{v: we, a: waddr, d: wdata};
      d2 <= d1;
      d3 <= d2;
    end
  end

  always_ff @(posedge clk) begin
    ra_q1 <= raddr;
    ra_q2 <= ra_q1;
  end

  for (genvar i = 0; i < 4; i++) begin : g_bank
    feature_bram #(.DEPTH(DEPTH), .W(W)) u_bram (
      .clk  (clk),
      .we   (d1.v),
      .waddr(d1.a),
      .wdata(d1.d),
      .raddr(raddr[i]),
      .rdata(bank_q[i])
    );

    always_comb begin
      if      (d1.v && d1.a == ra_q2[i]) rdata[i] = d1.d;
      else if (d2.v && d2.a == ra_q2[i]) rdata[i] = d2.d;
      else if (d3.v && d3.a == ra_q2[i]) rdata[i] = d3.d;
      else                               rdata[i] = bank_q[i];
    end
  end
endmodule
