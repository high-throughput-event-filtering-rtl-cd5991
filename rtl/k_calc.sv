// k_calc: weight factors K = I * d of the four neighbouring areas.
//
// For each neighbour (11, 12, 21, 22) the distance d from the event to the
// area centre is looked up in its own copy of the distance table (four
// identical ROMs, so the four lookups happen in the same cycle; d11 uses
// (dx1, dy1), d12 (dx2, dy1), d21 (dx1, dy2), d22 (dx2, dy2)). The area's
// interval I is multiplied by d, then precision is reduced by dropping the
// low K_DROP = 8 bits (which include the two fractional bits of d), and the
// result is saturated into K_W = 12 bits: a result above 4095 becomes 4095
// and a result of 0 becomes 1, so that no neighbour can lose all its weight
// and no event is rejected only because two weights vanished.
//
// Timing: dx/dy and the intervals are presented in the same cycle; the
// intervals are delayed internally to meet the two-cycle ROM read. K appears
// 2 + MULT_STAGES + 1 cycles later. No handshake; one set per cycle.
module k_calc #(
  parameter int SCALE       = 16,
  parameter int MULT_STAGES = 4,
  localparam int SH         = $clog2(SCALE),
  localparam int DW         = $clog2(6 * SCALE + 1),
  localparam int LAT        = 2 + MULT_STAGES + 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [SH-1:0]              dx1, dx2, dy1, dy2,
  input  dif_pkg::ts_t               intv [4],      // I11, I12, I21, I22
  output logic [dif_pkg::K_W-1:0]    k    [4]       // K11, K12, K21, K22
);
  import dif_pkg::*;

  localparam int PW = TS_W + DW;
  localparam logic [PW-K_DROP-1:0] KMAX = (PW-K_DROP)'((1 << K_W) - 1);

  logic [SH-1:0] rx [4], ry [4];
  assign rx = '{dx1, dx2, dx1, dx2};
  assign ry = '{dy1, dy1, dy2, dy2};

  for (genvar i = 0; i < 4; i++) begin : g_lane
    logic [DW-1:0]       dval;
    ts_t                 intv_d;
    logic [PW-1:0]       prod;
    logic [PW-K_DROP-1:0] red;

    distance_rom #(.SCALE(SCALE)) u_rom (
      .clk (clk), .dx(rx[i]), .dy(ry[i]), .dval(dval)
    );

    delay_line #(.W(TS_W), .DEPTH(2)) u_dly (
      .clk(clk), .rst_n(rst_n), .d(intv[i]), .q(intv_d)
    );

    pipe_mult #(.A_W(TS_W), .B_W(DW), .STAGES(MULT_STAGES)) u_mul (
      .clk(clk), .a(intv_d), .b(dval), .p(prod)
    );

    assign red = prod[PW-1:K_DROP];

    // precision reduction and saturation at both ends
    always_ff @(posedge clk) begin
      if (red == '0)       k[i] <= K_W'(1);
      else if (red > KMAX) k[i] <= K_W'(KMAX);
      else                 k[i] <= K_W'(red);
    end
  end
endmodule
