// dtc_calc: weighted sum of timestamp differences,
//
//   dTc = dT11*D11 + dT12*D12 + dT21*D21 + dT22*D22,
//
// the left side of the division-free DIF comparison. Four multipliers,
// then a two-level adder tree (pairs 11+12 and 21+22, then their sum),
// each level registered. Timing: MULT_STAGES + 2 cycles. No handshake.
module dtc_calc #(
  parameter int MULT_STAGES = 4
) (
  input  logic                      clk,
  input  logic [dif_pkg::DT_W-1:0]  dt [4],
  input  logic [dif_pkg::D_W-1:0]   d  [4],
  output logic [dif_pkg::DTC_W-1:0] dtc
);
  import dif_pkg::*;

  logic [P_W-1:0]   p [4];
  logic [P_W:0]     s_top, s_bot;

  for (genvar i = 0; i < 4; i++) begin : g_mul
    pipe_mult #(.A_W(DT_W), .B_W(D_W), .STAGES(MULT_STAGES)) u_mul (
      .clk(clk), .a(dt[i]), .b(d[i]), .p(p[i]));
  end

  always_ff @(posedge clk) begin
    s_top <= (P_W+1)'(p[0]) + (P_W+1)'(p[1]);
    s_bot <= (P_W+1)'(p[2]) + (P_W+1)'(p[3]);
    dtc   <= DTC_W'(s_top) + DTC_W'(s_bot);
  end
endmodule
