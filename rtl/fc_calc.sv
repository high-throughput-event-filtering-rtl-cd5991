// fc_calc: threshold side of the division-free DIF comparison,
//
//   Dsum = (D11 + D12) + (D21 + D22),   Fc = F_L * Dsum,
//
// where F_L is the filter length (FILTER_LENGTH, in timestamp units).
// Two registered adder levels, then a multiplier. Timing: 2 + MULT_STAGES
// cycles, the same as dtc_calc, so Fc and dTc of one event arrive together.
module fc_calc #(
  parameter int MULT_STAGES   = 4,
  parameter int FILTER_LENGTH = 200,
  localparam int FC_W         = dif_pkg::DSUM_W + dif_pkg::FL_W
) (
  input  logic                     clk,
  input  logic [dif_pkg::D_W-1:0]  d [4],
  output logic [FC_W-1:0]          fc
);
  import dif_pkg::*;

  logic [D_W:0]      s_top, s_bot;
  logic [DSUM_W-1:0] dsum;

  always_ff @(posedge clk) begin
    s_top <= (D_W+1)'(d[0]) + (D_W+1)'(d[1]);
    s_bot <= (D_W+1)'(d[2]) + (D_W+1)'(d[3]);
    dsum  <= DSUM_W'(s_top) + DSUM_W'(s_bot);
  end

  pipe_mult #(.A_W(DSUM_W), .B_W(FL_W), .STAGES(MULT_STAGES)) u_mul (
    .clk(clk), .a(dsum), .b(FL_W'(FILTER_LENGTH)), .p(fc));

  initial assert (FILTER_LENGTH >= 0 && FILTER_LENGTH < (1 << FL_W))
    else $error("fc_calc: FILTER_LENGTH does not fit in FL_W bits");
endmodule
