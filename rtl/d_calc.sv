// d_calc: interpolation weights D of the four neighbouring areas.
//
// D_ij is the product of the K of the three other areas, which makes each
// weight proportional to 1/(I_ij * d_ij) once the common denominator is
// multiplied out. The products share two partial results:
//   Kd1 = K12 * K21,  Kd2 = K11 * K22,
//   D11 = Kd1 * K22,  D12 = Kd2 * K21,  D21 = Kd2 * K12,  D22 = Kd1 * K11,
// six multipliers instead of eight.
//
// Timing: two multiplier pipelines in series, D appears 2*MULT_STAGES
// cycles after K. No handshake.
module d_calc #(
  parameter int MULT_STAGES = 4
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [dif_pkg::K_W-1:0] k [4],   // K11, K12, K21, K22
  output logic [dif_pkg::D_W-1:0] d [4]    // D11, D12, D21, D22
);
  import dif_pkg::*;

  logic [KD_W-1:0] kd1, kd2;
  logic [K_W-1:0]  kq [4];

  pipe_mult #(.A_W(K_W), .B_W(K_W), .STAGES(MULT_STAGES)) u_kd1 (
    .clk(clk), .a(k[1]), .b(k[2]), .p(kd1));
  pipe_mult #(.A_W(K_W), .B_W(K_W), .STAGES(MULT_STAGES)) u_kd2 (
    .clk(clk), .a(k[0]), .b(k[3]), .p(kd2));

  for (genvar i = 0; i < 4; i++) begin : g_kdly
    delay_line #(.W(K_W), .DEPTH(MULT_STAGES)) u_dly (
      .clk(clk), .rst_n(rst_n), .d(k[i]), .q(kq[i]));
  end

  pipe_mult #(.A_W(KD_W), .B_W(K_W), .STAGES(MULT_STAGES)) u_d11 (
    .clk(clk), .a(kd1), .b(kq[3]), .p(d[0]));
  pipe_mult #(.A_W(KD_W), .B_W(K_W), .STAGES(MULT_STAGES)) u_d12 (
    .clk(clk), .a(kd2), .b(kq[2]), .p(d[1]));
  pipe_mult #(.A_W(KD_W), .B_W(K_W), .STAGES(MULT_STAGES)) u_d21 (
    .clk(clk), .a(kd2), .b(kq[1]), .p(d[2]));
  pipe_mult #(.A_W(KD_W), .B_W(K_W), .STAGES(MULT_STAGES)) u_d22 (
    .clk(clk), .a(kd1), .b(kq[0]), .p(d[3]));
endmodule
