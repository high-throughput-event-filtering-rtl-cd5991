// pipe_mult: unsigned multiplier with a fixed number of register stages.
//
// p = a * b, delivered STAGES clock cycles after a and b are presented.
// The stage count models the pipeline registers of an FPGA DSP slice
// (input, multiply and output registers); the product is registered
// STAGES times, so the adder tree of the multiplier can be retimed by
// synthesis across those registers. No handshake: every cycle is a new
// operand pair.
module pipe_mult #(
  parameter int A_W    = 16,
  parameter int B_W    = 16,
  parameter int STAGES = 4
) (
  input  logic               clk,
  input  logic [A_W-1:0]     a,
  input  logic [B_W-1:0]     b,
  output logic [A_W+B_W-1:0] p
);
  logic [A_W+B_W-1:0] pipe [STAGES];

  always_ff @(posedge clk) begin
    pipe[0] <= a * b;
    for (int i = 1; i < STAGES; i++) pipe[i] <= pipe[i-1];
  end

  assign p = pipe[STAGES-1];

  initial assert (STAGES >= 1) else $error("pipe_mult: STAGES must be at least 1");
endmodule
