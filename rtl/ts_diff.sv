// ts_diff: differences between the event timestamp and the filtered
// timestamps of the four neighbouring areas.
//
//   dT_ij = Ts - T_ij, truncated to DT_W = 24 bits.
//
// Subtracting before interpolating keeps the operands of the following
// multipliers small. The 24-bit truncation keeps the low bits (modulo
// 2^24, about 16.8 s at 1 us per tick); the difference is taken as
// unsigned. Timing: one register stage.
module ts_diff (
  input  logic                     clk,
  input  dif_pkg::ts_t             ev_ts,
  input  dif_pkg::ts_t             t  [4],   // T11, T12, T21, T22
  output logic [dif_pkg::DT_W-1:0] dt [4]
);
  import dif_pkg::*;
  always_ff @(posedge clk)
    for (int i = 0; i < 4; i++) dt[i] <= DT_W'(ev_ts - t[i]);
endmodule
