// ts_update: new filtered timestamp of an area (first-order IIR filter).
//
//   Ts_new = Ts - (Ts >> U) + (Ts_e >> U)
//
// i.e. Ts*(1-u) + Ts_e*u with u = 2^-U, each product rounded down to an
// integer by the shift, as in the paper's timestamp-update datapath
// (two shifts, one subtractor, one adder). U is the "update offset",
// 2 by default (u = 0.25). Purely combinational: it sits between the read
// data of the feature memory and its write register.
module ts_update #(
  parameter int U = 2
) (
  input  dif_pkg::ts_t rd_ts,   // timestamp of the area as read (after the cache)
  input  dif_pkg::ts_t ev_ts,   // timestamp of the event (or of the sweep)
  output dif_pkg::ts_t new_ts
);
  assign new_ts = (rd_ts - (rd_ts >> U)) + (ev_ts >> U);
endmodule
