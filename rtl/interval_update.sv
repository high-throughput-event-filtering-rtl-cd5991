// interval_update: new estimated interval between events of an area
// (first-order IIR filter on the time since the area's filtered timestamp).
//
//   I_new = I - (I >> U) + ((Ts_e - Ts) >> U)
//
// i.e. I*(1-u) + (Ts_e - Ts)*u with u = 2^-U, rounded down by the shifts,
// as in the paper's interval-update datapath. Ts is the area's timestamp
// before this update. The difference is taken modulo 2^32 and assumed
// non-negative (events arrive in timestamp order). Purely combinational.
module interval_update #(
  parameter int U = 2
) (
  input  dif_pkg::ts_t rd_int,  // interval of the area as read
  input  dif_pkg::ts_t rd_ts,   // timestamp of the area as read
  input  dif_pkg::ts_t ev_ts,   // timestamp of the event (or of the sweep)
  output dif_pkg::ts_t new_int
);
  assign new_int = (rd_int - (rd_int >> U)) + ((ev_ts - rd_ts) >> U);
endmodule
