// dif_filter: event-stream noise filter after the DIF algorithm
// (distance-based interpolation with frequency weights), one event per
// clock cycle.
//
// The sensor is cut into SCALE x SCALE subareas. Each area keeps two
// features in block RAM: a filtered timestamp T (an IIR average of the
// timestamps of its events) and a filtered interval I (an IIR average of
// the time between them, i.e. the inverse of its event rate). For every
// event the four areas whose centres surround the pixel are read, and the
// event is kept when
//
//   F_L * sum(D_ij)  >  sum((Ts - T_ij) * D_ij),
//   D_ij = product of K over the three other areas, K_ij = I_ij * d_ij,
//
// which is the comparison "Ts - T < F_L" with T the average of the four
// area timestamps weighted by 1/(I_ij d_ij), multiplied out so that no
// division is needed. At the same time the event's own area is updated:
//   T <- T - T/4 + Ts/4,   I <- I - I/4 + (Ts - T)/4.
//
// Pipeline (cycle numbers relative to the cycle an event is accepted):
//   0      event accepted (in_valid & in_ready)
//   1      area mapper output: four area addresses, distance indices;
//          addresses presented to the timestamp and interval memories
//   3      read data, corrected by the write-back cache, is available;
//          the own area's new T and I are computed and presented for
//          writing (feature_memory keeps the following reads coherent)
//   4..    ts_diff, k_calc, d_calc, then dtc_calc and fc_calc side by side
//   LATENCY result_compare output: out_valid, out_event, out_pass
// A pad of registers before result_compare brings the natural depth
// (10 + 4*MULT_STAGES cycles) to exactly LATENCY, 30 by default, the
// latency reported for the original implementation.
//
// Global update (GLOBAL_UPDATE = 1): areas that received no event during a
// period of GU_PERIOD timestamp units are refreshed as if an event with the
// period's end time had arrived. global_update_ctrl holds the input
// (in_ready low) for one cycle per area and feeds sweep steps into the same
// update pipeline; activity_matrix says which areas were active. Sweep
// steps produce no output. With GLOBAL_UPDATE = 0 neither block is built
// and in_ready is always high.
//
// Follows the paper: the division-free comparison, the K/Kd/D factoring,
// 24-bit differences, 8-bit reduction and 12-bit saturation of K, the
// distance tables, four parallel memories per feature, the three-entry
// write cache, the edge rule, the register activity array, the parameters
// (64-bit events, 1280 x 720, scale 16, update offset 2, filter length
// 200) and the 30-cycle latency. This design's own choices: the event word
// layout, 32-bit stored features, zero initial contents, the sweep trigger
// (first event past the period end) and sweep timestamp (the period end),
// the split into pipeline stages and the valid/ready input handshake.
module dif_filter #(
  parameter int           WIDTH         = 1280,
  parameter int           HEIGHT        = 720,
  parameter int           SCALE         = 16,
  parameter int           UPDATE_OFFSET = 2,
  parameter int           FILTER_LENGTH = 200,
  parameter bit           GLOBAL_UPDATE = 1'b1,
  parameter dif_pkg::ts_t GU_PERIOD     = 20000,
  parameter int           MULT_STAGES   = 4,
  parameter int           LATENCY       = 30
) (
  input  logic            clk,
  input  logic            rst_n,
  // input event stream
  input  logic            in_valid,
  output logic            in_ready,
  input  dif_pkg::event_t in_event,
  // filtered stream: every event comes out, flagged by out_pass
  output logic            out_valid,
  output dif_pkg::event_t out_event,
  output logic            out_pass,
  // high while inactive areas are being refreshed
  output logic            gu_busy
);
  import dif_pkg::*;

  localparam int SH    = $clog2(SCALE);
  localparam int COLS  = (WIDTH  + SCALE - 1) / SCALE;
  localparam int ROWS  = (HEIGHT + SCALE - 1) / SCALE;
  localparam int AREAS = COLS * ROWS;
  localparam int AW    = $clog2(AREAS);
  localparam int FC_W  = DSUM_W + FL_W;
  localparam int K_LAT = 2 + MULT_STAGES + 1;
  localparam int NATURAL = 10 + 4 * MULT_STAGES;
  localparam int PAD   = LATENCY - NATURAL;

  // ---------------------------------------------------------------- input
  logic    accept;
  logic    sweep_valid;
  logic [AW-1:0] sweep_addr;
  ts_t     sweep_ts;

  assign accept = in_valid && in_ready;

  if (GLOBAL_UPDATE) begin : g_gu
    global_update_ctrl #(.AREAS(AREAS), .PERIOD(GU_PERIOD)) u_gu (
      .clk(clk), .rst_n(rst_n),
      .in_valid(in_valid), .in_ts(in_event.ts), .in_ready(in_ready),
      .sweep_valid(sweep_valid), .sweep_addr(sweep_addr),
      .sweep_ts(sweep_ts), .busy(gu_busy)
    );
  end else begin : g_no_gu
    assign in_ready    = 1'b1;
    assign sweep_valid = 1'b0;
    assign sweep_addr  = '0;
    assign sweep_ts    = '0;
    assign gu_busy     = 1'b0;
  end

  // ---------------------------------------------- stage P0 (cycle 1)
  logic [AW-1:0] m_addr [4];
  logic [1:0]    m_own_sel;
  logic [AW-1:0] m_own_addr;
  logic [SH-1:0] m_dx1, m_dx2, m_dy1, m_dy2;

  event_area_mapper #(.WIDTH(WIDTH), .HEIGHT(HEIGHT), .SCALE(SCALE)) u_map (
    .clk(clk), .x(in_event.x), .y(in_event.y),
    .addr(m_addr), .own_sel(m_own_sel), .own_addr(m_own_addr),
    .dx1(m_dx1), .dx2(m_dx2), .dy1(m_dy1), .dy2(m_dy2)
  );

  logic     ev_v0, sw_v0;
  event_t   ev0;
  logic [AW-1:0] sw_addr0;
  ts_t      sw_ts0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ev_v0 <= 1'b0; sw_v0 <= 1'b0;
      ev0 <= '0; sw_addr0 <= '0; sw_ts0 <= '0;
    end else begin
      ev_v0    <= accept;
      ev0      <= in_event;
      sw_v0    <= sweep_valid;
      sw_addr0 <= sweep_addr;
      sw_ts0   <= sweep_ts;
    end
  end

  // events and sweep steps never issue in the same cycle
  op_e           op0;
  logic          op_v0;
  logic [AW-1:0] raddr0 [4];
  logic [1:0]    own_sel0;
  logic [AW-1:0] own_addr0;
  ts_t           op_ts0;

  always_comb begin
    op_v0 = ev_v0 || sw_v0;
    if (sw_v0) begin
      op0       = OP_SWEEP;
      raddr0    = '{sw_addr0, sw_addr0, sw_addr0, sw_addr0};
      own_sel0  = 2'd0;
      own_addr0 = sw_addr0;
      op_ts0    = sw_ts0;
    end else begin
      op0       = OP_EVENT;
      raddr0    = m_addr;
      own_sel0  = m_own_sel;
      own_addr0 = m_own_addr;
      op_ts0    = ev0.ts;
    end
  end

  // area activity flags
  logic act2;
  if (GLOBAL_UPDATE) begin : g_act
    logic act1;
    activity_matrix #(.AREAS(AREAS)) u_act (
      .clk(clk), .rst_n(rst_n),
      .set_en(ev_v0), .set_addr(m_own_addr),
      .rd_en(sw_v0), .rd_addr(sw_addr0), .rd_active(act1)
    );
    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n) act2 <= 1'b0; else act2 <= act1;
  end else begin : g_no_act
    assign act2 = 1'b1;
  end

  // ------------------------------------------- P0 -> P2 side information
  typedef struct packed {
    logic          v;
    op_e           op;
    logic [1:0]    own_sel;
    logic [AW-1:0] own_addr;
    ts_t           ts;
  } upd_t;

  upd_t u0, u2;
  assign u0 = '{v: op_v0, op: op0, own_sel: own_sel0, own_addr: own_addr0, ts: op_ts0};

  delay_line #(.W($bits(upd_t)), .DEPTH(2)) u_upd_dly (
    .clk(clk), .rst_n(rst_n), .d(u0), .q(u2));

  // --------------------------------------- feature memories (read P0, data P2)
  ts_t rd_t [4], rd_i [4];
  logic upd_we;
  ts_t  own_t, own_i, new_t, new_i;

  feature_memory #(.DEPTH(AREAS), .W(TS_W)) u_ts_mem (
    .clk(clk), .rst_n(rst_n),
    .we(upd_we), .waddr(u2.own_addr), .wdata(new_t),
    .raddr(raddr0), .rdata(rd_t)
  );

  feature_memory #(.DEPTH(AREAS), .W(TS_W)) u_int_mem (
    .clk(clk), .rst_n(rst_n),
    .we(upd_we), .waddr(u2.own_addr), .wdata(new_i),
    .raddr(raddr0), .rdata(rd_i)
  );

  // ------------------------------------------------- area update (P2)
  assign own_t  = rd_t[u2.own_sel];
  assign own_i  = rd_i[u2.own_sel];
  // an event always updates its area; a sweep step only an inactive one
  assign upd_we = u2.v && (u2.op == OP_EVENT || !act2);

  ts_update #(.U(UPDATE_OFFSET)) u_ts_upd (
    .rd_ts(own_t), .ev_ts(u2.ts), .new_ts(new_t));

  interval_update #(.U(UPDATE_OFFSET)) u_int_upd (
    .rd_int(own_i), .rd_ts(own_t), .ev_ts(u2.ts), .new_int(new_i));

  // ------------------------------------------ interpolation and decision
  // P3: register the corrected read data
  ts_t    t3 [4], i3 [4];
  logic   v3;
  event_t ev3;
  event_t ev2;
  logic [4*SH-1:0] dxy0, dxy3;

  delay_line #(.W(EVENT_W), .DEPTH(2)) u_ev_dly (
    .clk(clk), .rst_n(rst_n), .d(ev0), .q(ev2));

  assign dxy0 = {m_dx1, m_dx2, m_dy1, m_dy2};
  delay_line #(.W(4*SH), .DEPTH(3)) u_dxy_dly (
    .clk(clk), .rst_n(rst_n), .d(dxy0), .q(dxy3));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v3  <= 1'b0;
      ev3 <= '0;
    end else begin
      v3  <= u2.v && (u2.op == OP_EVENT);
      ev3 <= ev2;
    end
  end

  always_ff @(posedge clk) begin
    t3 <= rd_t;
    i3 <= rd_i;
  end

  // timestamp differences (P3 -> P4), delayed to meet D
  logic [DT_W-1:0] dt4 [4], dt_d [4];
  ts_diff u_diff (.clk(clk), .ev_ts(ev3.ts), .t(t3), .dt(dt4));

  for (genvar i = 0; i < 4; i++) begin : g_dt_dly
    delay_line #(.W(DT_W), .DEPTH(K_LAT + 2*MULT_STAGES - 1)) u_dly (
      .clk(clk), .rst_n(rst_n), .d(dt4[i]), .q(dt_d[i]));
  end

  // K (P3 + K_LAT), D (+ 2*MULT_STAGES)
  logic [K_W-1:0] k [4];
  logic [D_W-1:0] d [4];

  k_calc #(.SCALE(SCALE), .MULT_STAGES(MULT_STAGES)) u_k (
    .clk(clk), .rst_n(rst_n),
    .dx1(dxy3[4*SH-1 -: SH]), .dx2(dxy3[3*SH-1 -: SH]),
    .dy1(dxy3[2*SH-1 -: SH]), .dy2(dxy3[SH-1 -: SH]),
    .intv(i3), .k(k)
  );

  d_calc #(.MULT_STAGES(MULT_STAGES)) u_d (
    .clk(clk), .rst_n(rst_n), .k(k), .d(d));

  // Fc and dTc (+ MULT_STAGES + 2)
  logic [FC_W-1:0]  fc;
  logic [DTC_W-1:0] dtc;

  fc_calc #(.MULT_STAGES(MULT_STAGES), .FILTER_LENGTH(FILTER_LENGTH)) u_fc (
    .clk(clk), .d(d), .fc(fc));

  dtc_calc #(.MULT_STAGES(MULT_STAGES)) u_dtc (
    .clk(clk), .dt(dt_d), .d(d), .dtc(dtc));

  // event word and valid flag travel alongside, then the latency pad
  localparam int SIDE_DLY = K_LAT + 3*MULT_STAGES + 2;   // P3 -> Fc/dTc
  logic [EVENT_W:0] side3, side_c, side_p;
  logic [FC_W-1:0]  fc_p;
  logic [DTC_W-1:0] dtc_p;

  assign side3 = {v3, ev3};
  delay_line #(.W(EVENT_W+1), .DEPTH(SIDE_DLY)) u_side_dly (
    .clk(clk), .rst_n(rst_n), .d(side3), .q(side_c));

  delay_line #(.W(EVENT_W+1), .DEPTH(PAD)) u_pad_side (
    .clk(clk), .rst_n(rst_n), .d(side_c), .q(side_p));
  delay_line #(.W(FC_W), .DEPTH(PAD)) u_pad_fc (
    .clk(clk), .rst_n(rst_n), .d(fc), .q(fc_p));
  delay_line #(.W(DTC_W), .DEPTH(PAD)) u_pad_dtc (
    .clk(clk), .rst_n(rst_n), .d(dtc), .q(dtc_p));

  result_compare #(.FC_W(FC_W), .DTC_W(DTC_W)) u_cmp (
    .clk(clk), .rst_n(rst_n),
    .in_valid(side_p[EVENT_W]), .in_event(event_t'(side_p[EVENT_W-1:0])),
    .fc(fc_p), .dtc(dtc_p),
    .out_valid(out_valid), .out_event(out_event), .out_pass(out_pass)
  );

  initial begin
    assert (PAD >= 0) else $error("dif_filter: LATENCY below the pipeline depth %0d", NATURAL);
    assert ((1 << SH) == SCALE) else $error("dif_filter: SCALE must be a power of two");
  end
endmodule
