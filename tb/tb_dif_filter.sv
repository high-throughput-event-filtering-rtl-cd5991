// tb_dif_filter: end-to-end test of the DIF filter against a sequential
// reference model.
//
// Two filters are simulated side by side on the same generated event
// stream, one with the global update of inactive areas and one without.
// The stream mixes a moving cluster of "signal" events, uniform noise
// (switched off in every other update period, so that some areas go
// inactive), events on the sensor corners and edges, bursts in one area,
// idle cycles and a long silent gap.
//
// The model processes the events one after another exactly as the
// algorithm states, with the hardware's integer rounding: it reads the four
// neighbour areas, computes K, D, Fc and dTc and the pass flag, then
// updates the event's own area; before an event past the end of the
// current update period it refreshes every inactive area with the period
// end time. Being sequential, it has no cache: any hazard the hardware
// cache missed shows up as a mismatch.
//
// Checked for every event: output order, event word, pass flag, and a
// latency of exactly 30 cycles from acceptance to output. Counted, and each
// required to happen at least once: cache forwarding from each of the three
// cache stages, input stalls during the sweep, sweeps, areas refreshed by a
// sweep, corner and edge events, the lower clamp and the upper saturation
// of K, and both pass outcomes.
module tb_dif_filter;
  import dif_pkg::*;

  localparam int W = 128, H = 64, S = 16;
  localparam int COLS = W / S, ROWS = H / S, AREAS = COLS * ROWS;
  localparam int FL = 200, PERIOD = 2000, LAT = 30;
  localparam int NEV = 6000;

  logic clk = 0, rst_n = 1;   // dropped at t=1 so asynchronous resets see an edge
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc++;

  // ---------------------------------------------------------------- DUTs
  logic   in_valid [2], in_ready [2], out_valid [2], out_pass [2], gu_busy [2];
  event_t in_event [2], out_event [2];

  dif_filter #(.WIDTH(W), .HEIGHT(H), .SCALE(S), .FILTER_LENGTH(FL),
               .GLOBAL_UPDATE(1'b1), .GU_PERIOD(PERIOD)) dut_gu (
    .clk(clk), .rst_n(rst_n),
    .in_valid(in_valid[0]), .in_ready(in_ready[0]), .in_event(in_event[0]),
    .out_valid(out_valid[0]), .out_event(out_event[0]), .out_pass(out_pass[0]),
    .gu_busy(gu_busy[0]));

  dif_filter #(.WIDTH(W), .HEIGHT(H), .SCALE(S), .FILTER_LENGTH(FL),
               .GLOBAL_UPDATE(1'b0), .GU_PERIOD(PERIOD)) dut_ngu (
    .clk(clk), .rst_n(rst_n),
    .in_valid(in_valid[1]), .in_ready(in_ready[1]), .in_event(in_event[1]),
    .out_valid(out_valid[1]), .out_event(out_event[1]), .out_pass(out_pass[1]),
    .gu_busy(gu_busy[1]));

  int checks = 0, failures = 0;

  // ------------------------------------------------------ reference model
  longint unsigned m_t [2][AREAS], m_i [2][AREAS];
  bit              m_act [2][AREAS];
  longint unsigned m_next [2];
  int n_refresh = 0, n_sweeps_model = 0, n_kclamp = 0, n_ksat = 0;
  int n_corner = 0, n_edge = 0, n_pass = 0, n_reject = 0;

  function automatic int dq(int a, int b);
    return $rtoi(4.0 * $sqrt((a + 0.5) ** 2 + (b + 0.5) ** 2) + 0.5);
  endfunction

  function automatic void update(int u, int a, longint unsigned ts);
    longint unsigned t, i;
    t = m_t[u][a]; i = m_i[u][a];
    m_t[u][a] = (t - (t >> 2) + (ts >> 2)) & 64'hFFFF_FFFF;
    m_i[u][a] = (i - (i >> 2) + (((ts - t) & 64'hFFFF_FFFF) >> 2)) & 64'hFFFF_FFFF;
  endfunction

  // neighbour areas: left/top index of the pair and distance indices
  function automatic void neigh(int p, output int lo, output int hi, output int d1, output int d2, input int n);
    int c;
    c = $floor(real'(2*p + 1 - S) / real'(2*S));
    d1 = (2*p + 1 - (2*S*c + S) - 1) / 2;
    d2 = ((2*S*(c+1) + S) - (2*p + 1) - 1) / 2;
    lo = (c < 0) ? 0 : c;
    hi = (c + 1 > n - 1) ? n - 1 : c + 1;
  endfunction

  function automatic bit model_event(int u, event_t ev);
    int cl, cr, rt, rb, dx1, dx2, dy1, dy2;
    int ad [4], dd [4];
    longint unsigned k [4], dv [4], dtc, dsum, ts;
    ts = ev.ts;
    if (u == 0) begin
      while (ts >= m_next[0]) begin
        n_sweeps_model++;
        for (int a = 0; a < AREAS; a++) begin
          if (!m_act[0][a]) begin update(0, a, m_next[0]); n_refresh++; end
          m_act[0][a] = 0;
        end
        m_next[0] += PERIOD;
      end
    end
    neigh(int'(ev.x), cl, cr, dx1, dx2, COLS);
    neigh(int'(ev.y), rt, rb, dy1, dy2, ROWS);
    ad = '{rt*COLS + cl, rt*COLS + cr, rb*COLS + cl, rb*COLS + cr};
    dd = '{dq(dx1, dy1), dq(dx2, dy1), dq(dx1, dy2), dq(dx2, dy2)};
    for (int j = 0; j < 4; j++) begin
      k[j] = (m_i[u][ad[j]] * dd[j]) >> 8;
      if (k[j] == 0) begin k[j] = 1; n_kclamp++; end
      else if (k[j] > 4095) begin k[j] = 4095; n_ksat++; end
    end
    dv[0] = k[1] * k[2] * k[3];
    dv[1] = k[0] * k[2] * k[3];
    dv[2] = k[0] * k[1] * k[3];
    dv[3] = k[0] * k[1] * k[2];
    dtc = 0; dsum = 0;
    for (int j = 0; j < 4; j++) begin
      dtc  += (((ts - m_t[u][ad[j]]) & 64'hFFFF_FFFF) % (64'd1 << 24)) * dv[j];
      dsum += dv[j];
    end
    begin
      int own = (int'(ev.y) / S) * COLS + int'(ev.x) / S;
      update(u, own, ts);
      m_act[u][own] = 1;
    end
    return (FL * dsum) > dtc;
  endfunction

  // ------------------------------------------------------- event stream
  event_t stream [NEV];

  function automatic void gen_stream();
    longint unsigned ts = 10;
    for (int n = 0; n < NEV; n++) begin
      event_t e;
      int kind = $urandom_range(99);
      int period = int'(ts / PERIOD);
      ts += $urandom_range(0, 2);
      if (n == NEV / 2) ts += 100000;            // long silent gap
      e.ts  = 32'(ts);
      e.pol = 1'($urandom);
      if (n % 500 < 12) begin                     // burst in one area
        e.x = 16'(40 + $urandom_range(3)); e.y = 15'(20 + $urandom_range(3));
      end else if (kind < 4) begin                // corners
        e.x = ($urandom_range(1)) ? 16'($urandom_range(7)) : 16'(W - 1 - $urandom_range(7));
        e.y = ($urandom_range(1)) ? 15'($urandom_range(7)) : 15'(H - 1 - $urandom_range(7));
      end else if (kind < 8) begin                // edges
        e.x = 16'($urandom_range(W - 1));
        e.y = ($urandom_range(1)) ? 15'($urandom_range(7)) : 15'(H - 1 - $urandom_range(7));
      end else if (kind < 30 && period % 2 == 0) begin   // noise, every other period
        e.x = 16'($urandom_range(W - 1)); e.y = 15'($urandom_range(H - 1));
      end else begin                              // moving cluster
        int cx = int'((ts / 20) % (W - 16)) + 8;
        e.x = 16'(cx + $urandom_range(6) - 3);
        e.y = 15'(H / 2 + $urandom_range(6) - 3);
      end
      stream[n] = e;
    end
  endfunction

  // ------------------------------------------------------ drivers, monitors
  typedef struct { event_t ev; bit pass; int cyc; } exp_t;
  exp_t exp_q [2][$];
  int   n_out [2];
  int   n_stall = 0, n_sweeps = 0;
  int   hit [3];
  int   last_own [3];   // own area of the ops issued 1, 2, 3 cycles ago (-1 none)

  task automatic drive(int u);
    for (int n = 0; n < NEV; n++) begin
      if ($urandom_range(9) == 0) begin
        @(negedge clk); in_valid[u] = 0;
      end
      @(negedge clk);
      in_valid[u] = 1; in_event[u] = stream[n];
      #1;
      while (!in_ready[u]) begin
        if (u == 0) n_stall++;
        @(negedge clk); #1;
      end
      // accepted at the coming clock edge
      exp_q[u].push_back('{ev: stream[n], pass: model_event(u, stream[n]), cyc: cyc});
    end
    @(negedge clk); in_valid[u] = 0;
  endtask

  task automatic monitor(int u);
    forever begin
      @(negedge clk);
      if (out_valid[u]) begin
        exp_t e;
        n_out[u]++;
        if (exp_q[u].size() == 0) begin
          failures++; checks++;
          $display("FAIL dut %0d: output with nothing expected", u);
        end else begin
          e = exp_q[u].pop_front();
          checks += 3;
          if (out_event[u] !== e.ev) begin
            failures++; $display("FAIL dut %0d event %0d: word %h expected %h", u, n_out[u], out_event[u], e.ev);
          end
          if (out_pass[u] !== e.pass) begin
            failures++; $display("FAIL dut %0d event %0d: pass %0b expected %0b", u, n_out[u], out_pass[u], e.pass);
          end
          if (cyc - e.cyc != LAT) begin
            failures++; $display("FAIL dut %0d event %0d: latency %0d", u, n_out[u], cyc - e.cyc);
          end
          if (u == 0) begin if (e.pass) n_pass++; else n_reject++; end
        end
      end
    end
  endtask

  // cache forwarding seen on the filter without sweeps: an event whose
  // neighbourhood contains the own area of an event accepted 1, 2 or 3
  // cycles earlier, with nothing accepted in between that hides it
  always @(posedge clk) if (rst_n) begin
    int own;
    own = -1;
    if (in_valid[1] && in_ready[1]) begin
      int cl, cr, rt, rb, a1, a2, b1, b2;
      neigh(int'(in_event[1].x), cl, cr, a1, a2, COLS);
      neigh(int'(in_event[1].y), rt, rb, b1, b2, ROWS);
      for (int j = 0; j < 3; j++) begin
        if (last_own[j] >= 0 &&
            (last_own[j] == rt*COLS + cl || last_own[j] == rt*COLS + cr ||
             last_own[j] == rb*COLS + cl || last_own[j] == rb*COLS + cr)) begin
          hit[j]++;
          break;
        end
      end
      own = (int'(in_event[1].y) / S) * COLS + int'(in_event[1].x) / S;
    end
    last_own[2] = last_own[1]; last_own[1] = last_own[0]; last_own[0] = own;
  end

  logic busy_q = 0;
  always @(posedge clk) begin
    if (gu_busy[0] && !busy_q) n_sweeps++;
    busy_q <= gu_busy[0];
  end

  initial begin
    #50ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic require(string what, int n);
    checks++;
    $display("  %-28s %0d", what, n);
    if (n == 0) begin failures++; $display("FAIL %s never happened", what); end
  endtask

  initial begin
    for (int u = 0; u < 2; u++) begin
      in_valid[u] = 0; in_event[u] = '0; m_next[u] = PERIOD; n_out[u] = 0;
      for (int a = 0; a < AREAS; a++) begin m_t[u][a] = 0; m_i[u][a] = 0; m_act[u][a] = 0; end
    end
    hit = '{0, 0, 0}; last_own = '{-1, -1, -1};
    #1 rst_n = 0;
    gen_stream();
    for (int n = 0; n < NEV; n++) begin
      int cx, cy;
      bit ex, ey;
      cx = int'(stream[n].x); cy = int'(stream[n].y);
      ex = (cx < S/2) || (cx >= W - S/2); ey = (cy < S/2) || (cy >= H - S/2);
      if (ex && ey) n_corner++; else if (ex || ey) n_edge++;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    fork
      monitor(0);
      monitor(1);
    join_none
    fork
      drive(0);
      drive(1);
    join
    repeat (LAT + 5) @(negedge clk);
    for (int u = 0; u < 2; u++) begin
      checks++;
      if (n_out[u] != NEV || exp_q[u].size() != 0) begin
        failures++;
        $display("FAIL dut %0d: %0d outputs, %0d still expected", u, n_out[u], exp_q[u].size());
      end
    end
    $display("mechanisms:");
    require("cache forward, 1 cycle", hit[0]);
    require("cache forward, 2 cycles", hit[1]);
    require("cache forward, 3 cycles", hit[2]);
    require("sweeps", n_sweeps);
    require("input stall cycles", n_stall);
    require("areas refreshed by sweep", n_refresh);
    require("corner events", n_corner);
    require("edge events", n_edge);
    require("K clamped to 1", n_kclamp);
    require("K saturated to 4095", n_ksat);
    require("events passed", n_pass);
    require("events rejected", n_reject);
    checks++;
    if (n_sweeps != n_sweeps_model) begin
      failures++; $display("FAIL sweeps %0d, model %0d", n_sweeps, n_sweeps_model);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
