// tb_dif_filter_workloads: the filter in the other configurations it is
// meant to run, each checked event by event against a sequential model.
//
// Four filters run side by side, each fed its own generated stream:
//   lane 0  640 x 480 sensor (1200 areas), global update every 20000
//   lane 1  1280 x 720 sensor, no global update of inactive areas
//   lane 2  1280 x 720 sensor, global update every 2000 (2 ms at 1 us)
//   lane 3  1280 x 720 sensor, 29031 events spread over 8 periods of 1000,
//           i.e. eight 1 ms batches with a global update between batches
// Timestamps grow evenly over each stream's span. Events come from a
// moving cluster, uniform noise and the sensor corners. For every output
// the event word, pass flag, order and 30-cycle latency are checked; per
// lane the number of sweeps must match the model, and both pass outcomes
// must occur (lane 1 must never sweep or stall).
module tb_dif_filter_workloads;
  import dif_pkg::*;

  localparam int L = 4, S = 16, FL = 200, LAT = 30;
  localparam int MAXA = (1280 / S) * (720 / S);
  localparam int MAXN = 29031;
  localparam int LW     [L] = '{640,   1280,  1280, 1280};
  localparam int LH     [L] = '{480,   720,   720,  720};
  localparam bit LGU    [L] = '{1'b1,  1'b0,  1'b1, 1'b1};
  localparam int LPER   [L] = '{20000, 20000, 2000, 1000};
  localparam int LNEV   [L] = '{20000, 20000, 16000, 29031};
  localparam int LSPAN  [L] = '{50000, 50000, 12000, 8000};

  logic clk = 0, rst_n = 1;   // dropped at t=1 so asynchronous resets see an edge
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc++;

  logic   in_valid [L], in_ready [L], out_valid [L], out_pass [L], gu_busy [L];
  event_t in_event [L], out_event [L];

  for (genvar l = 0; l < L; l++) begin : g_dut
    dif_filter #(.WIDTH(LW[l]), .HEIGHT(LH[l]), .SCALE(S), .FILTER_LENGTH(FL),
                 .GLOBAL_UPDATE(LGU[l]), .GU_PERIOD(LPER[l])) dut (
      .clk(clk), .rst_n(rst_n),
      .in_valid(in_valid[l]), .in_ready(in_ready[l]), .in_event(in_event[l]),
      .out_valid(out_valid[l]), .out_event(out_event[l]), .out_pass(out_pass[l]),
      .gu_busy(gu_busy[l]));
  end

  int checks = 0, failures = 0;

  // ------------------------------------------------------ reference model
  longint unsigned m_t [L][MAXA], m_i [L][MAXA];
  bit              m_act [L][MAXA];
  longint unsigned m_next [L];
  int n_sweeps_model [L], n_pass [L], n_reject [L], n_out [L], n_stall [L], n_sweeps [L];

  function automatic int dq(int a, int b);
    return $rtoi(4.0 * $sqrt((a + 0.5) ** 2 + (b + 0.5) ** 2) + 0.5);
  endfunction

  function automatic void update(int l, int a, longint unsigned ts);
    longint unsigned t, i;
    t = m_t[l][a]; i = m_i[l][a];
    m_t[l][a] = (t - (t >> 2) + (ts >> 2)) & 64'hFFFF_FFFF;
    m_i[l][a] = (i - (i >> 2) + (((ts - t) & 64'hFFFF_FFFF) >> 2)) & 64'hFFFF_FFFF;
  endfunction

  function automatic void neigh(int p, output int lo, output int hi, output int d1, output int d2, input int n);
    int c;
    c = $floor(real'(2*p + 1 - S) / real'(2*S));
    d1 = (2*p + 1 - (2*S*c + S) - 1) / 2;
    d2 = ((2*S*(c+1) + S) - (2*p + 1) - 1) / 2;
    lo = (c < 0) ? 0 : c;
    hi = (c + 1 > n - 1) ? n - 1 : c + 1;
  endfunction

  function automatic bit model_event(int l, event_t ev);
    int cols, rows, areas, cl, cr, rt, rb, dx1, dx2, dy1, dy2, own;
    int ad [4], dd [4];
    longint unsigned k [4], dv [4], dtc, dsum, ts;
    cols = LW[l] / S; rows = LH[l] / S; areas = cols * rows;
    ts = ev.ts;
    if (LGU[l]) begin
      while (ts >= m_next[l]) begin
        n_sweeps_model[l]++;
        for (int a = 0; a < areas; a++) begin
          if (!m_act[l][a]) update(l, a, m_next[l]);
          m_act[l][a] = 0;
        end
        m_next[l] += 64'(LPER[l]);
      end
    end
    neigh(int'(ev.x), cl, cr, dx1, dx2, cols);
    neigh(int'(ev.y), rt, rb, dy1, dy2, rows);
    ad = '{rt*cols + cl, rt*cols + cr, rb*cols + cl, rb*cols + cr};
    dd = '{dq(dx1, dy1), dq(dx2, dy1), dq(dx1, dy2), dq(dx2, dy2)};
    for (int j = 0; j < 4; j++) begin
      k[j] = (m_i[l][ad[j]] * 64'(dd[j])) >> 8;
      if (k[j] == 0) k[j] = 1;
      else if (k[j] > 4095) k[j] = 4095;
    end
    dv[0] = k[1] * k[2] * k[3];
    dv[1] = k[0] * k[2] * k[3];
    dv[2] = k[0] * k[1] * k[3];
    dv[3] = k[0] * k[1] * k[2];
    dtc = 0; dsum = 0;
    for (int j = 0; j < 4; j++) begin
      dtc  += (((ts - m_t[l][ad[j]]) & 64'hFFFF_FFFF) % (64'd1 << 24)) * dv[j];
      dsum += dv[j];
    end
    own = (int'(ev.y) / S) * cols + int'(ev.x) / S;
    update(l, own, ts);
    m_act[l][own] = 1;
    return (64'(FL) * dsum) > dtc;
  endfunction

  // -------------------------------------------------------- event streams
  function automatic event_t gen_event(int l, int n);
    event_t e;
    longint unsigned ts;
    int kind, cx, cy, w, h;
    w = LW[l]; h = LH[l];
    ts = 5 + (longint'(n) * LSPAN[l]) / LNEV[l];
    kind = int'($urandom_range(99));
    e.ts  = 32'(ts);
    e.pol = 1'($urandom);
    if (kind < 3) begin                               // corners
      e.x = ($urandom_range(1) == 1) ? 16'($urandom_range(7)) : 16'(w - 1 - int'($urandom_range(7)));
      e.y = ($urandom_range(1) == 1) ? 15'($urandom_range(7)) : 15'(h - 1 - int'($urandom_range(7)));
    end else if (kind < 25) begin                     // uniform noise
      e.x = 16'($urandom_range(w - 1)); e.y = 15'($urandom_range(h - 1));
    end else begin                                    // moving cluster
      cx = int'((ts / 20) % 64'(w - 32)) + 16;
      cy = h / 3 + int'((ts / 100) % 64'(h / 3));
      e.x = 16'(cx + int'($urandom_range(10)) - 5);
      e.y = 15'(cy + int'($urandom_range(10)) - 5);
    end
    return e;
  endfunction

  // -------------------------------------------------- drivers and monitors
  typedef struct { event_t ev; bit pass; int cyc; } exp_t;
  exp_t exp_q [L][$];

  task automatic drive(int l);
    for (int n = 0; n < LNEV[l]; n++) begin
      event_t e;
      e = gen_event(l, n);
      @(negedge clk);
      in_valid[l] = 1; in_event[l] = e;
      #1;
      while (!in_ready[l]) begin
        n_stall[l]++;
        @(negedge clk); #1;
      end
      exp_q[l].push_back('{ev: e, pass: model_event(l, e), cyc: cyc});
    end
    @(negedge clk); in_valid[l] = 0;
  endtask

  task automatic monitor(int l);
    forever begin
      @(negedge clk);
      if (out_valid[l]) begin
        exp_t e;
        n_out[l]++;
        if (exp_q[l].size() == 0) begin
          failures++; checks++;
          $display("FAIL lane %0d: output with nothing expected", l);
        end else begin
          e = exp_q[l].pop_front();
          checks += 3;
          if (out_event[l] !== e.ev) begin
            failures++; $display("FAIL lane %0d event %0d: word %h expected %h", l, n_out[l], out_event[l], e.ev);
          end
          if (out_pass[l] !== e.pass) begin
            failures++; $display("FAIL lane %0d event %0d: pass %0b expected %0b", l, n_out[l], out_pass[l], e.pass);
          end
          if (cyc - e.cyc != LAT) begin
            failures++; $display("FAIL lane %0d event %0d: latency %0d", l, n_out[l], cyc - e.cyc);
          end
          if (e.pass) n_pass[l]++; else n_reject[l]++;
        end
      end
    end
  endtask

  logic busy_q [L];
  always @(posedge clk) begin
    for (int l = 0; l < L; l++) begin
      if (gu_busy[l] && !busy_q[l]) n_sweeps[l]++;
      busy_q[l] <= gu_busy[l];
    end
  end

  initial begin
    #20ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_true(string what, bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    for (int l = 0; l < L; l++) begin
      in_valid[l] = 0; in_event[l] = '0; m_next[l] = 64'(LPER[l]); busy_q[l] = 0;
      n_sweeps_model[l] = 0; n_pass[l] = 0; n_reject[l] = 0; n_out[l] = 0;
      n_stall[l] = 0; n_sweeps[l] = 0;
      for (int a = 0; a < MAXA; a++) begin m_t[l][a] = 0; m_i[l][a] = 0; m_act[l][a] = 0; end
    end
    #1 rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    fork
      monitor(0); monitor(1); monitor(2); monitor(3);
    join_none
    fork
      drive(0); drive(1); drive(2); drive(3);
    join
    repeat (LAT + 5) @(negedge clk);
    for (int l = 0; l < L; l++) begin
      $display("lane %0d (%0dx%0d, global update %0d, period %0d): %0d events, %0d passed, %0d rejected, %0d sweeps, %0d stall cycles",
               l, LW[l], LH[l], LGU[l], LPER[l], n_out[l], n_pass[l], n_reject[l], n_sweeps[l], n_stall[l]);
      expect_true($sformatf("lane %0d: all events out", l), n_out[l] == LNEV[l] && exp_q[l].size() == 0);
      expect_true($sformatf("lane %0d: sweeps match the model", l), n_sweeps[l] == n_sweeps_model[l]);
      expect_true($sformatf("lane %0d: some events passed", l), n_pass[l] > 0);
      expect_true($sformatf("lane %0d: some events rejected", l), n_reject[l] > 0);
      if (LGU[l]) begin
        expect_true($sformatf("lane %0d: sweeps happened", l), n_sweeps[l] > 0);
        expect_true($sformatf("lane %0d: one stall cycle per area and sweep", l),
                    n_stall[l] >= n_sweeps[l] * (LW[l] / S) * (LH[l] / S));
      end else begin
        expect_true($sformatf("lane %0d: never swept or stalled", l), n_sweeps[l] == 0 && n_stall[l] == 0);
      end
    end
    expect_true("lane 3: eight sweeps, one per 1 ms batch", n_sweeps[3] == 8);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
