// tb_dif_filter_full: test of the DIF filter at its default size
// (1280x720 sensor, 16x16-pixel subareas, 3600 areas, global update every
// 20000 time units), with the top instantiated without parameter overrides.
//
// A generated stream of about 24000 events covers more than two update
// periods, so the filter performs full sweeps over all 3600 areas while
// events wait at the input. Events come from a moving cluster, uniform
// noise over the whole sensor, the four corners and bursts in one area.
// Every output is compared with a sequential reference model of the
// algorithm (same integer rounding): event word, pass flag, order and the
// 30-cycle latency. At the end the number of sweeps, refreshed areas and
// both pass outcomes are required to be non-zero.
module tb_dif_filter_full;
  import dif_pkg::*;

  localparam int W = 1280, H = 720, S = 16;
  localparam int COLS = W / S, ROWS = H / S, AREAS = COLS * ROWS;
  localparam int FL = 200, PERIOD = 20000, LAT = 30;
  localparam int NEV = 24000;

  logic clk = 0, rst_n = 1;   // dropped at t=1 so asynchronous resets see an edge
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc++;

  logic   in_valid, in_ready, out_valid, out_pass, gu_busy;
  event_t in_event, out_event;

  dif_filter dut (
    .clk(clk), .rst_n(rst_n),
    .in_valid(in_valid), .in_ready(in_ready), .in_event(in_event),
    .out_valid(out_valid), .out_event(out_event), .out_pass(out_pass),
    .gu_busy(gu_busy));

  int checks = 0, failures = 0;

  // ------------------------------------------------------ reference model
  longint unsigned m_t [AREAS], m_i [AREAS];
  bit              m_act [AREAS];
  longint unsigned m_next;
  int n_refresh = 0, n_sweeps_model = 0, n_pass = 0, n_reject = 0;

  function automatic int dq(int a, int b);
    return $rtoi(4.0 * $sqrt((a + 0.5) ** 2 + (b + 0.5) ** 2) + 0.5);
  endfunction

  function automatic void update(int a, longint unsigned ts);
    longint unsigned t, i;
    t = m_t[a]; i = m_i[a];
    m_t[a] = (t - (t >> 2) + (ts >> 2)) & 64'hFFFF_FFFF;
    m_i[a] = (i - (i >> 2) + (((ts - t) & 64'hFFFF_FFFF) >> 2)) & 64'hFFFF_FFFF;
  endfunction

  function automatic void neigh(int p, output int lo, output int hi, output int d1, output int d2, input int n);
    int c;
    c = $floor(real'(2*p + 1 - S) / real'(2*S));
    d1 = (2*p + 1 - (2*S*c + S) - 1) / 2;
    d2 = ((2*S*(c+1) + S) - (2*p + 1) - 1) / 2;
    lo = (c < 0) ? 0 : c;
    hi = (c + 1 > n - 1) ? n - 1 : c + 1;
  endfunction

  function automatic bit model_event(event_t ev);
    int cl, cr, rt, rb, dx1, dx2, dy1, dy2, own;
    int ad [4], dd [4];
    longint unsigned k [4], dv [4], dtc, dsum, ts;
    ts = ev.ts;
    while (ts >= m_next) begin
      n_sweeps_model++;
      for (int a = 0; a < AREAS; a++) begin
        if (!m_act[a]) begin update(a, m_next); n_refresh++; end
        m_act[a] = 0;
      end
      m_next += 64'(PERIOD);
    end
    neigh(int'(ev.x), cl, cr, dx1, dx2, COLS);
    neigh(int'(ev.y), rt, rb, dy1, dy2, ROWS);
    ad = '{rt*COLS + cl, rt*COLS + cr, rb*COLS + cl, rb*COLS + cr};
    dd = '{dq(dx1, dy1), dq(dx2, dy1), dq(dx1, dy2), dq(dx2, dy2)};
    for (int j = 0; j < 4; j++) begin
      k[j] = (m_i[ad[j]] * 64'(dd[j])) >> 8;
      if (k[j] == 0) k[j] = 1;
      else if (k[j] > 4095) k[j] = 4095;
    end
    dv[0] = k[1] * k[2] * k[3];
    dv[1] = k[0] * k[2] * k[3];
    dv[2] = k[0] * k[1] * k[3];
    dv[3] = k[0] * k[1] * k[2];
    dtc = 0; dsum = 0;
    for (int j = 0; j < 4; j++) begin
      dtc  += (((ts - m_t[ad[j]]) & 64'hFFFF_FFFF) % (64'd1 << 24)) * dv[j];
      dsum += dv[j];
    end
    own = (int'(ev.y) / S) * COLS + int'(ev.x) / S;
    update(own, ts);
    m_act[own] = 1;
    return (64'(FL) * dsum) > dtc;
  endfunction

  // -------------------------------------------------------- event stream
  event_t stream [NEV];

  function automatic void gen_stream();
    longint unsigned ts;
    int kind, cx, cy;
    ts = 5;
    for (int n = 0; n < NEV; n++) begin
      event_t e;
      kind = int'($urandom_range(99));
      ts += 64'($urandom_range(0, 4));
      e.ts  = 32'(ts);
      e.pol = 1'($urandom);
      if (n % 1000 < 10) begin                    // burst in one area
        e.x = 16'(600 + $urandom_range(3)); e.y = 15'(300 + $urandom_range(3));
      end else if (kind < 3) begin                // corners
        e.x = ($urandom_range(1) == 1) ? 16'($urandom_range(7)) : 16'(W - 1 - int'($urandom_range(7)));
        e.y = ($urandom_range(1) == 1) ? 15'($urandom_range(7)) : 15'(H - 1 - int'($urandom_range(7)));
      end else if (kind < 25) begin               // uniform noise
        e.x = 16'($urandom_range(W - 1)); e.y = 15'($urandom_range(H - 1));
      end else begin                              // moving cluster
        cx = int'((ts / 40) % 64'(W - 32)) + 16;
        cy = H / 3 + int'((ts / 200) % 64'(H / 3));
        e.x = 16'(cx + int'($urandom_range(10)) - 5);
        e.y = 15'(cy + int'($urandom_range(10)) - 5);
      end
      stream[n] = e;
    end
  endfunction

  // -------------------------------------------------- driver and monitor
  typedef struct { event_t ev; bit pass; int cyc; } exp_t;
  exp_t exp_q [$];
  int   n_out = 0, n_stall = 0, n_sweeps = 0;

  task automatic drive();
    for (int n = 0; n < NEV; n++) begin
      @(negedge clk);
      in_valid = 1; in_event = stream[n];
      #1;
      while (!in_ready) begin
        n_stall++;
        @(negedge clk); #1;
      end
      exp_q.push_back('{ev: stream[n], pass: model_event(stream[n]), cyc: cyc});
    end
    @(negedge clk); in_valid = 0;
  endtask

  always @(negedge clk) if (out_valid) begin
    exp_t e;
    n_out++;
    if (exp_q.size() == 0) begin
      failures++; checks++;
      $display("FAIL output with nothing expected");
    end else begin
      e = exp_q.pop_front();
      checks += 3;
      if (out_event !== e.ev) begin
        failures++; $display("FAIL event %0d: word %h expected %h", n_out, out_event, e.ev);
      end
      if (out_pass !== e.pass) begin
        failures++; $display("FAIL event %0d: pass %0b expected %0b", n_out, out_pass, e.pass);
      end
      if (cyc - e.cyc != LAT) begin
        failures++; $display("FAIL event %0d: latency %0d", n_out, cyc - e.cyc);
      end
      if (e.pass) n_pass++; else n_reject++;
    end
  end

  logic busy_q = 0;
  always @(posedge clk) begin
    if (gu_busy && !busy_q) n_sweeps++;
    busy_q <= gu_busy;
  end

  initial begin
    #20ms;
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
    in_valid = 0; in_event = '0; m_next = 64'(PERIOD);
    for (int a = 0; a < AREAS; a++) begin m_t[a] = 0; m_i[a] = 0; m_act[a] = 0; end
    #1 rst_n = 0;
    gen_stream();
    repeat (3) @(negedge clk);
    rst_n = 1;
    drive();
    repeat (LAT + 5) @(negedge clk);
    checks++;
    if (n_out != NEV || exp_q.size() != 0) begin
      failures++;
      $display("FAIL %0d outputs, %0d still expected", n_out, exp_q.size());
    end
    $display("mechanisms:");
    require("sweeps", n_sweeps);
    require("input stall cycles", n_stall);
    require("areas refreshed by sweep", n_refresh);
    require("events passed", n_pass);
    require("events rejected", n_reject);
    checks++;
    if (n_sweeps != n_sweeps_model) begin
      failures++; $display("FAIL sweeps %0d, model %0d", n_sweeps, n_sweeps_model);
    end
    checks++;
    if (n_stall < n_sweeps * AREAS) begin
      failures++; $display("FAIL %0d stall cycles for %0d sweeps of %0d areas", n_stall, n_sweeps, AREAS);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
