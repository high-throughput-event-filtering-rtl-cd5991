// tb_global_update_ctrl: sweep triggering and sequencing.
// With 10 areas and a period of 100 ticks, events are offered with rising
// timestamps. An event inside the current period must be accepted at once;
// one at or past the period end must wait while every area address is
// issued once, in order, with the period end as sweep timestamp; an event
// several periods ahead must wait for one sweep per period. The waiting
// time must be (AREAS + 1) cycles per sweep.
module tb_global_update_ctrl;
  localparam int AREAS = 10;
  localparam int PERIOD = 100;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        in_valid, in_ready, sweep_valid, busy;
  logic [31:0] in_ts, sweep_ts;
  logic [3:0]  sweep_addr;
  int checks = 0, failures = 0;

  global_update_ctrl #(.AREAS(AREAS), .PERIOD(PERIOD)) dut (.*);

  task automatic expect_eq(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s got %0d expected %0d", what, got, exp);
    end
  endtask

  int next_end = PERIOD;

  // offer one event, count the cycles until it is accepted and check the sweeps
  task automatic offer(int ts);
    int wait_cycles = 0, nsweeps = 0, exp_sweeps = 0, addr_exp = 0;
    while (ts >= next_end + exp_sweeps * PERIOD) exp_sweeps++;
    @(negedge clk);
    in_valid = 1; in_ts = ts;
    #1;
    while (!in_ready) begin
      @(negedge clk); #1;
      wait_cycles++;
      if (sweep_valid) begin
        expect_eq("sweep_addr", sweep_addr, addr_exp);
        expect_eq("sweep_ts", sweep_ts, next_end + nsweeps * PERIOD);
        expect_eq("busy", busy, 1);
        addr_exp++;
        if (addr_exp == AREAS) begin addr_exp = 0; nsweeps++; end
      end
      if (wait_cycles > 1000) break;
    end
    expect_eq("sweeps", nsweeps, exp_sweeps);
    expect_eq("wait cycles", wait_cycles, exp_sweeps * (AREAS + 1));
    next_end += exp_sweeps * PERIOD;
    @(negedge clk);
    in_valid = 0;
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_ts = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    offer(5); offer(50); offer(99);
    offer(100);            // one sweep
    offer(150); offer(199);
    offer(450);            // three sweeps (200, 300, 400)
    offer(451);
    @(negedge clk); #1;
    expect_eq("idle busy", busy, 0);
    expect_eq("idle sweep_valid", sweep_valid, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
