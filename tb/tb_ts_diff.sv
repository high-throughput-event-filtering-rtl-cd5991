// tb_ts_diff: dT = (Ts - T) mod 2^24 for the four areas, one cycle later;
// differences below and above 2^24 are both exercised.
module tb_ts_diff;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [31:0] ev_ts, t [4];
  logic [23:0] dt [4];
  int checks = 0, failures = 0;

  ts_diff dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint unsigned exp_q [$][4];
    longint unsigned e [4];
    for (int n = 0; n < 2001; n++) begin
      @(negedge clk);
      if (n >= 1) begin
        for (int i = 0; i < 4; i++) begin
          checks++;
          if (64'(dt[i]) != exp_q[0][i]) begin
            failures++;
            $display("FAIL n=%0d lane %0d got %0d expected %0d", n, i, dt[i], exp_q[0][i]);
          end
        end
        void'(exp_q.pop_front());
      end
      ev_ts = $urandom;
      for (int i = 0; i < 4; i++) begin
        longint unsigned diff;
        diff = (n % 2) ? 64'($urandom_range(30000)) : 64'($urandom_range(32'h0400_0000));
        t[i] = ev_ts - 32'(diff);
        e[i] = diff % (64'd1 << 24);
      end
      exp_q.push_back(e);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
