// tb_ts_update: the area timestamp update.
// Fixed cases are the worked example of the algorithm (area Ts 200, event
// at 292 gives 223; area Ts 160, event at 296 gives 194). Random cases are
// compared with ceil(3*Ts/4) + floor(Ts_e/4) computed in 64 bits, which is
// the same rounding written differently.
module tb_ts_update;
  logic [31:0] rd_ts, ev_ts, new_ts;
  int checks = 0, failures = 0;

  ts_update #(.U(2)) dut (.*);

  task automatic check(logic [31:0] a, logic [31:0] e, logic [31:0] exp);
    rd_ts = a; ev_ts = e; #1;
    checks++;
    if (new_ts !== exp) begin
      failures++;
      $display("FAIL Ts=%0d Te=%0d got %0d expected %0d", a, e, new_ts, exp);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(200, 292, 223);
    check(160, 296, 194);
    check(0, 0, 0);
    check(0, 20000, 5000);
    for (int i = 0; i < 5000; i++) begin
      longint unsigned a, e;
      a = 64'($urandom);
      e = a + 64'($urandom_range(1000000));
      if (e > 64'hFFFF_FFFF) e = 64'hFFFF_FFFF;
      check(32'(a), 32'(e), 32'((3*a + 3) / 4 + e / 4));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
