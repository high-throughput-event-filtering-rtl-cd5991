// tb_interval_update: the area interval update.
// Fixed cases from the worked example of the algorithm (I 500, Ts 200,
// event 292 gives 398; I 50, Ts 160, event 296 gives 72) and random cases
// compared with ceil(3*I/4) + floor((Ts_e - Ts)/4) in 64 bits.
module tb_interval_update;
  logic [31:0] rd_int, rd_ts, ev_ts, new_int;
  int checks = 0, failures = 0;

  interval_update #(.U(2)) dut (.*);

  task automatic check(logic [31:0] i, logic [31:0] t, logic [31:0] e, logic [31:0] exp);
    rd_int = i; rd_ts = t; ev_ts = e; #1;
    checks++;
    if (new_int !== exp) begin
      failures++;
      $display("FAIL I=%0d Ts=%0d Te=%0d got %0d expected %0d", i, t, e, new_int, exp);
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
    check(500, 200, 292, 398);
    check(50, 160, 296, 72);
    check(0, 0, 0, 0);
    for (int k = 0; k < 5000; k++) begin
      longint unsigned i, t, e;
      i = 64'($urandom_range(32'h00FF_FFFF));
      t = 64'($urandom_range(32'h7FFF_FFFF));
      e = t + 64'($urandom_range(2000000));
      check(32'(i), 32'(t), 32'(e), 32'((3*i + 3) / 4 + (e - t) / 4));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
