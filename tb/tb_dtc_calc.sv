// tb_dtc_calc: dTc = sum of dT_ij * D_ij in 64-bit arithmetic, compared
// MULT_STAGES + 2 cycles after the operands, including full-scale operands.
module tb_dtc_calc;
  localparam int MS = 4, LAT = MS + 2;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [23:0] dt [4];
  logic [35:0] d [4];
  logic [61:0] dtc;
  int checks = 0, failures = 0;

  dtc_calc #(.MULT_STAGES(MS)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint unsigned exp_q [$];
    for (int n = 0; n < 2000 + LAT; n++) begin
      longint unsigned e;
      @(negedge clk);
      if (n >= LAT) begin
        checks++;
        if (64'(dtc) != exp_q[0]) begin
          failures++;
          $display("FAIL n=%0d got %0d expected %0d", n, dtc, exp_q[0]);
        end
        void'(exp_q.pop_front());
      end
      e = 0;
      for (int i = 0; i < 4; i++) begin
        dt[i] = (n % 40 == 0) ? 24'hFF_FFFF : 24'($urandom);
        d[i]  = (n % 40 == 0) ? 36'hF_FFFF_FFFF : {4'($urandom), 32'($urandom)};
        e += longint'(dt[i]) * longint'(d[i]);
      end
      exp_q.push_back(e);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
