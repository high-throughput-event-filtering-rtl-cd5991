// tb_fc_calc: Fc = F_L * (D11 + D12 + D21 + D22) with F_L = 200, compared
// 2 + MULT_STAGES cycles after D, including full-scale D.
module tb_fc_calc;
  localparam int MS = 4, LAT = MS + 2;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [35:0] d [4];
  logic [53:0] fc;
  int checks = 0, failures = 0;

  fc_calc #(.MULT_STAGES(MS), .FILTER_LENGTH(200)) dut (.*);

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
      longint unsigned s;
      @(negedge clk);
      if (n >= LAT) begin
        checks++;
        if (64'(fc) != exp_q[0]) begin
          failures++;
          $display("FAIL n=%0d got %0d expected %0d", n, fc, exp_q[0]);
        end
        void'(exp_q.pop_front());
      end
      s = 0;
      for (int i = 0; i < 4; i++) begin
        d[i] = (n % 40 == 0) ? 36'hF_FFFF_FFFF : {4'($urandom), 32'($urandom)};
        s += longint'(d[i]);
      end
      exp_q.push_back(s * 200);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
