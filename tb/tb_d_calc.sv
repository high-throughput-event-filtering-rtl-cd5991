// tb_d_calc: D_ij must equal the product of the three other K, computed
// directly (K12*K21*K22 for D11 and so on), 2*MULT_STAGES cycles after K.
module tb_d_calc;
  localparam int MS = 4, LAT = 2 * MS;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [11:0] k [4];
  logic [35:0] d [4];
  int checks = 0, failures = 0;

  d_calc #(.MULT_STAGES(MS)) dut (.*);

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
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000 + LAT; n++) begin
      @(negedge clk);
      if (n >= LAT) begin
        for (int i = 0; i < 4; i++) begin
          checks++;
          if (64'(d[i]) != exp_q[0][i]) begin
            failures++;
            $display("FAIL n=%0d D%0d got %0d expected %0d", n, i, d[i], exp_q[0][i]);
          end
        end
        void'(exp_q.pop_front());
      end
      for (int i = 0; i < 4; i++) k[i] = (n % 50 == 0) ? 12'd4095 : 12'($urandom_range(1, 4095));
      for (int i = 0; i < 4; i++) begin
        e[i] = 1;
        for (int j = 0; j < 4; j++) if (j != i) e[i] = e[i] * k[j];
      end
      exp_q.push_back(e);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
