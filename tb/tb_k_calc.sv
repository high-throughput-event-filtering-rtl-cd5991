// tb_k_calc: the four K lanes against a floating-point distance and an
// integer model of the reduction: K = I*round(4d) >> 8, then 0 -> 1 and
// values above 4095 -> 4095. Intervals are drawn from three ranges so that
// the lower clamp, the normal range and the upper saturation all occur;
// each must be seen. Latency 2 + MULT_STAGES + 1 = 7 cycles.
module tb_k_calc;
  localparam int MS = 4, LAT = 2 + MS + 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [3:0]  dx1, dx2, dy1, dy2;
  logic [31:0] intv [4];
  logic [11:0] k [4];
  int checks = 0, failures = 0, n_low = 0, n_mid = 0, n_sat = 0;

  k_calc #(.SCALE(16), .MULT_STAGES(MS)) dut (.*);

  function automatic int dq(int a, int b);
    return $rtoi(4.0 * $sqrt((a + 0.5) ** 2 + (b + 0.5) ** 2) + 0.5);
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_q [$][4];
    int e [4];
    rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000 + LAT; n++) begin
      @(negedge clk);
      if (n >= LAT) begin
        for (int i = 0; i < 4; i++) begin
          checks++;
          if (k[i] !== 12'(exp_q[0][i])) begin
            failures++;
            $display("FAIL n=%0d lane %0d got %0d expected %0d", n, i, k[i], exp_q[0][i]);
          end
        end
        void'(exp_q.pop_front());
      end
      dx1 = 4'($urandom_range(15)); dx2 = 4'(15 - dx1);
      dy1 = 4'($urandom_range(15)); dy2 = 4'(15 - dy1);
      for (int i = 0; i < 4; i++) begin
        int r;
        r = $urandom_range(2);
        intv[i] = (r == 0) ? $urandom_range(40) : (r == 1) ? $urandom_range(100000) : $urandom_range(32'h0FFF_FFFF);
      end
      begin
        int d [4];
        d[0] = dq(dx1, dy1); d[1] = dq(dx2, dy1); d[2] = dq(dx1, dy2); d[3] = dq(dx2, dy2);
        for (int i = 0; i < 4; i++) begin
          longint unsigned raw;
          raw = (longint'(intv[i]) * d[i]) >> 8;
          if (raw == 0) begin e[i] = 1; if (n < 3000) n_low++; end
          else if (raw > 4095) begin e[i] = 4095; if (n < 3000) n_sat++; end
          else begin e[i] = int'(raw); if (n < 3000) n_mid++; end
        end
      end
      exp_q.push_back(e);
    end
    $display("lower clamp %0d, in range %0d, saturated %0d", n_low, n_mid, n_sat);
    checks += 3;
    if (n_low == 0) failures++;
    if (n_mid == 0) failures++;
    if (n_sat == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
