// tb_distance_rom: every entry of the 16 x 16 distance table against
// round(4 * sqrt((dx+0.5)^2 + (dy+0.5)^2)) computed in floating point,
// read with the two-cycle latency.
module tb_distance_rom;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [3:0] dx, dy;
  logic [6:0] dval;
  int checks = 0, failures = 0;

  distance_rom #(.SCALE(16)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_q [$];
    for (int n = 0; n < 256 + 2; n++) begin
      @(negedge clk);
      if (n >= 2) begin
        checks++;
        if (dval !== 7'(exp_q[0])) begin
          failures++;
          $display("FAIL entry %0d got %0d expected %0d", n-2, dval, exp_q[0]);
        end
        void'(exp_q.pop_front());
      end
      dx = 4'(n % 16); dy = 4'((n / 16) % 16);
      exp_q.push_back($rtoi(4.0 * $sqrt((dx + 0.5) ** 2 + (dy + 0.5) ** 2) + 0.5));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
