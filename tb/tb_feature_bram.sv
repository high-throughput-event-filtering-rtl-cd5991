// tb_feature_bram: random writes and reads against an array model.
// A read issued in cycle c must return, in cycle c+2, the word as it was
// before any write presented in cycle c (read-first, two-cycle latency).
module tb_feature_bram;
  localparam int DEPTH = 64, W = 32;
  logic clk = 0;
  always #5 clk = ~clk;

  logic          we;
  logic [5:0]    waddr, raddr;
  logic [W-1:0]  wdata, rdata;
  logic [W-1:0]  model [DEPTH];
  logic [W-1:0]  exp_q [$];
  int checks = 0, failures = 0;

  feature_bram #(.DEPTH(DEPTH), .W(W)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < DEPTH; i++) model[i] = '0;
    we = 0; waddr = 0; wdata = 0; raddr = 0;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      if (t >= 2) begin
        checks++;
        if (rdata !== exp_q[0]) begin
          failures++;
          $display("FAIL t=%0d rdata %h expected %h", t, rdata, exp_q[0]);
        end
        void'(exp_q.pop_front());
      end
      we    = ($urandom_range(1) == 1);
      waddr = 6'($urandom_range(DEPTH-1));
      wdata = $urandom;
      raddr = (t % 5 == 0) ? waddr : 6'($urandom_range(DEPTH-1));
      exp_q.push_back(model[raddr]);      // value before this cycle's write
      if (we) model[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
