// tb_activity_matrix: random sets, then sweeps that read and clear every
// flag, against a bit-array model. A read returns the flag one cycle later
// and leaves it clear; a set in the same cycle as a clear of the same flag
// wins.
module tb_activity_matrix;
  localparam int AREAS = 100;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       set_en, rd_en, rd_active;
  logic [6:0] set_addr, rd_addr;
  bit         model [AREAS];
  int checks = 0, failures = 0;

  activity_matrix #(.AREAS(AREAS)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit exp, pend;
    set_en = 0; rd_en = 0; set_addr = 0; rd_addr = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 6; round++) begin
      // events
      repeat (round * 20) begin
        @(negedge clk);
        set_en = 1; rd_en = 0;
        set_addr = 7'($urandom_range(AREAS-1));
        model[set_addr] = 1;
      end
      // sweep; in the last round an event hits the flag being cleared
      pend = 0;
      for (int a = 0; a < AREAS; a++) begin
        @(negedge clk);
        if (pend) begin
          checks++;
          if (rd_active !== exp) begin
            failures++;
            $display("FAIL round %0d addr %0d got %0b expected %0b", round, a-1, rd_active, exp);
          end
        end
        rd_en = 1; rd_addr = 7'(a);
        exp = model[a]; pend = 1;
        set_en = (round == 5) && (a % 7 == 0);
        set_addr = 7'(a);
        model[a] = set_en;
      end
      @(negedge clk);
      checks++;
      if (rd_active !== exp) failures++;
      rd_en = 0; set_en = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
