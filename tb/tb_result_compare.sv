// tb_result_compare: pass = Fc > dTc, registered with the event word and
// valid flag; equal operands must give pass = 0.
module tb_result_compare;
  import dif_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic        in_valid, out_valid, out_pass;
  event_t      in_event, out_event;
  logic [53:0] fc;
  logic [61:0] dtc;
  int checks = 0, failures = 0;

  result_compare dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit   ev, ep;
    event_t ee;
    in_valid = 0; in_event = '0; fc = 0; dtc = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      if (n > 0) begin
        checks += 3;
        if (out_valid !== ev) failures++;
        if (out_event !== ee) failures++;
        if (out_pass !== ep) begin
          failures++;
          $display("FAIL n=%0d pass %0b expected %0b", n, out_pass, ep);
        end
      end
      in_valid = 1'($urandom);
      in_event = {$urandom, $urandom};
      fc  = {22'($urandom), 32'($urandom)};
      case (n % 3)
        0: dtc = 62'(fc);
        1: dtc = 62'(fc) + 62'($urandom_range(1, 5));
        default: dtc = 62'(fc) - 62'($urandom_range(0, 1000));
      endcase
      if (n % 97 == 0) dtc = {30'h3FFF_FFFF, 32'($urandom)};
      ev = in_valid; ee = in_event;
      ep = (64'(fc) > 64'(dtc));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
