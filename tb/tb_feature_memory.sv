// tb_feature_memory: four read ports and the write-back cache against an
// array model that is always up to date. A read issued in cycle c must see,
// in cycle c+2, every write presented up to cycle c+1, whether the word is
// still in the cache or already in the banks. A 16-entry memory and
// addresses chosen from recent writes make the cache hit often; hits on
// each cache stage (writes one, two and three cycles before the data is
// used) are counted and each must occur.
module tb_feature_memory;
  localparam int DEPTH = 16, W = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          we;
  logic [3:0]    waddr;
  logic [W-1:0]  wdata;
  logic [3:0]    raddr [4];
  logic [W-1:0]  rdata [4];
  logic [W-1:0]  model [DEPTH];
  logic [3:0]    ra_hist [$][4];
  logic          we_hist [$];
  logic [3:0]    wa_hist [$];
  int checks = 0, failures = 0;
  int hit1 = 0, hit2 = 0, hit3 = 0;

  feature_memory #(.DEPTH(DEPTH), .W(W)) dut (.*);

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [3:0] ra [4];
    for (int i = 0; i < DEPTH; i++) model[i] = '0;
    we = 0; waddr = 0; wdata = 0; raddr = '{default: 0};
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      if (t >= 2) begin
        for (int i = 0; i < 4; i++) begin
          logic [3:0] a;
          a = ra_hist[0][i];
          checks++;
          if (rdata[i] !== model[a]) begin
            failures++;
            $display("FAIL t=%0d port %0d addr %0d got %h expected %h", t, i, a, rdata[i], model[a]);
          end
          // which cache stage must supply it (writes of cycles t-1, t-2, t-3)
          if      (we_hist[2] && wa_hist[2] == a) hit1++;
          else if (we_hist[1] && wa_hist[1] == a) hit2++;
          else if (we_hist[0] && wa_hist[0] == a) hit3++;
        end
        void'(ra_hist.pop_front());
      end
      we    = ($urandom_range(3) != 0);
      waddr = 4'($urandom_range(DEPTH-1));
      wdata = $urandom;
      for (int i = 0; i < 4; i++) ra[i] = 4'($urandom_range(DEPTH-1));
      raddr = ra;
      ra_hist.push_back(ra);
      we_hist.push_back(we); wa_hist.push_back(waddr);
      if (we_hist.size() > 3) begin void'(we_hist.pop_front()); void'(wa_hist.pop_front()); end
      if (we) model[waddr] = wdata;
    end
    $display("cache hits D1=%0d D2=%0d D3=%0d", hit1, hit2, hit3);
    checks += 3;
    if (hit1 == 0) failures++;
    if (hit2 == 0) failures++;
    if (hit3 == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
