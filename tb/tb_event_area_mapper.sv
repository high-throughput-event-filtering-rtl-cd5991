// tb_event_area_mapper: checks the area mapper against an independent model.
//
// The model works in half-pixel units: a pixel centre is at 2x+1, the centre
// of area column c at 32c+16 (SCALE 16). The left neighbour column is the
// last centre at or left of the pixel, the right one the next; both are
// clamped to the sensor. Distance indices follow from the centre offsets.
// Corners, edges and random pixels of a 1280 x 720 sensor are checked, one
// cycle after the inputs.
module tb_event_area_mapper;
  localparam int W = 1280, H = 720, S = 16;
  localparam int COLS = W / S, ROWS = H / S;

  logic clk = 0;
  always #5 clk = ~clk;

  logic [15:0] x;
  logic [14:0] y;
  logic [11:0] addr [4];
  logic [1:0]  own_sel;
  logic [11:0] own_addr;
  logic [3:0]  dx1, dx2, dy1, dy2;
  int checks = 0, failures = 0;

  event_area_mapper #(.WIDTH(W), .HEIGHT(H), .SCALE(S)) dut (.*);

  task automatic expect_eq(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s x=%0d y=%0d got %0d expected %0d", what, x, y, got, exp);
    end
  endtask

  task automatic check_one(int xi, int yi);
    int c, r, cl, cr, rt, rb, e_dx1, e_dx2, e_dy1, e_dy2, ownc, ownr, sel;
    x = 16'(xi); y = 15'(yi);
    @(posedge clk); #1;
    c = $floor(real'(2*xi + 1 - 16) / 32.0);
    r = $floor(real'(2*yi + 1 - 16) / 32.0);
    e_dx1 = (2*xi + 1 - (32*c + 16) - 1) / 2;
    e_dx2 = ((32*(c+1) + 16) - (2*xi + 1) - 1) / 2;
    e_dy1 = (2*yi + 1 - (32*r + 16) - 1) / 2;
    e_dy2 = ((32*(r+1) + 16) - (2*yi + 1) - 1) / 2;
    cl = (c < 0) ? 0 : c;  cr = (c + 1 > COLS - 1) ? COLS - 1 : c + 1;
    rt = (r < 0) ? 0 : r;  rb = (r + 1 > ROWS - 1) ? ROWS - 1 : r + 1;
    ownc = xi / S; ownr = yi / S;
    sel = ((ownr == rt && !(r < 0)) ? 0 : 2) + ((ownc == cl && !(c < 0)) ? 0 : 1);
    expect_eq("addr11", addr[0], rt*COLS + cl);
    expect_eq("addr12", addr[1], rt*COLS + cr);
    expect_eq("addr21", addr[2], rb*COLS + cl);
    expect_eq("addr22", addr[3], rb*COLS + cr);
    expect_eq("own_addr", own_addr, ownr*COLS + ownc);
    expect_eq("own_sel", own_sel, sel);
    expect_eq("own_addr_in_set", addr[own_sel], ownr*COLS + ownc);
    expect_eq("dx1", dx1, e_dx1);
    expect_eq("dx2", dx2, e_dx2);
    expect_eq("dy1", dy1, e_dy1);
    expect_eq("dy2", dy2, e_dy2);
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // corners, edges and the two events of the update example
    check_one(0, 0);       check_one(W-1, 0);   check_one(0, H-1);  check_one(W-1, H-1);
    check_one(7, 300);     check_one(8, 300);   check_one(W-9, 5);  check_one(W-8, 5);
    check_one(500, 7);     check_one(500, 8);   check_one(19, 6);   check_one(33, 57);
    for (int i = 0; i < 2000; i++) check_one($urandom_range(W-1), $urandom_range(H-1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
