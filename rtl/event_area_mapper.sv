// event_area_mapper: assigns an event to its subarea and finds the four
// subareas whose centres surround the pixel.
//
// The sensor is divided into square subareas of SCALE x SCALE pixels
// (SCALE a power of two). The area of pixel (x, y) is (x >> log2 SCALE,
// y >> log2 SCALE); the remainder bits say in which quarter of the area the
// pixel lies, and so which neighbours enclose it: a pixel in the left half
// of its area is interpolated between the area to its left and its own,
// one in the right half between its own and the one to its right; likewise
// vertically. The four areas are returned as 11 (top-left), 12 (top-right),
// 21 (bottom-left), 22 (bottom-right), as linear addresses row*COLS + col.
// At the edge of the sensor a missing neighbour is replaced by the area
// that exists, so an event in a corner reads the same area four times and
// one on an edge reads each area twice. This is the edge rule of the
// hardware variant of the algorithm; the linear addressing is this
// design's choice.
//
// Distances: area centres lie at col*SCALE + SCALE/2 in pixel-corner units
// and a pixel's centre at x + 1/2, so the horizontal distance to the left
// centre is (i + 1/2) pixels with i = (x mod SCALE + SCALE/2) mod SCALE,
// and to the right centre (SCALE-1-i + 1/2). dx1/dx2/dy1/dy2 are returned
// as those indices i (SCALE possible values each), the address of the
// distance table.
//
// Timing: all outputs are registered, one cycle after x and y.
module event_area_mapper #(
  parameter int WIDTH  = 1280,
  parameter int HEIGHT = 720,
  parameter int SCALE  = 16,
  localparam int SH    = $clog2(SCALE),
  localparam int COLS  = (WIDTH  + SCALE - 1) / SCALE,
  localparam int ROWS  = (HEIGHT + SCALE - 1) / SCALE,
  localparam int AREAS = COLS * ROWS,
  localparam int AW    = $clog2(AREAS)
) (
  input  logic                clk,
  input  logic [dif_pkg::X_W-1:0] x,
  input  logic [dif_pkg::Y_W-1:0] y,
  output logic [AW-1:0]       addr [4],   // 11, 12, 21, 22
  output logic [1:0]          own_sel,    // which of the four is the event's own area
  output logic [AW-1:0]       own_addr,
  output logic [SH-1:0]       dx1, dx2, dy1, dy2
);
  localparam int CW = $clog2(COLS + 1);
  localparam int RW = $clog2(ROWS + 1);

  logic [CW-1:0] ax, cl, cr;
  logic [RW-1:0] ay, rt, rb;
  logic [SH-1:0] xr, yr;
  logic          xhi, yhi;   // pixel lies in the right / bottom half of its area

  always_comb begin
    ax  = CW'(x >> SH);
    ay  = RW'(y >> SH);
    xr  = x[SH-1:0];
    yr  = y[SH-1:0];
    xhi = xr[SH-1];
    yhi = yr[SH-1];
    // left/right columns, clamped at the sensor edge
    if (xhi) begin
      cl = ax;
      cr = (int'(ax) + 1 < COLS) ? ax + 1'b1 : ax;
    end else begin
      cl = (ax == 0) ? ax : ax - 1'b1;
      cr = ax;
    end
    if (yhi) begin
      rt = ay;
      rb = (int'(ay) + 1 < ROWS) ? ay + 1'b1 : ay;
    end else begin
      rt = (ay == 0) ? ay : ay - 1'b1;
      rb = ay;
    end
  end

  function automatic logic [AW-1:0] lin(input logic [RW-1:0] r, input logic [CW-1:0] c);
    return AW'(int'(r) * COLS + int'(c));
  endfunction

  always_ff @(posedge clk) begin
    addr[0]  <= lin(rt, cl);
    addr[1]  <= lin(rt, cr);
    addr[2]  <= lin(rb, cl);
    addr[3]  <= lin(rb, cr);
    own_sel  <= {~yhi, ~xhi};          // own area is bottom if y in top half, right if x in left half
    own_addr <= lin(ay, ax);
    dx1      <= xr ^ SH'(SCALE / 2);    // (xr + SCALE/2) mod SCALE
    dx2      <= ~(xr ^ SH'(SCALE / 2)); // SCALE-1 - dx1
    dy1      <= yr ^ SH'(SCALE / 2);
    dy2      <= ~(yr ^ SH'(SCALE / 2));
  end
endmodule
