// distance_rom: read-only table of the distance from a pixel to the centre
// of a neighbouring subarea.
//
// The horizontal and vertical offsets to a neighbour centre can take only
// SCALE values each, (i + 1/2) pixels for i = 0 .. SCALE-1, so the L2 norm
// is not computed but looked up. Entry {dy, dx} holds
//   round(4 * sqrt((dx + 1/2)^2 + (dy + 1/2)^2)),
// the distance with two fractional bits (a resolution of 0.25 pixel).
// The table is filled at elaboration by an integer square root, so it
// follows SCALE. Read latency is two cycles, like the block RAM it models.
module distance_rom #(
  parameter int SCALE = 16,
  localparam int SH   = $clog2(SCALE),
  localparam int DW   = $clog2(6 * SCALE + 1)   // 4*sqrt(2)*SCALE < 6*SCALE
) (
  input  logic          clk,
  input  logic [SH-1:0] dx,
  input  logic [SH-1:0] dy,
  output logic [DW-1:0] dval
);
  typedef logic [DW-1:0] rom_t [SCALE*SCALE];

  // round(sqrt(4*A)) with A = (2i+1)^2 + (2j+1)^2: r = floor(sqrt(4A)),
  // plus one when 4A >= (r + 1/2)^2, i.e. 16A >= (2r+1)^2.
  function automatic rom_t build();
    rom_t t;
    for (int j = 0; j < SCALE; j++) begin
      for (int i = 0; i < SCALE; i++) begin
        int a, n, r;
        a = (2*i + 1) * (2*i + 1) + (2*j + 1) * (2*j + 1);
        n = 4 * a;
        r = 0;
        while ((r + 1) * (r + 1) <= n) r++;
        if (16 * a >= (2*r + 1) * (2*r + 1)) r++;
        t[j*SCALE + i] = DW'(r);
      end
    end
    return t;
  endfunction

  localparam rom_t ROM = build();

  logic [DW-1:0] q1;

  always_ff @(posedge clk) begin
    q1   <= ROM[{dy, dx}];
    dval <= q1;
  end
endmodule
