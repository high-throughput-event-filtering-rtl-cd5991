// activity_matrix: one flag per subarea telling whether any event fell into
// that area since the last sweep of inactive areas.
//
// Built from registers, as in the paper (which names this register array
// as the longest path of the full design). An event sets the flag of its own
// area (set_en, set_addr). The sweep reads the flags one by one (rd_en,
// rd_addr); a read returns the flag one cycle later on rd_active and clears
// it in the same clock edge, so after a sweep all flags are zero. If one
// address is set and cleared in the same cycle the set wins. All flags are
// zero after reset.
module activity_matrix #(
  parameter int AREAS = 3600,
  localparam int AW   = $clog2(AREAS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          set_en,
  input  logic [AW-1:0] set_addr,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output logic          rd_active
);
  logic [AREAS-1:0] active;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active    <= '0;
      rd_active <= 1'b0;
    end else begin
      if (rd_en) begin
        rd_active        <= active[rd_addr];
        active[rd_addr]  <= 1'b0;
      end
      if (set_en) active[set_addr] <= 1'b1;
    end
  end
endmodule
