// global_update_ctrl: starts and sequences the sweep that refreshes
// inactive subareas.
//
// Time is divided into periods of PERIOD timestamp units (20 ms in the
// paper's evaluation). When an event arrives whose timestamp reaches the end
// of the current period, the controller holds that event back (in_ready
// low) and first sweeps all AREAS subareas, one address per clock cycle.
// Each sweep step travels down the same area-update pipeline as an event,
// carrying the period's end time as its timestamp; the pipeline updates the
// area's timestamp and interval only if the activity flag of the area is
// clear. The sweep therefore stalls the input for AREAS cycles per period,
// which is what lowers the throughput of the version with global update.
// After the sweep the next period begins and the held event is accepted.
// If the held event lies several periods ahead, one sweep is run per period.
//
// Interface: in_valid/in_ts observe the input event; in_ready gates it.
// sweep_valid, sweep_addr, sweep_ts issue one sweep step per cycle;
// busy is high while a sweep runs. Timestamps are compared unsigned, so a
// wrap of the 32-bit timestamp is not handled.
module global_update_ctrl #(
  parameter int          AREAS  = 3600,
  parameter dif_pkg::ts_t PERIOD = 20000,
  localparam int         AW     = $clog2(AREAS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  dif_pkg::ts_t  in_ts,
  output logic          in_ready,
  output logic          sweep_valid,
  output logic [AW-1:0] sweep_addr,
  output dif_pkg::ts_t  sweep_ts,
  output logic          busy
);
  typedef enum logic {S_IDLE, S_SWEEP} state_e;

  state_e        state;
  dif_pkg::ts_t  next_gu;
  logic [AW-1:0] cnt;
  logic          due;

  assign due         = in_valid && (in_ts >= next_gu);
  assign in_ready    = (state == S_IDLE) && !due;
  assign busy        = (state == S_SWEEP);
  assign sweep_valid = (state == S_SWEEP);
  assign sweep_addr  = cnt;
  assign sweep_ts    = next_gu;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      next_gu <= PERIOD;
      cnt     <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (due) begin
          state <= S_SWEEP;
          cnt   <= '0;
        end
        S_SWEEP: begin
          if (int'(cnt) == AREAS - 1) begin
            state   <= S_IDLE;
            next_gu <= next_gu + PERIOD;
          end
          cnt <= cnt + 1'b1;
        end
      endcase
    end
  end
endmodule
