// result_compare: final decision of the filter.
//
// The event is kept (pass = 1) when Fc > dTc, i.e. when the interpolated
// time since the last activity around the event is shorter than the filter
// length; otherwise it is marked as noise. The event word travels with its
// result: out_valid, out_event and out_pass are registered together, one
// cycle after the inputs. The event is not dropped here; the pass flag
// goes with it so that a consumer may drop it or use it as a label.
module result_compare #(
  parameter int FC_W  = dif_pkg::DSUM_W + dif_pkg::FL_W,
  parameter int DTC_W = dif_pkg::DTC_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  dif_pkg::event_t  in_event,
  input  logic [FC_W-1:0]  fc,
  input  logic [DTC_W-1:0] dtc,
  output logic             out_valid,
  output dif_pkg::event_t  out_event,
  output logic             out_pass
);
  localparam int CW = (FC_W > DTC_W) ? FC_W : DTC_W;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_event <= '0;
      out_pass  <= 1'b0;
    end else begin
      out_valid <= in_valid;
      out_event <= in_event;
      out_pass  <= CW'(fc) > CW'(dtc);
    end
  end
endmodule
