// periodic_trigger: low-rate trigger pulse for the rotation and shift schemes.
//
// Counts qualifying events (`event_i`: every core cycle for register
// rotation, every cache access for set remapping) and raises `trig` for one
// cycle when PERIOD events have been counted, or in the cycle after an
// external request `force_i` (a CR3 write or a return from interrupt for
// the register file). Any trigger restarts the count, so the triggers are
// never closer than one per cycle and never further apart than PERIOD
// events. `trig` is registered.
//
// The periods (10 million cycles, 10 million cache accesses) and the
// external trigger sources come from the scheme; restarting the count on a
// forced trigger is this design's choice.
module periodic_trigger #(
  parameter int unsigned PERIOD = aging_pkg::RF_ROTATE_PERIOD
) (
  input  logic clk,
  input  logic rst_n,
  input  logic event_i,
  input  logic force_i,
  output logic trig
);

  localparam int unsigned CW = (PERIOD > 1) ? $clog2(PERIOD) : 1;

  logic [CW-1:0] cnt_q;
  logic          count_done;

  assign count_done = event_i && (cnt_q == CW'(PERIOD - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_q <= '0;
      trig  <= 1'b0;
    end else begin
      trig <= count_done || force_i;
      if (count_done || force_i) cnt_q <= '0;
      else if (event_i)          cnt_q <= cnt_q + 1'b1;
    end
  end

  initial assert (PERIOD >= 2) else $error("periodic_trigger: PERIOD must be at least 2");

endmodule
