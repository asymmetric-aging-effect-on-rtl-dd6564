// slow_tick_gen: the slow clock of the execution-unit injection scheme.
//
// The PRBS injection runs "in the order of MHz or even lower", far below
// the core clock. Instead of a second clock domain this design derives a
// one-cycle enable pulse, `tick`, every PERIOD core cycles from a free
// running counter; the blocks that the scheme clocks slowly use it as a
// clock enable, which synthesis maps onto a clock gate. PERIOD = 2660 gives
// 1 MHz from the 2.66 GHz core clock. The first tick comes PERIOD cycles
// after reset, then every PERIOD cycles.
module slow_tick_gen #(
  parameter int unsigned PERIOD = aging_pkg::SLOW_PERIOD
) (
  input  logic clk,
  input  logic rst_n,
  output logic tick
);

  localparam int unsigned CW = (PERIOD > 1) ? $clog2(PERIOD) : 1;

  logic [CW-1:0] cnt_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_q <= '0;
      tick  <= 1'b0;
    end else if (cnt_q == CW'(PERIOD - 1)) begin
      cnt_q <= '0;
      tick  <= 1'b1;
    end else begin
      cnt_q <= cnt_q + 1'b1;
      tick  <= 1'b0;
    end
  end

  initial assert (PERIOD >= 2) else $error("slow_tick_gen: PERIOD must be at least 2");

endmodule
