// exec_unit_guard: PRBS injection into the operand registers of an idle
// execution unit (e.g. the FP adder or the FP multiplier/divider).
//
// An execution unit whose clock-gated input registers hold the same operands
// for a long idle period keeps its whole datapath under static bias stress.
// This block sits in front of the unit: each of the NUM_OPS operand
// registers is fed by a 2:1 mux that selects the issued operand when the
// unit is used (`issue`) and a slice of a PRBS pattern otherwise. The
// registers load when `issue` is high or when the slow clock ticks, so an
// idle unit sees a fresh pseudorandom operand set every slow-clock period
// and stays almost as gated as before. The PRBS generator advances only on
// slow ticks.
//
// Interface: `op_in` are the operands from issue, `op_q` the operand
// registers that drive the execution unit. `op_real_q` tells that `op_q`
// holds issued operands, not an injected pattern, so that the result of an
// injected pattern can be discarded downstream. Timing: `op_q` follows
// `op_in` one cycle after `issue`, and a PRBS slice one cycle after an idle
// `tick`. Issue always wins over injection.
//
// From the scheme: the PRBS generator on a slow clock, the operand muxes in
// front of the clock-gated operand registers. This design's choices: the
// clock gate is written as a load enable `issue | tick`, the mux selects on
// `issue`, and every operand gets its own WIDTH-bit slice of one
// NUM_OPS*WIDTH-bit pattern so that the operands differ from each other.
module exec_unit_guard #(
  parameter int unsigned NUM_OPS = 2,
  parameter int unsigned WIDTH   = 64,
  parameter logic [63:0] SEED    = 64'h0000_0000_5eed_0001
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             tick,                  // slow clock enable
  input  logic             issue,                 // unit in use this cycle
  input  logic [WIDTH-1:0] op_in [NUM_OPS],
  output logic [WIDTH-1:0] op_q  [NUM_OPS],
  output logic             op_real_q
);

  logic [NUM_OPS*WIDTH-1:0] prbs;
  logic                     load;

  prbs_gen #(
    .WIDTH (NUM_OPS * WIDTH),
    .SEED  (SEED)
  ) u_prbs (
    .clk     (clk),
    .rst_n   (rst_n),
    .advance (tick && !issue),
    .pattern (prbs)
  );

  // Clock gate of the operand registers: open for issue or a slow tick.
  assign load = issue || tick;

  for (genvar k = 0; k < NUM_OPS; k++) begin : g_op
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)    op_q[k] <= '0;
      else if (load) op_q[k] <= issue ? op_in[k] : prbs[k*WIDTH +: WIDTH];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    op_real_q <= 1'b0;
    else if (load) op_real_q <= issue;
  end

endmodule
