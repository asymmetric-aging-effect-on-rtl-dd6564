// prbs_gen: parallel pseudorandom bit sequence (PRBS) generator.
//
// A Fibonacci LFSR of DEGREE bits with the feedback polynomial
// x^DEGREE + x^TAP + 1 (PRBS-31 by default). The serial sequence is
// b = s[DEGREE-1] ^ s[TAP-1], shifted in at the bottom of the state. The
// generator presents the next WIDTH serial bits at once on `pattern`
// (bit 0 is the earliest), worked out combinationally from the present
// state; each cycle with `advance` high the state moves on by WIDTH bits,
// so consecutive advances give consecutive, non-overlapping stretches of
// the one PRBS stream.
//
// Interface: `advance` is the slow-clock enable of the injection schemes
// (execution units) or the fill strobe of the cache scheme. Reset loads
// SEED, which must be non-zero. `pattern` is valid in every cycle.
//
// The scheme only asks for "a simple PRBS circuit" that toggles the
// guarded logic at a low rate; the polynomial, the parallel output and the
// seed are choices of this design.
module prbs_gen #(
  parameter int unsigned  WIDTH  = 64,
  parameter int unsigned  DEGREE = aging_pkg::PRBS_DEGREE,
  parameter int unsigned  TAP    = aging_pkg::PRBS_TAP,
  parameter logic [63:0]  SEED   = 64'h0000_0000_1234_5677
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             advance,
  output logic [WIDTH-1:0] pattern
);

  logic [DEGREE-1:0] state_q, state_next;

  // Unroll WIDTH serial steps of the LFSR.
  always_comb begin
    logic [DEGREE-1:0] s;
    logic              b;
    s = state_q;
    pattern = '0;
    for (int unsigned i = 0; i < WIDTH; i++) begin
      b          = s[DEGREE-1] ^ s[TAP-1];
      pattern[i] = b;
      s          = {s[DEGREE-2:0], b};
    end
    state_next = s;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       state_q <= SEED[DEGREE-1:0];
    else if (advance) state_q <= state_next;
  end

  initial begin
    assert (SEED[DEGREE-1:0] != '0) else $error("prbs_gen: SEED must be non-zero");
    assert (TAP > 0 && TAP < DEGREE) else $error("prbs_gen: TAP out of range");
  end

endmodule
