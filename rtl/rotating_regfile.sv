// rotating_regfile: register file with periodic modulo rotation of the
// register mapping.
//
// Architectural and control registers that keep one value for a long time
// put their bit cells under static bias stress. Here each architectural
// register ID is mapped to a physical slot by adding the RF rotator, a
// modulo-NREGS counter: slot = (id + rot) mod NREGS. On every rotate
// trigger all registers shift by one slot (slot k takes slot k-1, slot 0
// takes slot NREGS-1) and the rotator is incremented, so every register
// keeps its architectural value while its bits move to a new location.
// Over NREGS rotations each value visits every slot.
//
// Interface: one write port (`we`, `waddr`, `wdata`) and NREAD
// combinational read ports, all addressed by architectural ID. `rotate` is
// a one-cycle pulse from the rotation trigger. `rot_q` is the rotator.
// Timing: a read returns the value written at the last clock edge; a write
// in the same cycle as `rotate` lands at the slot of the rotated mapping,
// so it is kept. Reset clears all registers and the rotator.
//
// From the scheme: the rotator counter, the modulo adder on the register ID
// and the per-register shift muxes next to the write port. This design's
// choices: the number of read ports and the handling of a write that
// coincides with a rotation.
module rotating_regfile #(
  parameter int unsigned NREGS = aging_pkg::RF_REGS,
  parameter int unsigned WIDTH = aging_pkg::XLEN,
  parameter int unsigned NREAD = 2,
  localparam int unsigned AW   = (NREGS > 1) ? $clog2(NREGS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             rotate,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr [NREAD],
  output logic [WIDTH-1:0] rdata [NREAD],
  output logic [AW-1:0]    rot_q
);

  logic [WIDTH-1:0] regs_q [NREGS];
  logic [AW-1:0]    rot_next;
  logic [AW-1:0]    wslot;

  // (a + b) mod NREGS for a, b < NREGS
  function automatic logic [AW-1:0] mod_add(input logic [AW-1:0] a, input logic [AW-1:0] b);
    logic [AW:0] s;
    s = {1'b0, a} + {1'b0, b};
    if (s >= (AW+1)'(NREGS)) s = s - (AW+1)'(NREGS);
    return s[AW-1:0];
  endfunction

  assign rot_next = rotate ? mod_add(rot_q, AW'(1)) : rot_q;
  assign wslot    = mod_add(waddr, rot_next);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rot_q <= '0;
    else        rot_q <= rot_next;
  end

  for (genvar k = 0; k < NREGS; k++) begin : g_reg
    localparam int unsigned PREV = (k == 0) ? NREGS - 1 : k - 1;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)                          regs_q[k] <= '0;
      else if (we && wslot == AW'(k))      regs_q[k] <= wdata;
      else if (rotate)                     regs_q[k] <= regs_q[PREV];
    end
  end

  for (genvar r = 0; r < NREAD; r++) begin : g_rd
    assign rdata[r] = regs_q[mod_add(raddr[r], rot_q)];
  end

  // register IDs must name a register (matters when NREGS is not a power of two)
  a_waddr_in_range: assert property (@(posedge clk) we |-> waddr < AW'(NREGS - 1) || waddr == AW'(NREGS - 1));

  initial assert (NREGS >= 2) else $error("rotating_regfile: NREGS must be at least 2");

endmodule
