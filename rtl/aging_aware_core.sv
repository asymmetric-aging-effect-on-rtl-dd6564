// aging_aware_core: the asymmetric-aging mitigation logic of one processor
// core, wired around the parts of the core it protects.
//
// Three mechanisms keep transistors from sitting under the same static
// bias for long periods:
//   * execution units: the operand registers of the FP add/sub unit and of
//     the FP mul/div unit load PRBS patterns at a slow clock rate while the
//     units are idle (exec_unit_guard, slow_tick_gen);
//   * registers: a bank of RF_REGS architectural/control registers whose
//     ID-to-slot mapping rotates by one every RF_ROTATE_PERIOD cycles, on a
//     CR3 write and on a return from interrupt (rotating_regfile,
//     periodic_trigger);
//   * caches: the set index of each of L1-D, L1-I, L2 and L3 is remapped by
//     the swap-shift process, one swap every CACHE_SHIFT_PERIOD accesses,
//     and the two swapped sets are invalidated and filled with PRBS data
//     (cache_aging_guard).
// The FP units, the cache arrays and the rest of the pipeline are not part
// of this module: the guarded operand registers and the remapped array
// requests are outputs, the core's requests are inputs.
//
// Ports: FP unit n takes `fpu_issue[n]` and `fpu_op_in[n]` and drives its
// datapath from `fpu_op_q[n]` (`fpu_op_real_q[n]` marks issued operands).
// The register bank has one write and two read ports by architectural ID,
// combinational reads. Cache c (aging_pkg::cache_id_e order) uses a
// valid/ready request port and a registered array port; narrower caches use
// the low bits of the shared index and way fields, the rest reads as zero.
// All logic runs on `clk` with an active-low asynchronous reset.
module aging_aware_core
  import aging_pkg::*;
#(
  parameter int unsigned SLOW_DIV      = SLOW_PERIOD,
  parameter int unsigned ROTATE_PERIOD = RF_ROTATE_PERIOD,
  parameter int unsigned SHIFT_PERIOD  = CACHE_SHIFT_PERIOD
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // FP execution units
  input  logic                 fpu_issue     [NUM_FP_UNITS],
  input  logic [XLEN-1:0]      fpu_op_in     [NUM_FP_UNITS][FP_OPS],
  output logic [XLEN-1:0]      fpu_op_q      [NUM_FP_UNITS][FP_OPS],
  output logic                 fpu_op_real_q [NUM_FP_UNITS],
  // rotating register bank
  input  logic                 cr3_write,
  input  logic                 iret,
  input  logic                 rf_we,
  input  logic [$clog2(RF_REGS)-1:0] rf_waddr,
  input  logic [XLEN-1:0]      rf_wdata,
  input  logic [$clog2(RF_REGS)-1:0] rf_raddr [2],
  output logic [XLEN-1:0]      rf_rdata [2],
  output logic [$clog2(RF_REGS)-1:0] rf_rot,
  // caches: core side
  input  logic                 c_shift_force [NUM_CACHES],
  input  logic                 c_req_valid   [NUM_CACHES],
  output logic                 c_req_ready   [NUM_CACHES],
  input  logic [MAX_SET_W-1:0] c_req_index   [NUM_CACHES],
  input  logic                 c_req_we      [NUM_CACHES],
  input  logic [MAX_WAY_W-1:0] c_req_way     [NUM_CACHES],
  input  logic [LINE_BITS-1:0] c_req_wdata   [NUM_CACHES],
  // caches: array side
  output logic                 arr_valid     [NUM_CACHES],
  output logic [MAX_SET_W-1:0] arr_index     [NUM_CACHES],
  output logic                 arr_we        [NUM_CACHES],
  output logic [MAX_WAYS-1:0]  arr_way_mask  [NUM_CACHES],
  output logic [LINE_BITS-1:0] arr_wdata     [NUM_CACHES],
  output logic                 arr_inval     [NUM_CACHES],
  output logic [MAX_SET_W-1:0] c_shift_cnt   [NUM_CACHES],
  output logic [MAX_SET_W-1:0] c_swap_cnt    [NUM_CACHES]
);

  // ---------------- execution units ----------------
  logic slow_tick;

  slow_tick_gen #(.PERIOD(SLOW_DIV)) u_slow (
    .clk   (clk),
    .rst_n (rst_n),
    .tick  (slow_tick)
  );

  for (genvar u = 0; u < NUM_FP_UNITS; u++) begin : g_fpu
    exec_unit_guard #(
      .NUM_OPS (FP_OPS),
      .WIDTH   (XLEN),
      .SEED    (64'h0000_0000_5eed_0001 + 64'(u))
    ) u_guard (
      .clk       (clk),
      .rst_n     (rst_n),
      .tick      (slow_tick),
      .issue     (fpu_issue[u]),
      .op_in     (fpu_op_in[u]),
      .op_q      (fpu_op_q[u]),
      .op_real_q (fpu_op_real_q[u])
    );
  end

  // ---------------- register rotation ----------------
  logic rf_rotate;

  periodic_trigger #(.PERIOD(ROTATE_PERIOD)) u_rf_trig (
    .clk     (clk),
    .rst_n   (rst_n),
    .event_i (1'b1),
    .force_i (cr3_write || iret),
    .trig    (rf_rotate)
  );

  rotating_regfile #(
    .NREGS (RF_REGS),
    .WIDTH (XLEN),
    .NREAD (2)
  ) u_rf (
    .clk    (clk),
    .rst_n  (rst_n),
    .rotate (rf_rotate),
    .we     (rf_we),
    .waddr  (rf_waddr),
    .wdata  (rf_wdata),
    .raddr  (rf_raddr),
    .rdata  (rf_rdata),
    .rot_q  (rf_rot)
  );

  // ---------------- cache set remapping ----------------
  for (genvar c = 0; c < NUM_CACHES; c++) begin : g_cache
    localparam int unsigned SETS = CACHE_SETS[c];
    localparam int unsigned WAYS = CACHE_WAYS[c];
    localparam int unsigned IW   = $clog2(SETS);
    localparam int unsigned WW   = $clog2(WAYS);

    logic [IW-1:0]   idx, shift_cnt, swap_cnt;
    logic [WAYS-1:0] way_mask;

    cache_aging_guard #(
      .NSETS     (SETS),
      .WAYS      (WAYS),
      .LINE_BITS (LINE_BITS),
      .PERIOD    (SHIFT_PERIOD),
      .SEED      (64'h0000_0000_0cac_4e10 + 64'(c))
    ) u_guard (
      .clk          (clk),
      .rst_n        (rst_n),
      .shift_force  (c_shift_force[c]),
      .req_valid    (c_req_valid[c]),
      .req_ready    (c_req_ready[c]),
      .req_index    (c_req_index[c][IW-1:0]),
      .req_we       (c_req_we[c]),
      .req_way      (c_req_way[c][WW-1:0]),
      .req_wdata    (c_req_wdata[c]),
      .arr_valid    (arr_valid[c]),
      .arr_index    (idx),
      .arr_we       (arr_we[c]),
      .arr_way_mask (way_mask),
      .arr_wdata    (arr_wdata[c]),
      .arr_inval    (arr_inval[c]),
      .shift_cnt    (shift_cnt),
      .swap_cnt     (swap_cnt)
    );

    assign arr_index[c]    = MAX_SET_W'(idx);
    assign arr_way_mask[c] = MAX_WAYS'(way_mask);
    assign c_shift_cnt[c]  = MAX_SET_W'(shift_cnt);
    assign c_swap_cnt[c]   = MAX_SET_W'(swap_cnt);
  end

endmodule
