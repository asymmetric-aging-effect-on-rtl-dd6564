// set_remap: swap-shift remapping of cache set indices.
//
// A cache line that holds the same value for a long time, or is never used,
// keeps its bit cells under static bias stress. This block slowly moves the
// logical sets across the physical sets so that the stress is spread over
// the whole array. Two counters hold the mapping:
//   set-shift counter S (0..NSETS-1): completed rotations of the whole map,
//   set-swap  counter m (0..NSETS-2): swaps done in the present rotation.
// After S rotations logical set L sits at rotated position r = (L - S) mod
// NSETS. In each rotation the set at position 0 (logical set S) is swapped
// down by one physical set per swap, so after m swaps
//   r == 0       -> physical m        (the set being moved)
//   1 <= r <= m  -> physical r - 1    (swapped region, one up)
//   r >  m       -> physical r        (unswapped region)
// After NSETS-1 swaps the moved set has reached the last set, which is the
// same map as one more rotation: m wraps to 0 and S increments (and wraps
// to 0 after NSETS rotations).
//
// Interface: `remapped_index` is the physical set of `set_index` under the
// present counters (combinational). `swap` performs one swap at the clock
// edge; `swap_row_a`/`swap_row_b` (m and m+1) are the two physical sets
// that this swap exchanges, whose lines the caller must invalidate.
// `wrap` is high when the next swap completes a rotation.
//
// From the scheme: the two counters, the comparison of the index against
// the swap counter, the modular addition of the shift counter and the
// swapped/unswapped regions of the swap-shift method. This design's choices:
// the exact index arithmetic above, written to reproduce the set orders of
// the published set diagrams; the shift counter is applied as a modular
// subtraction, the drawn adder adding its complement.
module set_remap #(
  parameter int unsigned NSETS = 64,
  localparam int unsigned IW   = (NSETS > 1) ? $clog2(NSETS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          swap,
  input  logic [IW-1:0] set_index,
  output logic [IW-1:0] remapped_index,
  output logic [IW-1:0] swap_row_a,
  output logic [IW-1:0] swap_row_b,
  output logic          wrap,
  output logic [IW-1:0] shift_cnt_q,
  output logic [IW-1:0] swap_cnt_q
);

  logic [IW-1:0] rot_idx;

  // r = (set_index - S) mod NSETS, both operands below NSETS
  always_comb begin
    if (set_index >= shift_cnt_q) rot_idx = set_index - shift_cnt_q;
    else                          rot_idx = IW'(set_index + IW'(NSETS) - shift_cnt_q);
  end

  always_comb begin
    if (rot_idx == '0)             remapped_index = swap_cnt_q;
    else if (rot_idx > swap_cnt_q) remapped_index = rot_idx;
    else                           remapped_index = rot_idx - 1'b1;
  end

  assign swap_row_a = swap_cnt_q;
  assign swap_row_b = swap_cnt_q + 1'b1;
  assign wrap       = (swap_cnt_q == IW'(NSETS - 2));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shift_cnt_q <= '0;
      swap_cnt_q  <= '0;
    end else if (swap) begin
      if (wrap) begin
        swap_cnt_q  <= '0;
        shift_cnt_q <= (shift_cnt_q == IW'(NSETS - 1)) ? '0 : shift_cnt_q + 1'b1;
      end else begin
        swap_cnt_q  <= swap_cnt_q + 1'b1;
      end
    end
  end

  initial assert (NSETS >= 2) else $error("set_remap: NSETS must be at least 2");

endmodule
