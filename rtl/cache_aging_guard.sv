// cache_aging_guard: set remapping with PRBS fill in front of one cache's
// set array.
//
// The block sits in the address-generation / memory-order-buffer stage,
// one pipeline stage ahead of the cache array, so that the index remapping
// adds no delay to the array access. Every cache request passes through it:
// its logical set index is remapped by set_remap and the request is
// registered towards the array. A shift trigger (every PERIOD accepted
// accesses, or `shift_force`) starts one swap of the swap-shift process:
//   cycle 1: the set counters advance, and the first swapped physical set
//            is sent to the array with `arr_inval` (all ways invalid) and a
//            write of PRBS data into all ways,
//   cycle 2: the same for the second swapped physical set.
// The write-data mux selects the PRBS pattern instead of the request's
// write data during these two cycles. `req_ready` is low while a swap is
// pending or running: the core sees a two-cycle stall per swap. Requests
// accepted before the swap use the old map and reach the array before the
// fills; requests after it use the new map.
//
// Interface (core side): `req_valid`/`req_ready` handshake, logical
// `req_index`, `req_we` with `req_way` and `req_wdata` for a line write.
// Array side, registered: `arr_valid`, physical `arr_index`, `arr_we` with
// `arr_way_mask`, `arr_wdata`, and `arr_inval`, which clears the valid bits
// of all ways of `arr_index`.
//
// From the scheme: the shift trigger, the swap-shift counters, invalidation
// of the two swapped sets, the PRBS pattern written into them through a mux
// on the write data, and the retimed remapping stage. This design's
// choices: the two-cycle fill sequence, the stall handshake, writing the
// same PRBS line to all ways of a set, and counting accepted requests as
// cache accesses. Dirty data in the invalidated sets must be written back
// by the cache before `arr_inval` takes effect, or the cache must be
// write-through; that is outside this block.
module cache_aging_guard #(
  parameter int unsigned NSETS     = 64,
  parameter int unsigned WAYS      = 8,
  parameter int unsigned LINE_BITS = aging_pkg::LINE_BITS,
  parameter int unsigned PERIOD    = aging_pkg::CACHE_SHIFT_PERIOD,
  parameter logic [63:0] SEED      = 64'h0000_0000_0ca_c4e1,
  localparam int unsigned IW       = (NSETS > 1) ? $clog2(NSETS) : 1,
  localparam int unsigned WW       = (WAYS > 1) ? $clog2(WAYS) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 shift_force,
  // request from the core
  input  logic                 req_valid,
  output logic                 req_ready,
  input  logic [IW-1:0]        req_index,
  input  logic                 req_we,
  input  logic [WW-1:0]        req_way,
  input  logic [LINE_BITS-1:0] req_wdata,
  // towards the cache set array
  output logic                 arr_valid,
  output logic [IW-1:0]        arr_index,
  output logic                 arr_we,
  output logic [WAYS-1:0]      arr_way_mask,
  output logic [LINE_BITS-1:0] arr_wdata,
  output logic                 arr_inval,
  // status
  output logic [IW-1:0]        shift_cnt,
  output logic [IW-1:0]        swap_cnt
);

  typedef enum logic [1:0] {
    S_IDLE,
    S_FILL_B
  } state_e;

  state_e         state_q;
  logic           trig;
  logic           pending_q;
  logic           accept;
  logic           start_swap;
  logic [IW-1:0]  remapped;
  logic [IW-1:0]  row_a, row_b;
  logic [IW-1:0]  row_b_q;
  logic           wrap_unused;
  logic [LINE_BITS-1:0] prbs;
  logic           fill;

  assign accept     = req_valid && req_ready;
  assign start_swap = (state_q == S_IDLE) && pending_q;
  assign req_ready  = (state_q == S_IDLE) && !pending_q;
  assign fill       = start_swap || (state_q == S_FILL_B);

  periodic_trigger #(.PERIOD(PERIOD)) u_trig (
    .clk     (clk),
    .rst_n   (rst_n),
    .event_i (accept),
    .force_i (shift_force),
    .trig    (trig)
  );

  set_remap #(.NSETS(NSETS)) u_remap (
    .clk            (clk),
    .rst_n          (rst_n),
    .swap           (start_swap),
    .set_index      (req_index),
    .remapped_index (remapped),
    .swap_row_a     (row_a),
    .swap_row_b     (row_b),
    .wrap           (wrap_unused),
    .shift_cnt_q    (shift_cnt),
    .swap_cnt_q     (swap_cnt)
  );

  prbs_gen #(.WIDTH(LINE_BITS), .SEED(SEED)) u_prbs (
    .clk     (clk),
    .rst_n   (rst_n),
    .advance (fill),
    .pattern (prbs)
  );

  // swap sequencing
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q   <= S_IDLE;
      pending_q <= 1'b0;
      row_b_q   <= '0;
    end else begin
      if (start_swap)   pending_q <= trig;   // a new trigger in this cycle stays pending
      else if (trig)    pending_q <= 1'b1;
      case (state_q)
        S_IDLE:   if (start_swap) begin
                    state_q <= S_FILL_B;
                    row_b_q <= row_b;
                  end
        S_FILL_B: state_q <= S_IDLE;
        default:  state_q <= S_IDLE;
      endcase
    end
  end

  // pipeline register between the AGU/MOB stage and the cache array,
  // with the write-data mux (request data or PRBS)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      arr_valid    <= 1'b0;
      arr_index    <= '0;
      arr_we       <= 1'b0;
      arr_way_mask <= '0;
      arr_wdata    <= '0;
      arr_inval    <= 1'b0;
    end else begin
      arr_valid <= accept || fill;
      arr_inval <= fill;
      arr_we    <= fill || (accept && req_we);
      if (fill) begin
        arr_index    <= start_swap ? row_a : row_b_q;
        arr_way_mask <= '1;
        arr_wdata    <= prbs;
      end else if (accept) begin
        arr_index    <= remapped;
        arr_way_mask <= req_we ? WAYS'(1) << req_way : '0;
        arr_wdata    <= req_wdata;
      end
    end
  end

  // handshake rules
  a_no_accept_in_swap: assert property (@(posedge clk) disable iff (!rst_n)
    (state_q == S_FILL_B) |-> !accept);
  a_fill_is_write: assert property (@(posedge clk) disable iff (!rst_n)
    arr_inval |-> (arr_we && arr_way_mask == '1));

  initial assert (NSETS >= 2 && WAYS >= 1) else $error("cache_aging_guard: bad geometry");

endmodule
