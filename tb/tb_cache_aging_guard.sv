// tb_cache_aging_guard: end-to-end test of one cache's remapping and PRBS
// fill, with a behavioural set array behind the block.
//
// Geometry 8 sets x 4 ways, 64-bit lines, a shift trigger every 5 accepted
// accesses, plus random forced triggers. The testbench keeps:
//   * a logical view: the line last written to (logical set, way), and
//     whether it is still valid (a swap of its physical set kills it);
//   * a physical set array updated only from the block's array port;
//   * its own swap-shift permutation, advanced when a swap is seen.
// Checks: every accepted request reaches the array one cycle later at the
// model's physical set with the right way mask and data; every swap is a
// pair of invalidating all-way writes to the model's two swap rows,
// carrying consecutive stretches of the PRBS-31 stream; each swap stalls
// the requester exactly two cycles; the number of swaps equals the
// triggers a counting model expects; and after every cycle each valid
// logical line is found, unchanged, in the array at its mapped set.
module tb_cache_aging_guard;

  localparam int unsigned NS = 8, NW = 4, LB = 64, P = 5;
  localparam logic [63:0] SEED = 64'h0000_0000_0ca_c4e1;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic force_s = 0, req_valid = 0, req_ready, req_we = 0;
  logic [2:0] req_index = '0;
  logic [1:0] req_way = '0;
  logic [LB-1:0] req_wdata = '0;
  logic arr_valid, arr_we, arr_inval;
  logic [2:0] arr_index;
  logic [NW-1:0] arr_way_mask;
  logic [LB-1:0] arr_wdata;
  logic [2:0] shift_cnt, swap_cnt;
  int checks = 0;
  int failures = 0;

  always #5 clk = ~clk;

  cache_aging_guard #(.NSETS(NS), .WAYS(NW), .LINE_BITS(LB), .PERIOD(P), .SEED(SEED)) dut (
    .clk(clk), .rst_n(rst_n), .shift_force(force_s),
    .req_valid(req_valid), .req_ready(req_ready), .req_index(req_index), .req_we(req_we),
    .req_way(req_way), .req_wdata(req_wdata),
    .arr_valid(arr_valid), .arr_index(arr_index), .arr_we(arr_we), .arr_way_mask(arr_way_mask),
    .arr_wdata(arr_wdata), .arr_inval(arr_inval), .shift_cnt(shift_cnt), .swap_cnt(swap_cnt));

  // physical array model
  logic [LB-1:0] mem [NS][NW];
  bit            vld [NS][NW];
  // logical model
  logic [LB-1:0] ldata [NS][NW];
  bit            lvld  [NS][NW];
  // permutation model
  int own [NS];
  int phys_of [NS];
  int pos = 0;
  // PRBS stream model
  bit hist [$];

  function automatic logic [LB-1:0] prbs_next();
    logic [LB-1:0] v;
    for (int i = 0; i < LB; i++) begin
      v[i] = hist[0] ^ hist[3];
      hist.pop_front();
      hist.push_back(v[i]);
    end
    return v;
  endfunction

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit  exp_req;          // an accepted request must show on the array port
    int  exp_phys, exp_way;
    bit  exp_we;
    logic [LB-1:0] exp_data;
    int  fills_in_pair = 0;
    int  cnt = 0, exp_swaps = 0, swaps = 0, stalls = 0, forced = 0, accepted = 0, pend = 0;
    logic [LB-1:0] fill_a;

    for (int i = 30; i >= 0; i--) hist.push_back(SEED[i]);
    for (int s = 0; s < NS; s++) begin
      own[s] = s; phys_of[s] = s;
      for (int w = 0; w < NW; w++) begin vld[s][w] = 0; lvld[s][w] = 0; mem[s][w] = '0; end
    end
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    for (int c = 0; c < 3000; c++) begin
      // drive
      req_valid = ($urandom_range(0, 3) != 0);
      req_we    = ($urandom_range(0, 1) == 0);
      req_index = 3'($urandom_range(0, NS - 1));
      req_way   = 2'($urandom_range(0, NW - 1));
      req_wdata = {$urandom, $urandom};
      force_s   = (req_ready && $urandom_range(0, 40) == 0);
      exp_req   = req_valid && req_ready;
      if (!req_ready) stalls++;
      if (exp_req) begin
        accepted++;
        exp_phys = phys_of[req_index];
        exp_way  = req_way;
        exp_we   = req_we;
        exp_data = req_wdata;
        if (req_we) begin
          ldata[req_index][req_way] = req_wdata;
          lvld[req_index][req_way]  = 1;
        end
      end
      // trigger counting model
      if (force_s) begin exp_swaps++; cnt = 0; forced++; end
      else if (exp_req) begin
        cnt++;
        if (cnt == P) begin exp_swaps++; cnt = 0; end
      end
      @(negedge clk);
      // observe the array port
      if (arr_valid && arr_we)
        for (int w = 0; w < NW; w++)
          if (arr_way_mask[w]) begin mem[arr_index][w] = arr_wdata; vld[arr_index][w] = 1; end
      if (arr_inval) begin
        logic [LB-1:0] want;
        want = prbs_next();
        for (int w = 0; w < NW; w++) vld[arr_index][w] = 0;
        chk(arr_we && arr_way_mask == '1, "fill is not an all-way write");
        chk(arr_wdata == want, "fill data is not the PRBS stream");
        chk(arr_index == 3'(pos + fills_in_pair), $sformatf("fill row %0d, expected %0d",
                                                           arr_index, pos + fills_in_pair));
        // the logical set living at this physical row loses its lines
        for (int w = 0; w < NW; w++) lvld[own[arr_index]][w] = 0;
        if (fills_in_pair == 0) fill_a = arr_wdata;
        else chk(arr_wdata != fill_a, "both rows got the same pattern");
        fills_in_pair++;
        if (fills_in_pair == 2) begin
          int t;
          fills_in_pair = 0;
          swaps++;
          t = own[pos]; own[pos] = own[pos + 1]; own[pos + 1] = t;
          phys_of[own[pos]] = pos; phys_of[own[pos + 1]] = pos + 1;
          pos = (pos + 1 == NS - 1) ? 0 : pos + 1;
        end
      end else if (exp_req) begin
        chk(arr_valid && arr_index == 3'(exp_phys) && arr_we == exp_we &&
            (!exp_we || (arr_way_mask == NW'(1 << exp_way) && arr_wdata == exp_data)) &&
            (exp_we || arr_way_mask == '0),
            $sformatf("request to phys %0d not on array port (idx %0d)", exp_phys, arr_index));
      end else chk(!arr_valid, "array access without a request");
      // every valid logical line is in the array at its mapped set
      for (int s = 0; s < NS; s++)
        for (int w = 0; w < NW; w++)
          if (lvld[s][w])
            chk(vld[phys_of[s]][w] && mem[phys_of[s]][w] == ldata[s][w],
                $sformatf("line (%0d,%0d) lost", s, w));
    end
    req_valid = 0; force_s = 0;
    repeat (6) @(negedge clk);
    // swaps still running at the end are not counted by the loop above
    chk(swaps == exp_swaps || swaps + 1 == exp_swaps, $sformatf("swaps %0d, triggers %0d", swaps, exp_swaps));
    chk(stalls >= 2 * swaps && stalls <= 2 * swaps + 2, $sformatf("stalls %0d for %0d swaps", stalls, swaps));
    chk(swaps > NS, "no wrap of the swap counter");
    chk(forced > 0, "no forced trigger");
    $display("accepted=%0d swaps=%0d forced=%0d stall_cycles=%0d shift_cnt=%0d", accepted, swaps, forced, stalls, shift_cnt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
