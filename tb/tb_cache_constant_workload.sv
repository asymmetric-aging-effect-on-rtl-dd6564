// tb_cache_constant_workload: an embedded-style loop that keeps a few
// constant lines hot in the L1-D, run against two L1-D guards (64 sets,
// 8 ways, 512-bit lines).
//
// The program writes four lines once and then reads them in a loop for
// ever, the case in which those bit cells would otherwise hold one value
// for the whole lifetime while the other sets are never touched.
//  * At the default shift rate (one swap per 10,000,000 accesses) the test
//    runs 10,000,100 accesses and checks the cost: one swap, two stall
//    cycles, an overhead well below 0.01% of the cycles.
//  * With a shift every 16 accesses (same logic, faster trigger) it runs a
//    full remapping period of 64*63 swaps and checks that each hot logical
//    set has lived in every one of the 64 physical sets, and that every
//    physical set has been rewritten with PRBS data, so no cell keeps a
//    constant or an unused value through the period.
module tb_cache_constant_workload;

  localparam int unsigned NS = 64, NW = 8, LB = 512;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  int checks = 0;
  int failures = 0;

  always #5 clk = ~clk;

  // default-rate guard
  logic d_valid = 0, d_ready, d_we = 0;
  logic [5:0] d_index = '0;
  logic [2:0] d_way = '0;
  logic [LB-1:0] d_wdata = '0;
  logic d_arr_valid, d_arr_we, d_arr_inval;
  logic [5:0] d_arr_index, d_shift, d_swap;
  logic [NW-1:0] d_mask;
  logic [LB-1:0] d_arr_wdata;

  cache_aging_guard dut_d (
    .clk(clk), .rst_n(rst_n), .shift_force(1'b0),
    .req_valid(d_valid), .req_ready(d_ready), .req_index(d_index), .req_we(d_we),
    .req_way(d_way), .req_wdata(d_wdata),
    .arr_valid(d_arr_valid), .arr_index(d_arr_index), .arr_we(d_arr_we), .arr_way_mask(d_mask),
    .arr_wdata(d_arr_wdata), .arr_inval(d_arr_inval), .shift_cnt(d_shift), .swap_cnt(d_swap));

  // fast-trigger guard
  logic f_valid = 0, f_ready, f_we = 0;
  logic [5:0] f_index = '0;
  logic [2:0] f_way = '0;
  logic [LB-1:0] f_wdata = '0;
  logic f_arr_valid, f_arr_we, f_arr_inval;
  logic [5:0] f_arr_index, f_shift, f_swap;
  logic [NW-1:0] f_mask;
  logic [LB-1:0] f_arr_wdata;

  cache_aging_guard #(.PERIOD(16)) dut_f (
    .clk(clk), .rst_n(rst_n), .shift_force(1'b0),
    .req_valid(f_valid), .req_ready(f_ready), .req_index(f_index), .req_we(f_we),
    .req_way(f_way), .req_wdata(f_wdata),
    .arr_valid(f_arr_valid), .arr_index(f_arr_index), .arr_we(f_arr_we), .arr_way_mask(f_mask),
    .arr_wdata(f_arr_wdata), .arr_inval(f_arr_inval), .shift_cnt(f_shift), .swap_cnt(f_swap));

  localparam int HOT [4] = '{3, 17, 40, 63};

  initial begin
    repeat (10_300_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // fast-trigger run
  bit f_done = 0;
  initial begin
    bit visited [4][NS];
    int fills [NS];
    int swaps = 0, half = 0;
    int k = 0;
    for (int h = 0; h < 4; h++) for (int p = 0; p < NS; p++) visited[h][p] = 0;
    for (int p = 0; p < NS; p++) fills[p] = 0;
    wait (rst_n);
    @(negedge clk);
    while (swaps < NS * (NS - 1)) begin
      int h;
      h = k % 4;
      f_valid = 1;
      f_index = 6'(HOT[h]);
      f_we    = (k < 4);             // written once, read for ever after
      f_way   = 3'(h);
      f_wdata = {16{32'hC0FF_EE00 + 32'(h)}};
      if (f_ready) k++;
      @(negedge clk);
      if (f_arr_valid && !f_arr_inval) visited[h][f_arr_index] = 1;
      if (f_arr_inval) begin
        fills[f_arr_index]++;
        half++;
        if (half == 2) begin half = 0; swaps++; end
      end
    end
    f_valid = 0;
    for (int h = 0; h < 4; h++)
      for (int p = 0; p < NS; p++) begin
        checks++;
        if (!visited[h][p]) begin
          failures++;
          if (failures < 10) $display("FAIL: hot set %0d never in physical set %0d", HOT[h], p);
        end
      end
    for (int p = 0; p < NS; p++) begin
      checks++;
      if (fills[p] == 0) begin failures++; $display("FAIL: physical set %0d never refreshed", p); end
    end
    checks++;
    if (f_shift != 0 || f_swap != 0) begin failures++; $display("FAIL: map not back at identity"); end
    $display("fast trigger: %0d accesses, %0d swaps, every hot set visited every physical set", k, swaps);
    f_done = 1;
  end

  // default-rate run and the end of the test
  initial begin
    longint acc = 0, cyc = 0, stall = 0;
    int swaps = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    while (acc < 10_000_100) begin
      d_valid = 1;
      d_index = 6'(HOT[acc % 4]);
      d_we    = (acc < 4);
      d_way   = 3'(acc % 4);
      d_wdata = {16{32'h0BAD_F00D}};
      if (d_ready) acc++;
      else stall++;
      cyc++;
      @(negedge clk);
      if (d_arr_inval) swaps++;
    end
    d_valid = 0;
    repeat (4) @(negedge clk);
    checks += 3;
    if (swaps != 2) begin failures++; $display("FAIL: %0d fills at the default rate, expected one swap (2)", swaps); end
    if (stall != 2) begin failures++; $display("FAIL: %0d stall cycles", stall); end
    if (real'(stall) / real'(cyc) >= 1.0e-4) begin failures++; $display("FAIL: overhead %e", real'(stall) / real'(cyc)); end
    $display("default rate: %0d accesses in %0d cycles, %0d stall cycles (%e of cycles)",
             acc, cyc, stall, real'(stall) / real'(cyc));
    wait (f_done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
