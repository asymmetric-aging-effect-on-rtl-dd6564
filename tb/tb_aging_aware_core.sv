// tb_aging_aware_core: end-to-end test of the whole mitigation logic at its
// default sizes and rates (2660-cycle slow clock, rotation every 10 million
// cycles, cache shift every 10 million accesses, 32 x 64 register bank,
// 64/128/512/8192-set caches with 512-bit lines).
//
// Phases:
//  1. FP units: issue operands to both units and check they reach the
//     operand registers; leave them idle and check that a fresh, non-zero
//     PRBS pattern is injected every 2660 cycles and only then.
//  2. Register bank: write all 32 registers, rotate through CR3 writes and
//     returns from interrupt, and read everything back after each rotation.
//  3. Caches: random requests to all four caches with forced shift
//     triggers, each checked against a per-cache swap-shift model; enough
//     swaps on every cache that its swap counter wraps and its shift
//     counter advances.
//  4. Periodic triggers: run to cycle 10,000,000 with the L1-D requested
//     every cycle, and check the periodic register rotation and the
//     periodic L1-D swap at 10 million accesses.
// Each mechanism is counted; one that never happened is a failure.
module tb_aging_aware_core;
  import aging_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;

  logic                 fpu_issue     [NUM_FP_UNITS];
  logic [XLEN-1:0]      fpu_op_in     [NUM_FP_UNITS][FP_OPS];
  logic [XLEN-1:0]      fpu_op_q      [NUM_FP_UNITS][FP_OPS];
  logic                 fpu_op_real_q [NUM_FP_UNITS];
  logic                 cr3_write = 0, iret = 0, rf_we = 0;
  logic [4:0]           rf_waddr = '0;
  logic [XLEN-1:0]      rf_wdata = '0;
  logic [4:0]           rf_raddr [2];
  logic [XLEN-1:0]      rf_rdata [2];
  logic [4:0]           rf_rot;
  logic                 c_shift_force [NUM_CACHES];
  logic                 c_req_valid   [NUM_CACHES];
  logic                 c_req_ready   [NUM_CACHES];
  logic [MAX_SET_W-1:0] c_req_index   [NUM_CACHES];
  logic                 c_req_we      [NUM_CACHES];
  logic [MAX_WAY_W-1:0] c_req_way     [NUM_CACHES];
  logic [LINE_BITS-1:0] c_req_wdata   [NUM_CACHES];
  logic                 arr_valid     [NUM_CACHES];
  logic [MAX_SET_W-1:0] arr_index     [NUM_CACHES];
  logic                 arr_we        [NUM_CACHES];
  logic [MAX_WAYS-1:0]  arr_way_mask  [NUM_CACHES];
  logic [LINE_BITS-1:0] arr_wdata     [NUM_CACHES];
  logic                 arr_inval     [NUM_CACHES];
  logic [MAX_SET_W-1:0] c_shift_cnt   [NUM_CACHES];
  logic [MAX_SET_W-1:0] c_swap_cnt    [NUM_CACHES];

  int checks = 0;
  int failures = 0;
  longint cycle = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  aging_aware_core dut (.*);

  // counters of the mechanisms
  int n_issue = 0, n_inject = 0, n_rot_cr3 = 0, n_rot_iret = 0, n_rot_periodic = 0;
  int n_swap [NUM_CACHES];
  int n_stall [NUM_CACHES];
  int n_shift [NUM_CACHES];
  int n_periodic_swap = 0;
  longint last_forced_rot = 0;

  // per-cache swap-shift model
  int own     [NUM_CACHES][8192];
  int phys_of [NUM_CACHES][8192];
  int pos     [NUM_CACHES];
  int half    [NUM_CACHES];

  logic [XLEN-1:0] rf_model [32];

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL @%0d: %s", cycle, what);
    end
  endtask

  // Observe the array ports after a clock edge: update the swap model.
  task automatic observe_fills();
    for (int c = 0; c < NUM_CACHES; c++) begin
      if (arr_inval[c]) begin
        chk(arr_valid[c] && arr_we[c], "fill is not a write");
        chk(arr_way_mask[c] == MAX_WAYS'((1 << CACHE_WAYS[c]) - 1), "fill does not cover all ways");
        chk(int'(arr_index[c]) == pos[c] + half[c], $sformatf("cache %0d fill row %0d, expected %0d",
                                                              c, arr_index[c], pos[c] + half[c]));
        chk(arr_wdata[c] != '0, "fill pattern is zero");
        half[c]++;
        if (half[c] == 2) begin
          int t, p;
          p = pos[c];
          half[c] = 0;
          n_swap[c]++;
          t = own[c][p]; own[c][p] = own[c][p + 1]; own[c][p + 1] = t;
          phys_of[c][own[c][p]] = p; phys_of[c][own[c][p + 1]] = p + 1;
          if (p + 1 == int'(CACHE_SETS[c]) - 1) begin pos[c] = 0; n_shift[c]++; end
          else pos[c] = p + 1;
        end
      end
    end
  endtask

  task automatic idle_inputs();
    for (int u = 0; u < NUM_FP_UNITS; u++) begin
      fpu_issue[u] = 0;
      for (int k = 0; k < FP_OPS; k++) fpu_op_in[u][k] = '0;
    end
    for (int c = 0; c < NUM_CACHES; c++) begin
      c_shift_force[c] = 0; c_req_valid[c] = 0; c_req_index[c] = '0;
      c_req_we[c] = 0; c_req_way[c] = '0; c_req_wdata[c] = '0;
    end
    cr3_write = 0; iret = 0; rf_we = 0;
  endtask

  initial begin
    repeat (10_500_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rf_raddr[0] = '0; rf_raddr[1] = '0;
    idle_inputs();
    for (int c = 0; c < NUM_CACHES; c++) begin
      pos[c] = 0; half[c] = 0; n_swap[c] = 0; n_stall[c] = 0; n_shift[c] = 0;
      for (int s = 0; s < 8192; s++) begin own[c][s] = s; phys_of[c][s] = s; end
    end
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    // ---------- 1. FP execution units ----------
    for (int i = 0; i < 20; i++) begin
      logic [XLEN-1:0] a [NUM_FP_UNITS][FP_OPS];
      for (int u = 0; u < NUM_FP_UNITS; u++) begin
        fpu_issue[u] = 1;
        for (int k = 0; k < FP_OPS; k++) begin
          a[u][k] = {$urandom, $urandom};
          fpu_op_in[u][k] = a[u][k];
        end
      end
      @(negedge clk);
      for (int u = 0; u < NUM_FP_UNITS; u++) begin
        n_issue++;
        chk(fpu_op_real_q[u], "issued operands not marked real");
        for (int k = 0; k < FP_OPS; k++) chk(fpu_op_q[u][k] == a[u][k], "operand not registered");
      end
    end
    idle_inputs();
    begin
      logic [XLEN-1:0] last [NUM_FP_UNITS][FP_OPS];
      longint last_change = -1;
      for (int u = 0; u < NUM_FP_UNITS; u++)
        for (int k = 0; k < FP_OPS; k++) last[u][k] = fpu_op_q[u][k];
      for (int i = 0; i < 4 * 2660 + 5; i++) begin
        bit changed;
        changed = 0;
        @(negedge clk);
        for (int u = 0; u < NUM_FP_UNITS; u++)
          for (int k = 0; k < FP_OPS; k++)
            if (fpu_op_q[u][k] != last[u][k]) changed = 1;
        if (changed) begin
          n_inject++;
          chk(!fpu_op_real_q[0] && !fpu_op_real_q[1], "injected operands marked real");
          chk(fpu_op_q[0][0] != fpu_op_q[0][1] && fpu_op_q[0][0] != fpu_op_q[1][0],
              "operands share one pattern");
          if (last_change >= 0)
            chk(cycle - last_change == 2660, $sformatf("injection period %0d", cycle - last_change));
          last_change = cycle;
          for (int u = 0; u < NUM_FP_UNITS; u++)
            for (int k = 0; k < FP_OPS; k++) last[u][k] = fpu_op_q[u][k];
        end
      end
      chk(n_inject >= 4, $sformatf("%0d injections in 4 slow periods", n_inject));
    end

    // ---------- 2. register bank ----------
    for (int a = 0; a < 32; a++) begin
      rf_we = 1; rf_waddr = 5'(a); rf_wdata = {$urandom, $urandom}; rf_model[a] = rf_wdata;
      @(negedge clk);
    end
    rf_we = 0;
    for (int r = 0; r < 40; r++) begin
      logic [4:0] rot_before;
      rot_before = rf_rot;
      last_forced_rot = cycle;
      if (r % 2 == 0) begin cr3_write = 1; n_rot_cr3++; end
      else begin iret = 1; n_rot_iret++; end
      @(negedge clk);
      cr3_write = 0; iret = 0;
      @(negedge clk);   // the trigger is registered: the rotation lands one cycle later
      chk(rf_rot == rot_before + 1'b1, "rotator did not advance");
      for (int a = 0; a < 32; a++) begin
        rf_raddr[0] = 5'(a); rf_raddr[1] = 5'(31 - a);
        #0.1;
        chk(rf_rdata[0] == rf_model[a] && rf_rdata[1] == rf_model[31 - a], $sformatf("r%0d after rotation", a));
      end
    end

    // ---------- 3. caches ----------
    for (int i = 0; i < 40000; i++) begin
      bit acc [NUM_CACHES];
      int exp_phys [NUM_CACHES];
      for (int c = 0; c < NUM_CACHES; c++) begin
        c_req_valid[c] = ($urandom_range(0, 1) == 0);
        c_req_index[c] = MAX_SET_W'($urandom_range(0, CACHE_SETS[c] - 1));
        c_req_we[c]    = $urandom_range(0, 1);
        c_req_way[c]   = MAX_WAY_W'($urandom_range(0, CACHE_WAYS[c] - 1));
        c_req_wdata[c] = {16{$urandom}};
        // force swaps: every few cycles, enough for the L3 to wrap
        c_shift_force[c] = c_req_ready[c] && (c == int'(CACHE_L3) || $urandom_range(0, 3) == 0);
        acc[c] = c_req_valid[c] && c_req_ready[c];
        if (!c_req_ready[c]) n_stall[c]++;
        exp_phys[c] = phys_of[c][c_req_index[c]];
      end
      @(negedge clk);
      for (int c = 0; c < NUM_CACHES; c++)
        if (acc[c] && !arr_inval[c])
          chk(arr_valid[c] && int'(arr_index[c]) == exp_phys[c],
              $sformatf("cache %0d request to phys %0d went to %0d", c, exp_phys[c], arr_index[c]));
      observe_fills();
    end
    idle_inputs();
    repeat (4) begin @(negedge clk); observe_fills(); end
    for (int c = 0; c < NUM_CACHES; c++) begin
      chk(int'(c_swap_cnt[c]) == pos[c], $sformatf("cache %0d swap counter", c));
      chk(int'(c_shift_cnt[c]) == n_shift[c] % int'(CACHE_SETS[c]), $sformatf("cache %0d shift counter", c));
    end

    // ---------- 4. periodic triggers at the default rates ----------
    begin
      int rot0, swaps0;
      longint l1d_acc;
      // restart the L1-D access count with one forced trigger
      c_shift_force[CACHE_L1D] = 1;
      @(negedge clk);
      c_shift_force[CACHE_L1D] = 0;
      repeat (6) begin @(negedge clk); observe_fills(); end
      rot0 = int'(rf_rot);
      swaps0 = n_swap[CACHE_L1D];
      l1d_acc = 0;
      c_req_valid[CACHE_L1D] = 1;
      while (n_periodic_swap == 0 || n_rot_periodic == 0) begin
        if (c_req_ready[CACHE_L1D]) l1d_acc++;
        @(negedge clk);
        observe_fills();
        if (rf_rot != 5'(rot0)) begin
          n_rot_periodic++;
          rot0 = int'(rf_rot);
          // counted from the cycle after the last forced rotation
          chk(cycle - last_forced_rot == 10_000_002,
              $sformatf("periodic rotation %0d cycles after the last forced one", cycle - last_forced_rot));
        end
        if (n_swap[CACHE_L1D] != swaps0) begin
          n_periodic_swap++;
          swaps0 = n_swap[CACHE_L1D];
          // the trigger is registered, so one more access gets in before the stall
          chk(l1d_acc == 10_000_001, $sformatf("periodic L1-D swap after %0d accesses", l1d_acc));
        end
        if (l1d_acc > 10_000_010) break;
      end
      c_req_valid[CACHE_L1D] = 0;
      for (int a = 0; a < 32; a++) begin
        rf_raddr[0] = 5'(a);
        #0.1;
        chk(rf_rdata[0] == rf_model[a], "register lost after periodic rotation");
      end
    end

    // ---------- mechanism coverage ----------
    chk(n_issue > 0,  "no FP issue");
    chk(n_inject > 0, "no PRBS injection into an FP unit");
    chk(n_rot_cr3 > 0 && n_rot_iret > 0, "no event-triggered register rotation");
    chk(n_rot_periodic > 0, "no periodic register rotation");
    chk(n_periodic_swap > 0, "no periodic cache swap");
    for (int c = 0; c < NUM_CACHES; c++) begin
      chk(n_swap[c] > 0,  $sformatf("cache %0d: no swap", c));
      chk(n_stall[c] > 0, $sformatf("cache %0d: no stall", c));
      chk(n_shift[c] > 0, $sformatf("cache %0d: no set shift (swap counter wrap)", c));
    end
    $display("fp_issue=%0d injections=%0d rot_cr3=%0d rot_iret=%0d rot_periodic=%0d periodic_l1d_swaps=%0d",
             n_issue, n_inject, n_rot_cr3, n_rot_iret, n_rot_periodic, n_periodic_swap);
    for (int c = 0; c < NUM_CACHES; c++)
      $display("cache %0d: swaps=%0d shifts=%0d stall_cycles=%0d", c, n_swap[c], n_shift[c], n_stall[c]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
