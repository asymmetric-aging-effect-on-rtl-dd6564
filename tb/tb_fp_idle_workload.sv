// tb_fp_idle_workload: an integer-only program's view of the FP adder.
//
// Integer workloads leave the FP units idle for their whole run. This test
// holds the FP add/sub guard idle for one million core cycles with the
// default 2660-cycle slow clock, as in the one-million-cycle signal
// probability experiment for the double precision adder, and measures for
// each of the 128 operand register bits the fraction of cycles it spends
// at 1 (its signal probability) and how often it toggles. Without the
// guard every bit would sit at its last value (probability 0 or 1). With
// it every bit must toggle and have a signal probability within 0.35..0.65
// (376 patterns: about five standard deviations around 0.5); the mean over
// all bits must be within 0.47..0.53.
module tb_fp_idle_workload;

  localparam int unsigned W = 64;
  localparam int unsigned CYCLES = 1_000_000;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic tick;
  logic [W-1:0] op_in [2];
  logic [W-1:0] op_q [2];
  logic real_q;
  int checks = 0;
  int failures = 0;

  always #5 clk = ~clk;

  slow_tick_gen u_slow (.clk(clk), .rst_n(rst_n), .tick(tick));
  exec_unit_guard dut (
    .clk(clk), .rst_n(rst_n), .tick(tick), .issue(1'b0),
    .op_in(op_in), .op_q(op_q), .op_real_q(real_q));

  int ones [2*W];
  int toggles [2*W];

  initial begin
    repeat (CYCLES + 1000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [2*W-1:0] prev, cur;
    real sum, p, pmin, pmax;
    op_in[0] = '0; op_in[1] = '0;
    for (int i = 0; i < 2*W; i++) begin ones[i] = 0; toggles[i] = 0; end
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    prev = {op_q[1], op_q[0]};
    for (int c = 0; c < CYCLES; c++) begin
      @(negedge clk);
      cur = {op_q[1], op_q[0]};
      for (int i = 0; i < 2*W; i++) begin
        if (cur[i]) ones[i]++;
        if (cur[i] != prev[i]) toggles[i]++;
      end
      prev = cur;
    end
    sum = 0; pmin = 1; pmax = 0;
    for (int i = 0; i < 2*W; i++) begin
      p = real'(ones[i]) / real'(CYCLES);
      sum += p;
      if (p < pmin) pmin = p;
      if (p > pmax) pmax = p;
      checks += 2;
      if (toggles[i] == 0) begin failures++; $display("FAIL: bit %0d never toggled", i); end
      if (p < 0.35 || p > 0.65) begin failures++; $display("FAIL: bit %0d signal probability %f", i, p); end
    end
    checks++;
    if (sum / (2*W) < 0.47 || sum / (2*W) > 0.53) begin
      failures++;
      $display("FAIL: mean signal probability %f", sum / (2*W));
    end
    checks++;
    if (real_q) begin failures++; $display("FAIL: idle unit shows issued operands"); end
    $display("signal probability: mean %f min %f max %f", sum / (2*W), pmin, pmax);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
