// tb_slow_tick_gen: checks that the slow clock enable pulses for exactly one
// cycle every PERIOD cycles, the first one PERIOD cycles after reset, with
// the default period (2660) and with a short one (5).
module tb_slow_tick_gen;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic tick_d, tick_s;
  int checks = 0;
  int failures = 0;

  always #5 clk = ~clk;

  slow_tick_gen dut_d (.clk(clk), .rst_n(rst_n), .tick(tick_d));
  slow_tick_gen #(.PERIOD(5)) dut_s (.clk(clk), .rst_n(rst_n), .tick(tick_s));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc = 0;
    int last_d = 0, last_s = 0, nd = 0, ns = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (cyc = 1; cyc <= 3 * 2660 + 10; cyc++) begin
      @(negedge clk);
      if (tick_d) begin
        checks++;
        if (cyc - last_d != 2660) begin
          failures++;
          $display("FAIL: default tick at cycle %0d, previous %0d", cyc, last_d);
        end
        last_d = cyc;
        nd++;
      end
      if (tick_s) begin
        checks++;
        if (cyc - last_s != 5) begin
          failures++;
          $display("FAIL: short tick at cycle %0d, previous %0d", cyc, last_s);
        end
        last_s = cyc;
        ns++;
      end
    end
    checks += 2;
    if (nd != 3) begin failures++; $display("FAIL: %0d default ticks", nd); end
    if (ns != (3 * 2660 + 10) / 5) begin failures++; $display("FAIL: %0d short ticks", ns); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
