// tb_periodic_trigger: checks the trigger against a counting model: a
// one-cycle pulse one cycle after every PERIOD-th counted event, none
// without events, and a pulse one cycle after a forced trigger, which also
// restarts the count. Runs a short period (7) with random events and the
// default period (10 million) driven every cycle up to its first pulse.
module tb_periodic_trigger;

  localparam int unsigned P = 7;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic ev = 1'b0, frc = 1'b0, trig;
  logic ev_d = 1'b0, trig_d;
  int checks = 0;
  int failures = 0;

  always #5 clk = ~clk;

  periodic_trigger #(.PERIOD(P)) dut (
    .clk(clk), .rst_n(rst_n), .event_i(ev), .force_i(frc), .trig(trig));
  periodic_trigger dut_d (
    .clk(clk), .rst_n(rst_n), .event_i(ev_d), .force_i(1'b0), .trig(trig_d));

  initial begin
    repeat (10_100_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int count = 0;
    bit expect_trig = 0;
    int forced = 0, periodic = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int i = 0; i < 3000; i++) begin
      ev  = ($urandom_range(0, 2) != 0);
      frc = ($urandom_range(0, 60) == 0);
      // model update for the inputs applied in this cycle
      if (frc) begin
        expect_trig = 1; count = 0; forced++;
      end else if (ev) begin
        count++;
        if (count == P) begin expect_trig = 1; count = 0; periodic++; end
        else expect_trig = 0;
      end else expect_trig = 0;
      @(negedge clk);
      checks++;
      if (trig !== expect_trig) begin
        failures++;
        $display("FAIL: cycle %0d trig=%0b expected %0b", i, trig, expect_trig);
      end
    end
    ev = 0; frc = 0;
    checks += 2;
    if (forced == 0)   begin failures++; $display("FAIL: no forced trigger"); end
    if (periodic == 0) begin failures++; $display("FAIL: no periodic trigger"); end

    // default period: first pulse exactly 10,000,000 events after reset
    ev_d = 1'b1;
    begin
      int n = 0;
      while (!trig_d && n < 10_000_010) begin
        @(negedge clk);
        n++;
      end
      checks++;
      if (n != 10_000_000) begin failures++; $display("FAIL: default period gave %0d", n); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
