// tb_prbs_gen: self-checking test of the parallel PRBS generator.
//
// Collects the serial stream that prbs_gen delivers WIDTH bits at a time,
// with the seed bits in front of it (oldest first), and checks the
// defining recurrence of the polynomial x^31 + x^28 + 1 on it:
// b[n] = b[n-31] ^ b[n-28]. It also checks that the pattern holds while
// `advance` is low, and, on a PRBS-7 instance (x^7 + x^6 + 1) stepped one
// bit per clock, that the sequence repeats after exactly 127 advances.
module tb_prbs_gen;

  localparam int unsigned W     = 64;
  localparam int unsigned NADV  = 40;
  localparam logic [63:0] SEED  = 64'h0000_0000_1234_5677;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic adv = 1'b0;
  logic [W-1:0] pat;
  logic adv7 = 1'b0;
  logic [0:0] pat7;

  int checks = 0;
  int failures = 0;

  always #5 clk = ~clk;

  prbs_gen #(.WIDTH(W), .SEED(SEED)) dut (
    .clk(clk), .rst_n(rst_n), .advance(adv), .pattern(pat));

  prbs_gen #(.WIDTH(1), .DEGREE(7), .TAP(6), .SEED(64'h1)) dut7 (
    .clk(clk), .rst_n(rst_n), .advance(adv7), .pattern(pat7));

  bit stream [$];
  bit s7 [$];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] held;
    for (int i = 30; i >= 0; i--) stream.push_back(SEED[i]);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int a = 0; a < NADV; a++) begin
      for (int i = 0; i < W; i++) stream.push_back(pat[i]);
      adv = 1'b1;
      @(negedge clk);
      adv = 1'b0;
      held = pat;
      @(negedge clk);
      check(pat == held, "pattern changed without advance");
    end
    for (int n = 31; n < stream.size(); n++)
      check(stream[n] == (stream[n-31] ^ stream[n-28]), $sformatf("recurrence at bit %0d", n));
    check(stream.size() == 31 + NADV * W, "stream length");

    // PRBS-7 period
    for (int i = 6; i >= 0; i--) s7.push_back(i == 0);
    for (int a = 0; a < 254; a++) begin
      s7.push_back(pat7[0]);
      adv7 = 1'b1;
      @(negedge clk);
    end
    adv7 = 1'b0;
    for (int n = 7; n < 7 + 127; n++)
      check(s7[n] == s7[n + 127], $sformatf("PRBS-7 period at %0d", n));
    begin
      int first_repeat = 0;
      for (int p = 1; p <= 127 && first_repeat == 0; p++) begin
        bit same;
        same = 1;
        for (int n = 7; n < 7 + 127; n++) if (s7[n] != s7[n + p]) same = 0;
        if (same) first_repeat = p;
      end
      check(first_repeat == 127, $sformatf("PRBS-7 period is %0d", first_repeat));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
