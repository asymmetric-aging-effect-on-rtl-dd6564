// tb_exec_unit_guard: self-checking test of PRBS injection into the
// operand registers of an execution unit.
//
// Drives random issue cycles and slow-clock ticks. Expected operand register
// contents come from a model: issued operands one cycle after `issue`;
// after an idle tick, the next 128 bits of the PRBS-31 stream (recurrence
// b[n] = b[n-31] ^ b[n-28], seeded like the block), operand 0 taking the
// first 64; otherwise the registers hold. Counts issues and injections and
// fails if either never happened.
module tb_exec_unit_guard;

  localparam int unsigned W = 64;
  localparam logic [63:0] SEED = 64'h0000_0000_5eed_0001;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic tick = 1'b0, issue = 1'b0;
  logic [W-1:0] op_in [2];
  logic [W-1:0] op_q [2];
  logic real_q;
  int checks = 0;
  int failures = 0;

  always #5 clk = ~clk;

  exec_unit_guard #(.NUM_OPS(2), .WIDTH(W), .SEED(SEED)) dut (
    .clk(clk), .rst_n(rst_n), .tick(tick), .issue(issue),
    .op_in(op_in), .op_q(op_q), .op_real_q(real_q));

  // PRBS stream model: history of the last 31 bits, oldest first
  bit hist [$];
  function automatic bit next_bit();
    bit b;
    b = hist[0] ^ hist[3];          // b[n-31] ^ b[n-28]
    hist.pop_front();
    hist.push_back(b);
    return b;
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] exp_q [2];
    logic exp_real;
    int n_issue = 0, n_inject = 0, n_hold = 0;
    for (int i = 30; i >= 0; i--) hist.push_back(SEED[i]);
    exp_q[0] = '0; exp_q[1] = '0; exp_real = 0;
    op_in[0] = '0; op_in[1] = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int c = 0; c < 4000; c++) begin
      issue = ($urandom_range(0, 9) == 0);
      tick  = ($urandom_range(0, 19) == 0);
      op_in[0] = {$urandom, $urandom};
      op_in[1] = {$urandom, $urandom};
      if (issue) begin
        exp_q[0] = op_in[0]; exp_q[1] = op_in[1]; exp_real = 1; n_issue++;
      end else if (tick) begin
        for (int k = 0; k < 2; k++)
          for (int i = 0; i < W; i++) exp_q[k][i] = next_bit();
        exp_real = 0; n_inject++;
      end else n_hold++;
      @(negedge clk);
      checks++;
      if (op_q[0] !== exp_q[0] || op_q[1] !== exp_q[1] || real_q !== exp_real) begin
        failures++;
        if (failures < 10)
          $display("FAIL: cycle %0d op0=%h exp %h op1=%h exp %h real=%0b exp %0b",
                   c, op_q[0], exp_q[0], op_q[1], exp_q[1], real_q, exp_real);
      end
    end
    checks += 2;
    if (n_issue == 0)  begin failures++; $display("FAIL: no issue"); end
    if (n_inject == 0) begin failures++; $display("FAIL: no injection"); end
    $display("issues=%0d injections=%0d holds=%0d", n_issue, n_inject, n_hold);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
