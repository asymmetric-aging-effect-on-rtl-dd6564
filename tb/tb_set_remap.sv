// tb_set_remap: self-checking test of the swap-shift set index remapping.
//
// A reference model keeps an explicit permutation of logical sets over
// physical sets and applies the swap-shift process to it directly: in each
// round the set that starts at physical 0 is exchanged with its lower
// neighbour once per swap until it reaches the last set (NSETS-1 swaps),
// then the next round starts. After every swap the remapped index of every
// logical set is compared with the model, the swap rows with the model's
// next pair, and the map is checked to be a permutation. A full period of
// NSETS*(NSETS-1) swaps must bring the map back to identity with the shift
// counter wrapped to 0. Runs the default 64 sets and a 6-set instance.
module tb_set_remap;

  localparam int unsigned N1 = 64;
  localparam int unsigned N2 = 6;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic swap = 1'b0;
  logic [5:0] idx1 = '0, rem1, ra1, rb1, sh1, sw1;
  logic [2:0] idx2 = '0, rem2, ra2, rb2, sh2, sw2;
  logic wrap1, wrap2;
  int checks = 0;
  int failures = 0;

  always #100 clk = ~clk;   // long half period: the index sweep uses #1 steps

  set_remap dut1 (
    .clk(clk), .rst_n(rst_n), .swap(swap), .set_index(idx1), .remapped_index(rem1),
    .swap_row_a(ra1), .swap_row_b(rb1), .wrap(wrap1), .shift_cnt_q(sh1), .swap_cnt_q(sw1));

  set_remap #(.NSETS(N2)) dut2 (
    .clk(clk), .rst_n(rst_n), .swap(swap), .set_index(idx2), .remapped_index(rem2),
    .swap_row_a(ra2), .swap_row_b(rb2), .wrap(wrap2), .shift_cnt_q(sh2), .swap_cnt_q(sw2));

  // model: owner[p] = logical set held by physical set p
  int own1 [N1];
  int own2 [N2];
  int pos1 = 0, pos2 = 0;   // physical position of the set being moved

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  task automatic compare();
    bit hit1 [N1];
    bit hit2 [N2];
    for (int p = 0; p < N1; p++) hit1[p] = 0;
    for (int p = 0; p < N2; p++) hit2[p] = 0;
    for (int p = 0; p < N1; p++) begin
      idx1 = 6'(own1[p]);
      #1;
      chk(rem1 == 6'(p), $sformatf("64 sets: logical %0d at %0d, expected %0d", own1[p], rem1, p));
      hit1[rem1] = 1;
    end
    for (int p = 0; p < N2; p++) begin
      idx2 = 3'(own2[p]);
      #1;
      chk(rem2 == 3'(p), $sformatf("6 sets: logical %0d at %0d, expected %0d", own2[p], rem2, p));
      if (rem2 < N2) hit2[rem2] = 1;
    end
    for (int p = 0; p < N1; p++) chk(hit1[p], "64 sets: not a permutation");
    for (int p = 0; p < N2; p++) chk(hit2[p], "6 sets: not a permutation");
    chk(ra1 == 6'(pos1) && rb1 == 6'(pos1 + 1), "64 sets: swap rows");
    chk(ra2 == 3'(pos2) && rb2 == 3'(pos2 + 1), "6 sets: swap rows");
  endtask

  task automatic model_swap();
    int t;
    t = own1[pos1]; own1[pos1] = own1[pos1 + 1]; own1[pos1 + 1] = t;
    pos1 = (pos1 + 1 == N1 - 1) ? 0 : pos1 + 1;
    t = own2[pos2]; own2[pos2] = own2[pos2 + 1]; own2[pos2 + 1] = t;
    pos2 = (pos2 + 1 == N2 - 1) ? 0 : pos2 + 1;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int rounds1 = 0;
    for (int p = 0; p < N1; p++) own1[p] = p;
    for (int p = 0; p < N2; p++) own2[p] = p;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    compare();
    for (int s = 1; s <= N1 * (N1 - 1); s++) begin
      swap = 1'b1;
      @(negedge clk);
      swap = 1'b0;
      model_swap();
      compare();
      if (s % (N1 - 1) == 0) begin
        rounds1++;
        // a completed round is a rotation: logical L at (L - rounds) mod N
        for (int l = 0; l < N1; l++)
          chk(own1[((l - rounds1) % N1 + N1) % N1] == l, "64 sets: round is not a rotation");
        chk(sh1 == 6'(rounds1 % N1) && sw1 == 0, "64 sets: counters after a round");
      end
    end
    for (int p = 0; p < N1; p++) chk(own1[p] == p, "64 sets: model not back at identity");
    chk(sh1 == 0 && sw1 == 0, "64 sets: counters not wrapped after full period");
    $display("swaps=%0d rounds=%0d", N1 * (N1 - 1), rounds1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
