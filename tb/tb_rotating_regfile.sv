// tb_rotating_regfile: self-checking test of the rotating register file.
//
// Two instances, 32 x 64 (default) and 5 x 16 (modulus not a power of
// two), get random writes, reads and rotate pulses, some of them in the
// same cycle as a write. A model keeps the architectural values and the
// number of rotations: every read port must return the architectural
// value, the rotator must equal rotations mod N, and the physical slot
// (id + rotations) mod N must hold the value of register id, which shows
// that the values really move. After N rotations every value must have
// visited every slot; counts rotations and fails if there were none.
module tb_rotating_regfile;

  localparam int unsigned N1 = 32, W1 = 64;
  localparam int unsigned N2 = 5,  W2 = 16;

  logic clk = 1'b0;
  logic rst_n = 1'b0;

  logic rot1 = 0, we1 = 0;
  logic [4:0] wa1 = '0;
  logic [W1-1:0] wd1 = '0;
  logic [4:0] ra1 [2];
  logic [W1-1:0] rd1 [2];
  logic [4:0] rq1;

  logic rot2 = 0, we2 = 0;
  logic [2:0] wa2 = '0;
  logic [W2-1:0] wd2 = '0;
  logic [2:0] ra2 [2];
  logic [W2-1:0] rd2 [2];
  logic [2:0] rq2;

  int checks = 0;
  int failures = 0;

  always #100 clk = ~clk;   // long half period: check_all() steps the read ports with #1

  rotating_regfile dut1 (
    .clk(clk), .rst_n(rst_n), .rotate(rot1), .we(we1), .waddr(wa1), .wdata(wd1),
    .raddr(ra1), .rdata(rd1), .rot_q(rq1));

  rotating_regfile #(.NREGS(N2), .WIDTH(W2), .NREAD(2)) dut2 (
    .clk(clk), .rst_n(rst_n), .rotate(rot2), .we(we2), .waddr(wa2), .wdata(wd2),
    .raddr(ra2), .rdata(rd2), .rot_q(rq2));

  logic [W1-1:0] m1 [N1];
  logic [W2-1:0] m2 [N2];
  int nrot1 = 0, nrot2 = 0;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  task automatic check_all();
    for (int a = 0; a < N1; a++) begin
      ra1[0] = 5'(a); ra1[1] = 5'((a * 7 + 3) % N1);
      #1;
      chk(rd1[0] == m1[a], $sformatf("rf32 read r%0d", a));
      chk(rd1[1] == m1[(a * 7 + 3) % N1], "rf32 read port 1");
      chk(dut1.regs_q[(a + nrot1) % N1] == m1[a], $sformatf("rf32 slot of r%0d", a));
    end
    for (int a = 0; a < N2; a++) begin
      ra2[0] = 3'(a); ra2[1] = 3'((a + 2) % N2);
      #1;
      chk(rd2[0] == m2[a], $sformatf("rf5 read r%0d", a));
      chk(rd2[1] == m2[(a + 2) % N2], "rf5 read port 1");
      chk(dut2.regs_q[(a + nrot2) % N2] == m2[a], $sformatf("rf5 slot of r%0d", a));
    end
    chk(rq1 == 5'(nrot1 % N1), "rf32 rotator");
    chk(rq2 == 3'(nrot2 % N2), "rf5 rotator");
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int both = 0;
    for (int a = 0; a < N1; a++) m1[a] = '0;
    for (int a = 0; a < N2; a++) m2[a] = '0;
    ra1[0] = '0; ra1[1] = '0; ra2[0] = '0; ra2[1] = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    // fill every register
    for (int a = 0; a < N1; a++) begin
      we1 = 1; wa1 = 5'(a); wd1 = {$urandom, $urandom}; m1[a] = wd1;
      if (a < N2) begin we2 = 1; wa2 = 3'(a); wd2 = 16'($urandom); m2[a] = wd2; end
      else we2 = 0;
      @(negedge clk);
    end
    we1 = 0; we2 = 0;
    check_all();
    for (int c = 0; c < 600; c++) begin
      rot1 = ($urandom_range(0, 3) == 0);
      rot2 = ($urandom_range(0, 3) == 0);
      we1  = ($urandom_range(0, 1) == 0);
      we2  = ($urandom_range(0, 1) == 0);
      wa1 = 5'($urandom_range(0, N1 - 1)); wd1 = {$urandom, $urandom};
      wa2 = 3'($urandom_range(0, N2 - 1)); wd2 = 16'($urandom);
      if (we1) m1[wa1] = wd1;
      if (we2) m2[wa2] = wd2;
      if (rot1) nrot1++;
      if (rot2) nrot2++;
      if (rot1 && we1) both++;
      @(negedge clk);
      rot1 = 0; rot2 = 0; we1 = 0; we2 = 0;
      check_all();
    end
    // a value must visit every slot: N1 further rotations, one per cycle
    begin
      bit seen [N1];
      for (int s = 0; s < N1; s++) seen[s] = 0;
      for (int k = 0; k < N1; k++) begin
        for (int s = 0; s < N1; s++) if (dut1.regs_q[s] == m1[0]) seen[s] = 1;
        rot1 = 1; nrot1++;
        @(negedge clk);
      end
      rot1 = 0;
      for (int s = 0; s < N1; s++) chk(seen[s], $sformatf("r0 never in slot %0d", s));
      check_all();
    end
    chk(nrot1 > 0 && nrot2 > 0, "no rotation happened");
    chk(both > 0, "no write coincided with a rotation");
    $display("rotations=%0d/%0d write+rotate=%0d", nrot1, nrot2, both);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
