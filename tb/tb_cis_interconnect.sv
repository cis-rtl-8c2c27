// tb_cis_interconnect -- self-checking testbench of the interconnect resource.
//
// Random words are driven on all four slot output ports every cycle; each
// slot input port is compared with the source the configuration in force
// says (or with an idle port where no path exists). Covered: the paper's two
// simultaneous paths of option 0 (slot1->slot2, slot2->slot1), paths that
// persist after the FSM has stopped, a reconfiguration that only takes
// effect at the next activation and clears the old paths, and a T chain that
// switches between options at the programmed cycles.
module tb_cis_interconnect;
  import cis_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  cfg_t  cfg = '0;
  logic  act = 1'b0, busy;
  port_t slot_out [NSLOT];
  port_t slot_in  [NSLOT];

  cis_interconnect dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  task automatic send(instr_t i);
    @(negedge clk);
    cfg = '{valid: 1'b1, fsm: 1'b0, instr: i};
    @(negedge clk);
    cfg = '0;
  endtask

  // expected paths: src[d] or -1
  int xs [NSLOT];

  task automatic expect_paths(int s0, int s1, int s2, int s3);
    xs[0] = s0; xs[1] = s1; xs[2] = s2; xs[3] = s3;
  endtask

  // compare in the middle of the cycle, after fresh random stimulus
  task automatic cycle_check(string tag);
    @(negedge clk);
    for (int s = 0; s < NSLOT; s++) slot_out[s] = '{valid: 1'($urandom), data: DW'($urandom)};
    #1;
    for (int d = 0; d < NSLOT; d++)
      if (xs[d] < 0) check(slot_in[d] == '0, $sformatf("%s: slot %0d input idle", tag, d));
      else           check(slot_in[d] == slot_out[xs[d]], $sformatf("%s: slot %0d input from slot %0d", tag, d, xs[d]));
  endtask

  task automatic activate();
    @(negedge clk);
    act = 1'b1;
    @(negedge clk);
    act = 1'b0;
    // option 0 is in force from the next edge on
    @(posedge clk);
  endtask

  initial begin
    for (int s = 0; s < NSLOT; s++) slot_out[s] = '0;
    expect_paths(-1, -1, -1, -1);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (5) cycle_check("reset");

    // the paper's program
    send(enc_i(0, 0, 0, 1, 2));
    send(enc_i(0, 0, 0, 2, 1));
    repeat (3) cycle_check("configured, not active");
    activate();
    expect_paths(-1, 2, 1, -1);
    repeat (50) cycle_check("paper paths");
    check(!busy, "FSM idle, paths persist");

    // new configuration: 2->3 and 3->1; old paths stay until activation
    send(enc_i(0, 0, 0, 2, 3));
    send(enc_i(0, 0, 0, 3, 1));
    repeat (3) cycle_check("old paths until activation");
    activate();
    expect_paths(-1, 3, -1, 2);
    repeat (20) cycle_check("new paths");

    // T chain: option0 (1->2) for 5 cycles, option1 (2->3, 1->0) for 9, option2 (3->2)
    send(enc_i(0, 0, 0, 1, 2));
    send(enc_i(0, 0, 1, 2, 3));
    send(enc_i(0, 0, 1, 1, 0));
    send(enc_i(0, 0, 2, 3, 2));
    send(enc_t(0, 0, 5));
    send(enc_t(0, 0, 9));
    @(negedge clk);
    act = 1'b1;
    @(negedge clk);
    act = 1'b0;
    // option 0 is in force from the next edge on
    expect_paths(-1, -1, 1, -1);
    repeat (5) cycle_check("option 0");
    expect_paths(1, -1, -1, 2);
    repeat (9) cycle_check("option 1");
    expect_paths(-1, -1, 3, -1);
    repeat (20) cycle_check("option 2");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
