// tb_cis_compute -- self-checking testbench of the compute resource.
//
// Random words are streamed into the input port (with random gaps) and every
// output word is compared, one cycle later, with the function in force:
// ADD-1 as in the paper's example, then ADD/MUL immediate and PASS. A T chain
// switches option 0 -> 1 -> 2 after programmed delays; the test checks that
// the function changes at exactly those cycles. Also checked: nothing comes
// out before the first activation, and an FSM1 instruction is ignored.
module tb_cis_compute;
  import cis_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  cfg_t  cfg = '0;
  logic  act = 1'b0, busy;
  port_t in_port = '0, out_port;

  cis_compute dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (50000) @(posedge clk);
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

  task automatic send(int fsm, instr_t i);
    @(negedge clk);
    in_port.valid = 1'b0;
    cfg = '{valid: 1'b1, fsm: 1'(fsm), instr: i};
    @(negedge clk);
    cfg = '0;
  endtask

  function automatic logic [DW-1:0] apply(func_e f, logic [DW-1:0] x, logic [DW-1:0] imm);
    case (f)
      FN_ADD1: return x + 16'd1;
      FN_ADDI: return x + imm;
      FN_MULI: return DW'(32'(x) * 32'(imm));
      FN_PASS: return x;
      default: return 'x;
    endcase
  endfunction

  // expected function per cycle, set by the stimulus process
  func_e         x_fn [int];
  logic [DW-1:0] x_imm [int];
  logic [DW-1:0] x_in [int];
  bit            x_v [int];

  int n_out = 0;
  // output at cycle c belongs to the input at cycle c-1
  always @(posedge clk) if (rst_n) begin
    if (x_v.exists(cyc - 1) && x_v[cyc - 1] && x_fn[cyc - 1] != FN_NONE) begin
      check(out_port.valid, $sformatf("valid at %0d", cyc));
      check(out_port.data == apply(x_fn[cyc - 1], x_in[cyc - 1], x_imm[cyc - 1]),
            $sformatf("cycle %0d fn %s in %0h out %0h", cyc, x_fn[cyc - 1].name(), x_in[cyc - 1], out_port.data));
      n_out++;
    end else begin
      check(!out_port.valid, $sformatf("no output expected at %0d", cyc));
    end
  end

  // drive one cycle of input and record what should happen to it
  task automatic drive(func_e f, logic [DW-1:0] imm);
    @(negedge clk);
    in_port.valid = ($urandom_range(0, 4) != 0);
    in_port.data  = DW'($urandom);
    x_v[cyc]   = in_port.valid;
    x_in[cyc]  = in_port.data;
    x_fn[cyc]  = f;
    x_imm[cyc] = imm;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // before any activation: silent
    repeat (10) drive(FN_NONE, 0);

    // the paper's example: @C slot2:FSM0 option0 ADD-1, activated
    send(0, enc_c(2, 0, 0, FN_ADD1, 0));
    send(1, enc_c(2, 1, 0, FN_MULI, 3));   // FSM1 is not used: ignored
    repeat (5) drive(FN_NONE, 0);
    @(negedge clk);
    act = 1'b1;
    x_v[cyc] = 0; x_fn[cyc] = FN_NONE;
    @(negedge clk);
    act = 1'b0;
    x_v[cyc] = 0; x_fn[cyc] = FN_NONE;
    // ADD-1 in force from here on, "forever"
    repeat (100) drive(FN_ADD1, 0);

    // options 0..2 with a T chain: ADDI 1000 for 7 cycles, MULI 3 for 12, then PASS
    send(0, enc_c(2, 0, 0, FN_ADDI, 1000));
    send(0, enc_c(2, 0, 1, FN_MULI, 3));
    send(0, enc_c(2, 0, 2, FN_PASS, 0));
    send(0, enc_t(2, 0, 7));
    send(0, enc_t(2, 0, 12));
    // ADD-1 still in force until the new activation
    drive(FN_ADD1, 0);
    @(negedge clk);
    act = 1'b1;
    in_port.valid = 1'b0;
    x_v[cyc] = 0; x_fn[cyc] = FN_ADD1;
    @(negedge clk);
    act = 1'b0;
    // option 0 is in force from the cycle after the activation edge
    for (int k = 0; k < 7; k++)  drive(FN_ADDI, 1000);
    for (int k = 0; k < 12; k++) drive(FN_MULI, 3);
    for (int k = 0; k < 60; k++) drive(FN_PASS, 0);
    check(!busy, "T chain finished");
    @(negedge clk);
    in_port = '0;
    x_v[cyc] = 0;
    repeat (3) @(negedge clk);
    check(n_out > 100, $sformatf("%0d results checked", n_out));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
