// tb_cis_sequencer -- self-checking testbench of the single-issue sequencer.
//
// Random programs of all seven instruction types (plus NOPs) are loaded and
// run. Every configuration word that appears on a slot's cfg_o, and every
// activation mask on act_o, is compared with a list computed here from the
// program: instruction k leaves the sequencer one cycle after it issues,
// instructions issue one per cycle, and "@W d" delays the next issue by d
// cycles. Also checked: the cycle at which done rises, the issue and wait
// counters, and the paper's example program (12 instructions, 1 + 63 waits).
module tb_cis_sequencer;
  import cis_pkg::*;

  localparam int IMEM_DEPTH = 64;
  localparam int PW = $clog2(IMEM_DEPTH + 1);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic            im_we = 1'b0, start = 1'b0;
  logic [PW-1:0]   im_addr = '0, prog_len = '0;
  instr_t          im_wdata = '0;
  logic            busy, done;
  cfg_t            cfg_o [NSLOT];
  logic [NACT-1:0] act_o;
  logic [31:0]     n_issued, n_wait_cycles;

  cis_sequencer #(.IMEM_DEPTH(IMEM_DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (100000) @(posedge clk);
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

  instr_t prog[$];

  // observed outputs: (relative cycle, slot or -1 for act, word)
  int     o_t[$], o_s[$];
  instr_t o_w[$];
  int     t_start, t_done;
  logic   done_q = 1'b0;
  always @(posedge clk) begin
    done_q <= done;
    for (int s = 0; s < NSLOT; s++)
      if (cfg_o[s].valid) begin
        o_t.push_back(cyc - t_start); o_s.push_back(s); o_w.push_back(cfg_o[s].instr);
        check(cfg_o[s].fsm == cfg_o[s].instr[26], "fsm bit forwarded");
      end
    if (act_o != '0) begin
      o_t.push_back(cyc - t_start); o_s.push_back(-1); o_w.push_back(instr_t'(act_o));
    end
    if (done && !done_q && t_done < 0) t_done = cyc - t_start;
  end

  task automatic run_program(string tag);
    int     x_t[$], x_s[$];
    instr_t x_w[$];
    int     t, waits;
    // expected
    t = 2;
    waits = 0;
    foreach (prog[k]) begin
      opcode_e op = f_op(prog[k]);
      case (op)
        OP_C, OP_I, OP_S, OP_R, OP_T: begin
          x_t.push_back(t); x_s.push_back(int'(prog[k][28:27])); x_w.push_back(prog[k]);
        end
        OP_A: if (prog[k][7:0] != 0) begin
          x_t.push_back(t); x_s.push_back(-1); x_w.push_back(instr_t'(prog[k][7:0]));
        end
        default: ;
      endcase
      if (op == OP_W) begin
        int d = int'(prog[k][15:0]);
        if (d == 0) d = 1;
        waits += d - 1;
        t += d;
      end else t += 1;
    end
    // load and run
    foreach (prog[k]) begin
      @(negedge clk);
      im_we = 1'b1; im_addr = PW'(k); im_wdata = prog[k];
    end
    @(negedge clk);
    im_we = 1'b0;
    o_t.delete(); o_s.delete(); o_w.delete();
    t_done = -1;
    @(negedge clk);
    start = 1'b1; prog_len = PW'(prog.size());
    t_start = cyc;
    @(negedge clk);
    start = 1'b0;
    check(busy, {tag, ": busy after start"});
    while (!done) @(negedge clk);
    repeat (2) @(negedge clk);
    check(o_t.size() == x_t.size(), $sformatf("%s: %0d outputs, expected %0d", tag, o_t.size(), x_t.size()));
    for (int k = 0; k < o_t.size() && k < x_t.size(); k++)
      check(o_t[k] == x_t[k] && o_s[k] == x_s[k] && o_w[k] == x_w[k],
            $sformatf("%s: output %0d at +%0d slot %0d %h, expected +%0d slot %0d %h",
                      tag, k, o_t[k], o_s[k], o_w[k], x_t[k], x_s[k], x_w[k]));
    check(t_done == t, $sformatf("%s: done at +%0d, expected +%0d", tag, t_done, t));
    check(n_issued == 32'(prog.size()), $sformatf("%s: issued %0d", tag, n_issued));
    check(n_wait_cycles == 32'(waits), $sformatf("%s: waited %0d, expected %0d", tag, n_wait_cycles, waits));
    check(!busy, {tag, ": idle after done"});
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // the paper's example program
    prog = '{
      enc_i(0, 0, 0, 1, 2),
      enc_i(0, 0, 0, 2, 1),
      enc_c(2, 0, 0, FN_ADD1, 0),
      enc_s(1, 1, 0),
      enc_r(1, 1, 64, 1, 0),
      enc_s(1, 0, 0),
      enc_r(1, 0, 64, 1, 0),
      enc_a(act_bit(0, 0) | act_bit(2, 0)),
      enc_a(act_bit(1, 1)),
      enc_w(1),
      enc_a(act_bit(1, 0)),
      enc_w(63)
    };
    run_program("paper");

    // an empty program ends at once
    prog.delete();
    run_program("empty");

    // random programs
    for (int n = 0; n < 40; n++) begin
      automatic int len = $urandom_range(1, IMEM_DEPTH);
      prog.delete();
      for (int k = 0; k < len; k++) begin
        automatic instr_t w = instr_t'($urandom);
        if (f_op(w) == OP_W) w[15:0] = 16'($urandom_range(0, 9));
        prog.push_back(w);
      end
      run_program($sformatf("rand%0d", n));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
