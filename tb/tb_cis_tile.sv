// tb_cis_tile -- end-to-end testbench of the tile at its default sizes.
//
// Three CIS programs are loaded into the sequencer and run:
//  1. The paper's vector example, A[i] = A[i] + 1 for 64 words, exactly as
//     its assembly listing gives it (interconnect slot1->slot2 and
//     slot2->slot1, compute ADD-1, storage read and write ports each with one
//     R level of 64, activation of the write port two cycles after the read
//     port, final wait of 63). Checked: the memory contents, one ADD-1 per
//     cycle for 64 consecutive cycles, and the cycle at which done rises.
//  2. A 2-level read pattern (3 x 5 words, row step 8, a delay of 2 between
//     rows) streamed through the compute unit whose T chain switches from
//     ADD 100 to MUL 3 after 7 cycles; the results leave the tile through
//     slot 3 and are compared word by word, with their timing.
//  3. Words entering through slot 3 are written into storage by an R pattern
//     with a delay of 1 (every other cycle), with the interconnect activated
//     before the storage port; the memory is read back and compared.
// Each mechanism (R repetition, nested R, R delay, T transition, @W wait,
// multi-FSM @A, persistent interconnect paths, slot-3 input and output) is
// counted; one that never happened counts as a failure.
module tb_cis_tile;
  import cis_pkg::*;

  localparam int DEPTH = 64;
  localparam int AW    = $clog2(DEPTH);
  localparam int PW    = $clog2(64 + 1);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic          im_we = 1'b0, start = 1'b0;
  logic [PW-1:0] im_addr = '0, prog_len = '0;
  instr_t        im_wdata = '0;
  logic          busy, done, res_busy;
  logic [31:0]   n_issued, n_wait_cycles;
  logic          h_we = 1'b0, h_re = 1'b0, h_rvalid;
  logic [AW-1:0] h_addr = '0;
  logic [DW-1:0] h_wdata = '0, h_rdata;
  cfg_t          s3_cfg;
  logic [1:0]    s3_act;
  port_t         s3_out = '0, s3_in;

  cis_tile dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

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
      if (failures < 30) $display("FAIL: %s", what);
    end
  endtask

  // ---------------- mechanism counters ----------------
  int m_rep = 0, m_nested = 0, m_rdelay = 0, m_trans = 0, m_wait = 0;
  int m_multi_act = 0, m_persist = 0, m_s3_in = 0, m_s3_out = 0;
  always @(posedge clk) if (rst_n) begin
    m_rep       += int'(dut.u_st.ev[0]) + int'(dut.u_st.ev[1]);
    if (dut.u_st.ev[1] && dut.u_st.g_fsm[1].u_fsm.adv == 1) m_nested++;
    if (dut.u_st.g_fsm[1].u_fsm.r_run && dut.u_st.g_fsm[1].u_fsm.rw != 0) m_rdelay++;
    if (dut.u_st.g_fsm[0].u_fsm.r_run && dut.u_st.g_fsm[0].u_fsm.rw != 0) m_rdelay++;
    if (dut.u_cu.opt_load && dut.u_cu.opt != 0) m_trans++;
    if (busy && dut.u_seq.wcnt != 0) m_wait++;
    if ($countones(dut.act) > 1) m_multi_act++;
    if (!dut.busy_ic && (dut.slot_in[1].valid || dut.slot_in[2].valid)) m_persist++;
    if (s3_in.valid) m_s3_out++;
    if (dut.slot_in[1].valid && dut.u_ic.src[1] == 2'd3 && dut.u_ic.en[1]) m_s3_in++;
  end

  // ---------------- helpers ----------------
  logic [DW-1:0] model [DEPTH];

  task automatic host_write(int a, logic [DW-1:0] d);
    @(negedge clk);
    h_we = 1'b1; h_addr = AW'(a); h_wdata = d;
    @(negedge clk);
    h_we = 1'b0;
  endtask

  task automatic host_read(int a, output logic [DW-1:0] d);
    @(negedge clk);
    h_re = 1'b1; h_addr = AW'(a);
    @(negedge clk);
    h_re = 1'b0;
    d = h_rdata;
  endtask

  task automatic check_memory(string tag);
    logic [DW-1:0] d;
    for (int a = 0; a < DEPTH; a++) begin
      host_read(a, d);
      check(d == model[a], $sformatf("%s: mem[%0d] = %0h, expected %0h", tag, a, d, model[a]));
    end
  endtask

  instr_t prog[$];
  int t_start, t_done;

  // load prog, start it, wait for done; t_done is the cycle done is first seen
  task automatic run(string tag);
    foreach (prog[k]) begin
      @(negedge clk);
      im_we = 1'b1; im_addr = PW'(k); im_wdata = prog[k];
    end
    @(negedge clk);
    im_we = 1'b0;
    @(negedge clk);
    start = 1'b1; prog_len = PW'(prog.size());
    t_start = cyc;
    @(negedge clk);
    start = 1'b0;
    t_done = -1;
    while (t_done < 0) @(negedge clk);
    check(n_issued == 32'(prog.size()), $sformatf("%s: %0d instructions issued", tag, n_issued));
    repeat (4) @(negedge clk);
    check(!res_busy, {tag, ": all local FSMs finished"});
  endtask

  // first cycle of done after a start
  logic done_q = 1'b0;
  always @(posedge clk) begin
    done_q <= done;
    if (done && !done_q) t_done = cyc - t_start;
  end

  // slot-3 output monitor
  int s3_t[$];
  logic [DW-1:0] s3_d[$];
  always @(posedge clk) if (s3_in.valid) begin
    s3_t.push_back(cyc - t_start);
    s3_d.push_back(s3_in.data);
  end

  // ADD-1 throughput on the compute output port
  int run_len = 0, best_run = 0;
  always @(posedge clk) begin
    if (dut.slot_out[2].valid) run_len <= run_len + 1;
    else run_len <= 0;
    if (run_len > best_run) best_run = run_len;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    for (int a = 0; a < DEPTH; a++) begin
      model[a] = DW'($urandom);
      host_write(a, model[a]);
    end

    // ---------- 1. the paper's program ----------
    prog = '{
      enc_i(0, 0, 0, 1, 2),                   // @I slot0:FSM0 option0 slot1->slot2
      enc_i(0, 0, 0, 2, 1),                   // @I slot0:FSM0 option0 slot2->slot1
      enc_c(2, 0, 0, FN_ADD1, 0),             // @C slot2:FSM0 option0 ADD-1
      enc_s(1, 1, 0),                         // @S slot1:FSM1 address=0
      enc_r(1, 1, 64, 1, 0),                  // @R slot1:FSM1 iter=64 step=1 delay=0
      enc_s(1, 0, 0),                         // @S slot1:FSM0 address=0
      enc_r(1, 0, 64, 1, 0),                  // @R slot1:FSM0 iter=64 step=1 delay=0
      enc_a(act_bit(0, 0) | act_bit(2, 0)),   // @A [slot0:FSM0, slot2:FSM0]
      enc_a(act_bit(1, 1)),                   // @A [slot1:FSM1]
      enc_w(1),                               // @W delay=1
      enc_a(act_bit(1, 0)),                   // @A [slot1:FSM0]
      enc_w(63)                               // @W delay=63
    };
    best_run = 0;
    run("paper");
    // 12 instructions, the two waits add 0 + 62 stall cycles
    check(t_done == 2 + 11 + 63, $sformatf("paper: done at +%0d, expected +76", t_done));
    check(best_run == 64, $sformatf("paper: %0d consecutive ADD-1 results, expected 64", best_run));
    for (int a = 0; a < DEPTH; a++) model[a] = model[a] + 1'b1;
    check_memory("paper");

    // ---------- 2. 2D read, T-switched compute, out through slot 3 ----------
    prog = '{
      enc_i(0, 0, 0, 1, 2),
      enc_i(0, 0, 0, 2, 3),
      enc_c(2, 0, 0, FN_ADDI, 100),
      enc_c(2, 0, 1, FN_MULI, 3),
      enc_t(2, 0, 7),
      enc_s(1, 1, 5),
      enc_r(1, 1, 3, 1, 0),
      enc_r(1, 1, 5, 8, 2),
      enc_a(act_bit(0, 0) | act_bit(1, 1) | act_bit(2, 0)),
      enc_w(40)
    };
    s3_t.delete(); s3_d.delete();
    run("2d");
    begin
      int x_t[$];
      logic [DW-1:0] x_d[$];
      int r;
      r = 1;
      for (int row = 0; row < 5; row++)
        for (int col = 0; col < 3; col++) begin
          logic [DW-1:0] w;
          w = model[5 + col + 8 * row];
          // @A is instruction 8: sampled at +10, event k at +10+r, result on slot 3 at +12+r
          x_t.push_back(12 + r);
          x_d.push_back((r <= 7) ? DW'(w + 16'd100) : DW'(32'(w) * 3));
          r += (col < 2) ? 1 : 3;
        end
      check(s3_d.size() == 15, $sformatf("2d: %0d words out of slot 3, expected 15", s3_d.size()));
      for (int k = 0; k < 15 && k < s3_d.size(); k++)
        check(s3_t[k] == x_t[k] && s3_d[k] == x_d[k],
              $sformatf("2d: word %0d at +%0d = %0h, expected +%0d %0h", k, s3_t[k], s3_d[k], x_t[k], x_d[k]));
    end
    check_memory("2d (memory unchanged)");

    // ---------- 3. slot 3 -> storage, every other cycle ----------
    prog = '{
      enc_i(0, 0, 0, 3, 1),
      enc_s(1, 0, 40),
      enc_r(1, 0, 8, 2, 1),
      enc_a(act_bit(0, 0)),
      enc_a(act_bit(1, 0)),
      enc_w(20)
    };
    fork
      run("ext-write");
      begin
        // slot 3 output carries the cycle number since the start
        wait (start);
        while (!done || start) begin
          @(negedge clk);
          s3_out = '{valid: 1'b1, data: DW'(cyc - t_start)};
        end
        s3_out = '0;
      end
    join
    // @A of the storage port is instruction 4: sampled at +6, writes at +7, +9, ...
    for (int k = 0; k < 8; k++) model[40 + 2 * k] = DW'(7 + 2 * k);
    check_memory("ext-write");
    check(n_wait_cycles == 19, $sformatf("ext-write: %0d wait cycles, expected 19", n_wait_cycles));

    // ---------- mechanisms ----------
    check(m_rep > 0,       $sformatf("R repetition seen %0d times", m_rep));
    check(m_nested > 0,    $sformatf("nested R advance seen %0d times", m_nested));
    check(m_rdelay > 0,    $sformatf("R delay cycles seen %0d times", m_rdelay));
    check(m_trans > 0,     $sformatf("T transition seen %0d times", m_trans));
    check(m_wait > 0,      $sformatf("@W stall cycles seen %0d times", m_wait));
    check(m_multi_act > 0, $sformatf("multi-FSM @A seen %0d times", m_multi_act));
    check(m_persist > 0,   $sformatf("persistent path used %0d times", m_persist));
    check(m_s3_out > 0,    $sformatf("slot-3 output words %0d", m_s3_out));
    check(m_s3_in > 0,     $sformatf("slot-3 input words %0d", m_s3_in));
    $display("mechanisms: R events %0d, nested %0d, R delay %0d, T %0d, W %0d, multi-A %0d, persistent %0d, slot3 out %0d, slot3 in %0d",
             m_rep, m_nested, m_rdelay, m_trans, m_wait, m_multi_act, m_persist, m_s3_out, m_s3_in);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
