// tb_cis_fsm -- self-checking testbench of the local FSM (cis_fsm).
//
// Random configurations of up to four blocks, each with an R nest of 0..4
// levels (random iterations, signed steps and delays), separated by T
// operators with random delays, are loaded, the FSM is activated, and every event (its cycle
// relative to the activation and its offset) and every block change is
// compared with a reference computed here by plain nested counting, with each
// block cut off when the next one's T delay expires. Also
// checked: a rerun without reconfiguration repeats the same thread, the first
// configuration after an activation raises cfg_new and discards the old
// levels, and a fifth @R is ignored.
module tb_cis_fsm;
  import cis_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                    cfg_valid = 1'b0, act = 1'b0;
  instr_t                  cfg_instr = '0;
  logic                    cfg_new, busy, ev, opt_load;
  logic signed [OFS_W-1:0] ofs;
  logic [OPT_W-1:0]        opt, cfg_blk;

  cis_fsm dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (200000) @(posedge clk);
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

  bit last_new;
  task automatic send(instr_t i);
    @(negedge clk);
    cfg_valid = 1'b1;
    cfg_instr = i;
    #1 last_new = cfg_new;
    @(negedge clk);
    cfg_valid = 1'b0;
  endtask

  // configuration under test: blocks 0..n_t, block b has nr[b] R levels
  int n_t;
  int nr[4];
  int it[4][4], st[4][4], dl[4][4];
  int td[3];

  // observed
  int ev_t[$], ev_o[$], ld_t[$], ld_o[$];
  int t_act;
  logic mon = 1'b0;
  always @(posedge clk) if (mon) begin
    if (ev)       begin ev_t.push_back(cyc - t_act); ev_o.push_back(int'(ofs)); end
    if (opt_load) begin ld_t.push_back(cyc - t_act); ld_o.push_back(int'(opt)); end
  end

  // expected
  int x_t[$], x_o[$];

  // block start times: block 0 at +1, block b+1 after T delay b (0 read as 1)
  function automatic int blk_start(int b);
    int t = 1;
    for (int j = 0; j < b; j++) t += (td[j] == 0) ? 1 : td[j];
    return t;
  endfunction

  task automatic build_expected();
    x_t.delete(); x_o.delete();
    for (int b = 0; b <= n_t; b++) begin
      int idx[4];
      int t, k, o, limit;
      bit fin;
      foreach (idx[j]) idx[j] = 0;
      t = blk_start(b);
      limit = (b < n_t) ? blk_start(b + 1) : 1 << 30;
      fin = 0;
      while (!fin && t < limit) begin
        o = 0;
        for (int j = 0; j < nr[b]; j++) o += idx[j] * st[b][j];
        x_t.push_back(t);
        x_o.push_back(o);
        k = -1;
        for (int j = 0; j < nr[b]; j++)
          if (idx[j] < ((it[b][j] == 0) ? 1 : it[b][j]) - 1) begin k = j; break; end
        if (k < 0) fin = 1;
        else begin
          for (int j = 0; j < k; j++) idx[j] = 0;
          idx[k]++;
          t += 1 + dl[b][k];
        end
      end
    end
  endtask

  task automatic run_and_compare(string tag);
    int expected_loads;
    ev_t.delete(); ev_o.delete(); ld_t.delete(); ld_o.delete();
    build_expected();
    @(negedge clk);
    act = 1'b1;
    t_act = cyc;            // the act pulse is sampled at the next edge
    mon = 1'b1;
    @(negedge clk);
    act = 1'b0;
    while (busy) @(negedge clk);
    repeat (3) @(negedge clk);
    mon = 1'b0;
    check(ev_t.size() == x_t.size(),
          $sformatf("%s: %0d events, expected %0d", tag, ev_t.size(), x_t.size()));
    for (int j = 0; j < x_t.size() && j < ev_t.size(); j++) begin
      check(ev_t[j] == x_t[j], $sformatf("%s: event %0d at +%0d, expected +%0d", tag, j, ev_t[j], x_t[j]));
      check(ev_o[j] == x_o[j], $sformatf("%s: event %0d offset %0d, expected %0d", tag, j, ev_o[j], x_o[j]));
    end
    // option 0 at +1, then option k after sum of the first k T delays
    expected_loads = n_t + 1;
    check(ld_t.size() == expected_loads,
          $sformatf("%s: %0d option loads, expected %0d", tag, ld_t.size(), expected_loads));
    for (int k = 0; k < expected_loads && k < ld_t.size(); k++)
      check(ld_t[k] == blk_start(k) && ld_o[k] == k,
            $sformatf("%s: load %0d at +%0d opt %0d, expected +%0d opt %0d", tag, k, ld_t[k], ld_o[k], blk_start(k), k));
  endtask

  task automatic configure();
    n_t = $urandom_range(0, 3);
    for (int j = 0; j < 3; j++) td[j] = $urandom_range(0, 40);
    for (int b = 0; b < 4; b++) begin
      int total;
      do begin
        nr[b] = $urandom_range(0, 4);
        total = 1;
        for (int j = 0; j < 4; j++) begin
          it[b][j] = (j < nr[b]) ? $urandom_range(0, 6) : 1;
          st[b][j] = int'($urandom_range(0, 20)) - 5;
          dl[b][j] = ($urandom_range(0, 2) == 0) ? $urandom_range(0, 3) : 0;
          total *= (it[b][j] == 0) ? 1 : it[b][j];
        end
      end while (total > 200);
    end
    send(enc_s(0, 0, 0));
    for (int b = 0; b <= n_t; b++) begin
      for (int j = 0; j < nr[b]; j++) send(enc_r(0, 0, it[b][j], st[b][j], dl[b][j]));
      if (b < n_t) send(enc_t(0, 0, td[b]));
    end
  endtask

  // single-block configuration helper
  task automatic one_block(int n);
    n_t = 0; nr[0] = n;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // The paper's example: repeat 64 times, step 1, delay 0 -> one per cycle
    one_block(1); it[0][0] = 64; st[0][0] = 1; dl[0][0] = 0;
    send(enc_s(0, 0, 0));
    send(enc_r(0, 0, 64, 1, 0));
    run_and_compare("add1-64");
    check(x_t[63] == 64, "64 events take 64 cycles");

    // The 2D example of the paper: read, repeat 3 step 1, repeat 5 step 1
    one_block(2); it[0][0] = 3; st[0][0] = 1; dl[0][0] = 0; it[0][1] = 5; st[0][1] = 1; dl[0][1] = 0;
    send(enc_r(0, 0, 3, 1, 0));
    check(last_new, "cfg_new on the first instruction after an activation");
    send(enc_r(0, 0, 5, 1, 0));
    check(!last_new, "no cfg_new on the second instruction");
    run_and_compare("2d-3x5");

    // rerun without reconfiguration
    run_and_compare("rerun");

    // five R instructions: the fifth is ignored
    one_block(4);
    for (int j = 0; j < 4; j++) begin it[0][j] = 2; st[0][j] = 1 << j; dl[0][j] = 0; end
    for (int j = 0; j < 4; j++) send(enc_r(0, 0, it[0][j], st[0][j], dl[0][j]));
    send(enc_r(0, 0, 7, 100, 0));
    run_and_compare("r-overflow");

    // two blocks: 3 events with step 2, T after 10 cycles, then 4 events step -1
    n_t = 1; td[0] = 10;
    nr[0] = 1; it[0][0] = 3; st[0][0] = 2; dl[0][0] = 0;
    nr[1] = 1; it[1][0] = 4; st[1][0] = -1; dl[1][0] = 0;
    send(enc_s(0, 0, 0));
    send(enc_r(0, 0, 3, 2, 0));
    send(enc_t(0, 0, 10));
    check(cfg_blk == 1, "instructions after @T belong to block 1");
    send(enc_r(0, 0, 4, -1, 0));
    run_and_compare("two-blocks");
    check(x_t.size() == 7 && x_t[3] == 11, "block 1 starts 10 cycles after block 0");

    // T cuts off a long nest: 50 events, T after 5
    n_t = 1; td[0] = 5;
    nr[0] = 1; it[0][0] = 50; st[0][0] = 1; dl[0][0] = 0;
    nr[1] = 0;
    send(enc_r(0, 0, 50, 1, 0));
    send(enc_t(0, 0, 5));
    run_and_compare("cut-off");
    check(x_t.size() == 6, "5 events of block 0, 1 of block 1");

    // random configurations
    for (int n = 0; n < 200; n++) begin
      configure();
      run_and_compare($sformatf("rand%0d", n));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
