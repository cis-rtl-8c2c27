// tb_cis_storage -- self-checking testbench of the storage resource.
//
// The memory is filled through the host port. The read FSM (FSM1) is given
// a base address and random 2-level R patterns (with delays); every word on
// the output port is checked against a model memory, one cycle after its
// event. The write FSM (FSM0) then streams a counting sequence from the input
// port into a random 2-level pattern while the read FSM runs concurrently;
// the memory is read back through the host port and compared. Also checked:
// the paper's 64-word, one-per-cycle pattern takes 64 cycles, and a read port
// configured with two blocks (@S/@R, @T, @S/@R) switches base address and
// pattern when the T delay expires.
module tb_cis_storage;
  import cis_pkg::*;

  localparam int DEPTH = 64;
  localparam int AW    = $clog2(DEPTH);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  cfg_t          cfg = '0;
  logic [1:0]    act = '0, busy;
  port_t         in_port = '0, out_port;
  logic          h_we = 1'b0, h_re = 1'b0, h_rvalid;
  logic [AW-1:0] h_addr = '0;
  logic [DW-1:0] h_wdata = '0, h_rdata;

  cis_storage #(.DEPTH(DEPTH)) dut (.*);

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

  logic [DW-1:0] model [DEPTH];

  task automatic send(int fsm, instr_t i);
    @(negedge clk);
    cfg = '{valid: 1'b1, fsm: 1'(fsm), instr: i};
    @(negedge clk);
    cfg = '0;
  endtask

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
    check(h_rvalid, "host read valid");
    d = h_rdata;
  endtask

  // expected read stream: (cycle after activation, address)
  int x_t[$], x_a[$];
  task automatic pattern(int base, int i0, int s0, int d0, int i1, int s1, int d1);
    int t = 1;
    x_t.delete(); x_a.delete();
    for (int b = 0; b < i1; b++)
      for (int a = 0; a < i0; a++) begin
        x_t.push_back(t);
        x_a.push_back((base + a * s0 + b * s1) & (DEPTH - 1));
        if (a < i0 - 1) t += 1 + d0;
        else if (b < i1 - 1) t += 1 + d1;
      end
  endtask

  int r_t[$];
  logic [DW-1:0] r_d[$];
  int t_act;
  always @(posedge clk)
    if (out_port.valid) begin r_t.push_back(cyc - t_act); r_d.push_back(out_port.data); end

  task automatic activate(logic [1:0] m);
    @(negedge clk);
    act = m;
    t_act = cyc;
    @(negedge clk);
    act = '0;
  endtask

  initial begin
    logic [DW-1:0] d;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    for (int a = 0; a < DEPTH; a++) begin
      model[a] = DW'($urandom);
      host_write(a, model[a]);
    end
    for (int a = 0; a < DEPTH; a += 7) begin
      host_read(a, d);
      check(d == model[a], $sformatf("host read %0d", a));
    end

    // paper pattern: @S address=0, @R iter=64 step=1 delay=0
    send(1, enc_s(1, 1, 0));
    send(1, enc_r(1, 1, 64, 1, 0));
    pattern(0, 64, 1, 0, 1, 0, 0);
    r_t.delete(); r_d.delete();
    activate(2'b10);
    repeat (70) @(negedge clk);
    check(r_d.size() == 64, $sformatf("64 words read, got %0d", r_d.size()));
    for (int k = 0; k < r_d.size() && k < 64; k++) begin
      // event at +1+k, word on the port one cycle later
      check(r_t[k] == x_t[k] + 1, $sformatf("read %0d at +%0d", k, r_t[k]));
      check(r_d[k] == model[x_a[k]], $sformatf("read %0d data", k));
    end
    check(r_t[63] - r_t[0] == 63, "one word per cycle");

    // random 2-level read patterns
    for (int n = 0; n < 30; n++) begin
      automatic int b = $urandom_range(0, DEPTH - 1);
      automatic int i0 = $urandom_range(1, 6), s0 = int'($urandom_range(0, 8)) - 2, d0 = $urandom_range(0, 2);
      automatic int i1 = $urandom_range(1, 5), s1 = int'($urandom_range(0, 20)) - 4, d1 = $urandom_range(0, 3);
      send(1, enc_s(1, 1, b));
      send(1, enc_r(1, 1, i0, s0, d0));
      send(1, enc_r(1, 1, i1, s1, d1));
      pattern(b, i0, s0, d0, i1, s1, d1);
      r_t.delete(); r_d.delete();
      activate(2'b10);
      while (busy[1]) @(negedge clk);
      repeat (2) @(negedge clk);
      check(r_d.size() == x_t.size(), $sformatf("pattern %0d: %0d words, expected %0d", n, r_d.size(), x_t.size()));
      for (int k = 0; k < r_d.size() && k < x_t.size(); k++) begin
        check(r_t[k] == x_t[k] + 1, $sformatf("pattern %0d word %0d time", n, k));
        check(r_d[k] == model[x_a[k]], $sformatf("pattern %0d word %0d data", n, k));
      end
    end

    // two blocks on the read port: block 0 reads i0 words from base b0, a T
    // after td cycles switches to block 1 with its own base b1 and step
    for (int n = 0; n < 10; n++) begin
      automatic int b0 = $urandom_range(0, DEPTH - 1), b1 = $urandom_range(0, DEPTH - 1);
      automatic int i0 = $urandom_range(1, 12), td = $urandom_range(1, 10);
      automatic int i1 = $urandom_range(1, 8), s1 = int'($urandom_range(0, 6)) - 3;
      int n0;
      send(1, enc_s(1, 1, b0));
      send(1, enc_r(1, 1, i0, 1, 0));
      send(1, enc_t(1, 1, td));
      send(1, enc_s(1, 1, b1));
      send(1, enc_r(1, 1, i1, s1, 0));
      x_t.delete(); x_a.delete();
      n0 = (i0 < td) ? i0 : td;
      for (int k = 0; k < n0; k++) begin x_t.push_back(1 + k); x_a.push_back((b0 + k) & (DEPTH - 1)); end
      for (int k = 0; k < i1; k++) begin x_t.push_back(1 + td + k); x_a.push_back((b1 + k * s1) & (DEPTH - 1)); end
      r_t.delete(); r_d.delete();
      activate(2'b10);
      while (busy[1]) @(negedge clk);
      repeat (2) @(negedge clk);
      check(r_d.size() == x_t.size(), $sformatf("blocks %0d: %0d words, expected %0d", n, r_d.size(), x_t.size()));
      for (int k = 0; k < r_d.size() && k < x_t.size(); k++) begin
        check(r_t[k] == x_t[k] + 1, $sformatf("blocks %0d word %0d at +%0d, expected +%0d", n, k, r_t[k], x_t[k] + 1));
        check(r_d[k] == model[x_a[k]], $sformatf("blocks %0d word %0d data", n, k));
      end
    end

    // write stream (FSM0) concurrent with a read stream (FSM1)
    for (int n = 0; n < 10; n++) begin
      automatic int b = $urandom_range(0, DEPTH - 1);
      automatic int i0 = $urandom_range(1, 8), s0 = $urandom_range(1, 3);
      automatic int i1 = $urandom_range(1, 4), s1 = 16;
      automatic int base_val = $urandom_range(0, 60000);
      send(0, enc_s(1, 0, b));
      send(0, enc_r(1, 0, i0, s0, 0));
      send(0, enc_r(1, 0, i1, s1, 0));
      send(1, enc_s(1, 1, (b + 32) & (DEPTH - 1)));
      send(1, enc_r(1, 1, 16, 1, 0));
      pattern(b, i0, s0, 0, i1, s1, 0);
      // input port carries base_val + (cycles since activation)
      @(negedge clk);
      act = 2'b11;
      t_act = cyc;
      in_port = '{valid: 1'b1, data: DW'(base_val)};
      for (int k = 1; k <= i0 * i1 + 1; k++) begin
        @(negedge clk);
        act = '0;
        in_port.data = DW'(base_val + k);
      end
      in_port = '0;
      while (busy != 2'b00) @(negedge clk);
      // expected: event at +t writes base_val + t
      for (int k = 0; k < x_t.size(); k++) model[x_a[k]] = DW'(base_val + x_t[k]);
      for (int a = 0; a < DEPTH; a++) begin
        host_read(a, d);
        check(d == model[a], $sformatf("write test %0d addr %0d: %0h expected %0h", n, a, d, model[a]));
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
