// cis_fsm -- one local FSM of a resource slot (the "slot:FSM" of the ISA).
//
// A local FSM turns a short, temporally composed instruction sequence into an
// autonomous micro-thread. While idle it collects its configuration as a row
// of blocks, block 0 first; each @T closes the current block and opens the next:
//   @R iter step delay   appends one repetition level to the current block.
//                        The first @R is the innermost loop, each further @R
//                        wraps the ones before it, up to NR_P levels per block
//                        (more are ignored).
//   @T delay             the transition operator: `delay` cycles after the
//                        current block started, force the move to the next
//                        block (up to NOPT_P blocks in all).
// The resource instruction itself (@S/@C/@I) is handled by the owning resource.
// Block k is configuration option k: @C and @I name their option explicitly,
// and for @S the resource stores the address for block cfg_blk, the block
// now being configured. The first configuration instruction that arrives
// after an activation clears all blocks and raises cfg_new, so a new program
// does not inherit the old one; otherwise configuration is sticky and a second
// @A reruns the same micro-thread.
//
// Running (after the act pulse at cycle c):
//   * block 0 comes into force at c+1 (opt = 0, opt_load pulse). Each T delay
//     (0 is read as 1) later the next block comes into force in the same way.
//   * whenever a block comes into force its R nest starts from index 0: `ev`
//     marks one basic operation per cycle, the first in the block's first
//     cycle, and `ofs` = sum(idx[k]*step[k]) over the block's levels. A block
//     without @R makes one event. After an event on which loop level k
//     advances, delay[k] idle cycles are inserted (delay=0: one event per
//     cycle). A T transition cuts off an unfinished nest; a nest that finishes
//     early leaves the FSM idle until the transition.
//   busy is high while the R nest or the T chain still has work.
// The R and T operators, their fields and the "up to 4 nested loops" figure are
// the paper's; the block/option numbering, the counting scheme, the clear rule
// and the timing above are this design's choices.
module cis_fsm
  import cis_pkg::*;
#(
  parameter int NR_P   = NR,
  parameter int NOPT_P = NOPT
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    cfg_valid,   // instruction addressed to this slot:FSM
  input  instr_t                  cfg_instr,
  input  logic                    act,         // activation pulse from @A
  output logic                    cfg_new,     // first configuration after an activation
  output logic [$clog2(NOPT_P)-1:0] cfg_blk,   // block an arriving instruction belongs to
  output logic                    busy,
  output logic                    ev,          // one basic operation this cycle
  output logic signed [OFS_W-1:0] ofs,         // address offset of this event
  output logic [$clog2(NOPT_P)-1:0] opt,       // block (option) in force
  output logic                    opt_load     // opt has just (re)entered force
);

  localparam int NT_P  = NOPT_P - 1;
  localparam int OW    = $clog2(NOPT_P);
  localparam int RIW   = $clog2(NR_P);

  // ---------------- configuration ----------------
  logic [ITER_W-1:0]         r_iter [NOPT_P][NR_P];
  logic signed [STEP_W-1:0]  r_step [NOPT_P][NR_P];
  logic [RDLY_W-1:0]         r_dly  [NOPT_P][NR_P];
  logic [$clog2(NR_P+1)-1:0] n_r    [NOPT_P];
  logic [TDLY_W-1:0]         t_dly  [NT_P];
  logic [$clog2(NT_P+1)-1:0] n_t;
  logic                      consumed;   // activated since the last configuration

  opcode_e op;
  assign op      = f_op(cfg_instr);
  assign cfg_new = cfg_valid && consumed;
  assign cfg_blk = consumed ? '0 : OW'(n_t);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_t      <= '0;
      consumed <= 1'b0;
      for (int b = 0; b < NOPT_P; b++) begin
        n_r[b] <= '0;
        for (int k = 0; k < NR_P; k++) begin
          r_iter[b][k] <= '0;
          r_step[b][k] <= '0;
          r_dly[b][k]  <= '0;
        end
      end
      for (int k = 0; k < NT_P; k++) t_dly[k] <= '0;
    end else begin
      if (act) consumed <= 1'b1;
      if (cfg_valid) begin
        consumed <= 1'b0;
        if (consumed) begin
          n_t <= '0;
          for (int b = 0; b < NOPT_P; b++) n_r[b] <= '0;
        end
        if (op == OP_R) begin
          if (consumed) begin
            r_iter[0][0] <= f_iter(cfg_instr);
            r_step[0][0] <= f_step(cfg_instr);
            r_dly[0][0]  <= f_rdly(cfg_instr);
            n_r[0]       <= 1;
          end else if (32'(n_r[cfg_blk]) < NR_P) begin
            r_iter[cfg_blk][RIW'(n_r[cfg_blk])] <= f_iter(cfg_instr);
            r_step[cfg_blk][RIW'(n_r[cfg_blk])] <= f_step(cfg_instr);
            r_dly[cfg_blk][RIW'(n_r[cfg_blk])]  <= f_rdly(cfg_instr);
            n_r[cfg_blk]                        <= n_r[cfg_blk] + 1'b1;
          end
        end
        if (op == OP_T) begin
          if (consumed) begin
            t_dly[0] <= f_imm(cfg_instr);
            n_t      <= 1;
          end else if (32'(n_t) < NT_P) begin
            t_dly[n_t] <= f_imm(cfg_instr);
            n_t        <= n_t + 1'b1;
          end
        end
      end
    end
  end

  // ---------------- T chain ----------------
  logic              t_run;
  logic [TDLY_W-1:0] tcnt;
  logic              t_fire;        // the next block comes into force next cycle

  function automatic logic [TDLY_W-1:0] min1(logic [TDLY_W-1:0] d);
    return (d == '0) ? TDLY_W'(1) : d;
  endfunction

  assign t_fire = !act && t_run && (tcnt == TDLY_W'(1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t_run    <= 1'b0;
      tcnt     <= '0;
      opt      <= '0;
      opt_load <= 1'b0;
    end else begin
      opt_load <= 1'b0;
      if (act) begin
        opt      <= '0;
        opt_load <= 1'b1;
        t_run    <= (n_t != '0);
        tcnt     <= min1(t_dly[0]);
      end else if (t_run) begin
        if (t_fire) begin
          opt      <= opt + 1'b1;
          opt_load <= 1'b1;
          if (32'(opt) + 1 < 32'(n_t)) tcnt <= min1(t_dly[32'(opt) + 1]);
          else                         t_run <= 1'b0;
        end else begin
          tcnt <= tcnt - 1'b1;
        end
      end
    end
  end

  // ---------------- R chain of the block in force ----------------
  logic              r_run;
  logic [ITER_W-1:0] idx [NR_P];
  logic [RDLY_W-1:0] rw;            // idle cycles still to insert

  assign ev = r_run && (rw == '0);

  // last index of a level (iteration count 0 is read as 1)
  function automatic logic [ITER_W-1:0] last_idx(logic [ITER_W-1:0] it);
    return (it == '0) ? '0 : it - 1'b1;
  endfunction

  // Level that advances after the current event; NR_P if the nest is done.
  int adv;
  always_comb begin
    adv = NR_P;
    for (int k = NR_P - 1; k >= 0; k--)
      if (k < 32'(n_r[opt]) && idx[k] != last_idx(r_iter[opt][k])) adv = k;
  end

  always_comb begin
    ofs = '0;
    for (int k = 0; k < NR_P; k++)
      if (k < 32'(n_r[opt]))
        ofs = ofs + OFS_W'($signed({1'b0, idx[k]}) * r_step[opt][k]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_run <= 1'b0;
      rw    <= '0;
      for (int k = 0; k < NR_P; k++) idx[k] <= '0;
    end else if (act || t_fire) begin
      // a block comes into force: start its nest
      r_run <= 1'b1;
      rw    <= '0;
      for (int k = 0; k < NR_P; k++) idx[k] <= '0;
    end else if (r_run) begin
      if (rw != '0) begin
        rw <= rw - 1'b1;
      end else if (adv == NR_P) begin
        r_run <= 1'b0;
      end else begin
        for (int k = 0; k < NR_P; k++) begin
          if (k < adv)  idx[k] <= '0;
          if (k == adv) idx[k] <= idx[k] + 1'b1;
        end
        rw <= r_dly[opt][adv];
      end
    end
  end

  assign busy = r_run | t_run;

endmodule
