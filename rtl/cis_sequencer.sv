// cis_sequencer -- the tile's single-issue controller.
//
// The sequencer steps through a CIS program held in a small instruction
// memory, one instruction per cycle:
//   @C @I @S @R @T : forwarded unchanged to the addressed slot (cfg_o[slot],
//                    with the FSM bit); the slot's FSM and resource decode it.
//   @A mask        : pulses act_o for every slot:FSM whose bit is set.
//   @W delay       : the next instruction issues `delay` cycles after the @W
//                    (0 is read as 1, i.e. the @W then costs one cycle).
//   NOP            : one cycle, nothing else.
// cfg_o and act_o are registered: an instruction issued in cycle t reaches
// its slot in cycle t+1. A program runs from address 0 on a start pulse and
// ends after prog_len instructions; done then stays high until the next start.
// The paper gives the instruction set and the single-issue property; the
// instruction memory, its load port (im_*), start/prog_len/done and the
// timing above are this design's choices.
module cis_sequencer
  import cis_pkg::*;
#(
  parameter int IMEM_DEPTH = 64,
  localparam int PW        = $clog2(IMEM_DEPTH + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // program load
  input  logic                    im_we,
  input  logic [PW-1:0]           im_addr,
  input  instr_t                  im_wdata,
  // run control
  input  logic                    start,
  input  logic [PW-1:0]           prog_len,
  output logic                    busy,
  output logic                    done,
  // to the resource slots
  output cfg_t                    cfg_o [NSLOT],
  output logic [NACT-1:0]         act_o,
  // issue counters, for utilisation measurements
  output logic [31:0]             n_issued,
  output logic [31:0]             n_wait_cycles
);

  instr_t imem [IMEM_DEPTH];

  always_ff @(posedge clk)
    if (im_we) imem[im_addr[$clog2(IMEM_DEPTH)-1:0]] <= im_wdata;

  logic [PW-1:0]     pc;
  logic [PW-1:0]     len;
  logic [TDLY_W-1:0] wcnt;
  instr_t            ir;
  opcode_e           op;

  assign ir    = imem[pc[$clog2(IMEM_DEPTH)-1:0]];
  assign op    = f_op(ir);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy          <= 1'b0;
      done          <= 1'b0;
      pc            <= '0;
      len           <= '0;
      wcnt          <= '0;
      act_o         <= '0;
      n_issued      <= '0;
      n_wait_cycles <= '0;
      for (int s = 0; s < NSLOT; s++) cfg_o[s] <= '0;
    end else begin
      act_o <= '0;
      for (int s = 0; s < NSLOT; s++) cfg_o[s].valid <= 1'b0;

      if (start && !busy) begin
        busy          <= 1'b1;
        done          <= 1'b0;
        pc            <= '0;
        len           <= prog_len;
        wcnt          <= '0;
        n_issued      <= '0;
        n_wait_cycles <= '0;
      end else if (busy) begin
        if (wcnt != '0) begin
          wcnt          <= wcnt - 1'b1;
          n_wait_cycles <= n_wait_cycles + 1;
        end else if (pc == len) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          pc       <= pc + 1'b1;
          n_issued <= n_issued + 1;
          unique case (op)
            OP_C, OP_I, OP_S, OP_R, OP_T: begin
              cfg_o[f_slot(ir)].valid <= 1'b1;
              cfg_o[f_slot(ir)].fsm   <= f_fsm(ir);
              cfg_o[f_slot(ir)].instr <= ir;
            end
            OP_A: act_o <= f_mask(ir);
            OP_W: wcnt  <= (f_imm(ir) == '0) ? '0 : f_imm(ir) - 1'b1;
            default: ;
          endcase
        end
      end
    end
  end

  // The program memory must not change under a running program.
  a_no_load_while_running: assert property (@(posedge clk) disable iff (!rst_n) busy |-> !im_we)
    else $error("cis_sequencer: program written while running");

  // A single-issue controller configures at most one slot per cycle.
  logic [NSLOT-1:0] cfg_valids;
  always_comb for (int s = 0; s < NSLOT; s++) cfg_valids[s] = cfg_o[s].valid;
  a_single_issue: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(cfg_valids))
    else $error("cis_sequencer: more than one slot configured");

endmodule
