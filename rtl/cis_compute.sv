// cis_compute -- computation resource (slot 2 of the tile).
//
// A streaming unary operator: every cycle in which in_port carries a word, the
// unit applies the function in force and drives the result on out_port one
// cycle later (registered, one result per cycle, no stall).
//
// "@C slot2:FSM0 optionN function imm" stores a function (and an immediate
// operand) in configuration option N. On activation the local FSM puts option
// 0 in force; @T transitions step to option 1, 2, ... after their delays. The
// function in force persists after the FSM stops ("forever"), until a new
// activation loads another option. Only FSM0 of the slot is used, as in the
// paper's example; instructions addressed to FSM1 are ignored.
//
// Functions: ADD-1 (the paper's example), ADD immediate, MUL immediate (the
// paper names addition and multiplication as examples), PASS, and NONE (output
// silent; the state after reset). The immediate operand, PASS and the one-cycle
// latency are this design's choices.
module cis_compute
  import cis_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  cfg_t  cfg,
  input  logic  act,        // activation of slot2:FSM0
  output logic  busy,
  input  port_t in_port,
  output port_t out_port
);

  logic sel;
  assign sel = cfg.valid && (cfg.fsm == 1'b0);

  logic                    cfg_new, ev, opt_load;
  logic signed [OFS_W-1:0] ofs;
  logic [OPT_W-1:0]        opt, cfg_blk;

  cis_fsm u_fsm (
    .clk      (clk),
    .rst_n    (rst_n),
    .cfg_valid(sel),
    .cfg_instr(cfg.instr),
    .act      (act),
    .cfg_new  (cfg_new),
    .cfg_blk  (cfg_blk),
    .busy     (busy),
    .ev       (ev),
    .ofs      (ofs),
    .opt      (opt),
    .opt_load (opt_load)
  );

  func_e         opt_fn  [NOPT];
  logic [DW-1:0] opt_imm [NOPT];
  func_e         fn;
  logic [DW-1:0] imm;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < NOPT; k++) begin
        opt_fn[k]  <= FN_NONE;
        opt_imm[k] <= '0;
      end
    end else if (sel && f_op(cfg.instr) == OP_C) begin
      opt_fn[f_opt(cfg.instr)]  <= f_func(cfg.instr);
      opt_imm[f_opt(cfg.instr)] <= DW'(f_imm(cfg.instr));
    end
  end

  // configuration in force
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fn  <= FN_NONE;
      imm <= '0;
    end else if (opt_load) begin
      fn  <= opt_fn[opt];
      imm <= opt_imm[opt];
    end
  end

  logic [DW-1:0] res;
  always_comb begin
    unique case (fn)
      FN_ADD1: res = in_port.data + 1'b1;
      FN_ADDI: res = in_port.data + imm;
      FN_MULI: res = DW'(in_port.data * imm);
      FN_PASS: res = in_port.data;
      default: res = '0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_port <= '0;
    end else begin
      out_port.valid <= in_port.valid && (fn != FN_NONE);
      out_port.data  <= res;
    end
  end

endmodule
