// cis_pkg -- types and constants shared by the composable-instruction-set tile.
//
// The tile is a single-issue sequencer plus NSLOT resource slots; every slot
// owns two local FSMs (slot:FSM0, slot:FSM1) and one input and one output data
// port. The instruction set has seven instructions in three groups:
//   resource  : @C (computation), @I (interconnection), @S (storage)
//   transform : @R (repetition operator), @T (transition operator)
//   control   : @W (wait), @A (activate a list of slot:FSMs)
// The mnemonics, their fields and the slot/FSM/port template follow the
// paper's toy instance. The 32-bit binary encoding below, all field widths, the
// data width and the function codes of the compute unit are choices of this
// design; the paper gives only the assembly form.
//
// Encoding (bit 31 is the MSB):
//   [31:29] opcode         [28:27] slot        [26] fsm
//   @C : [25:24] option  [23:20] function  [15:0] immediate operand
//   @I : [25:24] option  [23:22] source slot (its output port)
//                        [21:20] destination slot (its input port)
//   @S : [15:0]  base address
//   @R : [25:16] iterations (0 is read as 1)  [15:8] step (signed)  [7:0] delay
//   @T : [15:0]  delay (cycles spent in the current option before the next)
//   @W : [15:0]  delay (cycles the sequencer waits; 0 is read as 1)
//   @A : [7:0]   activation mask, bit (2*slot + fsm)
// Opcode 0 is a no-operation that takes one issue cycle.
package cis_pkg;

  localparam int NSLOT    = 4;          // Fig. 1: slots 0..3
  localparam int NFSM     = 2;          // two local FSMs per slot
  localparam int NOPT     = 4;          // configuration options per FSM (assumed)
  localparam int NR       = 4;          // nested R levels per FSM ("up to 4 layers")
  localparam int DW       = 16;         // data word width (assumed)
  localparam int IW       = 32;         // instruction width (assumed)
  localparam int ITER_W   = 10;
  localparam int STEP_W   = 8;
  localparam int RDLY_W   = 8;
  localparam int TDLY_W   = 16;
  localparam int OFS_W    = 16;         // address offset produced by the R chain
  localparam int SLOT_W   = $clog2(NSLOT);
  localparam int OPT_W    = $clog2(NOPT);
  localparam int NACT     = NSLOT * NFSM;

  typedef enum logic [2:0] {
    OP_NOP = 3'd0,
    OP_C   = 3'd1,
    OP_I   = 3'd2,
    OP_S   = 3'd3,
    OP_R   = 3'd4,
    OP_T   = 3'd5,
    OP_W   = 3'd6,
    OP_A   = 3'd7
  } opcode_e;

  // Functions of the compute resource. ADD-1 is the paper's example; ADD and
  // MUL with an immediate operand stand for the paper's "addition,
  // multiplication" examples; NONE leaves the output port silent.
  typedef enum logic [3:0] {
    FN_NONE = 4'd0,
    FN_ADD1 = 4'd1,
    FN_ADDI = 4'd2,
    FN_MULI = 4'd3,
    FN_PASS = 4'd4
  } func_e;

  typedef logic [IW-1:0] instr_t;

  // One instruction as delivered by the sequencer to one slot.
  typedef struct packed {
    logic   valid;
    logic   fsm;
    instr_t instr;
  } cfg_t;

  // A data port: one word per cycle, qualified by valid.
  typedef struct packed {
    logic          valid;
    logic [DW-1:0] data;
  } port_t;

  // Field extraction.
  function automatic opcode_e f_op(instr_t i);        return opcode_e'(i[31:29]); endfunction
  function automatic logic [SLOT_W-1:0] f_slot(instr_t i); return i[28:27]; endfunction
  function automatic logic f_fsm(instr_t i);          return i[26]; endfunction
  function automatic logic [OPT_W-1:0] f_opt(instr_t i);  return i[25:24]; endfunction
  function automatic func_e f_func(instr_t i);        return func_e'(i[23:20]); endfunction
  function automatic logic [15:0] f_imm(instr_t i);   return i[15:0]; endfunction
  function automatic logic [SLOT_W-1:0] f_src(instr_t i); return i[23:22]; endfunction
  function automatic logic [SLOT_W-1:0] f_dst(instr_t i); return i[21:20]; endfunction
  function automatic logic [ITER_W-1:0] f_iter(instr_t i); return i[25:16]; endfunction
  function automatic logic [STEP_W-1:0] f_step(instr_t i); return i[15:8]; endfunction
  function automatic logic [RDLY_W-1:0] f_rdly(instr_t i); return i[7:0]; endfunction
  function automatic logic [NACT-1:0] f_mask(instr_t i);  return i[NACT-1:0]; endfunction

  // Instruction builders, used by testbenches to write programs in the
  // paper's assembly form.
  function automatic instr_t enc_c(int slot, int fsm, int opt, func_e fn, int imm);
    return {OP_C, 2'(slot), 1'(fsm), 2'(opt), 4'(fn), 4'd0, 16'(imm)};
  endfunction
  function automatic instr_t enc_i(int slot, int fsm, int opt, int src, int dst);
    return {OP_I, 2'(slot), 1'(fsm), 2'(opt), 2'(src), 2'(dst), 20'd0};
  endfunction
  function automatic instr_t enc_s(int slot, int fsm, int addr);
    return {OP_S, 2'(slot), 1'(fsm), 10'd0, 16'(addr)};
  endfunction
  function automatic instr_t enc_r(int slot, int fsm, int iter, int step, int delay);
    return {OP_R, 2'(slot), 1'(fsm), 10'(iter), 8'(step), 8'(delay)};
  endfunction
  function automatic instr_t enc_t(int slot, int fsm, int delay);
    return {OP_T, 2'(slot), 1'(fsm), 10'd0, 16'(delay)};
  endfunction
  function automatic instr_t enc_w(int delay);
    return {OP_W, 3'd0, 10'd0, 16'(delay)};
  endfunction
  function automatic instr_t enc_a(logic [NACT-1:0] mask);
    return {OP_A, 3'd0, 18'd0, mask};
  endfunction
  function automatic logic [NACT-1:0] act_bit(int slot, int fsm);
    return NACT'(1) << (2 * slot + fsm);
  endfunction

endpackage
