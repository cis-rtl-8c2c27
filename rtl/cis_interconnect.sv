// cis_interconnect -- interconnection resource (slot 0 of the tile).
//
// A crossbar from the slots' output ports to the slots' input ports.
// "@I slot0:FSM0 optionN src->dst" adds the path "output port of slot src to
// input port of slot dst" to configuration option N. Several @I to the same
// option build paths that exist together (the paper's example sets
// slot1->slot2 and slot2->slot1 in option 0). A later @I to the same
// destination in the same option replaces its source. The first @I after an
// activation starts a fresh set of options (all paths cleared).
//
// On activation the local FSM puts option 0 in force; @T transitions step to
// the next options after their delays. The paths in force stay until the next
// activation loads new ones, so a connection needs no repetition. The crossbar
// itself is combinational: a word leaves the source port and reaches the
// destination port in the same cycle. An input port with no path sees
// valid=0 and data=0. The crossbar structure and its zero latency are this
// design's choices; the paper gives only the function. Only FSM0 is used.
module cis_interconnect
  import cis_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  cfg_t  cfg,
  input  logic  act,                 // activation of slot0:FSM0
  output logic  busy,
  input  port_t slot_out [NSLOT],    // output ports of all slots
  output port_t slot_in  [NSLOT]     // input ports of all slots
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

  // per option and destination: path enable and source slot
  logic [NSLOT-1:0]  opt_en  [NOPT];
  logic [SLOT_W-1:0] opt_src [NOPT][NSLOT];
  logic [NSLOT-1:0]  en;
  logic [SLOT_W-1:0] src [NSLOT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < NOPT; o++) begin
        opt_en[o] <= '0;
        for (int d = 0; d < NSLOT; d++) opt_src[o][d] <= '0;
      end
    end else if (sel) begin
      if (cfg_new)
        for (int o = 0; o < NOPT; o++) opt_en[o] <= '0;
      if (f_op(cfg.instr) == OP_I) begin
        opt_en[f_opt(cfg.instr)][f_dst(cfg.instr)]  <= 1'b1;
        opt_src[f_opt(cfg.instr)][f_dst(cfg.instr)] <= f_src(cfg.instr);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      en <= '0;
      for (int d = 0; d < NSLOT; d++) src[d] <= '0;
    end else if (opt_load) begin
      en <= opt_en[opt];
      for (int d = 0; d < NSLOT; d++) src[d] <= opt_src[opt][d];
    end
  end

  always_comb begin
    for (int d = 0; d < NSLOT; d++)
      slot_in[d] = en[d] ? slot_out[src[d]] : '0;
  end

endmodule
