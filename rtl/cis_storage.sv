// cis_storage -- storage resource (slot 1 of the tile).
//
// A DEPTH-word memory seen through the slot's two data ports, each driven by
// one local FSM:
//   FSM0 -> input port  : writes the word on in_port at base0 + ofs0
//   FSM1 -> output port : reads base1 + ofs1 and drives it on out_port
// "@S slot:FSMn address" sets the base address of FSMn for the block being
// configured; @R/@T go to the FSM (cis_fsm), which generates the affine offset
// pattern and one event per access once @A activates it. A @T opens a second
// (third, fourth) block with its own @S base and @R nest, and the FSM switches
// to it after the T delay, so one port can run e.g. two different address
// patterns back to back. This split of the two FSMs over the two ports
// follows the paper's example program; the rest is this design's choice.
//
// Timing: a read event at cycle t puts the word on out_port at t+1 (registered
// read, valid high for that cycle). A write event at cycle t stores in_port as
// it is in cycle t. The schedule is static: the program must place the write
// events on the cycles where valid data arrives (an assertion reports a write
// event without valid input). Addresses wrap modulo DEPTH.
//
// A host port (h_*) loads and unloads the memory from outside the tile; the
// paper does not describe how data enters a tile, so this port is an
// assumption. A host write is ignored in a cycle with an FSM write; a host read
// is served only in a cycle without an FSM read (h_rvalid tells when).
module cis_storage
  import cis_pkg::*;
#(
  parameter int DEPTH = 64,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  cfg_t            cfg,          // instruction for this slot
  input  logic [1:0]      act,          // activation of FSM1..FSM0
  output logic [1:0]      busy,
  input  port_t           in_port,
  output port_t           out_port,
  input  logic            h_we,
  input  logic            h_re,
  input  logic [AW-1:0]   h_addr,
  input  logic [DW-1:0]   h_wdata,
  output logic [DW-1:0]   h_rdata,
  output logic            h_rvalid
);

  logic [DW-1:0] mem [DEPTH];

  logic [1:0]              fsel;
  logic [1:0]              ev, cfg_new, opt_load;
  logic signed [OFS_W-1:0] ofs [2];
  logic [OPT_W-1:0]        opt [2], cfg_blk [2];
  logic [15:0]             base [2][NOPT];   // per FSM, per block

  assign fsel[0] = cfg.valid && (cfg.fsm == 1'b0);
  assign fsel[1] = cfg.valid && (cfg.fsm == 1'b1);

  for (genvar g = 0; g < 2; g++) begin : g_fsm
    cis_fsm u_fsm (
      .clk      (clk),
      .rst_n    (rst_n),
      .cfg_valid(fsel[g]),
      .cfg_instr(cfg.instr),
      .act      (act[g]),
      .cfg_new  (cfg_new[g]),
      .cfg_blk  (cfg_blk[g]),
      .busy     (busy[g]),
      .ev       (ev[g]),
      .ofs      (ofs[g]),
      .opt      (opt[g]),
      .opt_load (opt_load[g])
    );

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)
        for (int b = 0; b < NOPT; b++) base[g][b] <= '0;
      else if (fsel[g] && f_op(cfg.instr) == OP_S)
        base[g][cfg_blk[g]] <= f_imm(cfg.instr);
    end
  end

  logic [AW-1:0] waddr, raddr;
  assign waddr = AW'(base[0][opt[0]] + 16'(ofs[0]));
  assign raddr = AW'(base[1][opt[1]] + 16'(ofs[1]));

  // one write port, one read port
  always_ff @(posedge clk) begin
    if (ev[0])     mem[waddr]  <= in_port.data;
    else if (h_we) mem[h_addr] <= h_wdata;
  end

  logic [DW-1:0] rdata;
  always_ff @(posedge clk) begin
    if (ev[1])     rdata <= mem[raddr];
    else if (h_re) rdata <= mem[h_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_port.valid <= 1'b0;
      h_rvalid       <= 1'b0;
    end else begin
      out_port.valid <= ev[1];
      h_rvalid       <= h_re && !ev[1];
    end
  end

  assign out_port.data = rdata;
  assign h_rdata       = rdata;

  // The static schedule must deliver data when the input port writes.
  a_write_has_data: assert property (@(posedge clk) disable iff (!rst_n) ev[0] |-> in_port.valid)
    else $error("cis_storage: write event at address %0d without valid input", waddr);

endmodule
