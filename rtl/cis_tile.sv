// cis_tile -- one tile of the composable-instruction-set architecture: a
// single-issue sequencer and four resource slots.
//
//   slot 0 : interconnect (cis_interconnect), FSM0
//   slot 1 : storage      (cis_storage), FSM0 = input/write port,
//                                        FSM1 = output/read port
//   slot 2 : compute      (cis_compute), FSM0
//   slot 3 : unused in this instance; its configuration stream, activation
//            pulses and both data ports are tile ports (s3_*), so a resource
//            or an I/O channel can be attached outside the tile.
// This is the instance of the paper's hardware template (sequencer plus
// slots with two FSMs and one input and one output port each). The sequencer
// issues one instruction per cycle; each instruction configures or controls
// exactly one slot:FSM, and the slots then run on their own. Every data path
// between slots goes through the interconnect; the interconnect's own ports
// are not used.
//
// Interface: load the program through im_*, the data through the storage
// host port h_*, then pulse start with prog_len; done rises when the program
// has issued its last instruction (including its final @W). res_busy is high
// while any local FSM is still running.
// Timing, end to end: storage read event at t, word on the storage output
// port at t+1, through the interconnect in the same cycle, compute result at
// t+2, written back by a write event at t+2. This is why the paper's example
// activates the write FSM two issue cycles after the read FSM (@A, @W 1, @A).
module cis_tile
  import cis_pkg::*;
#(
  parameter int DEPTH      = 64,
  parameter int IMEM_DEPTH = 64,
  localparam int AW        = $clog2(DEPTH),
  localparam int PW        = $clog2(IMEM_DEPTH + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  // program load and run control
  input  logic            im_we,
  input  logic [PW-1:0]   im_addr,
  input  instr_t          im_wdata,
  input  logic            start,
  input  logic [PW-1:0]   prog_len,
  output logic            busy,
  output logic            done,
  output logic            res_busy,
  output logic [31:0]     n_issued,
  output logic [31:0]     n_wait_cycles,
  // storage host port
  input  logic            h_we,
  input  logic            h_re,
  input  logic [AW-1:0]   h_addr,
  input  logic [DW-1:0]   h_wdata,
  output logic [DW-1:0]   h_rdata,
  output logic            h_rvalid,
  // slot 3 (no resource in this instance)
  output cfg_t            s3_cfg,
  output logic [1:0]      s3_act,
  input  port_t           s3_out,    // slot 3 output port -> interconnect
  output port_t           s3_in      // interconnect -> slot 3 input port
);

  cfg_t            cfg [NSLOT];
  logic [NACT-1:0] act;
  port_t           slot_out [NSLOT];
  port_t           slot_in  [NSLOT];
  logic            busy_ic, busy_cu;
  logic [1:0]      busy_st;

  cis_sequencer #(.IMEM_DEPTH(IMEM_DEPTH)) u_seq (
    .clk          (clk),
    .rst_n        (rst_n),
    .im_we        (im_we),
    .im_addr      (im_addr),
    .im_wdata     (im_wdata),
    .start        (start),
    .prog_len     (prog_len),
    .busy         (busy),
    .done         (done),
    .cfg_o        (cfg),
    .act_o        (act),
    .n_issued     (n_issued),
    .n_wait_cycles(n_wait_cycles)
  );

  // slot 0: interconnect
  cis_interconnect u_ic (
    .clk     (clk),
    .rst_n   (rst_n),
    .cfg     (cfg[0]),
    .act     (act[0]),
    .busy    (busy_ic),
    .slot_out(slot_out),
    .slot_in (slot_in)
  );
  assign slot_out[0] = '0;

  // slot 1: storage
  cis_storage #(.DEPTH(DEPTH)) u_st (
    .clk     (clk),
    .rst_n   (rst_n),
    .cfg     (cfg[1]),
    .act     (act[3:2]),
    .busy    (busy_st),
    .in_port (slot_in[1]),
    .out_port(slot_out[1]),
    .h_we    (h_we),
    .h_re    (h_re),
    .h_addr  (h_addr),
    .h_wdata (h_wdata),
    .h_rdata (h_rdata),
    .h_rvalid(h_rvalid)
  );

  // slot 2: compute
  cis_compute u_cu (
    .clk     (clk),
    .rst_n   (rst_n),
    .cfg     (cfg[2]),
    .act     (act[4]),
    .busy    (busy_cu),
    .in_port (slot_in[2]),
    .out_port(slot_out[2])
  );

  // slot 3: brought out
  assign s3_cfg      = cfg[3];
  assign s3_act      = act[7:6];
  assign slot_out[3] = s3_out;
  assign s3_in       = slot_in[3];

  assign res_busy = busy_ic | busy_cu | (|busy_st);

endmodule
