// nmp_core: one rank-level near-memory processing core for tensor
// gather-reduce and tensor scatter.
//
// The core sits on the DIMM next to the rank's DRAM devices. It runs the
// CISC instructions that the GPU sends. Gathered embedding or gradient rows
// are read into Input Q (I1). Destination rows are read into Input Q (I2).
// The vector ALU adds the two beat by beat into Output Q (O), and O drains
// back to the rank as vector writes. During a gather-reduce run whose rows
// fit the queues, O is instead fed back into I2, so the running sum stays in
// the core until the run ends. The local memory controller sequences
// all of it and drives DDR4 commands to the DDR PHY. The PHY and the DRAM
// devices are outside this module: their command and read-data signals are
// the ports cmd / phy_rd_*.
//
// Interface: instr (valid/ready), busy and a one-cycle done pulse, a host
// beat-access port (accepted only while idle), the PHY side, and event pulses
// for performance counters. Timing: one command per cycle. Sustained reads
// reach one 64-byte beat per tCCD = 4 cycles within an open row.
//
// From the paper: the block structure (two input queues, a vector adder and
// an output queue between local DRAM reads and writes, plus a local memory
// controller), one core per rank and reduction on the fly in the local
// buffers. This design's own choices: the O-to-I2 feedback path, queue
// depths, the element format, the instruction format and the host port.
module nmp_core
  import tcast_pkg::*;
#(
  parameter int unsigned QDEPTH   = 8,
  parameter int unsigned T_RCD    = 22,
  parameter int unsigned T_RP     = 22,
  parameter int unsigned T_RAS    = 52,
  parameter int unsigned T_CCD    = 4,
  parameter int unsigned T_RTP    = 12,
  parameter int unsigned T_WR2PRE = 44,
  parameter int unsigned T_WR2RD  = 32
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      instr_valid,
  output logic      instr_ready,
  input  instr_t    instr,
  output logic      busy,
  output logic      done,
  input  logic      host_req_valid,
  output logic      host_req_ready,
  input  logic      host_req_we,
  input  baddr_t    host_req_addr,
  input  beat_t     host_req_wdata,
  output logic      host_rsp_valid,
  output beat_t     host_rsp_data,
  output dram_cmd_t cmd,
  input  logic      phy_rd_valid,
  input  beat_t     phy_rd_data,
  output nmp_ev_t   ev
);

  localparam int unsigned QCW = $clog2(QDEPTH+1);

  logic  i1_push, i2_push;
  beat_t q_push_data, i2_push_data;
  logic [QCW-1:0] i1_count, i2_count, o_count;
  logic  i1_valid, i1_ready, i2_valid, i2_ready;
  beat_t i1_data, i2_data;
  logic  alu_valid, alu_ready;
  beat_t alu_data;
  logic  o_valid, o_ready;
  beat_t o_data;
  logic  zero_b, alu_en;

  local_mem_ctrl #(
    .QDEPTH(QDEPTH), .T_RCD(T_RCD), .T_RP(T_RP), .T_RAS(T_RAS), .T_CCD(T_CCD),
    .T_RTP(T_RTP), .T_WR2PRE(T_WR2PRE), .T_WR2RD(T_WR2RD)
  ) u_lmc (
    .clk, .rst_n,
    .instr_valid, .instr_ready, .instr, .busy, .done,
    .host_req_valid, .host_req_ready, .host_req_we, .host_req_addr, .host_req_wdata,
    .host_rsp_valid, .host_rsp_data,
    .i1_push, .i2_push, .q_push_data, .i2_push_data, .i1_count, .i2_count,
    .o_count, .o_valid, .o_ready, .o_data,
    .zero_b, .alu_en, .alu_take (i1_valid && i1_ready),
    .cmd, .phy_rd_valid, .phy_rd_data,
    .ev
  );

  // Input Q (I1): gathered rows
  vec_queue #(.W(BEAT_W), .DEPTH(QDEPTH)) u_i1 (
    .clk, .rst_n,
    .wr_valid (i1_push), .wr_ready (), .wr_data (q_push_data),
    .rd_valid (i1_valid), .rd_ready (i1_ready), .rd_data (i1_data),
    .count    (i1_count)
  );

  // Input Q (I2): destination rows
  vec_queue #(.W(BEAT_W), .DEPTH(QDEPTH)) u_i2 (
    .clk, .rst_n,
    .wr_valid (i2_push), .wr_ready (), .wr_data (i2_push_data),
    .rd_valid (i2_valid), .rd_ready (i2_ready), .rd_data (i2_data),
    .count    (i2_count)
  );

  vector_alu u_alu (
    .clk, .rst_n,
    .a_valid (i1_valid && alu_en), .a_ready (i1_ready), .a_data (i1_data),
    .b_valid (i2_valid), .b_ready (i2_ready), .b_data (i2_data),
    .zero_b  (zero_b),
    .out_valid (alu_valid), .out_ready (alu_ready), .out_data (alu_data)
  );

  // Output Q (O): sums waiting to be written back
  vec_queue #(.W(BEAT_W), .DEPTH(QDEPTH)) u_o (
    .clk, .rst_n,
    .wr_valid (alu_valid), .wr_ready (alu_ready), .wr_data (alu_data),
    .rd_valid (o_valid), .rd_ready (o_ready), .rd_data (o_data),
    .count    (o_count)
  );

endmodule
