// nmp_memory_node: the disaggregated memory node that trains the embedding
// layers. It holds N_RANKS ranks, each with its own rank-level NMP core, and
// the embedding tables are interleaved across the ranks.
//
// The GPU sends one CISC instruction at a time on instr_*. Its rank field
// picks the core that runs it. Cores run independently, so instructions to
// different ranks overlap, and the aggregate bandwidth grows with the number
// of ranks. Host beat accesses (loading tables, index arrays and gradients,
// reading results) carry a rank number too and reach that rank's core
// directly. Each core's DRAM command bus and read-data return are brought
// out per rank, because the DDR PHYs and DRAM devices are not part of this
// RTL. busy and done are per-rank vectors.
//
// Timing: instr_ready follows the addressed core's ready, a core accepts
// when idle. Host responses come back on host_rsp_* with the rank they came
// from; responses from different ranks may return in the same cycle, one per
// rank.
//
// From the paper: one NMP core per rank, 32 ranks per node (25.6 GB/s each,
// 819.2 GB/s in aggregate) and tables interleaved across ranks. The
// instruction routing by a rank field is this design's own choice.
module nmp_memory_node
  import tcast_pkg::*;
#(
  parameter int unsigned N_RANKS = 32,
  parameter int unsigned QDEPTH  = 8
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      instr_valid,
  output logic                      instr_ready,
  input  instr_t                    instr,
  output logic [N_RANKS-1:0]        busy,
  output logic [N_RANKS-1:0]        done,
  input  logic                      host_req_valid,
  output logic                      host_req_ready,
  input  logic [RANK_ID_W-1:0]      host_req_rank,
  input  logic                      host_req_we,
  input  baddr_t                    host_req_addr,
  input  beat_t                     host_req_wdata,
  output logic [N_RANKS-1:0]        host_rsp_valid,
  output beat_t                     host_rsp_data [N_RANKS],
  output dram_cmd_t                 cmd           [N_RANKS],
  input  logic [N_RANKS-1:0]        phy_rd_valid,
  input  beat_t                     phy_rd_data   [N_RANKS],
  output nmp_ev_t                   ev            [N_RANKS]
);

  logic [N_RANKS-1:0] core_instr_ready, core_host_ready;

  for (genvar r = 0; r < N_RANKS; r++) begin : g_rank
    logic sel_i, sel_h;
    assign sel_i = (int'(instr.rank) == r);
    assign sel_h = (int'(host_req_rank) == r);

    nmp_core #(.QDEPTH(QDEPTH)) u_core (
      .clk, .rst_n,
      .instr_valid    (instr_valid && sel_i),
      .instr_ready    (core_instr_ready[r]),
      .instr          (instr),
      .busy           (busy[r]),
      .done           (done[r]),
      .host_req_valid (host_req_valid && sel_h),
      .host_req_ready (core_host_ready[r]),
      .host_req_we    (host_req_we),
      .host_req_addr  (host_req_addr),
      .host_req_wdata (host_req_wdata),
      .host_rsp_valid (host_rsp_valid[r]),
      .host_rsp_data  (host_rsp_data[r]),
      .cmd            (cmd[r]),
      .phy_rd_valid   (phy_rd_valid[r]),
      .phy_rd_data    (phy_rd_data[r]),
      .ev             (ev[r])
    );
  end

  // a rank number beyond N_RANKS addresses nothing and is never accepted
  always_comb begin
    instr_ready    = 1'b0;
    host_req_ready = 1'b0;
    for (int r = 0; r < N_RANKS; r++) begin
      if (int'(instr.rank) == r)    instr_ready    = core_instr_ready[r];
      if (int'(host_req_rank) == r) host_req_ready = core_host_ready[r];
    end
  end

endmodule
