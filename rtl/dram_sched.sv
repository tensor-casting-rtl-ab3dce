// dram_sched: back end of the local memory controller. Turns 64-byte beat
// requests into DDR4 commands (ACT, RD, WR, PRE) for one rank.
//
// Requests are served strictly in order, one command per cycle at most. The
// head request's address is split into bank, row and column. If its row is
// open in that bank, the column command (RD or WR) issues. If another row is
// open, the bank is precharged. If the bank is closed, the row is activated.
// The page policy is open-page: rows stay open until a conflict. Per-bank
// down-counters enforce tRCD, tRP, tRAS and the RD/WR-to-PRE gaps. Shared
// counters enforce tCCD between column commands and the write-to-read
// turnaround. Write data travels with the WR command; the DDR PHY applies
// the write latency.
//
// Read data comes back from the PHY in command order. Each issued RD pushes
// its request tag into a FIFO, and each returned beat pops the tag and is
// forwarded on rsp_* with it. The requester must have room for every read it
// has in flight; rsp_* has no back-pressure.
//
// Timing: the defaults are DDR4-3200AA values in 1600 MHz controller clocks.
// At that clock, a RD every tCCD = 4 cycles moves 64 B per 4 cycles. That is
// 25.6 GB/s, the paper's per-rank bandwidth. The paper asks for a memory
// controller that issues low-level DRAM commands. Everything else here is
// this design's own choice: the command set, the in-order scheduling, the
// open-page policy and the timing values. Refresh is not generated, since the
// paper does not mention it.
module dram_sched
  import tcast_pkg::*;
#(
  parameter int unsigned T_RCD    = 22,
  parameter int unsigned T_RP     = 22,
  parameter int unsigned T_RAS    = 52,
  parameter int unsigned T_CCD    = 4,
  parameter int unsigned T_RTP    = 12,
  parameter int unsigned T_WR2PRE = 44,   // CWL + BL/2 + tWR
  parameter int unsigned T_WR2RD  = 32,   // CWL + BL/2 + tWTR_L
  parameter int unsigned TAG_DEPTH = 32
) (
  input  logic      clk,
  input  logic      rst_n,
  // beat requests
  input  logic      req_valid,
  output logic      req_ready,
  input  mem_req_t  req,
  // read responses, in order
  output logic      rsp_valid,
  output rtag_e     rsp_tag,
  output beat_t     rsp_data,
  // DDR PHY side
  output dram_cmd_t cmd,
  input  logic      phy_rd_valid,
  input  beat_t     phy_rd_data,
  // events
  output logic      ev_act,
  output logic      ev_pre
);

  localparam int unsigned CW = 8;
  typedef logic [CW-1:0] cnt_t;

  logic [NBANKS-1:0] open_q;
  row_t              orow_q [NBANKS];
  cnt_t              rcd_q  [NBANKS];
  cnt_t              rp_q   [NBANKS];
  cnt_t              ras_q  [NBANKS];
  cnt_t              pre_q  [NBANKS];   // earliest PRE after RD/WR
  cnt_t              ccd_q, wr2rd_q;

  bank_t b;
  row_t  r;
  logic  hit, tag_full;
  logic  do_act, do_pre, do_col;
  logic  [$clog2(TAG_DEPTH+1)-1:0] tag_count;
  logic  [1:0] tag_head;

  assign b   = addr_bank(req.addr);
  assign r   = addr_row(req.addr);
  assign hit = open_q[b] && (orow_q[b] == r);
  assign tag_full = (tag_count == TAG_DEPTH[$clog2(TAG_DEPTH+1)-1:0]);

  always_comb begin
    do_act = 1'b0;
    do_pre = 1'b0;
    do_col = 1'b0;
    if (req_valid) begin
      if (hit) begin
        do_col = (rcd_q[b] == 0) && (ccd_q == 0) &&
                 (req.we ? 1'b1 : (wr2rd_q == 0 && !tag_full));
      end else if (open_q[b]) begin
        do_pre = (ras_q[b] == 0) && (pre_q[b] == 0);
      end else begin
        do_act = (rp_q[b] == 0);
      end
    end
  end

  assign req_ready = do_col;
  assign ev_act    = do_act;
  assign ev_pre    = do_pre;

  always_comb begin
    cmd       = '0;
    cmd.cmd   = CMD_NOP;
    cmd.bank  = b;
    cmd.row   = r;
    cmd.col   = addr_col(req.addr);
    if (do_act) cmd.cmd = CMD_ACT;
    if (do_pre) cmd.cmd = CMD_PRE;
    if (do_col) begin
      cmd.cmd   = req.we ? CMD_WR : CMD_RD;
      cmd.wdata = req.wdata;
    end
  end

  function automatic cnt_t dec(cnt_t c);
    return (c == 0) ? c : c - 1'b1;
  endfunction

  // a counter loaded with T at a command reaches 0 T cycles later
  function automatic cnt_t ld(int unsigned t);
    return (t == 0) ? cnt_t'(0) : cnt_t'(t - 1);
  endfunction

  function automatic cnt_t maxc(cnt_t a, cnt_t c);
    return (a > c) ? a : c;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      open_q  <= '0;
      ccd_q   <= '0;
      wr2rd_q <= '0;
      for (int i = 0; i < NBANKS; i++) begin
        orow_q[i] <= '0;
        rcd_q[i]  <= '0;
        rp_q[i]   <= '0;
        ras_q[i]  <= '0;
        pre_q[i]  <= '0;
      end
    end else begin
      ccd_q   <= dec(ccd_q);
      wr2rd_q <= dec(wr2rd_q);
      for (int i = 0; i < NBANKS; i++) begin
        rcd_q[i] <= dec(rcd_q[i]);
        rp_q[i]  <= dec(rp_q[i]);
        ras_q[i] <= dec(ras_q[i]);
        pre_q[i] <= dec(pre_q[i]);
      end
      if (do_act) begin
        open_q[b] <= 1'b1;
        orow_q[b] <= r;
        rcd_q[b]  <= ld(T_RCD);
        ras_q[b]  <= ld(T_RAS);
      end
      if (do_pre) begin
        open_q[b] <= 1'b0;
        rp_q[b]   <= ld(T_RP);
      end
      if (do_col) begin
        ccd_q <= ld(T_CCD);
        if (req.we) begin
          wr2rd_q  <= ld(T_WR2RD);
          pre_q[b] <= maxc(dec(pre_q[b]), ld(T_WR2PRE));
        end else begin
          pre_q[b] <= maxc(dec(pre_q[b]), ld(T_RTP));
        end
      end
    end
  end

  // tags of reads in flight
  vec_queue #(.W(2), .DEPTH(TAG_DEPTH)) u_tags (
    .clk      (clk),
    .rst_n    (rst_n),
    .wr_valid (do_col && !req.we),
    .wr_ready (),
    .wr_data  (req.tag),
    .rd_valid (),
    .rd_ready (phy_rd_valid),
    .rd_data  (tag_head),
    .count    (tag_count)
  );

  assign rsp_valid = phy_rd_valid;
  assign rsp_tag   = rtag_e'(tag_head);
  assign rsp_data  = phy_rd_data;

  always_ff @(posedge clk) begin
    if (rst_n) begin
      assert (!(phy_rd_valid && tag_count == 0))
        else $error("dram_sched: read data with no read in flight");
    end
  end

endmodule
