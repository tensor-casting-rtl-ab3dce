// local_mem_ctrl: the NMP core's local memory controller. It executes one
// tensor gather-reduce or tensor scatter CISC instruction at a time. It turns
// the instruction into 64-byte DRAM reads and writes, which the dram_sched
// back end turns into DDR4 commands.
//
// Both instructions walk a packed array of (src, dst) index pairs, 8 pairs
// per 64-byte beat. The controller has two halves that run side by side:
//  * the walker fetches index beats into a one-beat buffer, takes the pairs
//    in order and reads the row_beats beats of in[src] into Input Q (I1). It
//    runs up to 4 pairs ahead of the sequencer (pair FIFO u_pq), so the DRAM
//    read latency of one pair overlaps the work on earlier pairs;
//  * the pair sequencer handles one pair at a time. It reads out[dst] into
//    Input Q (I2), lets the vector ALU take exactly this pair's beats from
//    I1 (alu_en), and writes each sum beat from Output Q (O) to out[dst]. A
//    gather-reduce skips the out[dst] read on the first pair of a dst run,
//    and the ALU then adds zero (zero_b).
// A gather-reduce therefore computes out[dst] = sum of in[src] over all pairs
// of one dst run. A run is a block of consecutive pairs with the same dst.
// This is the fused gather-reduce of the forward pass, and with Tensor
// Casted indices it is also the coalescing of gradients. A scatter always
// reads the destination (read-modify-write), so out[dst] += in[src]. It
// applies the coalesced, pre-scaled gradients to the embedding table
// (plain SGD). The two instructions share the whole datapath.
//
// On-chip accumulation: when a gather-reduce's rows fit the queues
// (row_beats <= QDEPTH), sums are not written per pair. A pair ends once all
// its sum beats sit in O. If the next pair continues the run, O is moved
// into I2 (state S_MOVE) in place of the out[dst] read, so the partial sum
// never leaves the core. If the next pair starts a new run, or the
// instruction ends, O is written to out[dst] (state S_FLUSH). Each dst row
// is then written once per run and never read. Scatter, and gather-reduce
// rows longer than the queues, use read-modify-write per pair; the
// sequencer then streams the row through I2 and O beat by beat, so rows of
// any length pass through queues of fixed depth.
//
// Reads into I1 and I2 are only issued while the queue has a free slot,
// counting the reads still in flight (credit check). Requests are granted in
// the order sum write, out[dst] read, index fetch, in[src] read. All writes
// of a pair are issued before the next pair's out[dst] read, and the
// back end is in order, so a repeated dst sees the data just written.
//
// Interface and timing: an instruction is accepted (instr_valid and
// instr_ready) only while idle; busy stays high until the one-cycle done
// pulse after the last write. The queue side pushes returned read data into
// I1/I2 and pops O; the queue counts feed the credit check. One DRAM command
// leaves per cycle at most; read data returns in command order.
//
// Host port: while no instruction runs, the host (the GPU side of the memory
// node) can read and write any beat of the rank. The host uses this port to
// load tables, index arrays and gradients, and to fetch results.
//
// Requirements on the software: a gather-reduce's index array must have
// equal dst values in consecutive pairs. The forward-pass arrays (dst is the
// batch sample) and Tensor Casted arrays (dst is nondecreasing) both do. The
// out array must overlap neither the in array nor the index array, since
// reads of both run ahead of the writes.
//
// From the paper: the CISC instruction sent by the GPU, and the controller
// that translates gather-reduce and scatter into DRAM commands. Also from the
// paper: 64-byte access granularity, scatter on the same datapath as gather,
// and Algorithm 3's out[dst] += grad[src]. This design's own choices: the
// instruction fields, the index packing, the walker and pair sequencer, zero
// initialisation of a new dst run and the host port. The paper says the
// local buffers carry out reductions on the fly; the O-to-I2 move that does
// it here, and the read-modify-write fallback, are this design's own.
module local_mem_ctrl
  import tcast_pkg::*;
#(
  parameter int unsigned QDEPTH = 8,
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
  // instruction
  input  logic      instr_valid,
  output logic      instr_ready,
  input  instr_t    instr,
  output logic      busy,
  output logic      done,
  // host access (only while idle)
  input  logic      host_req_valid,
  output logic      host_req_ready,
  input  logic      host_req_we,
  input  baddr_t    host_req_addr,
  input  beat_t     host_req_wdata,
  output logic      host_rsp_valid,
  output beat_t     host_rsp_data,
  // Input Q (I1), Input Q (I2): push side and occupancy
  output logic      i1_push,
  output logic      i2_push,
  output beat_t     q_push_data,
  output beat_t     i2_push_data,
  input  logic [$clog2(QDEPTH+1)-1:0] i1_count,
  input  logic [$clog2(QDEPTH+1)-1:0] i2_count,
  // Output Q (O): pop side
  input  logic [$clog2(QDEPTH+1)-1:0] o_count,
  input  logic      o_valid,
  output logic      o_ready,
  input  beat_t     o_data,
  // vector ALU: operand select and gate for the current pair; I1 pops
  output logic      zero_b,
  output logic      alu_en,
  input  logic      alu_take,
  // DDR PHY
  output dram_cmd_t cmd,
  input  logic      phy_rd_valid,
  input  beat_t     phy_rd_data,
  // events
  output nmp_ev_t   ev
);

  typedef enum logic [2:0] {S_IDLE, S_PAIR, S_XFER, S_MOVE, S_FLUSH, S_DONE} state_e;
  localparam int unsigned CRW = $clog2(QDEPTH+1) + 1;
  localparam int unsigned PDEPTH = 4;   // pairs the walker may run ahead

  // a pair handed from the walker to the pair sequencer
  typedef struct packed {
    baddr_t out_row;
    logic   zero;       // first pair of a gather-reduce dst run
  } pinfo_t;

  state_e             state_q;
  instr_t             ins_q;
  logic               acc_q;            // accumulate dst runs in the queues
  // walker: index fetch and in[src] reads into I1
  logic [COUNT_W-1:0] pairs_taken_q;
  baddr_t             idx_ptr_q;
  beat_t              idx_beat_q;
  logic               idx_valid_q, idx_inflight_q;
  logic [$clog2(PAIRS_PER_BEAT)-1:0] idx_pos_q;
  id_t                prev_dst_q;
  logic               w_busy_q;         // in[src] of the last taken pair still being read
  baddr_t             in_row_q;
  logic [VLEN_W-1:0]  rin_q;
  logic [CRW-1:0]     i1_fly_q, i2_fly_q;
  // pair sequencer: out[dst] reads into I2, sums from O
  logic [COUNT_W-1:0] pairs_done_q;
  logic [VLEN_W-1:0]  rout_q, wr_q, alu_q;  // beats read into I2, written or moved, added
  logic               held_q;           // O holds the finished sum of the current run
  baddr_t             held_row_q;       // where that sum belongs
  logic               end_after_flush_q;

  // back-end request mux
  logic     seq_req_valid, be_req_valid, be_req_ready;
  mem_req_t seq_req, be_req;
  logic     rsp_valid;
  rtag_e    rsp_tag;
  beat_t    rsp_data;
  logic     host_sel;

  logic running;
  assign running = (state_q != S_IDLE) && (state_q != S_DONE);

  // next pair in the index buffer
  id_t    pair_src, pair_dst;
  logic [ID_W+VLEN_W-1:0] src_off, dst_off;
  assign pair_src = idx_beat_q[idx_pos_q*2*ID_W +: ID_W];
  assign pair_dst = idx_beat_q[idx_pos_q*2*ID_W + ID_W +: ID_W];
  assign src_off  = pair_src * ins_q.row_beats;
  assign dst_off  = pair_dst * ins_q.row_beats;

  // pair FIFO between walker and sequencer
  logic   pq_push, pq_ready, pq_valid, pq_pop;
  pinfo_t pq_in, pq_head;
  assign pq_in.out_row = ins_q.out_base + baddr_t'(dst_off);
  assign pq_in.zero    = (ins_q.op == OP_GATHER_REDUCE) &&
                         (pairs_taken_q == 0 || pair_dst != prev_dst_q);
  assign pq_push = running && idx_valid_q && !w_busy_q && pq_ready &&
                   (pairs_taken_q != ins_q.count);
  vec_queue #(.W($bits(pinfo_t)), .DEPTH(PDEPTH)) u_pq (
    .clk, .rst_n,
    .wr_valid (pq_push), .wr_ready (pq_ready), .wr_data (pq_in),
    .rd_valid (pq_valid), .rd_ready (pq_pop), .rd_data (pq_head),
    .count    ()
  );

  logic i1_room, i2_room, want_wr, want_rout, want_idx, want_rin;
  assign i1_room   = (CRW'(i1_count) + i1_fly_q) < CRW'(QDEPTH);
  assign i2_room   = (CRW'(i2_count) + i2_fly_q) < CRW'(QDEPTH);

  // request priority: sum writes, out[dst] reads, index fetch, in[src] reads
  assign want_wr   = ((state_q == S_XFER && !acc_q) || state_q == S_FLUSH) && o_valid &&
                     (wr_q != ins_q.row_beats);
  assign want_rout = (state_q == S_XFER) && !acc_q && !pq_head.zero &&
                     (rout_q != ins_q.row_beats) && i2_room;
  assign want_idx  = running && (pairs_taken_q != ins_q.count) && !idx_valid_q && !idx_inflight_q;
  assign want_rin  = running && w_busy_q && i1_room;

  always_comb begin
    seq_req_valid = 1'b0;
    seq_req       = '0;
    seq_req.tag   = TAG_I1;
    if (want_wr) begin
      seq_req_valid = 1'b1;
      seq_req.we    = 1'b1;
      seq_req.addr  = ((state_q == S_FLUSH) ? held_row_q : pq_head.out_row) + baddr_t'(wr_q);
      seq_req.wdata = o_data;
    end else if (want_rout) begin
      seq_req_valid = 1'b1;
      seq_req.addr  = pq_head.out_row + baddr_t'(rout_q);
      seq_req.tag   = TAG_I2;
    end else if (want_idx) begin
      seq_req_valid = 1'b1;
      seq_req.addr  = ins_q.idx_base + idx_ptr_q;
      seq_req.tag   = TAG_IDX;
    end else if (want_rin) begin
      seq_req_valid = 1'b1;
      seq_req.addr  = in_row_q + baddr_t'(rin_q);
      seq_req.tag   = TAG_I1;
    end
  end

  assign host_sel = (state_q == S_IDLE) && !instr_valid;
  always_comb begin
    if (host_sel) begin
      be_req_valid = host_req_valid;
      be_req.we    = host_req_we;
      be_req.addr  = host_req_addr;
      be_req.tag   = TAG_HOST;
      be_req.wdata = host_req_wdata;
    end else begin
      be_req_valid = seq_req_valid;
      be_req       = seq_req;
    end
  end
  assign host_req_ready = host_sel && be_req_ready;

  logic seq_fire, wr_fire;
  assign seq_fire = !host_sel && seq_req_valid && be_req_ready;
  assign wr_fire  = seq_fire && seq_req.we;

  assign instr_ready = (state_q == S_IDLE);
  assign busy        = (state_q != S_IDLE);
  assign done        = (state_q == S_DONE);
  assign o_ready     = wr_fire || (state_q == S_MOVE);
  // the ALU may take only the current pair's beats from I1
  assign alu_en      = (state_q == S_XFER) && (alu_q != ins_q.row_beats);
  assign zero_b      = pq_head.zero;

  // read returns
  assign q_push_data    = rsp_data;
  assign i1_push        = rsp_valid && rsp_tag == TAG_I1;
  // I2 is filled from DRAM (read-modify-write) or from O (a run's partial sum)
  assign i2_push        = (rsp_valid && rsp_tag == TAG_I2) || (state_q == S_MOVE && o_valid);
  assign i2_push_data   = (state_q == S_MOVE) ? o_data : rsp_data;
  assign host_rsp_valid = rsp_valid && rsp_tag == TAG_HOST;
  assign host_rsp_data  = rsp_data;

  logic pair_end;   // the current pair's last sum beat is written, or all sit in O
  assign pair_end = (state_q == S_XFER) &&
                    (acc_q ? (alu_q == ins_q.row_beats &&
                              o_count == ($clog2(QDEPTH+1))'(ins_q.row_beats))
                           : (wr_fire && wr_q == ins_q.row_beats - 1'b1));
  assign pq_pop = pair_end;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q        <= S_IDLE;
      ins_q          <= '0;
      acc_q          <= 1'b0;
      pairs_taken_q  <= '0;
      idx_ptr_q      <= '0;
      idx_beat_q     <= '0;
      idx_valid_q    <= 1'b0;
      idx_inflight_q <= 1'b0;
      idx_pos_q      <= '0;
      prev_dst_q     <= '0;
      w_busy_q       <= 1'b0;
      in_row_q       <= '0;
      rin_q          <= '0;
      i1_fly_q       <= '0;
      i2_fly_q       <= '0;
      pairs_done_q   <= '0;
      rout_q         <= '0;
      wr_q           <= '0;
      alu_q          <= '0;
      held_q         <= 1'b0;
      held_row_q     <= '0;
      end_after_flush_q <= 1'b0;
    end else begin
      // credits for reads in flight
      i1_fly_q <= i1_fly_q + CRW'(seq_fire && seq_req.tag == TAG_I1 && !seq_req.we)
                           - CRW'(i1_push);
      i2_fly_q <= i2_fly_q + CRW'(seq_fire && seq_req.tag == TAG_I2 && !seq_req.we)
                           - CRW'(rsp_valid && rsp_tag == TAG_I2);

      // ---- walker ----
      if (rsp_valid && rsp_tag == TAG_IDX) begin
        idx_beat_q     <= rsp_data;
        idx_valid_q    <= 1'b1;
        idx_inflight_q <= 1'b0;
        idx_pos_q      <= '0;
      end
      if (seq_fire && seq_req.tag == TAG_IDX) begin
        idx_inflight_q <= 1'b1;
        idx_ptr_q      <= idx_ptr_q + 1'b1;
      end
      if (pq_push) begin
        in_row_q      <= ins_q.in_base + baddr_t'(src_off);
        rin_q         <= '0;
        w_busy_q      <= 1'b1;
        prev_dst_q    <= pair_dst;
        pairs_taken_q <= pairs_taken_q + 1'b1;
        idx_pos_q     <= idx_pos_q + 1'b1;
        if (idx_pos_q == $clog2(PAIRS_PER_BEAT)'(PAIRS_PER_BEAT - 1))
          idx_valid_q <= 1'b0;
      end
      if (seq_fire && seq_req.tag == TAG_I1 && !seq_req.we) begin
        rin_q <= rin_q + 1'b1;
        if (rin_q == ins_q.row_beats - 1'b1) w_busy_q <= 1'b0;
      end

      // ---- pair sequencer ----
      if (alu_take) alu_q <= alu_q + 1'b1;
      if (seq_fire && seq_req.tag == TAG_I2 && !seq_req.we) rout_q <= rout_q + 1'b1;
      if (wr_fire) wr_q <= wr_q + 1'b1;

      case (state_q)
        S_IDLE: begin
          if (instr_valid) begin
            ins_q          <= instr;
            pairs_done_q   <= '0;
            pairs_taken_q  <= '0;
            idx_ptr_q      <= '0;
            idx_valid_q    <= 1'b0;
            w_busy_q       <= 1'b0;
            held_q         <= 1'b0;
            acc_q          <= (instr.op == OP_GATHER_REDUCE) &&
                              (int'(instr.row_beats) <= QDEPTH);
            state_q        <= (instr.op == OP_NOP || instr.count == 0 || instr.row_beats == 0)
                              ? S_DONE : S_PAIR;
          end
        end
        S_PAIR: begin
          rout_q <= '0;
          wr_q   <= '0;
          alu_q  <= '0;
          if (pairs_done_q == ins_q.count) begin
            end_after_flush_q <= 1'b1;
            state_q           <= held_q ? S_FLUSH : S_DONE;
          end else if (pq_valid) begin
            if (!held_q) begin
              state_q <= S_XFER;
            end else if (!pq_head.zero) begin
              state_q <= S_MOVE;            // run continues: sum goes back in as b
            end else begin
              end_after_flush_q <= 1'b0;    // run ended: write its sum first
              state_q           <= S_FLUSH;
            end
          end
        end
        S_MOVE: begin
          if (o_valid) begin
            wr_q <= wr_q + 1'b1;
            if (wr_q == ins_q.row_beats - 1'b1) begin
              wr_q    <= '0;
              held_q  <= 1'b0;
              state_q <= S_XFER;
            end
          end
        end
        S_FLUSH: begin
          if (wr_fire && wr_q == ins_q.row_beats - 1'b1) begin
            wr_q    <= '0;
            held_q  <= 1'b0;
            state_q <= end_after_flush_q ? S_DONE : S_XFER;
          end
        end
        S_XFER: begin
          if (pair_end) begin
            if (acc_q) begin
              // every sum beat of this pair sits in O
              held_q     <= 1'b1;
              held_row_q <= pq_head.out_row;
            end
            pairs_done_q <= pairs_done_q + 1'b1;
            state_q      <= S_PAIR;
          end
        end
        S_DONE: state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  dram_sched #(
    .T_RCD(T_RCD), .T_RP(T_RP), .T_RAS(T_RAS), .T_CCD(T_CCD),
    .T_RTP(T_RTP), .T_WR2PRE(T_WR2PRE), .T_WR2RD(T_WR2RD)
  ) u_sched (
    .clk          (clk),
    .rst_n        (rst_n),
    .req_valid    (be_req_valid),
    .req_ready    (be_req_ready),
    .req          (be_req),
    .rsp_valid    (rsp_valid),
    .rsp_tag      (rsp_tag),
    .rsp_data     (rsp_data),
    .cmd          (cmd),
    .phy_rd_valid (phy_rd_valid),
    .phy_rd_data  (phy_rd_data),
    .ev_act       (ev.act),
    .ev_pre       (ev.pre)
  );

  assign ev.rd           = (cmd.cmd == CMD_RD);
  assign ev.wr           = (cmd.cmd == CMD_WR);
  assign ev.idx_fetch    = seq_fire && seq_req.tag == TAG_IDX;
  assign ev.zero_init    = pq_push && pq_in.zero;
  assign ev.rmw          = pq_push && !pq_in.zero && !acc_q;
  assign ev.chain        = (state_q == S_MOVE) && (wr_q == 0) && o_valid;
  assign ev.credit_stall = running && ((want_rin == 1'b0 && w_busy_q && !i1_room) ||
                           (state_q == S_XFER && !acc_q && !pq_head.zero &&
                            rout_q != ins_q.row_beats && !i2_room));
  assign ev.host_acc     = host_req_valid && host_req_ready;

  // the credit check must keep every returned beat within its queue
  always_ff @(posedge clk) begin
    if (rst_n) begin
      assert (!(i1_push && int'(i1_count) >= int'(QDEPTH))) else $error("local_mem_ctrl: I1 overflow");
      assert (!(i2_push && int'(i2_count) >= int'(QDEPTH))) else $error("local_mem_ctrl: I2 overflow");
    end
  end

endmodule
