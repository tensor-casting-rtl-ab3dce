// tb_nmp_memory_node_full: the end-to-end training step of
// tb_nmp_memory_node, with the memory node at its default size: 32 ranks,
// 8-deep queues, default DDR4 timing. All 32 ranks run the forward
// gather-reduce, the Tensor Casted gradient gather-reduce and the scatter
// concurrently. Every result is checked as in the reduced test. The queues
// are deep enough here that the input-queue credit stall need not occur, so
// that one mechanism is counted but not required.
module tb_nmp_memory_node_full;
  import tcast_pkg::*;
  import tb_tcast_ref_pkg::*;

  localparam int NR = 32;         // ranks simulated: the default node
  localparam bit FULL = 1'b1;     // full-size variant relaxes the credit-stall check
  // the paper's default 64-dim rows (4 beats)
  localparam int BATCH = 8, PER = 10, ROWS = 48, RB = 4;
  // row length per rank: in the reduced test the lower half of the ranks use
  // half-length rows, which fit the queues (gather-reduce runs accumulate on
  // chip), and the upper half use rows too long for that (read-modify-write)
  function automatic int rbof(int r);
    return (!FULL && r < NR / 2) ? RB / 2 : RB;
  endfunction

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic instr_valid, instr_ready, host_req_valid, host_req_ready, host_req_we;
  instr_t instr;
  logic [NR-1:0] busy, done, host_rsp_valid, phy_rd_valid;
  logic [RANK_ID_W-1:0] host_req_rank;
  baddr_t host_req_addr;
  beat_t host_req_wdata;
  beat_t host_rsp_data [NR];
  dram_cmd_t cmd [NR];
  beat_t phy_rd_data [NR];
  nmp_ev_t ev [NR];
  int viol [NR];

  nmp_memory_node dut (.*);

  for (genvar r = 0; r < NR; r++) begin : g_dram
    ddr4_rank_model u_dram (.clk, .rst_n, .cmd(cmd[r]), .rd_valid(phy_rd_valid[r]),
                            .rd_data(phy_rd_data[r]), .violations(viol[r]));
  end

  // arrays start in different DRAM banks (bank = beat address bits 10:7)
  localparam baddr_t E_B = 31'h000000, IDX_B = 31'h100100, R_B = 31'h200200,
                     G_B = 31'h300300, C_B = 31'h400400, CIDX_B = 31'h500500, SIDX_B = 31'h600600;

  int checks = 0, failures = 0;
  int n_conc = 0, n_act = 0, n_pre = 0, n_idx = 0, n_zero = 0, n_rmw = 0, n_chain = 0, n_stall = 0, n_host = 0;
  int n_done [NR];

  always @(posedge clk) if (rst_n) begin
    if ($countones(busy) > 1) n_conc++;
    for (int r = 0; r < NR; r++) begin
      n_act += ev[r].act; n_pre += ev[r].pre; n_idx += ev[r].idx_fetch; n_zero += ev[r].zero_init;
      n_rmw += ev[r].rmw; n_chain += ev[r].chain; n_stall += ev[r].credit_stall; n_host += ev[r].host_acc;
      n_done[r] += done[r];
    end
  end

  initial begin : watchdog
    repeat (4000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic host_write(int r, baddr_t a, beat_t d);
    @(negedge clk);
    host_req_valid = 1; host_req_we = 1; host_req_rank = RANK_ID_W'(r); host_req_addr = a; host_req_wdata = d;
    do @(posedge clk); while (!host_req_ready);
    @(negedge clk);
    host_req_valid = 0;
  endtask

  task automatic host_read(int r, baddr_t a, output beat_t d);
    @(negedge clk);
    host_req_valid = 1; host_req_we = 0; host_req_rank = RANK_ID_W'(r); host_req_addr = a;
    do @(posedge clk); while (!host_req_ready);
    @(negedge clk);
    host_req_valid = 0;
    while (!host_rsp_valid[r]) @(posedge clk);
    d = host_rsp_data[r];
  endtask

  task automatic issue(int r, opcode_e op, int n, baddr_t ib, baddr_t inb, baddr_t outb);
    instr_t i = '0;
    i.op = op; i.rank = RANK_ID_W'(r); i.row_beats = VLEN_W'(rbof(r)); i.count = n;
    i.idx_base = ib; i.in_base = inb; i.out_base = outb;
    @(negedge clk);
    instr = i; instr_valid = 1;
    do @(posedge clk); while (!instr_ready);
    @(negedge clk);
    instr_valid = 0;
  endtask

  // wait until every rank has finished `target` instructions
  task automatic wait_all(int target);
    bit all;
    do begin
      @(posedge clk);
      all = 1;
      for (int r = 0; r < NR; r++) if (n_done[r] < target) all = 0;
    end while (!all);
    @(negedge clk);
  endtask

  task automatic write_pairs(int r, baddr_t base, uarr_t s, uarr_t d);
    for (int k = 0; k * PAIRS_PER_BEAT < s.size(); k++)
      host_write(r, base + baddr_t'(k), pack_beat(s, d, k * PAIRS_PER_BEAT));
  endtask

  // per-rank state
  beat_t E [NR][ROWS][RB];
  beat_t G [NR][BATCH][RB];
  uarr_t src [NR], dst [NR], csrc [NR], cdst [NR], uniq [NR];

  initial begin
    beat_t d;
    int t0, t_fwd, t_bwd, t_sct;
    instr_valid = 0; instr = '0;
    host_req_valid = 0; host_req_we = 0; host_req_rank = '0; host_req_addr = '0; host_req_wdata = '0;
    for (int r = 0; r < NR; r++) n_done[r] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // load every rank through the host port
    for (int r = 0; r < NR; r++) begin
      src[r] = new[BATCH * PER]; dst[r] = new[BATCH * PER];
      for (int k = 0; k < BATCH * PER; k++) begin
        // skewed lookups: a few hot rows, so coalescing has work to do
        src[r][k] = ($urandom_range(0, 3) == 0) ? $urandom_range(0, 3) : $urandom_range(0, ROWS - 1);
        dst[r][k] = k / PER;
      end
      for (int e = 0; e < ROWS; e++)
        for (int b = 0; b < rbof(r); b++) begin
          E[r][e][b] = rand_beat(32'hffff);
          host_write(r, E_B + baddr_t'(e * rbof(r) + b), E[r][e][b]);
        end
      for (int s = 0; s < BATCH; s++)
        for (int b = 0; b < rbof(r); b++) begin
          G[r][s][b] = rand_beat(32'hffff);
          host_write(r, G_B + baddr_t'(s * rbof(r) + b), G[r][s][b]);
        end
      write_pairs(r, IDX_B, src[r], dst[r]);
      tensor_cast(src[r], dst[r], csrc[r], cdst[r], uniq[r]);
      write_pairs(r, CIDX_B, csrc[r], cdst[r]);
      begin
        uarr_t seq;
        seq = new[uniq[r].size()];
        foreach (seq[k]) seq[k] = k;
        write_pairs(r, SIDX_B, seq, uniq[r]);
      end
    end

    // forward, casted backward, scatter: each broadcast to all ranks
    t0 = int'($time / 10);
    for (int r = 0; r < NR; r++) issue(r, OP_GATHER_REDUCE, BATCH * PER, IDX_B, E_B, R_B);
    wait_all(1);
    t_fwd = int'($time / 10) - t0;
    for (int r = 0; r < NR; r++) issue(r, OP_GATHER_REDUCE, BATCH * PER, CIDX_B, G_B, C_B);
    wait_all(2);
    t_bwd = int'($time / 10) - t0 - t_fwd;
    for (int r = 0; r < NR; r++) issue(r, OP_SCATTER, uniq[r].size(), SIDX_B, C_B, E_B);
    wait_all(3);
    t_sct = int'($time / 10) - t0 - t_fwd - t_bwd;
    $display("cycles: forward %0d, casted gather-reduce %0d, scatter %0d", t_fwd, t_bwd, t_sct);

    for (int r = 0; r < NR; r++) begin
      beat_t R [BATCH][RB];
      beat_t C [RB];
      int u;
      // forward result
      for (int s = 0; s < BATCH; s++) for (int b = 0; b < rbof(r); b++) R[s][b] = '0;
      for (int k = 0; k < BATCH * PER; k++)
        for (int b = 0; b < rbof(r); b++) R[dst[r][k]][b] = lane_add(R[dst[r][k]][b], E[r][src[r][k]][b]);
      for (int s = 0; s < BATCH; s++)
        for (int b = 0; b < rbof(r); b++) begin
          host_read(r, R_B + baddr_t'(s * rbof(r) + b), d);
          check(d == R[s][b], $sformatf("rank %0d forward R[%0d]", r, s));
        end
      // coalesced gradients (expand-coalesce by definition) and updated rows
      u = 0;
      for (int e = 0; e < ROWS; e++) begin
        bit used;
        used = 0;
        for (int b = 0; b < rbof(r); b++) C[b] = '0;
        for (int k = 0; k < BATCH * PER; k++)
          if (src[r][k] == e) begin
            used = 1;
            for (int b = 0; b < rbof(r); b++) C[b] = lane_add(C[b], G[r][dst[r][k]][b]);
          end
        for (int b = 0; b < rbof(r); b++) begin
          if (used) begin
            host_read(r, C_B + baddr_t'(u * rbof(r) + b), d);
            check(d == C[b], $sformatf("rank %0d coalesced row for E[%0d]", r, e));
          end
          host_read(r, E_B + baddr_t'(e * rbof(r) + b), d);
          check(d == lane_add(E[r][e][b], C[b]), $sformatf("rank %0d updated E[%0d]", r, e));
        end
        if (used) u++;
      end
      check(u == uniq[r].size(), $sformatf("rank %0d number of coalesced rows", r));
      check(viol[r] == 0, $sformatf("rank %0d DDR4 protocol", r));
    end

    $display("events: concurrent=%0d act=%0d pre=%0d idx=%0d zero_init=%0d rmw=%0d chain=%0d credit_stall=%0d host=%0d",
             n_conc, n_act, n_pre, n_idx, n_zero, n_rmw, n_chain, n_stall, n_host);
    check(n_conc > 0, "ranks ran concurrently");
    check(n_act > 0, "row activates");
    check(FULL || n_pre > 0, "row-conflict precharges");
    check(n_idx > 0, "index fetches");
    check(n_zero > 0, "zero-initialised dst runs");
    check(n_rmw > 0, "read-modify-write pairs");
    check(n_chain > 0, "runs accumulated in the on-chip queues");
    check(FULL || n_stall > 0, "input-queue credit stalls");
    check(n_host > 0, "host accesses");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
