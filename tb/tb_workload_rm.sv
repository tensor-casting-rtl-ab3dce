// tb_workload_rm: embedding tables of the recommendation models trained for
// one step on a single NMP core at its default size (8-deep queues,
// DDR4-3200 timing).
//
// RM1/RM2 gather 80 rows per table and sample, RM3/RM4 gather 20. The models
// differ otherwise only in the number of tables. The tables are spread over
// the ranks and each rank works on its own, so one core running one table is
// the unit of work. RM1 and RM3 run with 64-dim rows (4 beats) at batch
// 1024, the smallest batch evaluated for them. RM3 then runs again with
// 32-, 128- and 256-dim rows (2, 8 and 16 beats) at a reduced batch of 128.
// 256-dim rows are longer than the queues, so that case runs the
// read-modify-write mode. The table has 256 rows; its size is not given for
// these models. Lookups are skewed towards a few hot rows, so coalescing has
// work to do.
//
// For each case the test runs the forward gather-reduce, the Tensor Casted
// gradient gather-reduce and the scatter of the coalesced gradients into
// the table. It checks every result against values computed here, and it
// checks the exact DRAM traffic of each phase. With on-chip accumulation a
// gather-reduce reads each gathered row once, plus the index beats, and
// writes each output row once. In read-modify-write mode every pair but a
// run's first also reads out[dst], and every pair writes it. The test prints
// cycles and effective bandwidth at 1600 MHz and checks them against the
// rank's 25.6 GB/s peak. For rows of 4 or more beats that fit the queues,
// the forward gather-reduce, whose table stays in open DRAM pages, must
// reach 60% of the peak. The casted gather-reduce reads the gradient table
// in random order across several DRAM rows per bank and must reach 40%.
// 2-beat rows are limited by the per-pair sequencing overhead instead, so
// they get no bandwidth floor.
module tb_workload_rm;
  import tcast_pkg::*;
  import tb_tcast_ref_pkg::*;

  localparam int MAX_BATCH = 1024, ROWS = 256, MAX_RB = 16, QDEPTH = 8;
  localparam real PEAK_GBS = 25.6, CLK_GHZ = 1.6;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic instr_valid, instr_ready, busy, done;
  instr_t instr;
  logic host_req_valid, host_req_ready, host_req_we, host_rsp_valid;
  baddr_t host_req_addr;
  beat_t host_req_wdata, host_rsp_data;
  dram_cmd_t cmd;
  logic phy_rd_valid;
  beat_t phy_rd_data;
  nmp_ev_t ev;
  int violations;
  int checks = 0, failures = 0;

  nmp_core dut (.*);
  ddr4_rank_model u_dram (.clk, .rst_n, .cmd, .rd_valid(phy_rd_valid), .rd_data(phy_rd_data), .violations);

  // the table fills banks 0-7 of DRAM row 0; the other arrays start in bank 8
  localparam baddr_t E_B = 31'h000000, IDX_B = 31'h100400, R_B = 31'h200400,
                     G_B = 31'h300400, C_B = 31'h400400, CIDX_B = 31'h500400, SIDX_B = 31'h600400;

  initial begin : watchdog
    repeat (20000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_rd = 0, n_wr = 0, n_chain = 0;
  always @(posedge clk) if (rst_n) begin
    n_rd += ev.rd; n_wr += ev.wr; n_chain += ev.chain;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic host_write(baddr_t a, beat_t d);
    @(negedge clk);
    host_req_valid = 1; host_req_we = 1; host_req_addr = a; host_req_wdata = d;
    do @(posedge clk); while (!host_req_ready);
    @(negedge clk);
    host_req_valid = 0;
  endtask

  task automatic host_read(baddr_t a, output beat_t d);
    @(negedge clk);
    host_req_valid = 1; host_req_we = 0; host_req_addr = a;
    do @(posedge clk); while (!host_req_ready);
    @(negedge clk);
    host_req_valid = 0;
    while (!host_rsp_valid) @(posedge clk);
    d = host_rsp_data;
  endtask

  task automatic write_pairs(baddr_t base, uarr_t s, uarr_t d);
    for (int k = 0; k * PAIRS_PER_BEAT < s.size(); k++)
      host_write(base + baddr_t'(k), pack_beat(s, d, k * PAIRS_PER_BEAT));
  endtask

  // run one instruction; return its cycles and the beats it read and wrote
  task automatic run(opcode_e op, int n, int rb, baddr_t ib, baddr_t inb, baddr_t outb,
                     output int cyc, output int rd, output int wr);
    instr_t i;
    int t0, rd0, wr0;
    i = '0;
    i.op = op; i.row_beats = VLEN_W'(rb); i.count = n;
    i.idx_base = ib; i.in_base = inb; i.out_base = outb;
    @(negedge clk);
    t0 = int'($time / 10); rd0 = n_rd; wr0 = n_wr;
    instr = i; instr_valid = 1;
    do @(posedge clk); while (!instr_ready);
    @(negedge clk);
    instr_valid = 0;
    while (!done) @(posedge clk);
    @(negedge clk);
    cyc = int'($time / 10) - t0; rd = n_rd - rd0; wr = n_wr - wr0;
  endtask

  function automatic real gbs(int beats, int cyc);
    return real'(beats) * BEAT_BYTES * CLK_GHZ / real'(cyc);
  endfunction

  beat_t E [ROWS][MAX_RB];
  beat_t G [MAX_BATCH][MAX_RB];

  task automatic train_step(string name, int per, int batch, int rb);
    uarr_t src, dst, csrc, cdst, uniq, seq;
    beat_t d;
    beat_t acc [ROWS][MAX_RB];
    bit used [ROWS];
    bit onchip;
    int n, nidx, ncidx, nsidx, cyc, rd, wr;
    n = batch * per;
    onchip = rb <= QDEPTH;
    src = new[n]; dst = new[n];
    for (int k = 0; k < n; k++) begin
      src[k] = ($urandom_range(0, 3) == 0) ? $urandom_range(0, 7) : $urandom_range(0, ROWS - 1);
      dst[k] = k / per;
    end
    for (int e = 0; e < ROWS; e++)
      for (int b = 0; b < rb; b++) begin
        E[e][b] = rand_beat(32'hffff);
        host_write(E_B + baddr_t'(e * rb + b), E[e][b]);
      end
    for (int s = 0; s < batch; s++)
      for (int b = 0; b < rb; b++) begin
        G[s][b] = rand_beat(32'hffff);
        host_write(G_B + baddr_t'(s * rb + b), G[s][b]);
      end
    tensor_cast(src, dst, csrc, cdst, uniq);
    seq = new[uniq.size()];
    foreach (seq[k]) seq[k] = k;
    write_pairs(IDX_B, src, dst);
    write_pairs(CIDX_B, csrc, cdst);
    write_pairs(SIDX_B, seq, uniq);
    nidx  = (n + PAIRS_PER_BEAT - 1) / PAIRS_PER_BEAT;
    ncidx = nidx;
    nsidx = (uniq.size() + PAIRS_PER_BEAT - 1) / PAIRS_PER_BEAT;

    // forward: R[s] = sum of the sample's gathered rows
    run(OP_GATHER_REDUCE, n, rb, IDX_B, E_B, R_B, cyc, rd, wr);
    $display("%s forward gather-reduce: %0d pairs, %0d cycles, %0d beats read, %0d written, %.1f GB/s",
             name, n, cyc, rd, wr, gbs(rd + wr, cyc));
    if (onchip) begin
      check(rd == n * rb + nidx, $sformatf("%s forward reads each gathered row once", name));
      check(wr == batch * rb, $sformatf("%s forward writes each sample's sum once", name));
      if (rb >= 4)
        check(gbs(rd + wr, cyc) >= 0.6 * PEAK_GBS, $sformatf("%s forward reaches 60%% of the rank peak", name));
    end else begin
      // read-modify-write: every pair but a run's first also reads out[dst]
      check(rd == (2 * n - batch) * rb + nidx, $sformatf("%s forward read-modify-write reads", name));
      check(wr == n * rb, $sformatf("%s forward read-modify-write writes", name));
    end
    check(gbs(rd + wr, cyc) <= PEAK_GBS, $sformatf("%s forward within the rank peak", name));
    for (int s = 0; s < batch; s++) begin
      beat_t r [MAX_RB];
      for (int b = 0; b < rb; b++) r[b] = '0;
      for (int k = s * per; k < (s + 1) * per; k++)
        for (int b = 0; b < rb; b++) r[b] = lane_add(r[b], E[src[k]][b]);
      for (int b = 0; b < rb; b++) begin
        host_read(R_B + baddr_t'(s * rb + b), d);
        check(d == r[b], $sformatf("%s R[%0d] beat %0d", name, s, b));
      end
    end

    // backward: casted gather-reduce gives the coalesced gradients directly
    run(OP_GATHER_REDUCE, n, rb, CIDX_B, G_B, C_B, cyc, rd, wr);
    $display("%s casted gather-reduce: %0d pairs -> %0d rows, %0d cycles, %0d beats read, %0d written, %.1f GB/s",
             name, n, uniq.size(), cyc, rd, wr, gbs(rd + wr, cyc));
    if (onchip) begin
      check(rd == n * rb + ncidx, $sformatf("%s casted gather-reduce reads each gradient once", name));
      check(wr == uniq.size() * rb, $sformatf("%s casted gather-reduce writes each coalesced row once", name));
      if (rb >= 4)
        check(gbs(rd + wr, cyc) >= 0.4 * PEAK_GBS, $sformatf("%s casted gather-reduce reaches 40%% of the rank peak", name));
    end else begin
      check(rd == (2 * n - uniq.size()) * rb + ncidx, $sformatf("%s casted read-modify-write reads", name));
      check(wr == n * rb, $sformatf("%s casted read-modify-write writes", name));
    end
    check(gbs(rd + wr, cyc) <= PEAK_GBS, $sformatf("%s casted gather-reduce within the rank peak", name));
    // expand-coalesce by definition: every gathered row collects its gradients
    for (int e = 0; e < ROWS; e++) begin
      used[e] = 0;
      for (int b = 0; b < rb; b++) acc[e][b] = '0;
    end
    for (int k = 0; k < n; k++) begin
      used[src[k]] = 1;
      for (int b = 0; b < rb; b++) acc[src[k]][b] = lane_add(acc[src[k]][b], G[dst[k]][b]);
    end
    begin
      int u;
      u = 0;
      for (int e = 0; e < ROWS; e++)
        if (used[e]) begin
          for (int b = 0; b < rb; b++) begin
            host_read(C_B + baddr_t'(u * rb + b), d);
            check(d == acc[e][b], $sformatf("%s coalesced gradient of row %0d", name, e));
          end
          u++;
        end
      check(u == uniq.size(), $sformatf("%s number of coalesced rows", name));
    end

    // scatter: E[uniq[u]] += C[u]
    run(OP_SCATTER, uniq.size(), rb, SIDX_B, C_B, E_B, cyc, rd, wr);
    $display("%s scatter: %0d rows, %0d cycles, %0d beats read, %0d written, %.1f GB/s",
             name, uniq.size(), cyc, rd, wr, gbs(rd + wr, cyc));
    check(rd == 2 * uniq.size() * rb + nsidx, $sformatf("%s scatter reads gradient and row", name));
    check(wr == uniq.size() * rb, $sformatf("%s scatter writes each row once", name));
    for (int e = 0; e < ROWS; e++)
      for (int b = 0; b < rb; b++) begin
        host_read(E_B + baddr_t'(e * rb + b), d);
        check(d == lane_add(E[e][b], acc[e][b]), $sformatf("%s updated E[%0d]", name, e));
      end
    $display("%s traffic: expand-coalesce would move %0d expanded gradient rows, casting moves none",
             name, n);
  endtask

  initial begin
    instr_valid = 0; instr = '0;
    host_req_valid = 0; host_req_we = 0; host_req_addr = '0; host_req_wdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // Table II models at the smallest evaluated batch, 64-dim rows
    train_step("RM1", 80, 1024, 4);
    train_step("RM3", 20, 1024, 4);
    // embedding-size sweep (32, 128, 256 dims) at a reduced batch of 128
    train_step("RM3 32-dim", 20, 128, 2);
    train_step("RM3 128-dim", 20, 128, 8);
    train_step("RM3 256-dim", 20, 128, 16);
    check(n_chain > 0, "runs accumulated in the on-chip queues");
    check(violations == 0, "DDR4 protocol");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
