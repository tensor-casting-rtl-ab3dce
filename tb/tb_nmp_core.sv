// tb_nmp_core: self-checking test of one NMP core with a DDR4 rank model.
// It runs the small worked example of an embedding layer's training step:
// batch 2, the first sample gathering rows 1, 2, 4 and the second rows 0, 2.
//
//  1. forward gather-reduce with pairs (src,dst) = (1,0)(2,0)(4,0)(0,1)(2,1):
//     R[0] = E[1]+E[2]+E[4], R[1] = E[0]+E[2];
//  2. the Tensor Casting reference model turns the same pairs into casted
//     src = 1,0,0,1,0 and dst = 0,1,2,2,3 (checked against those numbers);
//  3. casted gather-reduce over the gradient table G[0..1] gives coalesced
//     gradients C = G[1], G[0], G[0]+G[1], G[0];
//  4. scatter of C onto rows 0, 1, 2, 4 of E: E[u] += C[k] (the host has
//     already scaled the gradients by -lr).
// Each result is compared with values computed in the testbench: R and the
// updated E directly from the definition, and C by the baseline
// expand-coalesce (expand each gradient to its gathered rows, sort by row,
// accumulate). All data moves through the core's host port. The test also
// repeats the example with random sizes and row lengths.
module tb_nmp_core;
  import tcast_pkg::*;
  import tb_tcast_ref_pkg::*;

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

  localparam baddr_t E_B = 31'h000000, IDX_B = 31'h100000, R_B = 31'h200000,
                     G_B = 31'h300000, C_B = 31'h400000, CIDX_B = 31'h500000, SIDX_B = 31'h600000;

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
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

  task automatic run(opcode_e op, int rb, int n, baddr_t ib, baddr_t inb, baddr_t outb);
    instr_t i = '0;
    i.op = op; i.row_beats = VLEN_W'(rb); i.count = n;
    i.idx_base = ib; i.in_base = inb; i.out_base = outb;
    @(negedge clk);
    instr = i; instr_valid = 1;
    do @(posedge clk); while (!instr_ready);
    @(negedge clk);
    instr_valid = 0;
    check(busy, "busy while running");
    while (!done) @(posedge clk);
    @(negedge clk);
  endtask

  function automatic bit same(uarr_t a, string want);
    string got = "";
    foreach (a[k]) got = {got, (k == 0) ? "" : ",", $sformatf("%0d", a[k])};
    return got == want;
  endfunction

  task automatic write_pairs(baddr_t base, uarr_t s, uarr_t d);
    for (int k = 0; k * PAIRS_PER_BEAT < s.size(); k++)
      host_write(base + baddr_t'(k), pack_beat(s, d, k * PAIRS_PER_BEAT));
  endtask

  // one training step of the embedding layer, checked end to end
  task automatic step(uarr_t src, uarr_t dst, int n_rows, int batch, int rb, bit paper_example);
    beat_t E [][], G [][], Rexp [][], Cexp [][], Eexp [][];
    uarr_t csrc, cdst, uniq, seq;
    beat_t d;
    int n = src.size();
    E = new[n_rows]; Eexp = new[n_rows];
    G = new[batch]; Rexp = new[batch];
    for (int r = 0; r < n_rows; r++) begin
      E[r] = new[rb]; Eexp[r] = new[rb];
      for (int b = 0; b < rb; b++) begin
        E[r][b] = rand_beat(32'hffff);
        Eexp[r][b] = E[r][b];
        host_write(E_B + baddr_t'(r * rb + b), E[r][b]);
      end
    end
    // forward: reduce per sample
    for (int s = 0; s < batch; s++) begin
      Rexp[s] = new[rb];
      foreach (Rexp[s][b]) Rexp[s][b] = '0;
    end
    for (int k = 0; k < n; k++)
      for (int b = 0; b < rb; b++) Rexp[dst[k]][b] = lane_add(Rexp[dst[k]][b], E[src[k]][b]);
    write_pairs(IDX_B, src, dst);
    run(OP_GATHER_REDUCE, rb, n, IDX_B, E_B, R_B);
    for (int s = 0; s < batch; s++)
      for (int b = 0; b < rb; b++) begin
        host_read(R_B + baddr_t'(s * rb + b), d);
        check(d == Rexp[s][b], $sformatf("forward R[%0d] beat %0d", s, b));
      end

    // casting (GPU side, reference model)
    tensor_cast(src, dst, csrc, cdst, uniq);
    if (paper_example) begin
      check(same(csrc, "1,0,0,1,0"), "casted src = 1,0,0,1,0");
      check(same(cdst, "0,1,2,2,3"), "casted dst = 0,1,2,2,3");
      check(same(uniq, "0,1,2,4"), "rows to update = 0,1,2,4");
    end

    // backward: gradients from the DNN (already scaled by -lr)
    for (int s = 0; s < batch; s++) begin
      G[s] = new[rb];
      for (int b = 0; b < rb; b++) begin
        G[s][b] = rand_beat(32'hffff);
        host_write(G_B + baddr_t'(s * rb + b), G[s][b]);
      end
    end
    // baseline expand-coalesce: for each distinct row, in ascending order,
    // accumulate the gradients of every sample that gathered it
    Cexp = new[uniq.size()];
    begin
      int unsigned rows [$];
      for (int k = 0; k < n; k++) begin
        bit seen = 0;
        foreach (rows[j]) if (rows[j] == src[k]) seen = 1;
        if (!seen) rows.push_back(src[k]);
      end
      rows.sort();
      check(rows.size() == uniq.size(), "number of coalesced rows");
      foreach (rows[u]) begin
        Cexp[u] = new[rb];
        foreach (Cexp[u][b]) Cexp[u][b] = '0;
        for (int k = 0; k < n; k++)
          if (src[k] == rows[u])
            for (int b = 0; b < rb; b++) Cexp[u][b] = lane_add(Cexp[u][b], G[dst[k]][b]);
      end
    end
    write_pairs(CIDX_B, csrc, cdst);
    run(OP_GATHER_REDUCE, rb, n, CIDX_B, G_B, C_B);
    foreach (Cexp[u])
      for (int b = 0; b < rb; b++) begin
        host_read(C_B + baddr_t'(u * rb + b), d);
        check(d == Cexp[u][b], $sformatf("coalesced C[%0d] beat %0d", u, b));
      end

    // scatter: E[uniq[k]] += C[k]
    seq = new[uniq.size()];
    foreach (seq[k]) seq[k] = k;
    write_pairs(SIDX_B, seq, uniq);
    run(OP_SCATTER, rb, uniq.size(), SIDX_B, C_B, E_B);
    foreach (uniq[k])
      for (int b = 0; b < rb; b++) Eexp[uniq[k]][b] = lane_add(Eexp[uniq[k]][b], Cexp[k][b]);
    for (int r = 0; r < n_rows; r++)
      for (int b = 0; b < rb; b++) begin
        host_read(E_B + baddr_t'(r * rb + b), d);
        check(d == Eexp[r][b], $sformatf("updated E[%0d] beat %0d", r, b));
      end
  endtask

  initial begin
    instr_valid = 0; instr = '0;
    host_req_valid = 0; host_req_we = 0; host_req_addr = '0; host_req_wdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // the worked example, 64-dim rows (4 beats)
    step('{1, 2, 4, 0, 2}, '{0, 0, 0, 1, 1}, 6, 2, 4, 1'b1);
    // random steps
    for (int t = 0; t < 3; t++) begin
      int batch, per, rows, rb;
      uarr_t s, d;
      batch = $urandom_range(2, 6); per = $urandom_range(1, 5); rows = $urandom_range(4, 30);
      rb = $urandom_range(1, 6);
      s = new[batch * per]; d = new[batch * per];
      for (int k = 0; k < batch * per; k++) begin
        s[k] = $urandom_range(0, rows - 1);
        d[k] = k / per;
      end
      step(s, d, rows, batch, rb, 1'b0);
    end
    check(violations == 0, "DDR4 protocol violations");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
