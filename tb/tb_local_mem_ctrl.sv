// tb_local_mem_ctrl: self-checking test of the local memory controller and
// its DDR4 command back end. The controller is connected to FIFOs standing in
// for I1, I2 and O, to a lane-wise adder written in the testbench, and to a
// protocol-checking DDR4 rank model.
//
// Checks:
//  * host streaming reads within one DRAM row issue a RD every tCCD = 4
//    cycles, i.e. 64 B per 4 cycles = 25.6 GB/s at 1600 MHz;
//  * host writes and reads return the right data;
//  * a random gather-reduce (dst grouped in runs) and a random scatter give
//    the lane-wise sums computed here;
//  * a row longer than the input queues streams through them (credit stall);
//  * no DDR4 protocol violation, and row activates, row-conflict precharges,
//    zero-initialised runs and read-modify-write pairs all occur.
module tb_local_mem_ctrl;
  import tcast_pkg::*;
  import tb_tcast_ref_pkg::*;

  localparam int QD = 4;   // shallower than the default so the credit stall occurs
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic instr_valid, instr_ready, busy, done;
  instr_t instr;
  logic host_req_valid, host_req_ready, host_req_we, host_rsp_valid;
  baddr_t host_req_addr;
  beat_t host_req_wdata, host_rsp_data;
  logic i1_push, i2_push, o_valid, o_ready, zero_b, alu_en, alu_take;
  beat_t q_push_data, i2_push_data, o_data;
  logic [$clog2(QD+1)-1:0] i1_count, i2_count, o_count;
  dram_cmd_t cmd;
  logic phy_rd_valid;
  beat_t phy_rd_data;
  nmp_ev_t ev;
  int violations;

  int checks = 0, failures = 0;
  int n_act = 0, n_pre = 0, n_zero = 0, n_rmw = 0, n_stall = 0, n_idx = 0, n_chain = 0;

  local_mem_ctrl #(.QDEPTH(QD)) dut (.*);
  ddr4_rank_model u_dram (.clk, .rst_n, .cmd, .rd_valid(phy_rd_valid), .rd_data(phy_rd_data), .violations);

  // stand-ins for I1, I2, O and the adder
  logic i1_v, i2_v, add_fire;
  beat_t i1_d, i2_d;
  vec_queue #(.W(BEAT_W), .DEPTH(QD)) q1 (.clk, .rst_n, .wr_valid(i1_push), .wr_ready(), .wr_data(q_push_data),
    .rd_valid(i1_v), .rd_ready(add_fire), .rd_data(i1_d), .count(i1_count));
  vec_queue #(.W(BEAT_W), .DEPTH(QD)) q2 (.clk, .rst_n, .wr_valid(i2_push), .wr_ready(), .wr_data(i2_push_data),
    .rd_valid(i2_v), .rd_ready(add_fire && !zero_b), .rd_data(i2_d), .count(i2_count));
  logic o_wr_ready;
  assign add_fire = i1_v && alu_en && (zero_b || i2_v) && o_wr_ready;
  assign alu_take = add_fire;
  vec_queue #(.W(BEAT_W), .DEPTH(QD)) qo (.clk, .rst_n, .wr_valid(add_fire), .wr_ready(o_wr_ready),
    .wr_data(zero_b ? i1_d : lane_add(i1_d, i2_d)), .rd_valid(o_valid), .rd_ready(o_ready), .rd_data(o_data), .count(o_count));

  always @(posedge clk) if (rst_n) begin
    n_act += ev.act; n_pre += ev.pre; n_zero += ev.zero_init; n_rmw += ev.rmw; n_chain += ev.chain;
    n_stall += ev.credit_stall; n_idx += ev.idx_fetch;
  end

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(instr_t i);
    @(negedge clk);
    instr = i; instr_valid = 1;
    do @(posedge clk); while (!instr_ready);
    @(negedge clk);
    instr_valid = 0;
    while (!done) @(posedge clk);
    @(negedge clk);
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

  // load index pairs through the backdoor
  task automatic load_pairs(baddr_t base, uarr_t s, uarr_t d);
    for (int k = 0; k * PAIRS_PER_BEAT < s.size(); k++)
      u_dram.poke(base + baddr_t'(k), pack_beat(s, d, k * PAIRS_PER_BEAT));
  endtask

  // gather-reduce / scatter on random data, checked against sums computed here
  task automatic op_test(opcode_e op, int n, int rb, int n_in_rows, int n_out_rows);
    baddr_t in_b = 31'h0010_0000, out_b = 31'h0020_0000, idx_b = 31'h0030_0000;
    uarr_t s = new[n], d = new[n];
    beat_t expv [int];
    instr_t i;
    int cur = 0;
    // inputs
    for (int r = 0; r < n_in_rows; r++)
      for (int b = 0; b < rb; b++) u_dram.poke(in_b + baddr_t'(r * rb * 37 + b), rand_beat(32'hffff));
    for (int r = 0; r < n_out_rows; r++)
      for (int b = 0; b < rb; b++) u_dram.poke(out_b + baddr_t'(r * rb + b), rand_beat(32'hffff));
    for (int k = 0; k < n; k++) begin
      if (op == OP_SCATTER) begin
        s[k] = $urandom_range(0, n_in_rows - 1) * 37;   // sparse rows: row conflicts
        d[k] = $urandom_range(0, n_out_rows - 1);
      end else begin
        if (k > 0 && $urandom_range(0, 2) == 0) cur = (cur + 1 + $urandom_range(0, 3)) % n_out_rows;
        s[k] = $urandom_range(0, n_in_rows - 1) * 37;
        d[k] = cur;
      end
    end
    // expected: gather-reduce resets at each dst run, scatter accumulates
    for (int k = 0; k < n; k++)
      for (int b = 0; b < rb; b++) begin
        int key = d[k] * rb + b;
        beat_t x = u_dram.peek(in_b + baddr_t'(s[k] * rb + b));
        bit fresh = (op == OP_GATHER_REDUCE) && (k == 0 || d[k] != d[k-1]);
        beat_t old = expv.exists(key) ? expv[key] : u_dram.peek(out_b + baddr_t'(key));
        expv[key] = fresh ? x : lane_add(old, x);
      end
    load_pairs(idx_b, s, d);
    i = '0;
    i.op = op; i.row_beats = VLEN_W'(rb); i.count = n;
    i.in_base = in_b; i.out_base = out_b; i.idx_base = idx_b;
    run(i);
    foreach (expv[key]) check(u_dram.peek(out_b + baddr_t'(key)) == expv[key],
                              $sformatf("op %0d row beat %0d", op, key));
  endtask

  initial begin
    int rd_times [$];
    beat_t d;
    instr_valid = 0; instr = '0;
    host_req_valid = 0; host_req_we = 0; host_req_addr = '0; host_req_wdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1. host write/read
    host_write(31'h1234, {16{32'hcafe_0001}});
    host_read(31'h1234, d);
    check(d == {16{32'hcafe_0001}}, "host write/read");

    // 2. streaming read rate within one DRAM row: 32 beats at columns 0..31
    for (int k = 0; k < 32; k++) u_dram.poke(31'h4000 + baddr_t'(k), {16{k}});
    fork
      begin
        @(negedge clk);
        for (int k = 0; k < 32; k++) begin
          host_req_valid = 1; host_req_we = 0; host_req_addr = 31'h4000 + baddr_t'(k);
          do @(posedge clk); while (!host_req_ready);
          @(negedge clk);
        end
        host_req_valid = 0;
      end
      begin
        int got;
        got = 0;
        while (got < 32) begin
          @(posedge clk);
          if (cmd.cmd == CMD_RD) rd_times.push_back(int'($time / 10));
          if (host_rsp_valid) begin
            check(host_rsp_data == {16{got}}, "streamed read data");
            got++;
          end
        end
      end
    join
    for (int k = 1; k < rd_times.size(); k++)
      check(rd_times[k] - rd_times[k-1] == 4, $sformatf("RD spacing %0d", rd_times[k] - rd_times[k-1]));

    // 3. operations
    op_test(OP_GATHER_REDUCE, 40, 4, 50, 12);
    op_test(OP_SCATTER, 30, 4, 50, 40);
    op_test(OP_GATHER_REDUCE, 12, 12, 10, 6);   // rows longer than the queues
    op_test(OP_SCATTER, 10, 1, 20, 5);

    check(violations == 0, "DDR4 protocol violations");
    check(n_act > 0 && n_pre > 0, "activates and row-conflict precharges");
    check(n_zero > 0 && n_rmw > 0, "zero-init runs and read-modify-write pairs");
    check(n_chain > 0, "runs continued with the partial sum held on chip");
    check(n_stall > 0, "credit stall on long rows");
    check(n_idx > 0, "index fetches");
    $display("act=%0d pre=%0d zero=%0d rmw=%0d chain=%0d stall=%0d idx=%0d", n_act, n_pre, n_zero, n_rmw, n_chain, n_stall, n_idx);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
