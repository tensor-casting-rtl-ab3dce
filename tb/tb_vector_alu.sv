// tb_vector_alu: self-checking test of the vector adder. Random beats on a
// and b, random zero_b and random output back-pressure. Every result is
// compared with a lane-wise sum computed in the testbench. The test also
// checks the one-cycle latency and that b is not consumed when zero_b is set.
module tb_vector_alu;
  import tcast_pkg::*;
  import tb_tcast_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic a_valid, a_ready, b_valid, b_ready, zero_b, out_valid, out_ready;
  beat_t a_data, b_data, out_data;
  int checks = 0, failures = 0;
  beat_t exp_q [$];
  int n_out = 0, n_zero = 0;

  vector_alu dut (.*);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // scoreboard: record expected sums when the ALU accepts
  always @(posedge clk) if (rst_n) begin
    if (a_valid && a_ready) begin
      exp_q.push_back(zero_b ? a_data : lane_add(a_data, b_data));
      checks++;
      if (b_ready == zero_b) begin failures++; $display("b_ready wrong for zero_b=%0d", zero_b); end
      if (zero_b) n_zero++;
    end
    if (out_valid && out_ready) begin
      beat_t e;
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("unexpected output"); end
      else begin
        e = exp_q.pop_front();
        if (out_data !== e) begin failures++; $display("sum mismatch"); end
      end
      n_out++;
    end
  end

  initial begin
    a_valid = 0; b_valid = 0; zero_b = 0; out_ready = 1; a_data = '0; b_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // latency check: one beat in, result valid on the next cycle
    @(negedge clk);
    a_valid = 1; b_valid = 1; a_data = rand_beat(32'hffff_ffff); b_data = rand_beat(32'hffff_ffff);
    @(negedge clk);
    a_valid = 0; b_valid = 0;
    checks++;
    if (!out_valid) begin failures++; $display("latency is not one cycle"); end
    @(negedge clk);
    // random traffic
    for (int i = 0; i < 3000; i++) begin
      a_valid   = ($urandom_range(0, 3) != 0);
      b_valid   = ($urandom_range(0, 3) != 0);
      zero_b    = ($urandom_range(0, 4) == 0);
      out_ready = ($urandom_range(0, 3) != 0);
      a_data    = rand_beat(32'hffff_ffff);
      b_data    = rand_beat(32'hffff_ffff);
      @(negedge clk);
    end
    a_valid = 0; b_valid = 0; out_ready = 1;
    repeat (5) @(negedge clk);
    checks++;
    if (exp_q.size() != 0 || n_zero == 0 || n_out < 1000) begin
      failures++; $display("left=%0d zero=%0d out=%0d", exp_q.size(), n_zero, n_out);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
