// tb_vec_queue: self-checking test of the FIFO. Random pushes and pops
// against a testbench queue. Checks the data order, the occupancy count, the
// full and empty flags, and push-while-full with a simultaneous pop.
module tb_vec_queue;
  localparam int W = 64, DEPTH = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic wr_valid, wr_ready, rd_valid, rd_ready;
  logic [W-1:0] wr_data, rd_data;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0, n_full = 0, n_fullpush = 0;
  logic [W-1:0] model [$];

  vec_queue #(.W(W), .DEPTH(DEPTH)) dut (.*);

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    checks++;
    if (int'(count) != model.size()) begin failures++; $display("count %0d vs %0d", count, model.size()); end
    if (rd_valid != (model.size() != 0)) begin failures++; $display("rd_valid wrong"); end
    if (wr_ready != (model.size() < DEPTH || rd_ready)) begin failures++; $display("wr_ready wrong"); end
    if (model.size() == DEPTH) n_full++;
    if (model.size() == DEPTH && wr_valid && rd_ready) n_fullpush++;
    if (rd_valid && rd_ready) begin
      checks++;
      if (rd_data !== model[0]) begin failures++; $display("data order wrong"); end
      void'(model.pop_front());
    end
    if (wr_valid && wr_ready) model.push_back(wr_data);
  end

  initial begin
    wr_valid = 0; rd_ready = 0; wr_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int phase = 0; phase < 3; phase++) begin
      for (int i = 0; i < 2000; i++) begin
        @(negedge clk);
        // phase 0 fills, phase 1 drains, phase 2 is balanced
        wr_valid = (phase == 0) ? ($urandom_range(0, 3) != 0) :
                   (phase == 1) ? ($urandom_range(0, 3) == 0) : ($urandom_range(0, 1) == 1);
        rd_ready = (phase == 0) ? ($urandom_range(0, 3) == 0) :
                   (phase == 1) ? ($urandom_range(0, 3) != 0) : ($urandom_range(0, 1) == 1);
        wr_data  = {$urandom(), $urandom()};
      end
    end
    @(negedge clk);
    wr_valid = 0; rd_ready = 0;
    @(negedge clk);
    checks++;
    if (n_full == 0 || n_fullpush == 0) begin failures++; $display("full cases not reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
