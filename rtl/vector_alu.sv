// vector_alu: the NMP core's vector adder, the "(Vector) ALU" between the two
// input queues and the output queue.
//
// Each accepted beat is LANES independent ELEM_W-bit additions, a + b,
// registered once. When zero_b is high the b operand is taken as zero and b
// is not consumed. This is how a gather-reduce starts a new output row
// without first reading that row from DRAM.
//
// Interface: a valid/ready stream in (a from I1, b from I2) and a valid/ready
// stream out (to O). One beat per cycle, one cycle of latency, and a full
// throughput skid-free pipeline register: out_ready low holds the result and
// stalls the inputs.
//
// From the paper: the unit only adds, element-wise, gathered embeddings, and
// it works on 64-byte beats. This design's own choices: the 32-bit wrap-around
// integer element format (the paper does not give the number format) and the
// zero_b operand select.
module vector_alu
  import tcast_pkg::*;
#(
  parameter int unsigned N_LANES = LANES,
  parameter int unsigned EW      = ELEM_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    a_valid,
  output logic                    a_ready,
  input  logic [N_LANES*EW-1:0]   a_data,
  input  logic                    b_valid,
  output logic                    b_ready,
  input  logic [N_LANES*EW-1:0]   b_data,
  input  logic                    zero_b,
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic [N_LANES*EW-1:0]   out_data
);

  logic fire;
  logic can_load;
  logic [N_LANES*EW-1:0] sum;

  assign can_load = !out_valid || out_ready;
  assign fire     = can_load && a_valid && (zero_b || b_valid);
  assign a_ready  = fire;
  assign b_ready  = fire && !zero_b;

  always_comb begin
    for (int l = 0; l < N_LANES; l++) begin
      sum[l*EW +: EW] = a_data[l*EW +: EW] + (zero_b ? '0 : b_data[l*EW +: EW]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (can_load) begin
      out_valid <= fire;
      if (fire) out_data <= sum;
    end
  end

endmodule
