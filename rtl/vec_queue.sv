// vec_queue: synchronous FIFO used for the NMP core's staging buffers, Input
// Q (I1), Input Q (I2) and Output Q (O), and inside the memory controller
// for the pair FIFO and the read-tag FIFO.
//
// It is a circular buffer of DEPTH entries, each W bits wide, with separate
// read and write pointers and an occupancy counter. Push and pop may happen
// in the same cycle, also when the queue is full: the pop frees the slot. The
// head entry is visible on rd_data while rd_valid is high, a first-word
// fall-through FIFO. count reports occupancy, so a producer can reserve room
// for reads already in flight.
//
// From the paper: the queues exist and stage vectors in and out. This
// design's own choices: the depth and the FIFO discipline.
module vec_queue #(
  parameter int unsigned W     = 512,
  parameter int unsigned DEPTH = 8
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       wr_valid,
  output logic                       wr_ready,
  input  logic [W-1:0]               wr_data,
  output logic                       rd_valid,
  input  logic                       rd_ready,
  output logic [W-1:0]               rd_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH+1);

  logic [W-1:0]  mem [DEPTH];
  logic [PW-1:0] wp, rp;
  logic          do_push, do_pop;

  assign rd_valid = (count != 0);
  assign wr_ready = (count != CW'(DEPTH)) || rd_ready;
  assign do_pop   = rd_valid && rd_ready;
  assign do_push  = wr_valid && wr_ready;
  assign rd_data  = mem[rp];

  function automatic logic [PW-1:0] inc(logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_push) mem[wp] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (do_push) wp <= inc(wp);
      if (do_pop)  rp <= inc(rp);
      count <= count + CW'(do_push) - CW'(do_pop);
    end
  end

endmodule
