// ddr4_rank_model: behavioural model of one DDR4 rank together with its DDR
// PHY. Testbench only; it is not synthesizable and stands in for the DRAM
// devices and PHY that sit outside the RTL.
//
// It executes ACT/RD/WR/PRE from the controller's command bus. Storage is a
// sparse associative array of 64-byte beats, indexed by beat address
// {row, bank, col}; unwritten beats read as zero. Read data returns RL
// cycles after the RD command, in order. The model also checks the protocol:
// ACT only to a closed bank, RD/WR/PRE only to an open bank, RD/WR only to
// the open row, tRCD after ACT, tRP after PRE and tCCD between column
// commands. Each breach increments `violations`.
module ddr4_rank_model
  import tcast_pkg::*;
#(
  parameter int unsigned RL    = 26,
  parameter int unsigned T_RCD = 22,
  parameter int unsigned T_RP  = 22,
  parameter int unsigned T_CCD = 4
) (
  input  logic      clk,
  input  logic      rst_n,
  input  dram_cmd_t cmd,
  output logic      rd_valid,
  output beat_t     rd_data,
  output int        violations
);

  beat_t mem [baddr_t];
  logic  open   [NBANKS];
  row_t  orow   [NBANKS];
  longint t_act [NBANKS];
  longint t_pre [NBANKS];
  longint t_col;
  longint cyc;

  typedef struct { longint due; beat_t data; } rd_t;
  rd_t rq [$];

  function automatic baddr_t mk(row_t r, bank_t b, col_t c);
    return {r, b, c};
  endfunction

  function automatic beat_t peek(baddr_t a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction

  function automatic void poke(baddr_t a, beat_t d);
    mem[a] = d;
  endfunction

  function automatic void err(string s);
    violations++;
    $display("ddr4_rank_model %m: %s at cycle %0d", s, cyc);
  endfunction

  initial begin
    violations = 0;
    rd_valid   = 1'b0;
    rd_data    = '0;
    cyc   = 0;
    t_col = -1000;
    for (int i = 0; i < NBANKS; i++) begin
      open[i]  = 1'b0;
      orow[i]  = '0;
      t_act[i] = -1000;
      t_pre[i] = -1000;
    end
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    rd_valid <= 1'b0;
    if (rq.size() > 0 && rq[0].due <= cyc) begin
      rd_valid <= 1'b1;
      rd_data  <= rq[0].data;
      void'(rq.pop_front());
    end
    if (rst_n) begin
      case (cmd.cmd)
        CMD_ACT: begin
          if (open[cmd.bank]) err("ACT to open bank");
          if (cyc - t_pre[cmd.bank] < longint'(T_RP)) err("tRP");
          open[cmd.bank]  = 1'b1;
          orow[cmd.bank]  = cmd.row;
          t_act[cmd.bank] = cyc;
        end
        CMD_PRE: begin
          if (!open[cmd.bank]) err("PRE to closed bank");
          open[cmd.bank]  = 1'b0;
          t_pre[cmd.bank] = cyc;
        end
        CMD_RD, CMD_WR: begin
          if (!open[cmd.bank] || orow[cmd.bank] != cmd.row) err("column command to closed row");
          if (cyc - t_act[cmd.bank] < longint'(T_RCD)) err("tRCD");
          if (cyc - t_col < longint'(T_CCD)) err("tCCD");
          t_col = cyc;
          if (cmd.cmd == CMD_WR) mem[mk(cmd.row, cmd.bank, cmd.col)] = cmd.wdata;
          else rq.push_back('{due: cyc + longint'(RL) - 1, data: peek(mk(cmd.row, cmd.bank, cmd.col))});
        end
        default: ;
      endcase
    end
  end

endmodule
