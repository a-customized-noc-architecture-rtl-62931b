// rofm_sched: the ROFM instruction schedule table and its index counter.
//
// The paper observes that the instructions of an ROFM are periodic: during a
// convolution the same sequence of p instructions repeats (p = 2(P+W) for stride 1;
// p = 2*Sp for the M-type pooling sequence of the last row). The compiler therefore
// writes one period into a 128 x 16-bit table, and a counter produces the index of the
// instruction to execute. This block is that table and counter. The counter moves on
// when the ROFM reports that the current instruction has finished (advance) and wraps
// from period-1 to 0. Counting instructions rather than free-running clock cycles is
// this design's choice, as are the write port and the run/clear inputs.
//
// Interface: we/waddr/wdata write one entry (configuration time). run enables the
// counter; clear returns it to entry 0. instr is the entry at the current index,
// combinationally; idx is the index, count the number of instructions completed.
module rofm_sched
  import domino_pkg::*;
#(
  parameter int unsigned DEPTH = SCHED_DEPTH
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [INSTR_W-1:0]       wdata,
  input  logic                     run,
  input  logic                     clear,
  input  logic [$clog2(DEPTH):0]   period,   // 1..DEPTH
  input  logic                     advance,
  output logic [INSTR_W-1:0]       instr,
  output logic [$clog2(DEPTH)-1:0] idx,
  output logic [31:0]              count
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [INSTR_W-1:0] table_q [DEPTH];
  logic [AW-1:0]      idx_q;
  logic [31:0]        count_q;

  always_ff @(posedge clk) begin
    if (we) table_q[waddr] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx_q   <= '0;
      count_q <= '0;
    end else if (clear) begin
      idx_q   <= '0;
      count_q <= '0;
    end else if (run && advance) begin
      count_q <= count_q + 32'd1;
      if ({1'b0, idx_q} >= period - 1'b1) idx_q <= '0;
      else                                idx_q <= idx_q + 1'b1;
    end
  end

  assign instr = table_q[idx_q];
  assign idx   = idx_q;
  assign count = count_q;

  a_period: assert property (@(posedge clk) disable iff (!rst_n)
    run |-> (period != '0 && period <= ($clog2(DEPTH)+1)'(DEPTH)));

endmodule
