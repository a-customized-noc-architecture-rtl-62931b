// rofm_buffer: the ROFM data buffer, a 16 KiB queue of partial and group sums.
//
// Group sums wait here for the group sums of the next kernel row (the paper: "The
// group-sums are queued in the buffer for other group-sums to be ready"), and pooling
// keeps intermediate results here. The buffer is a circular queue of LANES-byte beats
// (16 KiB / 16 B = 1024 beats = 64 vectors of 256 bytes). A beat is pushed at the tail
// and popped at the head; rd_data shows the beat rd_off places behind the head, so an
// instruction may also read a whole vector without removing it. The queue organisation
// is this design's choice; the paper gives the size only.
//
// Interface: push/wr_data, pop, rd_off/rd_data (combinational read), full, empty, level
// (beats held). Pushing when full or popping when empty is an error (asserted); the ROFM
// never does either because it waits for room and data.
module rofm_buffer
  import domino_pkg::*;
#(
  parameter int unsigned BYTES = ROFM_BUF_BYTES
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  push,
  input  beat_t                 wr_data,
  input  logic                  pop,
  input  logic [$clog2(BYTES/LANES)-1:0] rd_off,
  output beat_t                 rd_data,
  output logic                  full,
  output logic                  empty,
  output logic [$clog2(BYTES/LANES):0] level
);

  localparam int unsigned DEPTH = BYTES / LANES;
  localparam int unsigned AW    = $clog2(DEPTH);

  beat_t          mem_q [DEPTH];
  logic [AW-1:0]  head_q, tail_q;
  logic [AW:0]    level_q;

  always_ff @(posedge clk) begin
    if (push && !full) mem_q[tail_q] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head_q  <= '0;
      tail_q  <= '0;
      level_q <= '0;
    end else begin
      if (push && !full)  tail_q <= tail_q + 1'b1;
      if (pop && !empty)  head_q <= head_q + 1'b1;
      level_q <= level_q + (AW+1)'(push && !full) - (AW+1)'(pop && !empty);
    end
  end

  assign rd_data = mem_q[head_q + rd_off];
  assign full    = (level_q == (AW+1)'(DEPTH));
  assign empty   = (level_q == '0);
  assign level   = level_q;

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> !full);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);

endmodule
