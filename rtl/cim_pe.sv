// cim_pe: behavioural model of the Processing Element, a computing-in-memory crossbar.
//
// This is a behavioural model, not a circuit: the real part is an analog crossbar (ReRAM
// or SRAM cells) with an integrator and ADCs, which the paper takes from other work and
// does not design. The model keeps the real part's role and ports: NC x NM stored 8-bit
// weights, an NC-entry input vector taken from the RIFM buffer, and NM 8-bit outputs,
// each the dot product of the inputs with one weight column, scaled by 2^-ADC_SHIFT and
// clipped to 8 bits as an ADC would. The model is written with synthesizable constructs,
// but it stands in for the analog array.
//
// Interface: w_we/w_col/w_chunk/w_data program LANES weights of one column per cycle
// (column w_col, rows w_chunk*LANES ..); each column is stored as one wide word. start (one cycle, only while ready) copies in_vec;
// the NM outputs then leave on out_link as NM/LANES beats, column 0 first, each held
// until out_ready. ready is high when no result is waiting. The first beat is valid the
// cycle after start. The ADC scaling is this design's choice; the paper gives none.
module cim_pe
  import domino_pkg::*;
#(
  parameter int unsigned ROWS      = NC,
  parameter int unsigned COLS      = NM,
  parameter int unsigned ADC_SHIFT = 8
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       w_we,
  input  logic [$clog2(COLS)-1:0]    w_col,
  input  logic [$clog2(ROWS/LANES > 1 ? ROWS/LANES : 2)-1:0] w_chunk,
  input  beat_t                      w_data,
  input  logic                       start,
  input  logic [ROWS*DATA_W-1:0]     in_vec,
  output logic                       ready,
  output link_t                      out_link,
  input  logic                       out_ready
);

  localparam int unsigned BEATS = COLS / LANES;
  localparam int unsigned BW    = $clog2(BEATS > 1 ? BEATS : 2);

  logic [ROWS*DATA_W-1:0] w_q [COLS];   // one word per crossbar column
  elem_t   x_q [ROWS];
  logic    busy_q;
  logic [BW-1:0] beat_q;

  always_ff @(posedge clk) begin
    if (w_we) begin
      w_q[w_col][int'(w_chunk)*BEAT_W +: BEAT_W] <= w_data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q <= 1'b0;
      beat_q <= '0;
      for (int r = 0; r < ROWS; r++) x_q[r] <= '0;
    end else if (!busy_q) begin
      if (start) begin
        busy_q <= 1'b1;
        beat_q <= '0;
        for (int r = 0; r < ROWS; r++) x_q[r] <= elem_t'(in_vec[r*DATA_W +: DATA_W]);
      end
    end else if (out_ready) begin
      if (int'(beat_q) == BEATS - 1) begin
        busy_q <= 1'b0;
        beat_q <= '0;
      end else begin
        beat_q <= beat_q + 1'b1;
      end
    end
  end

  // Column currents of the current beat, integrated and converted.
  always_comb begin
    out_link.valid = busy_q;
    out_link.data  = '0;
    for (int l = 0; l < LANES; l++) begin
      logic signed [31:0] acc;
      logic signed [31:0] q;
      logic [ROWS*DATA_W-1:0] col;
      col = w_q[int'(beat_q)*LANES + l];
      acc = '0;
      for (int r = 0; r < ROWS; r++)
        acc += 32'(x_q[r]) * 32'(signed'(col[r*DATA_W +: DATA_W]));
      q = acc >>> ADC_SHIFT;
      if (q > 32'sd127)       out_link.data[l*DATA_W +: DATA_W] = 8'h7f;
      else if (q < -32'sd128) out_link.data[l*DATA_W +: DATA_W] = 8'h80;
      else                    out_link.data[l*DATA_W +: DATA_W] = q[7:0];
    end
  end

  assign ready = !busy_q;

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy_q);

endmodule
