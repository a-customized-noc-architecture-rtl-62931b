// rofm: the output router of a Domino tile, run by periodic local instructions.
//
// The ROFM is where computing-on-the-move happens. Each instruction (one "step") moves
// one vector of NM 8-bit values as STEP_BEATS beats of LANES bytes. For every beat it
//   1. takes a beat from the receive source named by Rx Ctrl (a neighbour ROFM port or
//      the RIFM shortcut) into the input register, and a beat of the local PE result
//      into the PE register when Rx Ctrl asks for the PE;
//   2. combines the input register, the PE register and the ROFM buffer head in the
//      adders and computation unit (rofm_cu) as the Sum or Func field says;
//   3. places the result in the output register, sent to the directions of Tx Ctrl, and/or
//      pushes it into the ROFM buffer; pops the buffer head when told.
// When all beats of a step are done the schedule counter moves to the next instruction
// and wraps at the configured period. The paper gives the blocks (ports, input and
// output registers, schedule table, counter, decoder, buffer, adders, computation unit),
// the 16-bit instruction fields and the periodic execution; the field encodings, the
// beat-serial datapath and the valid/ready handshake are this design's choices.
//
// Execution is data driven: a beat is executed only when every operand it needs is
// present and every place its result goes has room, so ROFMs of a chain keep in step
// without a global controller (the paper: dataflow "controlled by distributed local
// instructions"). A step with nothing to receive or send still takes STEP_BEATS cycles.
//
// Interface: sched_we/sched_addr/sched_data load the schedule table; run starts
// execution; period is the schedule period; mul_scale is the Q0.8 average-pooling
// factor. in_link/in_ready (E,W,N,S), sc_link/sc_ready (shortcut), pe_link/pe_ready
// (PE results) and out_link/out_ready (E,W,N,S) are valid/ready links. A received beat
// is registered (one cycle) and its result is registered in the output register (one
// more cycle), so a beat passes an ROFM in two cycles.
module rofm
  import domino_pkg::*;
#(
  parameter int unsigned BUF_BYTES   = ROFM_BUF_BYTES,
  parameter int unsigned SCHED_DEPTH_P = SCHED_DEPTH,
  parameter int unsigned BEATS       = STEP_BEATS
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               sched_we,
  input  logic [$clog2(SCHED_DEPTH_P)-1:0]   sched_addr,
  input  logic [INSTR_W-1:0]                 sched_data,
  input  logic                               run,
  input  logic [$clog2(SCHED_DEPTH_P):0]     period,
  input  logic [7:0]                         mul_scale,
  input  link_t [NDIR-1:0]                   in_link,
  output logic  [NDIR-1:0]                   in_ready,
  input  link_t                              sc_link,
  output logic                               sc_ready,
  input  link_t                              pe_link,
  output logic                               pe_ready,
  output link_t [NDIR-1:0]                   out_link,
  input  logic  [NDIR-1:0]                   out_ready,
  output logic [31:0]                        instr_count,
  output logic                               stall,      // a step waits for data or room
  output logic                               illegal     // current instruction is illegal
);

  localparam int unsigned CW = $clog2(BEATS) + 1;

  // ---------------- schedule table, counter, decoder ----------------
  logic [INSTR_W-1:0] instr;
  ctrl_t              c;
  logic               step_done;

  rofm_sched #(.DEPTH(SCHED_DEPTH_P)) u_sched (
    .clk     (clk),
    .rst_n   (rst_n),
    .we      (sched_we),
    .waddr   (sched_addr),
    .wdata   (sched_data),
    .run     (run),
    .clear   (1'b0),
    .period  (period),
    .advance (step_done),
    .instr   (instr),
    .idx     (),              // index not needed here: the decoder sees the instruction
    .count   (instr_count)
  );

  rofm_decoder u_dec (
    .instr   (instr),
    .ctrl    (c),
    .illegal (illegal)
  );

  // ---------------- receive side: input register and PE register ----------------
  link_t         rx_sel;
  logic          in_v_q, pe_v_q;
  beat_t         in_q, pe_q;
  logic [CW-1:0] rx_cnt_q, pe_cnt_q, ex_cnt_q;
  logic          exec, take_rx, take_pe, in_free, pe_free;

  always_comb begin
    if (c.rx_src == SRC_SC) rx_sel = sc_link;
    else                    rx_sel = in_link[c.rx_src[1:0]];
  end

  // A register can take a new beat when it is empty or its beat is executed now.
  assign in_free = !in_v_q || exec;
  assign pe_free = !pe_v_q || exec;
  assign take_rx = run && c.rx_en && !step_done && (rx_cnt_q < CW'(BEATS)) && in_free
                   && rx_sel.valid;
  assign take_pe = run && c.pe_en && !step_done && (pe_cnt_q < CW'(BEATS)) && pe_free
                   && pe_link.valid;

  always_comb begin
    in_ready = '0;
    sc_ready = 1'b0;
    if (run && c.rx_en && !step_done && (rx_cnt_q < CW'(BEATS)) && in_free) begin
      if (c.rx_src == SRC_SC) sc_ready = 1'b1;
      else                    in_ready[c.rx_src[1:0]] = 1'b1;
    end
  end
  assign pe_ready = run && c.pe_en && !step_done && (pe_cnt_q < CW'(BEATS)) && pe_free;

  // ---------------- buffer ----------------
  localparam int unsigned BDEPTH = BUF_BYTES / LANES;
  localparam int unsigned BAW    = $clog2(BDEPTH);

  beat_t         buf_rd, result;
  logic          buf_full, buf_empty;
  logic [BAW:0]  buf_level;
  logic          do_push, do_pop;
  logic [BAW-1:0] rd_off;

  // Reading without popping walks through the stored vector beat by beat.
  assign rd_off = c.pop ? '0 : BAW'(ex_cnt_q);

  rofm_buffer #(.BYTES(BUF_BYTES)) u_buf (
    .clk     (clk),
    .rst_n   (rst_n),
    .push    (do_push),
    .wr_data (result),
    .pop     (do_pop),
    .rd_off  (rd_off),
    .rd_data (buf_rd),
    .full    (buf_full),
    .empty   (buf_empty),
    .level   (buf_level)
  );

  // ---------------- adders and computation unit ----------------
  rofm_cu u_cu (
    .fn       (c.fn),
    .use_in   (c.use_in && c.rx_en),
    .use_pe   (c.use_pe && c.pe_en),
    .use_buf  (c.use_buf),
    .scale    (mul_scale),
    .in_data  (in_q),
    .pe_data  (pe_q),
    .buf_data (buf_rd),
    .result   (result)
  );

  // ---------------- execute one beat ----------------
  logic [NDIR-1:0] out_pend_q;
  beat_t           out_q;
  logic            out_free, ops_ready;

  assign out_free  = ((out_pend_q & ~out_ready) == '0);
  assign ops_ready = (!c.rx_en || in_v_q) && (!c.pe_en || pe_v_q)
                     && (!c.use_buf || (BAW+1)'(ex_cnt_q) < buf_level || (c.pop && !buf_empty))
                     && (!c.push || !buf_full)
                     && (c.tx == '0 || out_free);
  assign exec      = run && !step_done && (ex_cnt_q < CW'(BEATS)) && ops_ready;
  assign do_push   = exec && c.push;
  assign do_pop    = exec && c.pop && c.use_buf;
  assign step_done = (ex_cnt_q == CW'(BEATS));
  assign stall     = run && !step_done && !ops_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_v_q     <= 1'b0;
      pe_v_q     <= 1'b0;
      in_q       <= '0;
      pe_q       <= '0;
      rx_cnt_q   <= '0;
      pe_cnt_q   <= '0;
      ex_cnt_q   <= '0;
      out_pend_q <= '0;
      out_q      <= '0;
    end else begin
      out_pend_q <= out_pend_q & ~out_ready;
      if (exec) begin
        in_v_q   <= 1'b0;
        pe_v_q   <= 1'b0;
        ex_cnt_q <= ex_cnt_q + 1'b1;
        if (c.tx != '0) begin
          out_pend_q <= c.tx;
          out_q      <= result;
        end
      end
      if (take_rx) begin
        in_v_q   <= 1'b1;
        in_q     <= rx_sel.data;
        rx_cnt_q <= rx_cnt_q + 1'b1;
      end
      if (take_pe) begin
        pe_v_q   <= 1'b1;
        pe_q     <= pe_link.data;
        pe_cnt_q <= pe_cnt_q + 1'b1;
      end
      if (step_done) begin
        rx_cnt_q <= '0;
        pe_cnt_q <= '0;
        ex_cnt_q <= '0;
      end
    end
  end

  always_comb begin
    for (int d = 0; d < NDIR; d++) begin
      out_link[d].valid = out_pend_q[d];
      out_link[d].data  = out_q;
    end
  end

  a_no_illegal: assert property (@(posedge clk) disable iff (!rst_n) run |-> !illegal);

endmodule
