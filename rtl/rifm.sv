// rifm: the input router of a Domino tile.
//
// The RIFM takes input-feature beats from one of its four mesh ports (chosen by the
// configuration), writes them into the RIFM buffer and, as configured, passes each beat
// on to neighbouring RIFMs. A counter counts received beats; when a step of
// cfg.step_beats beats is complete the controller starts the PE, which copies the
// buffer, and, if the shortcut is enabled, streams the whole buffer over the shortcut to
// the local ROFM (used when the MAC is skipped, as for the identity path of a residual
// unit). New input is held back until the shortcut copy has been read, so the buffer
// is not overwritten under it. Configuration is static while a layer runs, as in the paper ("decide
// input dataflow based on the initial configuration").
//
// Interface: every link is valid/ready; a beat moves when valid and ready are both high.
// in_link/in_ready are the four receive ports (E,W,N,S), out_link/out_ready the four send
// ports. pe_start is a one-cycle pulse; pe_vec holds the buffer; pe_ready high means the
// PE can take a new vector. sc_link/sc_ready is the shortcut towards the ROFM.
// Timing: a received beat appears on the forward ports one cycle later; the shortcut
// stream starts the cycle after the last beat of a step, one beat per cycle. pe_start rises the cycle after the last beat of a step. The
// last beat of a step is held back while the PE is busy: the back-pressure that keeps
// the tiles of a layer in step. Register stages and the valid/ready handshake are this
// design's choices; the paper does not describe the link protocol.
module rifm
  import domino_pkg::*;
#(
  parameter int unsigned BYTES = RIFM_BUF_BYTES
) (
  input  logic               clk,
  input  logic               rst_n,
  input  rifm_cfg_t          cfg,
  input  link_t [NDIR-1:0]   in_link,
  output logic  [NDIR-1:0]   in_ready,
  output link_t [NDIR-1:0]   out_link,
  input  logic  [NDIR-1:0]   out_ready,
  output logic               pe_start,
  output logic [BYTES*8-1:0] pe_vec,
  input  logic               pe_ready,
  output link_t              sc_link,
  input  logic               sc_ready,
  output logic [15:0]        step_count,
  output logic               stall       // a beat was offered but could not be taken
);

  logic [4:0]      beat_cnt_q;
  logic [15:0]     step_cnt_q;
  logic [NDIR-1:0] fwd_pend_q;
  beat_t           fwd_data_q;
  logic            sc_busy_q;
  logic [4:0]      sc_idx_q;
  logic            start_q;

  link_t in_sel;
  logic  last_beat, fwd_free, sc_free, pe_free, accept;

  assign in_sel    = in_link[cfg.in_dir[1:0]];
  assign last_beat = (beat_cnt_q == cfg.step_beats - 5'd1);
  // A forward or shortcut register is free when every pending copy leaves this cycle.
  assign fwd_free  = ((fwd_pend_q & ~out_ready) == '0);
  assign sc_free   = !sc_busy_q;
  assign pe_free   = !cfg.pe_en || !last_beat || (pe_ready && !start_q);
  assign accept    = in_sel.valid && fwd_free && sc_free && pe_free;
  assign stall     = in_sel.valid && !accept;

  always_comb begin
    in_ready = '0;
    in_ready[cfg.in_dir[1:0]] = fwd_free && sc_free && pe_free;
  end

  rifm_buffer #(.BYTES(BYTES)) u_buf (
    .clk     (clk),
    .rst_n   (rst_n),
    .clr     (1'b0),
    .wr_en   (accept),
    .wr_data (in_sel.data),
    .vec     (pe_vec)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      beat_cnt_q <= '0;
      step_cnt_q <= '0;
      fwd_pend_q <= '0;
      fwd_data_q <= '0;
      sc_busy_q  <= 1'b0;
      sc_idx_q   <= '0;
      start_q    <= 1'b0;
    end else begin
      start_q    <= 1'b0;
      fwd_pend_q <= fwd_pend_q & ~out_ready;
      if (sc_busy_q && sc_ready) begin
        if (sc_idx_q == 5'(BYTES / LANES - 1)) begin
          sc_busy_q <= 1'b0;
          sc_idx_q  <= '0;
        end else begin
          sc_idx_q  <= sc_idx_q + 5'd1;
        end
      end
      if (accept) begin
        if (last_beat) begin
          beat_cnt_q <= '0;
          step_cnt_q <= step_cnt_q + 16'd1;
          start_q    <= cfg.pe_en;
          sc_busy_q  <= cfg.sc_en;
        end else begin
          beat_cnt_q <= beat_cnt_q + 5'd1;
        end
        if (cfg.fwd_mask != '0) begin
          fwd_pend_q <= cfg.fwd_mask;
          fwd_data_q <= in_sel.data;
        end
      end
    end
  end

  always_comb begin
    for (int d = 0; d < NDIR; d++) begin
      out_link[d].valid = fwd_pend_q[d];
      out_link[d].data  = fwd_data_q;
    end
  end

  assign sc_link.valid = sc_busy_q;
  assign sc_link.data  = pe_vec[sc_idx_q*BEAT_W +: BEAT_W];
  assign pe_start      = start_q;
  assign step_count    = step_cnt_q;

  // A step is at least one beat and never more than the buffer holds.
  a_step_len: assert property (@(posedge clk) disable iff (!rst_n)
    cfg.step_beats != 5'd0 && 32'(cfg.step_beats) <= BYTES / LANES);

endmodule
