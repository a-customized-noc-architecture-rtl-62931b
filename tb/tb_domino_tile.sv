// tb_domino_tile: one tile end to end, at the full 256 x 256 size.
// Weights are programmed through the configuration port. Input vectors arrive on the
// RIFM west port and are forwarded east; the PE result is added to a partial sum that
// arrives on the ROFM north port and the sum leaves south (one link of the
// add-while-transfer chain); in a second instruction of the period the shortcut copy
// of the input leaves east unchanged (bypass). Expected values are computed here from
// the weights and inputs (dot product, >> ADC_SHIFT, clip, saturating add).
module tb_domino_tile;
  import domino_pkg::*;

  localparam int unsigned R = NC, C = NM, BEATS = NM / LANES, SH = 8, NV = 4;
  typedef logic [R*8-1:0] vec_t;

  logic clk = 0, rst_n = 0, cfg_we = 0;
  cfg_sel_e cfg_sel = CFG_CTRL;
  logic [15:0] cfg_addr = '0;
  beat_t cfg_data = '0;
  link_t [NDIR-1:0] ifm_in, ifm_out, ofm_in, ofm_out;
  logic  [NDIR-1:0] ifm_in_ready, ifm_out_ready, ofm_in_ready, ofm_out_ready;
  logic [15:0] ifm_steps;
  logic [31:0] instr_count;
  logic rifm_stall, rofm_stall, illegal;
  int checks = 0, failures = 0;

  domino_tile dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  logic [7:0] wts [R][C];
  vec_t xs[NV], ps[NV], exp_s[$], exp_e[$], exp_fwd[$];

  function automatic vec_t rnd();
    vec_t v;
    for (int i = 0; i < R / 4; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  function automatic int sat(int v); return v > 127 ? 127 : (v < -128 ? -128 : v); endfunction

  task automatic cfg_write(cfg_sel_e sel, int addr, beat_t data);
    // cfg_we stays high for back-to-back writes; cfg_idle() ends a burst
    cfg_we <= 1; cfg_sel <= sel; cfg_addr <= 16'(addr); cfg_data <= data;
    @(posedge clk);
  endtask
  task automatic cfg_idle();
    cfg_we <= 0;
    @(posedge clk);
  endtask

  task automatic send(int dir, bit ofm, vec_t v);
    for (int b = 0; b < R / LANES; b++) begin
      if (ofm) begin ofm_in[dir].valid <= 1; ofm_in[dir].data <= v[b*BEAT_W +: BEAT_W]; end
      else     begin ifm_in[dir].valid <= 1; ifm_in[dir].data <= v[b*BEAT_W +: BEAT_W]; end
      do @(negedge clk); while (!(ofm ? ofm_in_ready[dir] : ifm_in_ready[dir]));
      @(posedge clk);
    end
  endtask

  // sinks
  int sb = 0, eb = 0, fb = 0, n_rifm_stall = 0, n_rofm_stall = 0;
  always @(posedge clk) begin
    ofm_out_ready <= 4'($urandom);
    ifm_out_ready <= 4'($urandom);
    if (rst_n) begin
      if (rifm_stall) n_rifm_stall++;
      if (rofm_stall) n_rofm_stall++;
      if (ofm_out[DIR_S].valid && ofm_out_ready[DIR_S]) begin
        check("sum beat", exp_s.size() > 0 && ofm_out[DIR_S].data == exp_s[0][sb*BEAT_W +: BEAT_W]);
        if (++sb == BEATS) begin sb = 0; void'(exp_s.pop_front()); end
      end
      if (ofm_out[DIR_E].valid && ofm_out_ready[DIR_E]) begin
        check("bypass beat", exp_e.size() > 0 && ofm_out[DIR_E].data == exp_e[0][eb*BEAT_W +: BEAT_W]);
        if (++eb == BEATS) begin eb = 0; void'(exp_e.pop_front()); end
      end
      if (ifm_out[DIR_E].valid && ifm_out_ready[DIR_E]) begin
        check("forwarded input beat", exp_fwd.size() > 0 && ifm_out[DIR_E].data == exp_fwd[0][fb*BEAT_W +: BEAT_W]);
        if (++fb == R / LANES) begin fb = 0; void'(exp_fwd.pop_front()); end
      end
      check("silent ports", !ofm_out[DIR_W].valid && !ofm_out[DIR_N].valid && !ifm_out[DIR_W].valid);
    end
  end

  initial begin
    tile_cfg_t tc;
    ifm_in = '0; ofm_in = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int c = 0; c < C; c++)
      for (int k = 0; k < R / LANES; k++) begin
        beat_t d;
        for (int l = 0; l < LANES; l++) begin
          wts[k*LANES + l][c] = 8'($urandom);
          d[l*8 +: 8] = wts[k*LANES + l][c];
        end
        cfg_write(CFG_WEIGHT, c * (R / LANES) + k, d);
      end
    // period 2: (0) north psum + PE -> south; (1) shortcut bypass -> east
    cfg_write(CFG_SCHED, 0, beat_t'({1'b1, 3'(DIR_N), 1'b1, 4'b1100, 2'b00, 4'b1000, 1'b0}));
    cfg_write(CFG_SCHED, 1, beat_t'({1'b1, 3'(SRC_SC), 1'b0, 3'(FN_BP), 3'b100, 4'b0001, 1'b1}));
    tc = '0;
    tc.rifm = '{in_dir: DIR_W, fwd_mask: 4'b0001, pe_en: 1, sc_en: 1, step_beats: 5'(R / LANES)};
    tc.run = 1; tc.period = 8'd2; tc.mul_scale = 8'd0;
    for (int v = 0; v < NV; v++) begin
      xs[v] = rnd(); ps[v] = rnd();
      exp_fwd.push_back(xs[v]);
      exp_e.push_back(xs[v]);
      begin
        vec_t e;
        for (int c = 0; c < C; c++) begin
          int acc, q;
          acc = 0;
          for (int r = 0; r < R; r++) acc += int'($signed(xs[v][r*8 +: 8])) * int'($signed(wts[r][c]));
          q = sat(acc >>> SH);
          e[c*8 +: 8] = 8'(sat(q + int'($signed(ps[v][c*8 +: 8]))));
        end
        exp_s.push_back(e);
      end
    end
    cfg_write(CFG_CTRL, 0, beat_t'(tc));
    cfg_idle();
    fork
      begin for (int v = 0; v < NV; v++) send(DIR_W, 0, xs[v]); ifm_in[DIR_W].valid <= 0; end
      begin for (int v = 0; v < NV; v++) send(DIR_N, 1, ps[v]); ofm_in[DIR_N].valid <= 0; end
    join
    wait (instr_count == 2 * NV);
    repeat (20) @(posedge clk);
    check("all sums out", exp_s.size() == 0);
    check("all bypassed", exp_e.size() == 0);
    check("all forwarded", exp_fwd.size() == 0);
    check("RIFM counted the steps", ifm_steps == NV);
    check("no illegal", !illegal);
    $display("rifm stall cycles=%0d rofm stall cycles=%0d", n_rifm_stall, n_rofm_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
