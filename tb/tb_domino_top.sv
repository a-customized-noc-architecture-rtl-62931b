// tb_domino_top: end-to-end runs of the mesh on the paper's dataflows.
// A 2 x 2 mesh with 32 x 32 crossbars (two beats per vector) runs three layers, each
// after a reset and a fresh configuration:
//  A. fully connected layer y = relu(x W), x of 64 and y of 64 values, blocked over the
//     four tiles as in the paper's FC mapping: input slice r enters row r from the west
//     and is forwarded east; partial sums are added while they move south down each
//     column; the last row applies the activation and sends the output slices out of
//     the south edge.
//  B. 2 x 2 convolution over a 3 x 4 input frame, computing-on-the-move: the pixel stream
//     is forwarded through the four tiles along a snake path; the tiles of each kernel
//     row form a partial-sum chain giving a group sum; the group sum of kernel row 0 is
//     sent to the last tile and queued in its ROFM buffer until the group sum of kernel
//     row 1 for the same output pixel is formed there; the last tile adds the two and
//     applies the activation. Each tile runs two instructions per pixel (the factor 2
//     in the paper's period 2(P+W)).
//  C. pooling by block reuse in one tile: four activations are compared (max pooling)
//     or summed and scaled by 1/4 (average pooling) in the ROFM buffer.
//  D. a residual skip: the RIFM shortcut carries the input to the ROFM, which bypasses it.
// Expected outputs are computed here from the weights and inputs. Each mechanism is
// counted and a mechanism that never happened counts as a failure.
module tb_domino_top;
  import domino_pkg::*;

  localparam int unsigned MR = 2, MC = 2, TN = 32, VB = TN / LANES, SH = 8, NT = MR * MC;
  typedef logic [TN*8-1:0] vec_t;

  logic clk = 0, rst_n = 0, cfg_we = 0;
  logic [15:0] cfg_tile = '0, cfg_addr = '0;
  cfg_sel_e cfg_sel = CFG_CTRL;
  beat_t cfg_data = '0;
  link_t [MC-1:0] ifm_n_in, ifm_s_in, ifm_n_out, ifm_s_out, ofm_n_in, ofm_s_in, ofm_n_out, ofm_s_out;
  link_t [MR-1:0] ifm_w_in, ifm_e_in, ifm_w_out, ifm_e_out, ofm_w_in, ofm_e_in, ofm_w_out, ofm_e_out;
  logic  [MC-1:0] ifm_n_in_ready, ifm_s_in_ready, ifm_n_out_ready, ifm_s_out_ready;
  logic  [MC-1:0] ofm_n_in_ready, ofm_s_in_ready, ofm_n_out_ready, ofm_s_out_ready;
  logic  [MR-1:0] ifm_w_in_ready, ifm_e_in_ready, ifm_w_out_ready, ifm_e_out_ready;
  logic  [MR-1:0] ofm_w_in_ready, ofm_e_in_ready, ofm_w_out_ready, ofm_e_out_ready;
  logic [NT-1:0][31:0] instr_count;
  logic [NT-1:0][15:0] ifm_steps;
  logic [NT-1:0] rifm_stall, rofm_stall, illegal;
  int checks = 0, failures = 0;

  domino_top #(.MESH_ROWS(MR), .MESH_COLS(MC), .TILE_NC(TN), .TILE_NM(TN)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    for (int t = 0; t < NT; t++) $display("tile %0d: instructions %0d, steps %0d, stalls %b %b", t, instr_count[t], ifm_steps[t], rifm_stall[t], rofm_stall[t]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  // ---------------- reference arithmetic ----------------
  logic [7:0] wts [NT][TN][TN];
  function automatic int sx(logic [7:0] v); return int'($signed(v)); endfunction
  function automatic int sat(int v); return v > 127 ? 127 : (v < -128 ? -128 : v); endfunction
  function automatic vec_t rnd();
    vec_t v;
    for (int i = 0; i < TN / 4; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction
  function automatic vec_t pe_ref(int t, vec_t x);
    vec_t y;
    for (int c = 0; c < TN; c++) begin
      int acc; acc = 0;
      for (int r = 0; r < TN; r++) acc += sx(x[r*8 +: 8]) * sx(wts[t][r][c]);
      y[c*8 +: 8] = 8'(sat(acc >>> SH));
    end
    return y;
  endfunction
  function automatic vec_t vadd(vec_t a, vec_t b);
    vec_t y;
    for (int i = 0; i < TN; i++) y[i*8 +: 8] = 8'(sat(sx(a[i*8 +: 8]) + sx(b[i*8 +: 8])));
    return y;
  endfunction
  function automatic vec_t vrelu(vec_t a);
    vec_t y;
    for (int i = 0; i < TN; i++) y[i*8 +: 8] = sx(a[i*8 +: 8]) < 0 ? 8'd0 : a[i*8 +: 8];
    return y;
  endfunction
  function automatic vec_t vmax(vec_t a, vec_t b);
    vec_t y;
    for (int i = 0; i < TN; i++) y[i*8 +: 8] = sx(a[i*8 +: 8]) > sx(b[i*8 +: 8]) ? a[i*8 +: 8] : b[i*8 +: 8];
    return y;
  endfunction
  function automatic vec_t vscale(vec_t a, int s);
    vec_t y;
    for (int i = 0; i < TN; i++) y[i*8 +: 8] = 8'(sat((sx(a[i*8 +: 8]) * s) >>> 8));
    return y;
  endfunction

  // ---------------- instruction builders ----------------
  function automatic logic [15:0] c_ins(logic rx, logic [2:0] src, logic pe, logic ui, logic up,
                                        logic ub, logic push, logic pop, logic [3:0] tx);
    return {rx, src, pe, ui, up, ub, 1'b0, push, pop, tx, 1'b0};
  endfunction
  function automatic logic [15:0] m_ins(logic rx, logic [2:0] src, logic pe, func_e fn,
                                        logic ui, logic up, logic ub, logic [3:0] tx);
    return {rx, src, pe, 3'(fn), ui, up, ub, tx, 1'b1};
  endfunction
  localparam logic [3:0] TX_E = 4'b0001, TX_W = 4'b0010, TX_N = 4'b0100, TX_S = 4'b1000;

  // ---------------- configuration ----------------
  task automatic cfg_write(int t, cfg_sel_e sel, int addr, beat_t data);
    cfg_we <= 1; cfg_tile <= 16'(t); cfg_sel <= sel; cfg_addr <= 16'(addr); cfg_data <= data;
    @(posedge clk);
  endtask
  task automatic cfg_idle();
    cfg_we <= 0;
    @(posedge clk);
  endtask
  task automatic program_weights(int t);
    for (int c = 0; c < TN; c++)
      for (int k = 0; k < TN / LANES; k++) begin
        beat_t d;
        for (int l = 0; l < LANES; l++) begin
          wts[t][k*LANES + l][c] = 8'($urandom);
          d[l*8 +: 8] = wts[t][k*LANES + l][c];
        end
        cfg_write(t, CFG_WEIGHT, c * (TN / LANES) + k, d);
      end
  endtask
  task automatic program_ctrl(int t, dir_e in_dir, logic [3:0] fwd, logic sc, int period, int scale,
                              logic pe = 1'b1);
    tile_cfg_t tc;
    tc = '0;
    tc.rifm = '{in_dir: in_dir, fwd_mask: fwd, pe_en: pe, sc_en: sc, step_beats: 5'(VB)};
    tc.run = 1'b1; tc.period = 8'(period); tc.mul_scale = 8'(scale);
    cfg_write(t, CFG_CTRL, 0, beat_t'(tc));
  endtask
  task automatic do_reset();
    rst_n <= 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
  endtask

  // ---------------- edge sources ----------------
  task automatic send_w(int r, vec_t v);   // input features into row r from the west
    for (int b = 0; b < VB; b++) begin
      ifm_w_in[r].valid <= 1; ifm_w_in[r].data <= v[b*BEAT_W +: BEAT_W];
      do @(negedge clk); while (!ifm_w_in_ready[r]);
      @(posedge clk);
    end
  endtask

  // ---------------- edge sinks ----------------
  vec_t got_s[MC][$], got_w[MR][$];
  vec_t cur_s[MC], cur_w[MR];
  int bs[MC], bw[MR];
  int n_rifm_stall = 0, n_rofm_stall = 0, n_push = 0, n_pop = 0, n_act = 0, n_fwd = 0;
  int n_cmp = 0, n_mul = 0, n_bp = 0, n_illegal = 0;

  always @(posedge clk) begin
    ofm_s_out_ready <= 2'($urandom);
    ofm_w_out_ready <= 2'($urandom);
    if (rst_n) begin
      for (int c = 0; c < MC; c++)
        if (ofm_s_out[c].valid && ofm_s_out_ready[c]) begin
          cur_s[c][bs[c]*BEAT_W +: BEAT_W] = ofm_s_out[c].data;
          if (++bs[c] == VB) begin bs[c] = 0; got_s[c].push_back(cur_s[c]); end
        end
      for (int r = 0; r < MR; r++)
        if (ofm_w_out[r].valid && ofm_w_out_ready[r]) begin
          cur_w[r][bw[r]*BEAT_W +: BEAT_W] = ofm_w_out[r].data;
          if (++bw[r] == VB) begin bw[r] = 0; got_w[r].push_back(cur_w[r]); end
        end
      n_rifm_stall += $countones(rifm_stall);
      n_rofm_stall += $countones(rofm_stall);
      if (illegal != '0) n_illegal++;
    end
  end

  // Mechanism counters read from inside the tiles.
  for (genvar t = 0; t < NT; t++) begin : g_mon
    always @(posedge clk) if (rst_n) begin
      if (dut.g_row[t / MC].g_col[t % MC].u_tile.u_rofm.do_push) n_push++;
      if (dut.g_row[t / MC].g_col[t % MC].u_tile.u_rofm.do_pop) n_pop++;
      if (dut.g_row[t / MC].g_col[t % MC].u_tile.u_rofm.exec) begin
        case (dut.g_row[t / MC].g_col[t % MC].u_tile.u_rofm.c.fn)
          FN_ACT:            n_act++;
          FN_ACTCMP:         begin n_act++; n_cmp++; end
          FN_CMP:            n_cmp++;
          FN_MUL:            n_mul++;
          FN_BP:             n_bp++;
          default: ;
        endcase
      end
      if (dut.g_row[t / MC].g_col[t % MC].u_tile.ifm_out != '0) n_fwd++;
    end
  end

  task automatic clear_sinks();
    for (int c = 0; c < MC; c++) begin got_s[c].delete(); bs[c] = 0; end
    for (int r = 0; r < MR; r++) begin got_w[r].delete(); bw[r] = 0; end
  endtask

  // ---------------- A: fully connected layer ----------------
  task automatic run_fc(int nvec);
    vec_t xs[2][$], ys[2][$];
    do_reset(); clear_sinks();
    for (int t = 0; t < NT; t++) program_weights(t);
    // row 0: PE result goes south; row 1: north + PE, activation, south edge
    for (int c = 0; c < MC; c++) begin
      cfg_write(0 * MC + c, CFG_SCHED, 0, beat_t'(c_ins(0, 0, 1, 0, 1, 0, 0, 0, TX_S)));
      cfg_write(1 * MC + c, CFG_SCHED, 0, beat_t'(m_ins(1, DIR_N, 1, FN_ACT, 1, 1, 0, TX_S)));
    end
    for (int r = 0; r < MR; r++) begin
      program_ctrl(r * MC + 0, DIR_W, 4'b0001, 0, 1, 0);
      program_ctrl(r * MC + 1, DIR_W, 4'b0000, 0, 1, 0);
    end
    cfg_idle();
    for (int v = 0; v < nvec; v++) begin
      vec_t x0, x1;
      x0 = rnd(); x1 = rnd();
      xs[0].push_back(x0); xs[1].push_back(x1);
      for (int c = 0; c < MC; c++)
        ys[c].push_back(vrelu(vadd(pe_ref(0 * MC + c, x0), pe_ref(1 * MC + c, x1))));
    end
    fork
      begin foreach (xs[0][v]) send_w(0, xs[0][v]); ifm_w_in[0].valid <= 0; end
      begin foreach (xs[1][v]) send_w(1, xs[1][v]); ifm_w_in[1].valid <= 0; end
    join
    wait (got_s[0].size() == nvec && got_s[1].size() == nvec);
    for (int c = 0; c < MC; c++)
      for (int v = 0; v < nvec; v++) check("FC output slice", got_s[c][v] == ys[c][v]);
    $display("A: FC layer, %0d input vectors of %0d values, done at %0t", nvec, MR * TN, $time);
  endtask

  // ---------------- B: 2 x 2 convolution, computing on the move ----------------
  localparam int H = 3, W = 4, K = 2;
  task automatic run_conv();
    // kernel position (kr, kc) -> tile index (row-major): kernel row 0 on mesh row 0,
    // kernel row 1 on mesh row 1; the input pixels follow the snake 0 -> 1 -> 3 -> 2
    int tile_of [K][K];
    vec_t px [H][W], ofm[$];
    tile_of[0][0] = 0; tile_of[0][1] = 1; tile_of[1][0] = 2; tile_of[1][1] = 3;
    do_reset(); clear_sinks();
    for (int t = 0; t < NT; t++) program_weights(t);
    for (int r = 0; r < H; r++)
      for (int c = 0; c < W; c++) begin
        int i; i = r * W + c;
        for (int kr = 0; kr < K; kr++)
          for (int kc = 0; kc < K; kc++) begin
            int t; logic valid; logic [15:0] a, b;
            t = tile_of[kr][kc];
            valid = (r - kr >= 0) && (r - kr <= H - K) && (c - kc >= 0) && (c - kc <= W - K);
            a = c_ins(0, 0, 1, 0, 0, 0, 0, 0, 4'b0);  // default: consume the PE result only
            b = '0;                                    // second slot: nothing
            if (valid) begin
              if (kr == 0 && kc == 0) a = c_ins(0, 0, 1, 0, 1, 0, 0, 0, TX_E);           // U1
              if (kr == 0 && kc == 1) a = c_ins(1, DIR_W, 1, 1, 1, 0, 0, 0, TX_S);       // Ug1 -> last tile
              if (kr == 1 && kc == 0) a = c_ins(0, 0, 1, 0, 1, 0, 0, 0, TX_E);           // U3
              if (kr == 1 && kc == 1) a = m_ins(1, DIR_W, 1, FN_ACT, 1, 1, 1, TX_S);     // Ug2 + Ug1, ReLU
            end
            // the last tile queues each arriving group sum Ug1 in its buffer until the
            // group sum of kernel row 1 for the same output pixel is ready
            if (kr == 1 && kc == 1 && r <= H - K && c >= 1)
              b = c_ins(1, DIR_N, 0, 1, 0, 0, 1, 0, 4'b0);
            cfg_write(t, CFG_SCHED, 2 * i, beat_t'(a));
            cfg_write(t, CFG_SCHED, 2 * i + 1, beat_t'(b));
          end
      end
    // input features enter tile 0 from the west and follow the snake 0 -> 1 -> 3 -> 2
    program_ctrl(0, DIR_W, 4'b0001, 0, 2 * H * W, 0);
    program_ctrl(1, DIR_W, 4'b1000, 0, 2 * H * W, 0);
    program_ctrl(3, DIR_N, 4'b0010, 0, 2 * H * W, 0);
    program_ctrl(2, DIR_E, 4'b0000, 0, 2 * H * W, 0);
    cfg_idle();
    for (int r = 0; r < H; r++) for (int c = 0; c < W; c++) px[r][c] = rnd();
    for (int orow = 0; orow <= H - K; orow++)
      for (int oc = 0; oc <= W - K; oc++) begin
        vec_t s;
        vec_t g1, u3, u4;
        g1 = vadd(pe_ref(0, px[orow][oc]), pe_ref(1, px[orow][oc + 1]));
        u3 = pe_ref(2, px[orow + 1][oc]);
        u4 = pe_ref(3, px[orow + 1][oc + 1]);
        for (int l = 0; l < TN; l++)   // one saturation over the three operands
          s[l*8 +: 8] = 8'(sat(sx(u3[l*8 +: 8]) + sx(u4[l*8 +: 8]) + sx(g1[l*8 +: 8])));
        s = vrelu(s);
        ofm.push_back(s);
      end
    for (int r = 0; r < H; r++) for (int c = 0; c < W; c++) send_w(0, px[r][c]);
    ifm_w_in[0].valid <= 0;
    wait (got_s[1].size() == ofm.size());   // the last tile is in mesh column 1
    foreach (ofm[j]) check("CONV output pixel", got_s[1][j] == ofm[j]);
    repeat (20) @(posedge clk);
    check("every tile finished the frame", instr_count[0] == 2 * H * W && instr_count[1] == 2 * H * W
          && instr_count[2] == 2 * H * W && instr_count[3] == 2 * H * W);
    $display("B: CONV layer, %0dx%0d frame, %0d output pixels, done at %0t", H, W, ofm.size(), $time);
  endtask

  // ---------------- C: pooling by block reuse, D: skip connection ----------------
  task automatic run_pool_skip();
    vec_t x [8], a [8], zmax, zavg;
    do_reset(); clear_sinks();
    program_weights(0);
    // period 8 on tile 0: four activations max-pooled, then four results averaged
    cfg_write(0, CFG_SCHED, 0, beat_t'(m_ins(0, 0, 1, FN_ACTCMP, 0, 1, 0, 4'b0)));
    cfg_write(0, CFG_SCHED, 1, beat_t'(m_ins(0, 0, 1, FN_ACTCMP, 0, 1, 1, 4'b0)));
    cfg_write(0, CFG_SCHED, 2, beat_t'(m_ins(0, 0, 1, FN_ACTCMP, 0, 1, 1, 4'b0)));
    cfg_write(0, CFG_SCHED, 3, beat_t'(m_ins(0, 0, 1, FN_ACTCMP, 0, 1, 1, TX_W)));
    cfg_write(0, CFG_SCHED, 4, beat_t'(c_ins(0, 0, 1, 0, 1, 0, 1, 0, 4'b0)));
    cfg_write(0, CFG_SCHED, 5, beat_t'(c_ins(0, 0, 1, 0, 1, 1, 1, 1, 4'b0)));
    cfg_write(0, CFG_SCHED, 6, beat_t'(c_ins(0, 0, 1, 0, 1, 1, 1, 1, 4'b0)));
    cfg_write(0, CFG_SCHED, 7, beat_t'(m_ins(0, 0, 1, FN_MUL, 0, 1, 1, TX_W)));
    program_ctrl(0, DIR_W, 4'b0000, 0, 8, 64);
    cfg_idle();
    for (int v = 0; v < 8; v++) begin x[v] = rnd(); a[v] = pe_ref(0, x[v]); end
    zmax = vrelu(a[0]);
    for (int v = 1; v < 4; v++) zmax = vmax(vrelu(a[v]), zmax);
    zavg = vadd(vadd(vadd(a[4], a[5]), a[6]), a[7]);
    zavg = vscale(zavg, 64);
    for (int v = 0; v < 8; v++) send_w(0, x[v]);
    ifm_w_in[0].valid <= 0;
    wait (got_w[0].size() == 2);
    check("max pooling result", got_w[0][0] == zmax);
    check("average pooling result", got_w[0][1] == zavg);
    $display("C: pooling done at %0t", $time);
    // D: the PE is skipped; the RIFM shortcut hands the input to the ROFM, which
    // bypasses it to the west edge.
    do_reset(); clear_sinks();
    cfg_write(0, CFG_SCHED, 0, beat_t'(m_ins(1, SRC_SC, 0, FN_BP, 1, 0, 0, TX_W)));
    program_ctrl(0, DIR_W, 4'b0000, 1, 1, 0, 1'b0);
    cfg_idle();
    for (int v = 0; v < 8; v++) send_w(0, x[v]);
    ifm_w_in[0].valid <= 0;
    wait (got_w[0].size() == 8);
    for (int v = 0; v < 8; v++) check("skip connection carries the input", got_w[0][v] == x[v]);
    $display("D: skip connection done at %0t", $time);
  endtask

  initial begin
    ifm_n_in = '0; ifm_s_in = '0; ifm_w_in = '0; ifm_e_in = '0;
    ofm_n_in = '0; ofm_s_in = '0; ofm_w_in = '0; ofm_e_in = '0;
    ifm_n_out_ready = '1; ifm_s_out_ready = '1; ifm_w_out_ready = '1; ifm_e_out_ready = '1;
    ofm_n_out_ready = '1; ofm_e_out_ready = '1;
    for (int c = 0; c < MC; c++) bs[c] = 0;
    for (int r = 0; r < MR; r++) bw[r] = 0;
    repeat (2) @(posedge clk);
    run_fc(6);
    run_conv();
    run_pool_skip();
    $display("mechanisms: rifm stalls=%0d rofm stalls=%0d forwards=%0d buffer pushes=%0d pops=%0d activations=%0d compares=%0d multiplies=%0d bypasses=%0d",
             n_rifm_stall, n_rofm_stall, n_fwd, n_push, n_pop, n_act, n_cmp, n_mul, n_bp);
    check("RIFM back-pressure happened", n_rifm_stall > 0);
    check("ROFM stall happened", n_rofm_stall > 0);
    check("forwarding happened", n_fwd > 0);
    check("group sums buffered", n_push > 0 && n_pop > 0);
    check("activation happened", n_act > 0);
    check("max pooling happened", n_cmp > 0);
    check("average-pooling multiply happened", n_mul > 0);
    check("bypass happened", n_bp > 0);
    check("no illegal instruction ran", n_illegal == 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
