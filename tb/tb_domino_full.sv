// tb_domino_full: one complete layer on the full-size mesh, every parameter at its default
// (16 x 15 tiles, 256 x 256 crossbars, 16 beats per vector).
// The 2 x 2 block of tiles in the south-west corner (rows 14-15, columns 0-1) runs a fully
// connected layer y = relu(x W) with 512 inputs and 512 outputs: input slice r enters
// mesh row 14 + r from the west edge and is forwarded east; tile (14, c) sends its PE
// result south; tile (15, c) adds it to its own PE result, applies ReLU and sends the
// output slice c out of the south edge. The other tiles stay idle. Weights and inputs
// are random; the expected outputs are computed here. The step time is checked: once the
// pipeline is full, one vector leaves per step of BEATS + 2 cycles or better, the rate
// the data-driven ROFM reaches with its two register stages.
module tb_domino_full;
  import domino_pkg::*;

  localparam int unsigned MR = 16, MC = 15, TN = NC, VB = TN / LANES, SH = 8, NT = MR * MC;
  localparam int unsigned R0 = MR - 2;     // first row of the used block
  localparam int unsigned NVEC = 4;
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

  domino_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  logic [7:0] wts [4][TN][TN];   // [block tile][row][column]
  function automatic int sx(logic [7:0] v); return int'($signed(v)); endfunction
  function automatic int sat(int v); return v > 127 ? 127 : (v < -128 ? -128 : v); endfunction
  function automatic vec_t rnd();
    vec_t v;
    for (int i = 0; i < TN / 4; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction
  function automatic vec_t pe_ref(int b, vec_t x);
    vec_t y;
    for (int c = 0; c < TN; c++) begin
      int acc; acc = 0;
      for (int r = 0; r < TN; r++) acc += sx(x[r*8 +: 8]) * sx(wts[b][r][c]);
      y[c*8 +: 8] = 8'(sat(acc >>> SH));
    end
    return y;
  endfunction

  function automatic int tile_id(int b);   // block tile b = 2 * row + column
    return (R0 + b / 2) * MC + b % 2;
  endfunction

  task automatic cfg_write(int t, cfg_sel_e sel, int addr, beat_t data);
    cfg_we <= 1; cfg_tile <= 16'(t); cfg_sel <= sel; cfg_addr <= 16'(addr); cfg_data <= data;
    @(posedge clk);
  endtask

  task automatic send_w(int r, vec_t v);
    for (int b = 0; b < VB; b++) begin
      ifm_w_in[r].valid <= 1; ifm_w_in[r].data <= v[b*BEAT_W +: BEAT_W];
      do @(negedge clk); while (!ifm_w_in_ready[r]);
      @(posedge clk);
    end
  endtask

  vec_t got [2][$];
  vec_t cur [2];
  int   nb [2];
  longint t_out [2][$];
  always @(posedge clk) if (rst_n)
    for (int c = 0; c < 2; c++)
      if (ofm_s_out[c].valid && ofm_s_out_ready[c]) begin
        cur[c][nb[c]*BEAT_W +: BEAT_W] = ofm_s_out[c].data;
        if (++nb[c] == VB) begin nb[c] = 0; got[c].push_back(cur[c]); t_out[c].push_back($time / 10); end
      end

  initial begin
    vec_t xs [2][NVEC], ys [2][NVEC];
    tile_cfg_t tc;
    ifm_n_in = '0; ifm_s_in = '0; ifm_w_in = '0; ifm_e_in = '0;
    ofm_n_in = '0; ofm_s_in = '0; ofm_w_in = '0; ofm_e_in = '0;
    ifm_n_out_ready = '1; ifm_s_out_ready = '1; ifm_w_out_ready = '1; ifm_e_out_ready = '1;
    ofm_n_out_ready = '1; ofm_s_out_ready = '1; ofm_w_out_ready = '1; ofm_e_out_ready = '1;
    nb[0] = 0; nb[1] = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // weights: address = column * (NC / LANES) + row chunk
    for (int b = 0; b < 4; b++)
      for (int c = 0; c < TN; c++)
        for (int k = 0; k < TN / LANES; k++) begin
          beat_t d;
          for (int l = 0; l < LANES; l++) begin
            wts[b][k*LANES + l][c] = 8'($urandom);
            d[l*8 +: 8] = wts[b][k*LANES + l][c];
          end
          cfg_write(tile_id(b), CFG_WEIGHT, c * (TN / LANES) + k, d);
        end
    // schedules: upper row C-type (PE -> south), lower row M-type (north + PE, ReLU -> south)
    for (int c = 0; c < 2; c++) begin
      cfg_write(tile_id(c), CFG_SCHED, 0, beat_t'({1'b0, 3'd0, 1'b1, 4'b0100, 2'b00, 4'b1000, 1'b0}));
      cfg_write(tile_id(2 + c), CFG_SCHED, 0,
                beat_t'({1'b1, 3'(DIR_N), 1'b1, 3'(FN_ACT), 3'b110, 4'b1000, 1'b1}));
    end
    for (int b = 0; b < 4; b++) begin
      tc = '0;
      tc.rifm = '{in_dir: DIR_W, fwd_mask: (b % 2 == 0) ? 4'b0001 : 4'b0000, pe_en: 1'b1,
                  sc_en: 1'b0, step_beats: 5'(VB)};
      tc.run = 1'b1; tc.period = 8'd1;
      cfg_write(tile_id(b), CFG_CTRL, 0, beat_t'(tc));
    end
    cfg_we <= 0;
    @(posedge clk);
    for (int v = 0; v < NVEC; v++) begin
      xs[0][v] = rnd(); xs[1][v] = rnd();
      for (int c = 0; c < 2; c++) begin
        vec_t a, b2, y;
        a = pe_ref(c, xs[0][v]); b2 = pe_ref(2 + c, xs[1][v]);
        for (int i = 0; i < TN; i++) begin
          int s; s = sat(sx(a[i*8 +: 8]) + sx(b2[i*8 +: 8]));
          y[i*8 +: 8] = s < 0 ? 8'd0 : 8'(s);
        end
        ys[c][v] = y;
      end
    end
    fork
      begin for (int v = 0; v < NVEC; v++) send_w(R0, xs[0][v]); ifm_w_in[R0].valid <= 0; end
      begin for (int v = 0; v < NVEC; v++) send_w(R0 + 1, xs[1][v]); ifm_w_in[R0 + 1].valid <= 0; end
    join
    wait (got[0].size() == NVEC && got[1].size() == NVEC);
    for (int c = 0; c < 2; c++)
      for (int v = 0; v < NVEC; v++) check("output slice", got[c][v] == ys[c][v]);
    for (int v = 1; v < NVEC; v++)
      check("one vector per step", t_out[0][v] - t_out[0][v-1] <= 64'(VB + 2));
    check("no illegal instruction", illegal == '0);
    check("idle tiles ran nothing", instr_count[0] == 0);
    $display("%0d vectors of %0d values through a %0dx%0d mesh, last output at cycle %0d",
             NVEC, 2 * TN, MR, MC, t_out[0][NVEC-1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
