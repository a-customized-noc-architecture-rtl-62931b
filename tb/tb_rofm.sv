// tb_rofm: runs a schedule through the ROFM and compares every output beat.
// The schedule exercises each instruction kind of the design: the add-while-transfer
// of a partial-sum chain, a group sum pushed into the buffer and later sent on, an
// M-type activation, a shortcut vector kept in the buffer and compared with a new
// activation (block-reuse pooling), an average-pooling multiply, a bypass of the
// shortcut, and a step that consumes a vector and sends nothing. Sources (west port,
// shortcut, PE) offer beats with random gaps and sinks (east, south) accept at random,
// so stalls happen. A testbench model of the same program produces the expected beats.
// A second phase with no gaps checks the step time: STEP_BEATS + 2 cycles per step.
module tb_rofm;
  import domino_pkg::*;

  localparam int unsigned BEATS = STEP_BEATS;

  logic clk = 0, rst_n = 0, sched_we = 0, run = 0;
  logic [6:0] sched_addr = '0;
  logic [15:0] sched_data = '0;
  logic [7:0] period = 8'd1, mul_scale = 8'd64;
  link_t [NDIR-1:0] in_link, out_link;
  logic  [NDIR-1:0] in_ready, out_ready;
  link_t sc_link, pe_link;
  logic sc_ready, pe_ready, stall, illegal;
  logic [31:0] instr_count;
  int checks = 0, failures = 0;

  rofm dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  // ---------------- program ----------------
  function automatic logic [15:0] c_ins(logic rx, logic [2:0] src, logic pe, logic ui, logic up,
                                        logic ub, logic push, logic pop, logic [3:0] tx);
    return {rx, src, pe, ui, up, ub, 1'b0, push, pop, tx, 1'b0};
  endfunction
  function automatic logic [15:0] m_ins(logic rx, logic [2:0] src, logic pe, func_e fn,
                                        logic ui, logic up, logic ub, logic [3:0] tx);
    return {rx, src, pe, 3'(fn), ui, up, ub, tx, 1'b1};
  endfunction

  localparam logic [3:0] TX_E = 4'b0001, TX_S = 4'b1000;
  logic [15:0] prog [9];
  initial begin
    prog[0] = c_ins(1, DIR_W, 1, 1, 1, 0, 0, 0, TX_E);       // in + pe -> E
    prog[1] = c_ins(1, DIR_W, 1, 1, 1, 0, 1, 0, 4'b0);       // in + pe -> buffer
    prog[2] = c_ins(0, 0, 0, 0, 0, 1, 0, 1, TX_S);           // buffer -> S (pop)
    prog[3] = m_ins(1, DIR_W, 1, FN_ACT, 1, 1, 0, TX_E);     // relu(in + pe) -> E
    prog[4] = c_ins(1, SRC_SC, 0, 1, 0, 0, 1, 0, 4'b0);      // shortcut -> buffer
    prog[5] = m_ins(1, DIR_W, 1, FN_ACTCMP, 1, 1, 1, 4'b0);  // max(relu(in+pe), buf) -> buffer
    prog[6] = m_ins(0, 0, 0, FN_MUL, 0, 0, 1, TX_E);         // buf * scale -> E
    prog[7] = m_ins(1, SRC_SC, 0, FN_BP, 1, 0, 0, TX_S);     // shortcut bypass -> S
    prog[8] = c_ins(1, DIR_W, 1, 0, 0, 0, 0, 0, 4'b0);       // consume, send nothing
  end

  // ---------------- stimulus vectors and reference model ----------------
  typedef logic [BEATS*BEAT_W-1:0] vec_t;   // byte i at bits [8i +: 8]
  vec_t w_vecs[$], sc_vecs[$], pe_vecs[$], buf_q[$], exp_e[$], exp_s[$];

  function automatic int sx(logic [7:0] v); return int'($signed(v)); endfunction
  function automatic logic [7:0] sat(int v);
    return 8'(v > 127 ? 127 : (v < -128 ? -128 : v));
  endfunction
  function automatic vec_t rnd_vec();
    vec_t v;
    for (int i = 0; i < BEATS * LANES / 4; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  task automatic model(int periods);
    for (int p = 0; p < periods; p++) begin
      vec_t w, s, e, b, r;
      // 0
      w = rnd_vec(); e = rnd_vec(); w_vecs.push_back(w); pe_vecs.push_back(e);
      for (int i = 0; i < BEATS*LANES; i++) r[i*8 +: 8] = sat(sx(w[i*8 +: 8]) + sx(e[i*8 +: 8]));
      exp_e.push_back(r);
      // 1
      w = rnd_vec(); e = rnd_vec(); w_vecs.push_back(w); pe_vecs.push_back(e);
      for (int i = 0; i < BEATS*LANES; i++) r[i*8 +: 8] = sat(sx(w[i*8 +: 8]) + sx(e[i*8 +: 8]));
      buf_q.push_back(r);
      // 2
      exp_s.push_back(buf_q.pop_front());
      // 3
      w = rnd_vec(); e = rnd_vec(); w_vecs.push_back(w); pe_vecs.push_back(e);
      for (int i = 0; i < BEATS*LANES; i++) begin int t; t = sx(sat(sx(w[i*8 +: 8]) + sx(e[i*8 +: 8]))); r[i*8 +: 8] = 8'(t < 0 ? 0 : t); end
      exp_e.push_back(r);
      // 4
      s = rnd_vec(); sc_vecs.push_back(s);
      buf_q.push_back(s);
      // 5
      w = rnd_vec(); e = rnd_vec(); w_vecs.push_back(w); pe_vecs.push_back(e);
      b = buf_q.pop_front();
      for (int i = 0; i < BEATS*LANES; i++) begin
        int t; t = sx(sat(sx(w[i*8 +: 8]) + sx(e[i*8 +: 8]))); if (t < 0) t = 0;
        r[i*8 +: 8] = 8'(sx(b[i*8 +: 8]) > t ? sx(b[i*8 +: 8]) : t);
      end
      buf_q.push_back(r);
      // 6
      b = buf_q.pop_front();
      for (int i = 0; i < BEATS*LANES; i++) r[i*8 +: 8] = sat((sx(b[i*8 +: 8]) * int'(mul_scale)) >>> 8);
      exp_e.push_back(r);
      // 7
      s = rnd_vec(); sc_vecs.push_back(s);
      exp_s.push_back(s);
      // 8
      w = rnd_vec(); e = rnd_vec(); w_vecs.push_back(w); pe_vecs.push_back(e);
    end
  endtask

  // ---------------- sources ----------------
  bit gaps = 1, sink_random = 1;
  int n_stall = 0, n_e = 0, n_s = 0;

  task automatic source_w();
    while (w_vecs.size() > 0) begin
      vec_t v; v = w_vecs.pop_front();
      for (int b = 0; b < BEATS; b++) begin
        beat_t d;
        d = v[b*BEAT_W +: BEAT_W];
        if (gaps && $urandom % 4 == 0) begin in_link[DIR_W].valid <= 0; @(posedge clk); end
        in_link[DIR_W].valid <= 1; in_link[DIR_W].data <= d;
        do @(negedge clk); while (!in_ready[DIR_W]);
        @(posedge clk);
      end
    end
    in_link[DIR_W].valid <= 0;
  endtask
  task automatic source_sc();
    while (sc_vecs.size() > 0) begin
      vec_t v; v = sc_vecs.pop_front();
      for (int b = 0; b < BEATS; b++) begin
        beat_t d;
        d = v[b*BEAT_W +: BEAT_W];
        if (gaps && $urandom % 4 == 0) begin sc_link.valid <= 0; @(posedge clk); end
        sc_link.valid <= 1; sc_link.data <= d;
        do @(negedge clk); while (!sc_ready);
        @(posedge clk);
      end
    end
    sc_link.valid <= 0;
  endtask
  task automatic source_pe();
    while (pe_vecs.size() > 0) begin
      vec_t v; v = pe_vecs.pop_front();
      for (int b = 0; b < BEATS; b++) begin
        beat_t d;
        d = v[b*BEAT_W +: BEAT_W];
        if (gaps && $urandom % 4 == 0) begin pe_link.valid <= 0; @(posedge clk); end
        pe_link.valid <= 1; pe_link.data <= d;
        do @(negedge clk); while (!pe_ready);
        @(posedge clk);
      end
    end
    pe_link.valid <= 0;
  endtask

  // ---------------- sinks ----------------
  int e_beat = 0, s_beat = 0;
  always @(posedge clk) begin
    out_ready <= sink_random ? 4'($urandom) : 4'hf;
    if (rst_n && stall) n_stall++;
    if (rst_n && illegal && run) check("no illegal instruction", 0);
    if (rst_n && out_link[DIR_E].valid && out_ready[DIR_E]) begin
      logic ok; ok = exp_e.size() > 0;
      if (ok) ok = (out_link[DIR_E].data == exp_e[0][e_beat*BEAT_W +: BEAT_W]);
      check("east beat", ok);
      if (++e_beat == BEATS) begin e_beat = 0; void'(exp_e.pop_front()); n_e++; end
    end
    if (rst_n && out_link[DIR_S].valid && out_ready[DIR_S]) begin
      logic ok; ok = exp_s.size() > 0;
      if (ok) ok = (out_link[DIR_S].data == exp_s[0][s_beat*BEAT_W +: BEAT_W]);
      check("south beat", ok);
      if (++s_beat == BEATS) begin s_beat = 0; void'(exp_s.pop_front()); n_s++; end
    end
    if (rst_n) check("no output on W/N", !out_link[DIR_W].valid && !out_link[DIR_N].valid);
  end

  initial begin
    int t0, t1;
    in_link = '0; sc_link = '0; pe_link = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    foreach (prog[i]) begin
      sched_we <= 1; sched_addr <= 7'(i); sched_data <= prog[i];
      @(posedge clk);
    end
    sched_we <= 0; period <= 8'd9;
    model(3);
    @(posedge clk);
    run <= 1;
    fork source_w(); source_sc(); source_pe(); join
    wait (instr_count == 27);
    repeat (5) @(posedge clk);
    check("all east vectors", exp_e.size() == 0 && n_e == 9);
    check("all south vectors", exp_s.size() == 0 && n_s == 6);
    check("stalls happened", n_stall > 0);
    check("buffer empty at end of periods", dut.buf_empty);
    // phase 2: no gaps, sinks always ready: step time
    gaps = 0; sink_random = 0;
    model(2);
    fork source_w(); source_sc(); source_pe(); join_none
    wait (instr_count == 28);
    t0 = $time;
    wait (instr_count == 45);
    t1 = $time;
    $display("cycles per step: %0d/17", (t1 - t0) / 10);
    check("step time STEP_BEATS+2 cycles", (t1 - t0) / 10 <= 17 * (BEATS + 2));
    wait (instr_count == 45);
    repeat (40) @(posedge clk);
    check("phase 2 outputs", exp_e.size() == 0 && exp_s.size() == 0);
    $display("stall cycles=%0d", n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
