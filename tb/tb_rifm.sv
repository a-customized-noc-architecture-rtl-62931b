// tb_rifm: checks the input router.
// Beats enter on the west port with random gaps. The testbench checks that they come
// out, in order, on the configured forward port (east), that after each step the
// shortcut carries the whole buffer, that the PE is started once per step with the buffer holding the expected bytes, that no
// start is given while the PE model is busy (back-pressure) and that the other ports
// are never made ready. Steps of 256 bytes and then of 64 bytes (block shift) are run.
module tb_rifm;
  import domino_pkg::*;

  logic clk = 0, rst_n = 0;
  rifm_cfg_t cfg;
  link_t [NDIR-1:0] in_link, out_link;
  logic  [NDIR-1:0] in_ready, out_ready;
  logic pe_start, pe_ready, sc_ready, stall;
  logic [NC*8-1:0] pe_vec;
  link_t sc_link;
  logic [15:0] step_count;
  int checks = 0, failures = 0;

  rifm dut (.*);

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

  beat_t sent[$], fwd_exp[$], sc_exp[$];
  logic [7:0] ref_mem [NC], ref_snap [NC];
  int n_starts = 0, n_stalls = 0, pe_busy = 0, exp_starts = 0;

  // PE model: busy for a random time after each start.
  assign pe_ready = (pe_busy == 0);
  always @(posedge clk) begin
    if (pe_busy > 0) pe_busy <= pe_busy - 1;
    if (pe_start) begin
      check("start only when PE idle", pe_busy == 0);
      pe_busy <= 10 + $urandom % 30;
      n_starts++;
      for (int i = 0; i < NC; i++) check("pe_vec", pe_vec[i*8 +: 8] == ref_snap[i]);
    end
    if (stall) n_stalls++;
    if (rst_n) check("only the configured port is ready", (in_ready & 4'b1101) == 0);
  end

  // Sinks with random ready.
  always @(posedge clk) begin
    out_ready <= 4'($urandom);
    sc_ready  <= 1'($urandom);
  end
  always @(posedge clk) if (rst_n) begin
    if (out_link[DIR_E].valid && out_ready[DIR_E]) begin
      check("forward order", fwd_exp.size() > 0 && out_link[DIR_E].data == fwd_exp[0]);
      void'(fwd_exp.pop_front());
    end
    check("no forward to unconfigured ports", !out_link[DIR_W].valid && !out_link[DIR_N].valid && !out_link[DIR_S].valid);
    if (sc_link.valid && sc_ready) begin
      check("shortcut order", sc_exp.size() > 0 && sc_link.data == sc_exp[0]);
      void'(sc_exp.pop_front());
    end
  end

  // Source on the west port; the reference buffer is updated on every accepted beat.
  int beat_in_step = 0;
  always @(posedge clk) if (rst_n) begin
    if (in_link[DIR_W].valid && in_ready[DIR_W]) begin
      for (int i = 0; i < NC - LANES; i++) ref_mem[i] = ref_mem[i + LANES];
      for (int l = 0; l < LANES; l++) ref_mem[NC - LANES + l] = in_link[DIR_W].data[l*8 +: 8];
      fwd_exp.push_back(in_link[DIR_W].data);
      beat_in_step++;
      if (beat_in_step == int'(cfg.step_beats)) begin
        beat_in_step = 0;
        ref_snap = ref_mem;   // what the PE must see at the next start
        for (int b = 0; b < NC / LANES; b++) begin   // the shortcut carries the whole buffer
          beat_t d;
          for (int l = 0; l < LANES; l++) d[l*8 +: 8] = ref_mem[b*LANES + l];
          sc_exp.push_back(d);
        end
      end
    end
  end

  task automatic send(int nbeats);
    for (int i = 0; i < nbeats; i++) begin
      beat_t d;
      d = {$urandom, $urandom, $urandom, $urandom};
      if ($urandom % 3 == 0) begin
        in_link[DIR_W].valid <= 0;
        repeat (1 + $urandom % 3) @(posedge clk);
      end
      in_link[DIR_W].valid <= 1; in_link[DIR_W].data <= d;
      // ready is stable at the falling edge; the beat moves at the next rising edge
      do @(negedge clk); while (!in_ready[DIR_W]);
      @(posedge clk);
    end
    in_link[DIR_W].valid <= 0;
  endtask

  initial begin
    in_link = '0;
    for (int i = 0; i < NC; i++) ref_mem[i] = 0;
    cfg = '{in_dir: DIR_W, fwd_mask: 4'b0001, pe_en: 1, sc_en: 1, step_beats: 16};
    repeat (3) @(posedge clk);
    rst_n <= 1;
    send(16 * 6);
    repeat (60) @(posedge clk);
    check("six full steps", n_starts == 6 && step_count == 6);
    cfg.step_beats = 4;  // 64-byte block shift
    send(4 * 10);
    repeat (60) @(posedge clk);
    check("ten 64-byte steps", n_starts == 16 && step_count == 16);
    check("all beats forwarded", fwd_exp.size() == 0 && sc_exp.size() == 0);
    check("back-pressure seen", n_stalls > 0);
    $display("stalls=%0d starts=%0d", n_stalls, n_starts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
