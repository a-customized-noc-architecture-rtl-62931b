// tb_cim_pe: checks the PE model's matrix-vector product and its output handshake.
// Random weights are programmed column by column, random input vectors are applied,
// and each output beat is compared with a dot product computed in the testbench,
// shifted by ADC_SHIFT and clipped to 8 bits. The output sink stalls at random.
// Latency is checked: the first beat is valid one cycle after start, and with the sink
// always ready a vector leaves in NM/LANES cycles.
module tb_cim_pe;
  import domino_pkg::*;

  localparam int unsigned R = NC, C = NM, SH = 8;

  logic clk = 0, rst_n = 0, w_we = 0, start = 0, ready, out_ready = 1;
  logic [$clog2(C)-1:0] w_col = '0;
  logic [$clog2(R/LANES)-1:0] w_chunk = '0;
  beat_t w_data = '0;
  logic [R*8-1:0] in_vec = '0;
  link_t out_link;
  int checks = 0, failures = 0;
  int wts [R][C];

  cim_pe #(.ADC_SHIFT(SH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int c = 0; c < C; c++)
      for (int k = 0; k < R / LANES; k++) begin
        beat_t d;
        for (int l = 0; l < LANES; l++) begin
          wts[k*LANES + l][c] = int'($signed(8'($urandom)));
          d[l*8 +: 8] = 8'(wts[k*LANES + l][c]);
        end
        w_we <= 1; w_col <= c[$clog2(C)-1:0]; w_chunk <= k[$clog2(R/LANES)-1:0]; w_data <= d;
        @(posedge clk);
      end
    w_we <= 0;
    for (int v = 0; v < 6; v++) begin
      int x [R];
      int t0, beats;
      for (int r = 0; r < R; r++) begin
        x[r] = (v == 5) ? 127 : int'($signed(8'($urandom)));
        in_vec[r*8 +: 8] = 8'(x[r]);
      end
      out_ready <= (v < 3);
      @(posedge clk);
      check("ready before start", ready);
      start <= 1;
      @(posedge clk);
      start <= 0;
      t0 = $time;
      #1 check("first beat one cycle after start", out_link.valid);
      beats = 0;
      while (beats < C / LANES) begin
        @(posedge clk);
        if (out_link.valid && out_ready) begin
          for (int l = 0; l < LANES; l++) begin
            int acc, q, col;
            col = beats * LANES + l;
            acc = 0;
            for (int r = 0; r < R; r++) acc += x[r] * wts[r][col];
            q = acc >>> SH;
            q = q > 127 ? 127 : (q < -128 ? -128 : q);
            check("output value", int'($signed(out_link.data[l*8 +: 8])) == q);
          end
          beats++;
        end
        out_ready <= (v < 3) ? 1'b1 : 1'($urandom);
      end
      if (v < 3) check("vector in NM/LANES cycles", ($time - t0) == (C / LANES) * 10);
      @(posedge clk);
      #1 check("idle after last beat", ready && !out_link.valid);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
