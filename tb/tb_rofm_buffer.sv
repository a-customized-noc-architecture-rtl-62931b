// tb_rofm_buffer: checks the ROFM data buffer as a queue.
// Random pushes and pops are compared with a testbench queue; reads at an offset
// behind the head, full and empty flags, level and the full 1024-beat capacity are
// checked.
module tb_rofm_buffer;
  import domino_pkg::*;

  localparam int unsigned DEPTH = ROFM_BUF_BYTES / LANES;

  logic clk = 0, rst_n = 0, push = 0, pop = 0;
  beat_t wr_data = '0, rd_data;
  logic [$clog2(DEPTH)-1:0] rd_off = '0;
  logic full, empty;
  logic [$clog2(DEPTH):0] level;
  beat_t q[$];
  int checks = 0, failures = 0;

  rofm_buffer dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic cycle(logic do_push, logic do_pop);
    beat_t d;
    d = {$urandom, $urandom, $urandom, $urandom};
    push <= do_push; pop <= do_pop; wr_data <= d;
    @(posedge clk);
    push <= 0; pop <= 0;
    if (do_pop)  void'(q.pop_front());
    if (do_push) q.push_back(d);
    #1;
    check("level", int'(level) == q.size());
    check("empty", empty == (q.size() == 0));
    check("full", full == (q.size() == DEPTH));
    if (q.size() > 0) begin
      int off;
      off = $urandom % q.size();
      rd_off = off[$clog2(DEPTH)-1:0];
      #1 check("read", rd_data == q[off]);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    #1 check("reset empty", empty && !full && level == 0);
    for (int i = 0; i < 2000; i++) begin
      logic pu, po;
      pu = ($urandom % 3 != 0) && q.size() < DEPTH;
      po = ($urandom % 2 == 0) && q.size() > 0;
      cycle(pu, po);
    end
    while (q.size() < DEPTH) cycle(1, 0);
    check("full at capacity", full);
    while (q.size() > 0) cycle(0, 1);
    check("empty again", empty);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
