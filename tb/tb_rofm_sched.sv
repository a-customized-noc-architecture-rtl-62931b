// tb_rofm_sched: checks the schedule table and its periodic index counter.
// The table is filled with distinct words; with a chosen period the counter must
// fetch entries 0..period-1 in order and wrap, only when advanced and running.
module tb_rofm_sched;
  import domino_pkg::*;

  localparam int unsigned DEPTH = SCHED_DEPTH;

  logic clk = 0, rst_n = 0, we = 0, run = 0, clear = 0, advance = 0;
  logic [$clog2(DEPTH)-1:0] waddr = '0, idx;
  logic [INSTR_W-1:0] wdata = '0, instr;
  logic [$clog2(DEPTH):0] period = 1;
  logic [31:0] count;
  logic [15:0] image [DEPTH];
  int checks = 0, failures = 0;

  rofm_sched dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
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
    for (int i = 0; i < DEPTH; i++) begin
      image[i] = 16'($urandom);
      we <= 1; waddr <= i[$clog2(DEPTH)-1:0]; wdata <= image[i];
      @(posedge clk);
    end
    we <= 0;
    for (int k = 0; k < 4; k++) begin
      int p, exp_idx;
      p = (k == 0) ? 1 : (k == 1) ? 7 : (k == 2) ? 114 : 128;
      period <= p[$clog2(DEPTH):0];
      clear <= 1; @(posedge clk); clear <= 0;
      run <= 1;
      exp_idx = 0;
      for (int n = 0; n < 300; n++) begin
        logic adv;
        adv = 1'($urandom);
        advance <= adv;
        #1 check("instr", instr == image[exp_idx] && idx == exp_idx);
        @(posedge clk);
        if (adv) exp_idx = (exp_idx + 1) % p;
      end
      advance <= 0;
      // not running: no movement
      run <= 0; advance <= 1;
      @(posedge clk);
      advance <= 0;
      #1 check("hold when stopped", idx == exp_idx);
    end
    check("count", count != 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
