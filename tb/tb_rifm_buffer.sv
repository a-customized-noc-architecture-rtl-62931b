// tb_rifm_buffer: checks the RIFM buffer's block shift.
// Random beats are written; after every write the whole 256-byte vector is compared
// with a reference array shifted in the testbench. Full loads (16 beats) and partial
// loads of 64 and 128 bytes are covered, and clear is checked.
module tb_rifm_buffer;
  import domino_pkg::*;

  localparam int unsigned BYTES = RIFM_BUF_BYTES;

  logic clk = 0, rst_n = 0, clr = 0, wr_en = 0;
  beat_t wr_data = '0;
  logic [BYTES*8-1:0] vec;
  logic [7:0] ref_mem [BYTES];
  int checks = 0, failures = 0;

  rifm_buffer dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare(string what);
    int bad = 0;
    for (int i = 0; i < BYTES; i++)
      if (vec[i*8 +: 8] !== ref_mem[i]) bad++;
    checks++;
    if (bad != 0) begin
      failures++;
      $display("FAIL %s: %0d bytes differ", what, bad);
    end
  endtask

  task automatic write_beat(beat_t d);
    wr_en   <= 1'b1;
    wr_data <= d;
    @(posedge clk);
    wr_en   <= 1'b0;
    // reference: drop LANES bytes at the bottom, new beat on top
    for (int i = 0; i < BYTES - LANES; i++) ref_mem[i] = ref_mem[i + LANES];
    for (int l = 0; l < LANES; l++) ref_mem[BYTES - LANES + l] = d[l*8 +: 8];
    #1 compare("write");
  endtask

  initial begin
    for (int i = 0; i < BYTES; i++) ref_mem[i] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    compare("reset");
    // full load: first beat ends at bytes 0..15
    for (int b = 0; b < BYTES / LANES; b++) write_beat({$urandom, $urandom, $urandom, $urandom});
    // 64-byte step and 128-byte step
    for (int b = 0; b < 4; b++) write_beat({$urandom, $urandom, $urandom, $urandom});
    for (int b = 0; b < 8; b++) write_beat({$urandom, $urandom, $urandom, $urandom});
    // idle cycles keep the contents
    repeat (3) @(posedge clk);
    #1 compare("hold");
    clr <= 1'b1;
    @(posedge clk);
    clr <= 1'b0;
    for (int i = 0; i < BYTES; i++) ref_mem[i] = '0;
    #1 compare("clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
