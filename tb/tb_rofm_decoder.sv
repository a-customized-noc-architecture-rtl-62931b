// tb_rofm_decoder: checks instruction decoding for C-type and M-type words.
// Every field combination of interest is built from its fields and the decoded
// control is compared with the expected meaning of the encoding.
module tb_rofm_decoder;
  import domino_pkg::*;

  logic [INSTR_W-1:0] instr;
  ctrl_t ctrl;
  logic illegal;
  int checks = 0, failures = 0;

  rofm_decoder dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d (instr %h)", what, got, exp, instr);
    end
  endtask

  initial begin
    // C-type: loop over random fields
    for (int i = 0; i < 500; i++) begin
      logic rx_en, pe_en, ui, up, ub, push, pop, m;
      logic [2:0] src;
      logic [3:0] tx;
      rx_en = 1'($urandom); pe_en = 1'($urandom); src = 3'($urandom % 5);
      ui = 1'($urandom); up = 1'($urandom); ub = 1'($urandom);
      push = 1'($urandom); pop = 1'($urandom); tx = 4'($urandom); m = 1'($urandom);
      if (!m) begin
        instr = {rx_en, src, pe_en, ui, up, ub, 1'b0, push, pop, tx, 1'b0};
        #1;
        expect_eq("C fn", int'(ctrl.fn), int'(FN_ADD));
        expect_eq("C push", ctrl.push, push);
        expect_eq("C pop", ctrl.pop, pop);
      end else begin
        logic [2:0] fn;
        fn = 3'($urandom % 6);
        instr = {rx_en, src, pe_en, fn, ui, up, ub, tx, 1'b1};
        #1;
        expect_eq("M fn", int'(ctrl.fn), int'(fn));
        expect_eq("M push", ctrl.push, (tx == 0));
        expect_eq("M pop", ctrl.pop, ub);
      end
      expect_eq("rx_en", ctrl.rx_en, rx_en);
      expect_eq("rx_src", ctrl.rx_src, src);
      expect_eq("pe_en", ctrl.pe_en, pe_en);
      expect_eq("use_in", ctrl.use_in, ui);
      expect_eq("use_pe", ctrl.use_pe, up);
      expect_eq("use_buf", ctrl.use_buf, ub);
      expect_eq("tx", ctrl.tx, tx);
      expect_eq("legal", illegal, 0);
    end
    // illegal words: reserved Sum bit, unknown function, bad source
    instr = 16'b0_000_0_0001_00_0000_0; #1 expect_eq("reserved", illegal, 1);
    instr = 16'b0_000_0_110_000_0000_1; #1 expect_eq("bad fn", illegal, 1);
    instr = 16'b1_111_0_0000_00_0000_0; #1 expect_eq("bad src", illegal, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
