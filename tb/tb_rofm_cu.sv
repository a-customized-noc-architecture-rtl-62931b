// tb_rofm_cu: checks the ROFM adders and computation unit lane by lane.
// Random beats and random function/operand choices are applied; each lane is
// compared with a reference computed here in wide integer arithmetic.
module tb_rofm_cu;
  import domino_pkg::*;

  func_e fn;
  logic use_in, use_pe, use_buf;
  logic [7:0] scale;
  beat_t in_data, pe_data, buf_data, result;
  int checks = 0, failures = 0;

  rofm_cu dut (.*);

  function automatic int sat(int v);
    return v > 127 ? 127 : (v < -128 ? -128 : v);
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 3000; i++) begin
      fn = func_e'($urandom % 6);
      use_in = 1'($urandom); use_pe = 1'($urandom); use_buf = 1'($urandom);
      scale = 8'($urandom);
      in_data  = {$urandom, $urandom, $urandom, $urandom};
      pe_data  = {$urandom, $urandom, $urandom, $urandom};
      buf_data = {$urandom, $urandom, $urandom, $urandom};
      #1;
      for (int l = 0; l < LANES; l++) begin
        int a, p, b, s, m, e, got;
        a = int'($signed(in_data[l*8 +: 8]));
        p = int'($signed(pe_data[l*8 +: 8]));
        b = int'($signed(buf_data[l*8 +: 8]));
        s = sat((use_in ? a : 0) + (use_pe ? p : 0) + (use_buf ? b : 0));
        m = -1000;
        if (use_in) m = a;
        if (use_pe && p > m) m = p;
        if (use_buf && b > m) m = b;
        if (m == -1000) m = 0;
        case (fn)
          FN_ADD:    e = s;
          FN_ACT:    e = s < 0 ? 0 : s;
          FN_CMP:    e = m;
          FN_MUL:    e = sat((s * int'(scale)) >>> 8);
          FN_BP:     e = a;
          default: begin
            e = sat((use_in ? a : 0) + (use_pe ? p : 0));
            if (e < 0) e = 0;
            if (use_buf && b > e) e = b;
          end
        endcase
        got = int'($signed(result[l*8 +: 8]));
        checks++;
        if (got != e) begin
          failures++;
          if (failures < 10) $display("FAIL fn=%0d lane %0d: got %0d expected %0d", fn, l, got, e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
