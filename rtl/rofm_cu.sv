// rofm_cu: the ROFM adders and computation unit, one beat of LANES bytes per cycle.
//
// The paper's ROFM adds partial sums and group sums (Add) and has a computation unit
// with activation (Act), comparison for max pooling (Cmp), multiplication by a scaling
// factor for average pooling (Mul) and direct transmission for skip connections (Bp).
// Each of the LANES lanes works on one 8-bit value. The operands are the input
// register (a beat received from a neighbour or the shortcut), the local PE result and
// the head of the ROFM buffer, each used when its use_* bit is set.
//   FN_ADD    r = sat(sum of used operands)
//   FN_ACT    r = ReLU(sat(sum of used operands))
//   FN_CMP    r = max of used operands (0 when none)
//   FN_MUL    r = sat((sum * scale) >>> 8), scale an unsigned Q0.8 factor (64 = 1/4)
//   FN_BP     r = input register, unchanged
//   FN_ACTCMP r = ReLU(sat(in + pe)), then max with the buffer head when use_buf
// Saturating 8-bit arithmetic, ReLU as the activation and the Q0.8 scale are this
// design's choices; the paper names the functions only. Purely combinational.
module rofm_cu
  import domino_pkg::*;
(
  input  func_e      fn,
  input  logic       use_in,
  input  logic       use_pe,
  input  logic       use_buf,
  input  logic [7:0] scale,
  input  beat_t      in_data,
  input  beat_t      pe_data,
  input  beat_t      buf_data,
  output beat_t      result
);

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      elem_t a, p, b, s, m, r, ip;
      logic signed [15:0] wide;
      logic signed [15:0] prod;
      logic               any;
      a = lane(in_data, l);
      p = lane(pe_data, l);
      b = lane(buf_data, l);
      wide = '0;
      if (use_in)  wide += 16'(a);
      if (use_pe)  wide += 16'(p);
      if (use_buf) wide += 16'(b);
      s = sat8(wide);
      any = 1'b0;
      m = '0;
      if (use_in)  begin m = a;                         any = 1'b1; end
      if (use_pe)  begin m = any ? max8(m, p) : p;      any = 1'b1; end
      if (use_buf) begin m = any ? max8(m, b) : b;      any = 1'b1; end
      ip = sat8((use_in ? 16'(a) : 16'sd0) + (use_pe ? 16'(p) : 16'sd0));
      prod = (16'(s) * $signed({8'd0, scale})) >>> 8;
      unique case (fn)
        FN_ADD:    r = s;
        FN_ACT:    r = relu8(s);
        FN_CMP:    r = m;
        FN_MUL:    r = sat8(prod);
        FN_BP:     r = a;
        FN_ACTCMP: r = use_buf ? max8(relu8(ip), b) : relu8(ip);
        default:   r = a;
      endcase
      result[l*DATA_W +: DATA_W] = r;
    end
  end

endmodule
