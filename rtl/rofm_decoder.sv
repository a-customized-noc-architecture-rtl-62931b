// rofm_decoder: splits a 16-bit Domino instruction into the ROFM's control signals.
//
// Field positions follow the paper's instruction format: Rx Ctrl [15:11], Tx Ctrl [4:1]
// and the opcode bit [0] are common; a C-type word (opcode 0) carries Sum [10:7] and
// Buffer [6:5], an M-type word (opcode 1) carries Func [10:5]. What each bit inside a
// field means is this design's encoding, listed in domino_pkg. A C-type word always
// adds its selected operands. An M-type word applies one computation-unit function;
// it pops the buffer head whenever it reads it, and pushes its result into the buffer
// when it sends it nowhere (Tx Ctrl = 0). Purely combinational.
module rofm_decoder
  import domino_pkg::*;
(
  input  logic [INSTR_W-1:0] instr,
  output ctrl_t              ctrl,
  output logic               illegal   // reserved bit set or unknown function code
);

  instr_t w;
  assign w = instr_t'(instr);

  always_comb begin
    ctrl.rx_en  = w.rx.rx_en;
    ctrl.rx_src = w.rx.rx_src;
    ctrl.pe_en  = w.rx.pe_en;
    ctrl.tx     = w.tx;
    illegal     = w.rx.rx_en && (w.rx.rx_src > 3'd4);
    if (w.opc == OPC_C) begin
      ctrl.fn      = FN_ADD;
      ctrl.use_in  = w.mid[5];
      ctrl.use_pe  = w.mid[4];
      ctrl.use_buf = w.mid[3];
      ctrl.push    = w.mid[1];
      ctrl.pop     = w.mid[0];
      if (w.mid[2]) illegal = 1'b1;
    end else begin
      ctrl.use_in  = w.mid[2];
      ctrl.use_pe  = w.mid[1];
      ctrl.use_buf = w.mid[0];
      ctrl.push    = (w.tx == '0);
      ctrl.pop     = w.mid[0];
      if (w.mid[5:3] > 3'd5) begin
        ctrl.fn = FN_BP;
        illegal = 1'b1;
      end else begin
        ctrl.fn = func_e'(w.mid[5:3]);
      end
    end
  end

endmodule
