// domino_pkg: constants, types and arithmetic helpers shared by the Domino tile.
//
// Domino is a 2-D mesh of tiles. Each tile holds a computing-in-memory array (PE),
// an input router (RIFM) that moves input feature maps, and an output router (ROFM)
// that moves and sums partial results while they travel between tiles.
//
// Data width and datapath slicing. Activations, weights and partial sums are 8-bit
// signed values (the paper evaluates 8-bit precision). A vector of NM = 256 outputs
// (or NC = 256 inputs) is moved as STEP_BEATS = 16 beats of LANES = 16 bytes. The
// 16-lane beat comes from the ROFM adder size "8b x 8 x 2" and the two 64-bit input
// and output registers of the paper's configuration table; 16 beats per vector
// matches the 160 MHz peripheral clock against the 10 MHz instruction step. The beat
// slicing itself is this design's choice.
//
// Instruction word (16 bits), field positions as printed in the paper's format table:
//   [15:11] Rx Ctrl  [10:7] Sum   [6:5] Buffer  [4:1] Tx Ctrl  [0] Opc   (C-type, Opc=0)
//   [15:11] Rx Ctrl  [10:5] Func                [4:1] Tx Ctrl  [0] Opc   (M-type, Opc=1)
// The encodings inside each field are this design's own (the paper names the fields
// only):
//   Rx Ctrl : [15] rx_en, [14:12] rx_src (E,W,N,S,shortcut), [11] pe_en
//   Sum     : [10] add input register, [9] add PE result, [8] add buffer head, [7] reserved
//   Buffer  : [6] push result into the ROFM buffer, [5] pop the buffer head
//   Func    : [10:8] function (Bp, Add, Act, Cmp, Mul, ActCmp), [7:5] operand mask as Sum
//   Tx Ctrl : [4:1] one bit per output direction {S,N,W,E} = bits {4,3,2,1}
//   M-type results with Tx Ctrl = 0 stay in the tile: they are pushed into the buffer.
//   An M-type instruction pops the buffer head whenever it uses it.
package domino_pkg;

  localparam int unsigned DATA_W     = 8;    // precision of activations, weights, sums
  localparam int unsigned NC         = 256;  // crossbar rows (input channels per tile)
  localparam int unsigned NM         = 256;  // crossbar columns (output channels per tile)
  localparam int unsigned LANES      = 16;   // bytes per beat (adders 8b x 8 x 2)
  localparam int unsigned BEAT_W     = LANES * DATA_W;  // 128-bit beat
  localparam int unsigned STEP_BEATS = NM / LANES;      // 16 beats per vector
  localparam int unsigned INSTR_W    = 16;   // instruction width
  localparam int unsigned SCHED_DEPTH = 128; // schedule table entries
  localparam int unsigned RIFM_BUF_BYTES = 256;    // RIFM buffer, 256 B
  localparam int unsigned ROFM_BUF_BYTES = 16384;  // ROFM data buffer, 16 KiB

  typedef logic [BEAT_W-1:0] beat_t;
  typedef logic signed [DATA_W-1:0] elem_t;

  // Mesh directions. The order E, W, N, S follows the port labels of the tile figure.
  typedef enum logic [2:0] {
    DIR_E  = 3'd0,
    DIR_W  = 3'd1,
    DIR_N  = 3'd2,
    DIR_S  = 3'd3,
    SRC_SC = 3'd4   // RIFM-to-ROFM shortcut (ROFM receive source only)
  } dir_e;

  localparam int unsigned NDIR = 4;

  // A link carries one beat with a valid bit; ready flows back separately.
  typedef struct packed {
    logic  valid;
    beat_t data;
  } link_t;

  typedef enum logic {
    OPC_C = 1'b0,
    OPC_M = 1'b1
  } opc_e;

  typedef enum logic [2:0] {
    FN_BP     = 3'd0,  // direct transmission of the input register (skip connection)
    FN_ADD    = 3'd1,  // sum of the selected operands
    FN_ACT    = 3'd2,  // ReLU of the sum
    FN_CMP    = 3'd3,  // maximum of the selected operands (max pooling)
    FN_MUL    = 3'd4,  // sum times a scaling factor (average pooling)
    FN_ACTCMP = 3'd5   // ReLU of (input + PE), then max with the buffer head
  } func_e;

  typedef struct packed {
    logic       rx_en;
    logic [2:0] rx_src;
    logic       pe_en;
  } rx_ctrl_t;

  typedef struct packed {
    rx_ctrl_t   rx;
    logic [5:0] mid;   // Sum+Buffer (C-type) or Func (M-type)
    logic [3:0] tx;
    logic       opc;
  } instr_t;

  // Decoded control for one instruction step.
  typedef struct packed {
    logic       rx_en;    // take one vector from the rx_src port
    logic [2:0] rx_src;
    logic       pe_en;    // take one vector from the local PE
    logic       use_in;   // operand: input register
    logic       use_pe;   // operand: PE result
    logic       use_buf;  // operand: ROFM buffer head
    logic       push;     // push the result into the ROFM buffer
    logic       pop;      // drop the buffer head after use
    func_e      fn;
    logic [3:0] tx;       // output direction mask {S,N,W,E}
  } ctrl_t;

  // RIFM configuration, loaded once before a layer runs.
  typedef struct packed {
    logic [2:0] in_dir;      // receiving direction (DIR_E..DIR_S)
    logic [3:0] fwd_mask;    // forward received beats to these directions {S,N,W,E}
    logic       pe_en;       // start the PE after each complete step
    logic       sc_en;       // copy received beats to the ROFM shortcut
    logic [4:0] step_beats;  // beats per step: 4 (64 B), 8 (128 B) or 16 (256 B)
  } rifm_cfg_t;

  // Per-tile control register, written once before a layer runs.
  typedef struct packed {
    logic [7:0] mul_scale;   // ROFM Q0.8 scaling factor for average pooling
    logic [7:0] period;      // ROFM schedule period, 1..SCHED_DEPTH
    logic       run;         // start the ROFM schedule
    rifm_cfg_t  rifm;
  } tile_cfg_t;

  // Configuration write targets inside a tile.
  typedef enum logic [1:0] {
    CFG_CTRL   = 2'd0,   // tile_cfg_t in the low bits of the data
    CFG_SCHED  = 2'd1,   // schedule table entry: address = index, data[15:0] = instruction
    CFG_WEIGHT = 2'd2    // crossbar weights: address = {column, row chunk}, data = LANES weights
  } cfg_sel_e;

  function automatic elem_t sat8(input logic signed [15:0] v);
    if (v > 16'sd127) return 8'sd127;
    if (v < -16'sd128) return -8'sd128;
    return v[7:0];
  endfunction

  function automatic elem_t relu8(input elem_t v);
    return (v < 0) ? '0 : v;
  endfunction

  function automatic elem_t max8(input elem_t a, input elem_t b);
    return (a > b) ? a : b;
  endfunction

  function automatic elem_t lane(input beat_t b, input int unsigned i);
    return elem_t'(b[i*DATA_W +: DATA_W]);
  endfunction

endpackage
