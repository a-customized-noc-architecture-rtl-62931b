// domino_top: a Domino chip, a 2-D mesh of MESH_ROWS x MESH_COLS tiles.
//
// Every tile's RIFM and ROFM links connect to the same router of the four neighbouring
// tiles, giving two meshes: one carrying input feature maps, one carrying partial sums,
// group sums and layer outputs. A layer is mapped onto a group of tiles by configuration
// alone; data enter and leave the chip at the mesh edges, which are the top's ports (on
// silicon these edges meet the inter-chip transceivers, which are not part of this RTL).
// The paper evaluates 240 CIM arrays per chip; the 16 x 15 arrangement is this design's
// choice, as the paper gives no mesh shape.
//
// Interface: cfg_* writes configuration into the tile numbered cfg_tile (row-major).
// Edge links, each valid/ready: *_n_* along the north edge (one per column), *_s_*
// south, *_w_* west (one per row), *_e_* east; ifm_* belong to the input-feature mesh,
// ofm_* to the output mesh. "_in" links enter the chip, "_out" links leave it.
// Status: per-tile instruction counts and stall/illegal flags.
//
// Timing: a beat moves one tile per cycle through the register stages inside the
// routers. Ready signals are combinational: a router's in_ready depends on whether its
// own output register drains this cycle, which depends on the next router's ready. A
// lint tool therefore sees the ready arrays of neighbouring tiles feeding each other
// and reports circular combinational logic. No loop exists in a working configuration:
// each router raises ready only on the one port its configuration or current
// instruction selects, so ready follows the configured data path, which never returns
// to its start. A configuration whose paths formed a ring would close the loop; such a
// mapping is not a valid layer mapping.
module domino_top
  import domino_pkg::*;
#(
  parameter int unsigned MESH_ROWS = 16,
  parameter int unsigned MESH_COLS = 15,
  parameter int unsigned TILE_NC   = NC,
  parameter int unsigned TILE_NM   = NM,
  parameter int unsigned BUF_BYTES = ROFM_BUF_BYTES,
  parameter int unsigned SCHED_D   = SCHED_DEPTH,
  parameter int unsigned ADC_SHIFT = 8
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         cfg_we,
  input  logic [15:0]                  cfg_tile,
  input  cfg_sel_e                     cfg_sel,
  input  logic [15:0]                  cfg_addr,
  input  beat_t                        cfg_data,
  // input-feature mesh edges
  input  link_t [MESH_COLS-1:0]        ifm_n_in,
  output logic  [MESH_COLS-1:0]        ifm_n_in_ready,
  input  link_t [MESH_COLS-1:0]        ifm_s_in,
  output logic  [MESH_COLS-1:0]        ifm_s_in_ready,
  input  link_t [MESH_ROWS-1:0]        ifm_w_in,
  output logic  [MESH_ROWS-1:0]        ifm_w_in_ready,
  input  link_t [MESH_ROWS-1:0]        ifm_e_in,
  output logic  [MESH_ROWS-1:0]        ifm_e_in_ready,
  output link_t [MESH_COLS-1:0]        ifm_n_out,
  input  logic  [MESH_COLS-1:0]        ifm_n_out_ready,
  output link_t [MESH_COLS-1:0]        ifm_s_out,
  input  logic  [MESH_COLS-1:0]        ifm_s_out_ready,
  output link_t [MESH_ROWS-1:0]        ifm_w_out,
  input  logic  [MESH_ROWS-1:0]        ifm_w_out_ready,
  output link_t [MESH_ROWS-1:0]        ifm_e_out,
  input  logic  [MESH_ROWS-1:0]        ifm_e_out_ready,
  // output mesh edges
  input  link_t [MESH_COLS-1:0]        ofm_n_in,
  output logic  [MESH_COLS-1:0]        ofm_n_in_ready,
  input  link_t [MESH_COLS-1:0]        ofm_s_in,
  output logic  [MESH_COLS-1:0]        ofm_s_in_ready,
  input  link_t [MESH_ROWS-1:0]        ofm_w_in,
  output logic  [MESH_ROWS-1:0]        ofm_w_in_ready,
  input  link_t [MESH_ROWS-1:0]        ofm_e_in,
  output logic  [MESH_ROWS-1:0]        ofm_e_in_ready,
  output link_t [MESH_COLS-1:0]        ofm_n_out,
  input  logic  [MESH_COLS-1:0]        ofm_n_out_ready,
  output link_t [MESH_COLS-1:0]        ofm_s_out,
  input  logic  [MESH_COLS-1:0]        ofm_s_out_ready,
  output link_t [MESH_ROWS-1:0]        ofm_w_out,
  input  logic  [MESH_ROWS-1:0]        ofm_w_out_ready,
  output link_t [MESH_ROWS-1:0]        ofm_e_out,
  input  logic  [MESH_ROWS-1:0]        ofm_e_out_ready,
  // status
  output logic [MESH_ROWS*MESH_COLS-1:0][31:0] instr_count,
  output logic [MESH_ROWS*MESH_COLS-1:0][15:0] ifm_steps,
  output logic [MESH_ROWS*MESH_COLS-1:0]       rifm_stall,
  output logic [MESH_ROWS*MESH_COLS-1:0]       rofm_stall,
  output logic [MESH_ROWS*MESH_COLS-1:0]       illegal
);

  localparam int unsigned NT = MESH_ROWS * MESH_COLS;

  // Per-tile links, indexed [tile][direction], direction 0..3 = E, W, N, S.
  link_t [NT-1:0][NDIR-1:0] ifm_in, ifm_out, ofm_in, ofm_out;
  logic  [NT-1:0][NDIR-1:0] ifm_in_rdy, ifm_out_rdy, ofm_in_rdy, ofm_out_rdy;

  for (genvar r = 0; r < MESH_ROWS; r++) begin : g_row
    for (genvar c = 0; c < MESH_COLS; c++) begin : g_col
      localparam int unsigned T = r * MESH_COLS + c;

      domino_tile #(
        .TILE_NC   (TILE_NC),
        .TILE_NM   (TILE_NM),
        .BUF_BYTES (BUF_BYTES),
        .SCHED_D   (SCHED_D),
        .ADC_SHIFT (ADC_SHIFT)
      ) u_tile (
        .clk           (clk),
        .rst_n         (rst_n),
        .cfg_we        (cfg_we && cfg_tile == 16'(T)),
        .cfg_sel       (cfg_sel),
        .cfg_addr      (cfg_addr),
        .cfg_data      (cfg_data),
        .ifm_in        (ifm_in[T]),
        .ifm_in_ready  (ifm_in_rdy[T]),
        .ifm_out       (ifm_out[T]),
        .ifm_out_ready (ifm_out_rdy[T]),
        .ofm_in        (ofm_in[T]),
        .ofm_in_ready  (ofm_in_rdy[T]),
        .ofm_out       (ofm_out[T]),
        .ofm_out_ready (ofm_out_rdy[T]),
        .ifm_steps     (ifm_steps[T]),
        .instr_count   (instr_count[T]),
        .rifm_stall    (rifm_stall[T]),
        .rofm_stall    (rofm_stall[T]),
        .illegal       (illegal[T])
      );

      // East side: neighbour (r, c+1) or the east edge.
      if (c + 1 < MESH_COLS) begin : g_e
        assign ifm_in[T][0]      = ifm_out[T+1][1];
        assign ifm_out_rdy[T][0] = ifm_in_rdy[T+1][1];
        assign ofm_in[T][0]      = ofm_out[T+1][1];
        assign ofm_out_rdy[T][0] = ofm_in_rdy[T+1][1];
      end else begin : g_e_edge
        assign ifm_in[T][0]      = ifm_e_in[r];
        assign ifm_e_in_ready[r]     = ifm_in_rdy[T][0];
        assign ifm_e_out[r]          = ifm_out[T][0];
        assign ifm_out_rdy[T][0] = ifm_e_out_ready[r];
        assign ofm_in[T][0]      = ofm_e_in[r];
        assign ofm_e_in_ready[r]     = ofm_in_rdy[T][0];
        assign ofm_e_out[r]          = ofm_out[T][0];
        assign ofm_out_rdy[T][0] = ofm_e_out_ready[r];
      end
      // West side: neighbour (r, c-1) or the west edge.
      if (c > 0) begin : g_w
        assign ifm_in[T][1]      = ifm_out[T-1][0];
        assign ifm_out_rdy[T][1] = ifm_in_rdy[T-1][0];
        assign ofm_in[T][1]      = ofm_out[T-1][0];
        assign ofm_out_rdy[T][1] = ofm_in_rdy[T-1][0];
      end else begin : g_w_edge
        assign ifm_in[T][1]      = ifm_w_in[r];
        assign ifm_w_in_ready[r]     = ifm_in_rdy[T][1];
        assign ifm_w_out[r]          = ifm_out[T][1];
        assign ifm_out_rdy[T][1] = ifm_w_out_ready[r];
        assign ofm_in[T][1]      = ofm_w_in[r];
        assign ofm_w_in_ready[r]     = ofm_in_rdy[T][1];
        assign ofm_w_out[r]          = ofm_out[T][1];
        assign ofm_out_rdy[T][1] = ofm_w_out_ready[r];
      end
      // North side: neighbour (r-1, c) or the north edge.
      if (r > 0) begin : g_n
        assign ifm_in[T][2]      = ifm_out[T-MESH_COLS][3];
        assign ifm_out_rdy[T][2] = ifm_in_rdy[T-MESH_COLS][3];
        assign ofm_in[T][2]      = ofm_out[T-MESH_COLS][3];
        assign ofm_out_rdy[T][2] = ofm_in_rdy[T-MESH_COLS][3];
      end else begin : g_n_edge
        assign ifm_in[T][2]      = ifm_n_in[c];
        assign ifm_n_in_ready[c]     = ifm_in_rdy[T][2];
        assign ifm_n_out[c]          = ifm_out[T][2];
        assign ifm_out_rdy[T][2] = ifm_n_out_ready[c];
        assign ofm_in[T][2]      = ofm_n_in[c];
        assign ofm_n_in_ready[c]     = ofm_in_rdy[T][2];
        assign ofm_n_out[c]          = ofm_out[T][2];
        assign ofm_out_rdy[T][2] = ofm_n_out_ready[c];
      end
      // South side: neighbour (r+1, c) or the south edge.
      if (r + 1 < MESH_ROWS) begin : g_s
        assign ifm_in[T][3]      = ifm_out[T+MESH_COLS][2];
        assign ifm_out_rdy[T][3] = ifm_in_rdy[T+MESH_COLS][2];
        assign ofm_in[T][3]      = ofm_out[T+MESH_COLS][2];
        assign ofm_out_rdy[T][3] = ofm_in_rdy[T+MESH_COLS][2];
      end else begin : g_s_edge
        assign ifm_in[T][3]      = ifm_s_in[c];
        assign ifm_s_in_ready[c]     = ifm_in_rdy[T][3];
        assign ifm_s_out[c]          = ifm_out[T][3];
        assign ifm_out_rdy[T][3] = ifm_s_out_ready[c];
        assign ofm_in[T][3]      = ofm_s_in[c];
        assign ofm_s_in_ready[c]     = ofm_in_rdy[T][3];
        assign ofm_s_out[c]          = ofm_out[T][3];
        assign ofm_out_rdy[T][3] = ofm_s_out_ready[c];
      end
    end
  end

endmodule
