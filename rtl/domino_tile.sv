// domino_tile: one Domino tile, an RIFM, a PE and an ROFM.
//
// As in the paper's tile figure, the RIFM receives input-feature beats from a mesh port,
// fills its buffer and starts the PE; the PE's results go to the ROFM as "From PE"; the
// RIFM also feeds the ROFM through the shortcut. The RIFM and the ROFM each have their
// own four mesh ports (E,W,N,S): the two routers form two separate networks, one for
// input features and one for partial sums and outputs. A small configuration port loads
// the tile's control register, its ROFM schedule table and its crossbar weights; the
// configuration path is this design's choice (the paper says only that the compiler
// generates instructions and configuration for each tile).
//
// Interface: cfg_we/cfg_sel/cfg_addr/cfg_data write configuration (see domino_pkg);
// ifm_in/ifm_in_ready and ifm_out/ifm_out_ready are the RIFM mesh links; ofm_in/
// ofm_in_ready and ofm_out/ofm_out_ready the ROFM mesh links, all indexed E,W,N,S and
// valid/ready. Writes to an address beyond the schedule table or the weight array are
// ignored. The status outputs count and flag events for observation.
module domino_tile
  import domino_pkg::*;
#(
  parameter int unsigned TILE_NC   = NC,
  parameter int unsigned TILE_NM   = NM,
  parameter int unsigned BUF_BYTES = ROFM_BUF_BYTES,
  parameter int unsigned SCHED_D   = SCHED_DEPTH,
  parameter int unsigned ADC_SHIFT = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               cfg_we,
  input  cfg_sel_e           cfg_sel,
  input  logic [15:0]        cfg_addr,
  input  beat_t              cfg_data,
  input  link_t [NDIR-1:0]   ifm_in,
  output logic  [NDIR-1:0]   ifm_in_ready,
  output link_t [NDIR-1:0]   ifm_out,
  input  logic  [NDIR-1:0]   ifm_out_ready,
  input  link_t [NDIR-1:0]   ofm_in,
  output logic  [NDIR-1:0]   ofm_in_ready,
  output link_t [NDIR-1:0]   ofm_out,
  input  logic  [NDIR-1:0]   ofm_out_ready,
  output logic [15:0]        ifm_steps,     // input steps received by the RIFM
  output logic [31:0]        instr_count,   // instructions completed by the ROFM
  output logic               rifm_stall,
  output logic               rofm_stall,
  output logic               illegal
);

  localparam int unsigned CBW = $clog2(TILE_NC / LANES > 1 ? TILE_NC / LANES : 2);
  localparam int unsigned CW  = $clog2(TILE_NM);

  tile_cfg_t cfg_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg_q <= '0;
      cfg_q.rifm.step_beats <= 5'(TILE_NC / LANES);
      cfg_q.period <= 8'd1;
    end else if (cfg_we && cfg_sel == CFG_CTRL) begin
      cfg_q <= cfg_data[$bits(tile_cfg_t)-1:0];
    end
  end

  logic                      pe_start, pe_idle, pe_to_rofm_ready;
  logic [TILE_NC*DATA_W-1:0] pe_vec;
  link_t                     pe_out, sc;
  logic                      sc_ready;

  rifm #(.BYTES(TILE_NC)) u_rifm (
    .clk        (clk),
    .rst_n      (rst_n),
    .cfg        (cfg_q.rifm),
    .in_link    (ifm_in),
    .in_ready   (ifm_in_ready),
    .out_link   (ifm_out),
    .out_ready  (ifm_out_ready),
    .pe_start   (pe_start),
    .pe_vec     (pe_vec),
    .pe_ready   (pe_idle),
    .sc_link    (sc),
    .sc_ready   (sc_ready),
    .step_count (ifm_steps),
    .stall      (rifm_stall)
  );

  cim_pe #(.ROWS(TILE_NC), .COLS(TILE_NM), .ADC_SHIFT(ADC_SHIFT)) u_pe (
    .clk       (clk),
    .rst_n     (rst_n),
    .w_we      (cfg_we && cfg_sel == CFG_WEIGHT && 32'(cfg_addr) < TILE_NM * (TILE_NC / LANES)),
    .w_col     (cfg_addr[CBW +: CW]),
    .w_chunk   (cfg_addr[CBW-1:0]),
    .w_data    (cfg_data),
    .start     (pe_start),
    .in_vec    (pe_vec),
    .ready     (pe_idle),
    .out_link  (pe_out),
    .out_ready (pe_to_rofm_ready)
  );

  rofm #(.BUF_BYTES(BUF_BYTES), .SCHED_DEPTH_P(SCHED_D), .BEATS(TILE_NM / LANES)) u_rofm (
    .clk         (clk),
    .rst_n       (rst_n),
    .sched_we    (cfg_we && cfg_sel == CFG_SCHED && 32'(cfg_addr) < SCHED_D),
    .sched_addr  (cfg_addr[$clog2(SCHED_D)-1:0]),
    .sched_data  (cfg_data[INSTR_W-1:0]),
    .run         (cfg_q.run),
    .period      (cfg_q.period[$clog2(SCHED_D):0]),
    .mul_scale   (cfg_q.mul_scale),
    .in_link     (ofm_in),
    .in_ready    (ofm_in_ready),
    .sc_link     (sc),
    .sc_ready    (sc_ready),
    .pe_link     (pe_out),
    .pe_ready    (pe_to_rofm_ready),
    .out_link    (ofm_out),
    .out_ready   (ofm_out_ready),
    .instr_count (instr_count),
    .stall       (rofm_stall),
    .illegal     (illegal)
  );

endmodule
