// rifm_buffer: the RIFM buffer, a 256-byte input vector store with block shifting.
//
// The buffer holds the NC input activations the PE multiplies with its weights. It is
// written one beat (LANES bytes) at a time. Every write shifts the whole content down by
// one beat and places the new beat in the top LANES bytes, so after a full load of
// NC/LANES beats the first beat received sits at bytes 0..LANES-1. Loading only part of
// a vector (4 beats = 64 bytes, 8 beats = 128 bytes) therefore shifts the old content by
// that many bytes and keeps the rest: this is the in-buffer shift that lets a layer with
// few input channels reuse the pixels already held (the paper allows steps of 64 bytes
// or multiples of 128 bytes; the step length is chosen by the RIFM controller).
// Building the shift from single-beat moves is this design's choice.
//
// Interface: wr_en/wr_data write one beat at the clock edge; vec is the whole buffer,
// byte i at bits [8i +: 8], valid from the cycle after the write. clr empties it.
module rifm_buffer
  import domino_pkg::*;
#(
  parameter int unsigned BYTES = RIFM_BUF_BYTES
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clr,
  input  logic                 wr_en,
  input  beat_t                wr_data,
  output logic [BYTES*8-1:0]   vec
);

  logic [BYTES*8-1:0] mem_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mem_q <= '0;
    end else if (clr) begin
      mem_q <= '0;
    end else if (wr_en) begin
      mem_q <= {wr_data, mem_q[BYTES*8-1:BEAT_W]};
    end
  end

  assign vec = mem_q;

endmodule
