// pixel_buffer: storage for one grey-scale video frame.
//
// EVA^2 has two of these: one holds the latest key frame, the other the frame
// being processed; the controller swaps their roles when a new key frame is
// chosen. The paper builds them from eDRAM; here the store is a plain array
// that a synthesis tool maps to a memory macro. Pixels are kept in raster
// order, PIX_PER_WORD pixels per word (pixel 0 in the low bits), so word
// address = (y*FRAME_W + x)/PIX_PER_WORD. One write port and one read port;
// the read is synchronous with one cycle of latency, like an eDRAM or SRAM
// macro. Word width and the read latency are this design's choices.
module pixel_buffer
  import eva2_pkg::*;
#(
  parameter int FRAME_W      = FRAME_W_D,
  parameter int FRAME_H      = FRAME_H_D,
  parameter int PIX_PER_WORD = PIX_PER_WORD_D,
  localparam int WORDS  = FRAME_W * FRAME_H / PIX_PER_WORD,
  localparam int AW     = $clog2(WORDS),
  localparam int WORD_W = PIX_W * PIX_PER_WORD
) (
  input  logic              clk,
  input  logic              we,
  input  logic [AW-1:0]     waddr,
  input  logic [WORD_W-1:0] wdata,
  input  logic              re,
  input  logic [AW-1:0]     raddr,
  output logic [WORD_W-1:0] rdata
);
  logic [WORD_W-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

  initial begin
    assert (FRAME_W % PIX_PER_WORD == 0)
      else $error("FRAME_W must be a multiple of PIX_PER_WORD");
  end
endmodule
