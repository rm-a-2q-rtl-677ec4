// weight_buffer: 256 KB SRAM of 4-bit quantized weights.
//
// Each word holds 16 weights, the slice of one weight column that meets one
// 16-feature word of a node. Column c, slice k of a layer whose input has K
// words per node is at word c * K + k, so a column's slices are read in
// order and broadcast to every engine. The 256 KB size and the 4-bit weights
// are the paper's; the word shape and layout are this design's.
//
// Timing: a read returns one cycle after `rd_en`.
module weight_buffer #(
  parameter int unsigned LANES  = a2q_pkg::MACS_PER_PE,
  parameter int unsigned W_BITS = a2q_pkg::W_BITS,
  parameter int unsigned DEPTH  = a2q_pkg::WB_DEPTH,
  parameter int unsigned AW     = $clog2(DEPTH)
) (
  input  logic                          clk,
  input  logic                          rd_en,
  input  logic [AW-1:0]                 rd_addr,
  output logic [LANES-1:0][W_BITS-1:0]  rd_data,
  input  logic                          wr_en,
  input  logic [AW-1:0]                 wr_addr,
  input  logic [LANES-1:0][W_BITS-1:0]  wr_data
);

  sram_bank #(.LANES(LANES), .LANE_W(W_BITS), .DEPTH(DEPTH), .AW(AW)) u_mem (
    .clk,
    .rd_en, .rd_addr, .rd_data,
    .wr_en, .wr_addr,
    .wr_be   ({LANES{1'b1}}),
    .wr_data
  );

endmodule
