// node_param_buffer: per-node quantization parameters of the layer being run
// (input bitwidth and sign mode, the update-phase step size, and the
// aggregation output's bitwidth and inverse step size), one bank per engine.
//
// The learned per-node step sizes and bitwidths have to be on chip for the
// engines and requantizers to use them; the paper does not say where, so this
// small memory is this design's own. Node n's entry is in bank
// n mod NUM_BANKS at word n / NUM_BANKS, so one read with a common address
// returns the entries of all nodes of a row group, and one write with a
// common address can update any of them (the host writes one node at a time;
// in graph mode the controller writes back a whole group's parameters chosen
// by the Nearest Neighbor Strategy, to be used by the next layer).
//
// Timing: a read returns one cycle after `rd_en`.
module node_param_buffer
  import a2q_pkg::*;
#(
  parameter int unsigned NUM_BANKS = a2q_pkg::NUM_PE,
  parameter int unsigned DEPTH     = a2q_pkg::FB_DEPTH,
  parameter int unsigned AW        = $clog2(DEPTH)
) (
  input  logic                        clk,
  input  logic                        rd_en,
  input  logic [AW-1:0]               rd_addr,
  output node_meta_t [NUM_BANKS-1:0]  rd_data,
  input  logic [NUM_BANKS-1:0]        wr_en,
  input  logic [AW-1:0]               wr_addr,
  input  node_meta_t [NUM_BANKS-1:0]  wr_data
);

  for (genvar b = 0; b < NUM_BANKS; b++) begin : g_bank
    sram_bank #(.LANES(1), .LANE_W($bits(node_meta_t)), .DEPTH(DEPTH), .AW(AW)) u_bank (
      .clk,
      .rd_en   (rd_en),
      .rd_addr (rd_addr),
      .rd_data (rd_data[b]),
      .wr_en   (wr_en[b]),
      .wr_addr (wr_addr),
      .wr_be   (1'b1),
      .wr_data (wr_data[b])
    );
  end

endmodule
