// feature_buffer: 2 MB node-feature SRAM, split into one bank per processing
// engine.
//
// The accelerator has two of these, the input buffer and the output buffer;
// they trade roles after every phase, so the result of one phase is read in
// place by the next. Node n of a layer lives in bank n mod NUM_BANKS at word
// (n / NUM_BANKS) * K + k, where K is the number of 16-feature words per node
// and k the word index; each word holds 16 features in byte lanes. Every bank
// has its own read address and its own lane-enabled write port, so all
// engines can load their node's word in the same cycle, and the 256 results
// of one output column land in one write cycle. The 2 MB size and the
// input/output swap are the paper's; banking and layout are this design's.
//
// Timing: reads return one cycle after `rd_en`; writes take effect at the
// clock edge.
module feature_buffer #(
  parameter int unsigned NUM_BANKS  = a2q_pkg::NUM_PE,
  parameter int unsigned LANES      = a2q_pkg::MACS_PER_PE,
  parameter int unsigned LANE_W     = a2q_pkg::FEAT_BITS,
  parameter int unsigned DEPTH      = a2q_pkg::FB_DEPTH,
  parameter int unsigned AW         = $clog2(DEPTH)
) (
  input  logic                                         clk,
  input  logic [NUM_BANKS-1:0]                         rd_en,
  input  logic [NUM_BANKS-1:0][AW-1:0]                 rd_addr,
  output logic [NUM_BANKS-1:0][LANES-1:0][LANE_W-1:0]  rd_data,
  input  logic [NUM_BANKS-1:0]                         wr_en,
  input  logic [NUM_BANKS-1:0][AW-1:0]                 wr_addr,
  input  logic [NUM_BANKS-1:0][LANES-1:0]              wr_be,
  input  logic [NUM_BANKS-1:0][LANES-1:0][LANE_W-1:0]  wr_data
);

  for (genvar b = 0; b < NUM_BANKS; b++) begin : g_bank
    sram_bank #(.LANES(LANES), .LANE_W(LANE_W), .DEPTH(DEPTH), .AW(AW)) u_bank (
      .clk,
      .rd_en   (rd_en[b]),
      .rd_addr (rd_addr[b]),
      .rd_data (rd_data[b]),
      .wr_en   (wr_en[b]),
      .wr_addr (wr_addr[b]),
      .wr_be   (wr_be[b]),
      .wr_data (wr_data[b])
    );
  end

endmodule
