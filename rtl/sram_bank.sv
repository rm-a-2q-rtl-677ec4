// sram_bank: one single-port-read, single-port-write on-chip SRAM bank with
// per-lane write enables, written as an array.
//
// A read issued with `rd_en` in cycle t returns `rd_data` in cycle t+1 and
// holds it until the next read. A write with `wr_en` updates the lanes whose
// `wr_be` bit is set at the clock edge. The bank organisation is this
// design's; the memories' total sizes come from the paper.
module sram_bank #(
  parameter int unsigned LANES  = 16,
  parameter int unsigned LANE_W = 8,
  parameter int unsigned DEPTH  = 512,
  parameter int unsigned AW     = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                          clk,
  input  logic                          rd_en,
  input  logic [AW-1:0]                 rd_addr,
  output logic [LANES-1:0][LANE_W-1:0]  rd_data,
  input  logic                          wr_en,
  input  logic [AW-1:0]                 wr_addr,
  input  logic [LANES-1:0]              wr_be,
  input  logic [LANES-1:0][LANE_W-1:0]  wr_data
);

  logic [LANES-1:0][LANE_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en)
      for (int l = 0; l < LANES; l++)
        if (wr_be[l]) mem[wr_addr][l] <= wr_data[l];
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
