// edge_buffer: 256 KB SRAM holding the adjacency matrix in compressed sparse
// row (CSR) form.
//
// Words are 32 bits. Words 0..N hold the row pointers (row n's neighbours are
// entries row_ptr[n] .. row_ptr[n+1]-1); the column indices start at word
// `col_base`, given to the controller. Two read ports let the row pointers of
// a node and of its successor, or a pointer and a column index, be read in
// the same cycle. CSR storage and the 256 KB size are the paper's; the word
// size and the two read ports are this design's.
//
// Timing: each read port returns its word one cycle after its enable.
module edge_buffer #(
  parameter int unsigned DEPTH = a2q_pkg::EB_DEPTH,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          a_rd_en,
  input  logic [AW-1:0] a_rd_addr,
  output logic [31:0]   a_rd_data,
  input  logic          b_rd_en,
  input  logic [AW-1:0] b_rd_addr,
  output logic [31:0]   b_rd_data,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [31:0]   wr_data
);

  logic [31:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en)   mem[wr_addr] <= wr_data;
    if (a_rd_en) a_rd_data <= mem[a_rd_addr];
    if (b_rd_en) b_rd_data <= mem[b_rd_addr];
  end

endmodule
