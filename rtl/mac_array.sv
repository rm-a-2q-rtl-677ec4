// mac_array: the compute unit, NUM_PE processing engines of 16 bit-serial MACs.
//
// Update phase (agg_mode = 0): each engine gets 16 features of its own node
// (`x`, with the node's bitwidth and sign mode) and the same 16 weights of one
// weight column, broadcast to all engines, so NUM_PE inner products of one
// column are formed at once. Aggregation phase (agg_mode = 1): the adjacency
// matrix is binary, so its entries are serialized instead: each engine gets
// its own 16 gathered neighbour values as the MAC weights (`w_pe`) and a
// one-bit feature per MAC, the mask of valid neighbour slots; every engine
// then runs a one-cycle bit pass. The broadcast of a weight column and the
// 256 x 16 organisation are the paper's; the reuse of the MACs for the
// aggregation with the adjacency bit as the serial operand is this design's
// reading of "the calculation of A B is also in an inner-product manner".
//
// Timing: `start` is taken when `busy` is low. Engines with fewer feature
// bits finish early; `busy` stays high until the slowest one is done, and
// `done` is high for the first cycle in which `busy` is low again, with
// every `psum` final.
module mac_array #(
  parameter int unsigned NUM_PE    = a2q_pkg::NUM_PE,
  parameter int unsigned N_MAC     = a2q_pkg::MACS_PER_PE,
  parameter int unsigned W_BITS    = a2q_pkg::W_BITS,
  parameter int unsigned FEAT_BITS = a2q_pkg::FEAT_BITS,
  parameter int unsigned NBITS_W   = a2q_pkg::NBITS_W,
  parameter int unsigned PSUM_W    = a2q_pkg::PSUM_W
) (
  input  logic                                         clk,
  input  logic                                         rst_n,
  input  logic                                         start,
  input  logic                                         acc_clear,
  input  logic                                         agg_mode,
  input  logic [NUM_PE-1:0][N_MAC-1:0][FEAT_BITS-1:0]  x,
  input  logic [NUM_PE-1:0][NBITS_W-1:0]               nbits,
  input  logic [NUM_PE-1:0]                            is_signed,
  input  logic [N_MAC-1:0][W_BITS-1:0]                 w_bcast,
  input  logic [NUM_PE-1:0][N_MAC-1:0][W_BITS-1:0]     w_pe,
  input  logic [NUM_PE-1:0][N_MAC-1:0]                 mask,
  output logic                                         busy,
  output logic                                         done,
  output logic signed [PSUM_W-1:0]                     psum [NUM_PE]
);

  logic [NUM_PE-1:0] pe_busy;
  logic              busy_q;

  for (genvar p = 0; p < NUM_PE; p++) begin : g_pe
    logic [N_MAC-1:0][FEAT_BITS-1:0] x_sel;
    logic [N_MAC-1:0][W_BITS-1:0]    w_sel;

    always_comb begin
      for (int m = 0; m < N_MAC; m++)
        x_sel[m] = agg_mode ? FEAT_BITS'(mask[p][m]) : x[p][m];
      w_sel = agg_mode ? w_pe[p] : w_bcast;
    end

    pe #(.N_MAC(N_MAC), .W_BITS(W_BITS), .FEAT_BITS(FEAT_BITS),
         .NBITS_W(NBITS_W), .PSUM_W(PSUM_W)) u_pe (
      .clk, .rst_n,
      .start     (start && !busy),
      .acc_clear (acc_clear),
      .x         (x_sel),
      .w         (w_sel),
      .nbits     (agg_mode ? NBITS_W'(1) : nbits[p]),
      .is_signed (agg_mode ? 1'b0 : is_signed[p]),
      .busy      (pe_busy[p]),
      .done      (),
      .psum      (psum[p])
    );
  end

  assign busy = |pe_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) busy_q <= 1'b0;
    else        busy_q <= busy;
  end

  assign done = busy_q && !busy;

endmodule
