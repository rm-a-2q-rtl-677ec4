// bs_mac: bit-serial multiply-accumulate cell.
//
// One node-feature bit per cycle is ANDed with a 4-bit weight and added to the
// accumulator register shifted left by one, so an m-bit feature times a 4-bit
// weight takes m cycles, most significant feature bit first. This is the MAC
// of the paper's bit-serial figure (AND, adder, register, left-shift feedback).
// Two points are this design's own: the weight is two's complement and
// sign-extended into the adder, and when `neg` is high the gated term is
// subtracted, which gives the negative weight of a two's-complement feature's
// sign bit.
//
// Interface: `en` advances one bit; `first` starts a new product (the
// register's old contents are dropped instead of shifted); `acc` is the
// registered product, valid the cycle after the last bit.
module bs_mac #(
  parameter int unsigned W_BITS = a2q_pkg::W_BITS,
  parameter int unsigned ACC_W  = a2q_pkg::W_BITS + a2q_pkg::FEAT_BITS
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     en,
  input  logic                     first,
  input  logic                     x_bit,
  input  logic                     neg,
  input  logic signed [W_BITS-1:0] w,
  output logic signed [ACC_W-1:0]  acc
);

  logic signed [ACC_W-1:0] gated;
  logic signed [ACC_W-1:0] shifted;

  always_comb begin
    gated   = x_bit ? ACC_W'(w) : '0;   // the AND of the figure
    if (neg) gated = -gated;
    shifted = first ? '0 : (acc <<< 1); // the << feedback
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  acc <= '0;
    else if (en) acc <= shifted + gated;
  end

endmodule
