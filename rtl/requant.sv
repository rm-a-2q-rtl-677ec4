// requant: rescales one integer inner product and quantizes it again.
//
// The integer result of a phase is first multiplied by the column factor
// `col_scale` (ReLU applied before if `relu` is set), giving the real value
// v in fixed point; `v_abs` = |v| is what the Nearest Neighbor Strategy
// compares against its q_max table. v is then multiplied by the node factor
// `node_scale` (the inverse of the next step size, times any earlier step
// size) and rounded half away from zero, as in the paper's
// sign(x) * floor(|x| / s + 0.5), and clipped to +/-(2^(b-1) - 1) for a signed
// result or to 2^b - 1 for an unsigned one (the paper uses the sign bit as a
// magnitude bit after ReLU). Both factors are 16-bit unsigned fixed point
// with 12 fraction bits.
//
// The paper does these element-wise scalings in floating point; this design
// uses fixed point instead, and splits the precomputed outer product of the
// step sizes into a per-column and a per-node factor. It is purely
// combinational.
module requant #(
  parameter int unsigned PSUM_W     = a2q_pkg::PSUM_W,
  parameter int unsigned SCALE_W    = a2q_pkg::SCALE_W,
  parameter int unsigned SCALE_FRAC = a2q_pkg::SCALE_FRAC,
  parameter int unsigned OUT_W      = a2q_pkg::FEAT_BITS,
  parameter int unsigned NBITS_W    = a2q_pkg::NBITS_W,
  parameter int unsigned VAL_W      = a2q_pkg::VAL_W
) (
  input  logic signed [PSUM_W-1:0]  psum,
  input  logic [SCALE_W-1:0]        col_scale,
  input  logic [SCALE_W-1:0]        node_scale,
  input  logic [NBITS_W-1:0]        bits,
  input  logic                      out_signed,
  input  logic                      relu,
  output logic [VAL_W-1:0]          v_abs,
  output logic [OUT_W-1:0]          q
);

  localparam int unsigned V_W = PSUM_W + SCALE_W;      // SCALE_FRAC fraction bits
  localparam int unsigned T_W = V_W + SCALE_W;         // 2*SCALE_FRAC fraction bits

  logic signed [PSUM_W-1:0] x;
  logic                     neg;
  logic [PSUM_W-1:0]        mag;
  logic [V_W-1:0]           vmag;
  logic [T_W-1:0]           tmag;
  logic [T_W-1:0]           rounded;
  logic [T_W-1:0]           qmax;
  logic [T_W-1:0]           qmag;

  always_comb begin
    x    = (relu && psum < 0) ? '0 : psum;
    neg  = x < 0;
    mag  = neg ? PSUM_W'(-x) : PSUM_W'(x);
    vmag = V_W'(mag) * V_W'(col_scale);
    tmag = T_W'(vmag) * T_W'(node_scale);
    rounded = (tmag + (T_W'(1) << (2*SCALE_FRAC - 1))) >> (2*SCALE_FRAC);

    if (bits == '0)   qmax = '0;
    else if (out_signed) qmax = (T_W'(1) << (bits - 1'b1)) - 1'b1;
    else              qmax = (T_W'(1) << bits) - 1'b1;

    qmag = (rounded > qmax) ? qmax : rounded;
    q    = neg ? OUT_W'(-qmag) : OUT_W'(qmag);

    // |v| in Q(VAL_W-SCALE_FRAC).SCALE_FRAC, saturated
    v_abs = (vmag > V_W'({VAL_W{1'b1}})) ? {VAL_W{1'b1}} : VAL_W'(vmag);
  end

endmodule
