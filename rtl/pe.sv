// pe: processing engine, a row of 16 bit-serial MACs.
//
// A pass multiplies 16 features of one node with 16 weights and adds the 16
// products into the engine's partial-sum register. The features are latched
// at `start` and fed to the MACs one bit per cycle, most significant first,
// for `nbits` cycles (the node's own bitwidth, 1..8); one more cycle adds the
// MAC products through an adder tree into `psum` (cleared first when
// `acc_clear` was given with `start`). The paper gives the row of 16 MACs and
// the per-node serial bitwidth; the adder tree and the single partial-sum
// register per engine are this design's choices.
//
// Timing: `start` in cycle 0 is accepted only when `busy` is low; `busy` is
// high from cycle 1 to cycle nbits+1; `done` pulses and `psum` holds the new
// sum from cycle nbits+2, so a pass costs nbits+2 cycles.
module pe #(
  parameter int unsigned N_MAC     = a2q_pkg::MACS_PER_PE,
  parameter int unsigned W_BITS    = a2q_pkg::W_BITS,
  parameter int unsigned FEAT_BITS = a2q_pkg::FEAT_BITS,
  parameter int unsigned NBITS_W   = a2q_pkg::NBITS_W,
  parameter int unsigned PSUM_W    = a2q_pkg::PSUM_W
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                start,
  input  logic                                acc_clear,
  input  logic [N_MAC-1:0][FEAT_BITS-1:0]     x,
  input  logic [N_MAC-1:0][W_BITS-1:0]        w,
  input  logic [NBITS_W-1:0]                  nbits,
  input  logic                                is_signed,
  output logic                                busy,
  output logic                                done,
  output logic signed [PSUM_W-1:0]            psum
);

  localparam int unsigned ACC_W = W_BITS + FEAT_BITS;

  typedef enum logic [1:0] {S_IDLE, S_SHIFT, S_REDUCE} state_e;
  state_e state;

  logic [N_MAC-1:0][FEAT_BITS-1:0] xreg;
  logic [N_MAC-1:0][W_BITS-1:0]    wreg;
  logic [NBITS_W-1:0]              bitpos, topbit;
  logic                            sgn, clr;
  logic signed [ACC_W-1:0]         prod [N_MAC];
  logic signed [PSUM_W-1:0]        tree;

  wire mac_en    = (state == S_SHIFT);
  wire mac_first = (bitpos == topbit);

  for (genvar m = 0; m < N_MAC; m++) begin : g_mac
    bs_mac #(.W_BITS(W_BITS), .ACC_W(ACC_W)) u_mac (
      .clk, .rst_n,
      .en    (mac_en),
      .first (mac_first),
      .x_bit (xreg[m][bitpos[$clog2(FEAT_BITS)-1:0]]),
      .neg   (sgn && mac_first),
      .w     (wreg[m]),
      .acc   (prod[m])
    );
  end

  always_comb begin
    tree = '0;
    for (int m = 0; m < N_MAC; m++) tree += PSUM_W'(prod[m]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      xreg   <= '0;
      wreg   <= '0;
      bitpos <= '0;
      topbit <= '0;
      sgn    <= 1'b0;
      clr    <= 1'b0;
      done   <= 1'b0;
      psum   <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          xreg   <= x;
          wreg   <= w;
          topbit <= (nbits == '0) ? NBITS_W'(0) : nbits - 1'b1;
          bitpos <= (nbits == '0) ? NBITS_W'(0) : nbits - 1'b1;
          sgn    <= is_signed;
          clr    <= acc_clear;
          state  <= S_SHIFT;
        end
        S_SHIFT: begin
          if (bitpos == '0) state <= S_REDUCE;
          else              bitpos <= bitpos - 1'b1;
        end
        S_REDUCE: begin
          psum  <= (clr ? '0 : psum) + tree;
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  // A feature cannot be wider than its container.
  a_nbits: assert property (@(posedge clk) disable iff (!rst_n)
    (start && !busy) |-> (nbits <= NBITS_W'(FEAT_BITS)));

endmodule
