// nns_unit: Nearest Neighbor Strategy lookup.
//
// For graphs whose nodes have no learned quantization parameters of their own,
// a fixed table of m parameter groups (step size s, bitwidth b) is learned and
// each group's largest quantized value q_max = s * (2^(b-1) - 1) is computed
// and sorted ahead of time. Given the largest absolute feature value f of a
// node, this unit returns the group whose q_max is nearest to f. As the paper
// suggests, the sorted table is searched by binary search: one comparison per
// cycle narrows [lo, hi] to the last entry with q_max <= f, then a final pair
// of comparators picks the nearer of that entry and the next one (ties go to
// the smaller q_max).
//
// Table entries are written through the `wr_*` port in ascending q_max order;
// `n_entries` says how many are in use. The entry's `scale` is the inverse
// step size 1/s in the requantizer's fixed-point format, so that it can be
// used directly as the node factor; `step` is s itself, the factor the next
// layer's update phase needs. m = 1000 is the paper's; the formats and
// the one-comparison-per-cycle search are this design's.
//
// Timing: `start` is taken when `busy` is low; `done` pulses with `index`,
// `scale` and `bits` valid at most ceil(log2(n_entries)) + 3 cycles later.
module nns_unit #(
  parameter int unsigned M       = a2q_pkg::NNS_ENTRIES,
  parameter int unsigned VAL_W   = a2q_pkg::VAL_W,
  parameter int unsigned SCALE_W = a2q_pkg::SCALE_W,
  parameter int unsigned NBITS_W = a2q_pkg::NBITS_W,
  parameter int unsigned IW      = $clog2(M)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               wr_en,
  input  logic [IW-1:0]      wr_addr,
  input  logic [VAL_W-1:0]   wr_qmax,
  input  logic [SCALE_W-1:0] wr_scale,
  input  logic [SCALE_W-1:0] wr_step,
  input  logic [NBITS_W-1:0] wr_bits,
  input  logic [IW:0]        n_entries,
  input  logic               start,
  input  logic [VAL_W-1:0]   f,
  output logic               busy,
  output logic               done,
  output logic [IW-1:0]      index,
  output logic [SCALE_W-1:0] scale,
  output logic [SCALE_W-1:0] step,
  output logic [NBITS_W-1:0] bits
);

  logic [VAL_W-1:0]   qmax_tab  [M];
  logic [SCALE_W-1:0] scale_tab [M];
  logic [SCALE_W-1:0] step_tab  [M];
  logic [NBITS_W-1:0] bits_tab  [M];

  typedef enum logic [1:0] {S_IDLE, S_SEARCH, S_PICK} state_e;
  state_e state;

  logic [VAL_W-1:0] f_q;
  logic [IW:0]      lo, hi, mid, lo_n, hi_n, nxt;
  logic [VAL_W-1:0] d_lo, d_hi, q_lo, q_hi;
  logic             take_hi;

  always_ff @(posedge clk) begin
    if (wr_en) begin
      qmax_tab[wr_addr]  <= wr_qmax;
      scale_tab[wr_addr] <= wr_scale;
      step_tab[wr_addr]  <= wr_step;
      bits_tab[wr_addr]  <= wr_bits;
    end
  end

  // One binary-search step
  always_comb begin
    mid  = (lo + hi + 1'b1) >> 1;
    lo_n = lo;
    hi_n = hi;
    if (qmax_tab[mid[IW-1:0]] <= f_q) lo_n = mid;
    else                              hi_n = mid - 1'b1;
  end

  // Nearest of entry lo and entry lo+1
  always_comb begin
    nxt  = lo + 1'b1;
    q_lo = qmax_tab[lo[IW-1:0]];
    q_hi = (nxt < n_entries) ? qmax_tab[nxt[IW-1:0]] : q_lo;
    d_lo = (f_q >= q_lo) ? f_q - q_lo : q_lo - f_q;
    d_hi = (q_hi >= f_q) ? q_hi - f_q : f_q - q_hi;
    take_hi = (nxt < n_entries) && (d_hi < d_lo);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      f_q   <= '0;
      lo    <= '0;
      hi    <= '0;
      done  <= 1'b0;
      index <= '0;
      scale <= '0;
      step  <= '0;
      bits  <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          f_q   <= f;
          lo    <= '0;
          hi    <= (n_entries == '0) ? '0 : n_entries - 1'b1;
          state <= S_SEARCH;
        end
        S_SEARCH: begin
          if (lo == hi) state <= S_PICK;
          else begin
            lo <= lo_n;
            hi <= hi_n;
            if (lo_n == hi_n) state <= S_PICK;
          end
        end
        S_PICK: begin
          index <= take_hi ? nxt[IW-1:0] : lo[IW-1:0];
          scale <= take_hi ? scale_tab[nxt[IW-1:0]] : scale_tab[lo[IW-1:0]];
          step  <= take_hi ? step_tab[nxt[IW-1:0]]  : step_tab[lo[IW-1:0]];
          bits  <= take_hi ? bits_tab[nxt[IW-1:0]]  : bits_tab[lo[IW-1:0]];
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule
