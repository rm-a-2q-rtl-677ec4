// layer_ctrl: sequences one GNN layer on the accelerator.
//
// Update phase, B = X W: for every row group g of NUM_PE nodes and every
// output column c, the K input words of the group's nodes are read from the
// input buffer (all banks at word g*K+k) together with slice k of weight
// column c, and the MAC array accumulates the K passes. The 256 results of the
// column are then requantized to 4 bits and written to the output buffer in
// one cycle (word g*K_out + c/16, lane c mod 16). At the end of the phase the
// two feature buffers trade roles (`buf_sel` toggles).
//
// Aggregation phase, X' = A B: for every row group and column, the CSR
// gather unit loads chunk after chunk of up to 16 neighbours per node until
// no row of the group has more, the MAC array sums each chunk, and the result
// is rescaled, passed through ReLU and quantized to each node's bitwidth.
// In graph mode (unseen graphs, Nearest Neighbor Strategy) every group is
// processed twice: a first pass over all columns only tracks each node's
// largest |value|, then the NNS unit picks each node's (step size, bitwidth),
// which is written back to the node-parameter memory for the next layer, and
// a second pass quantizes and writes. The buffers swap again at the end, so
// the new features sit in the buffer the next layer reads.
//
// The two phases, the weight-column broadcast, the CSR row mapping and the
// input/output swap are the paper's. The paper fuses the NNS search into a
// pipeline without a second pass; its figure of that pipeline is not
// available, so the two-pass schedule here is this design's own.
//
// Interface: configuration is sampled at `start` (taken when `busy` is low);
// `done` pulses when the layer is finished. `cyc_update` and `cyc_agg` count
// the cycles spent in each phase of the last layer.
module layer_ctrl
  import a2q_pkg::*;
#(
  parameter int unsigned NUM_PE = a2q_pkg::NUM_PE,
  parameter int unsigned N_MAC  = a2q_pkg::MACS_PER_PE,
  parameter int unsigned FB_AW  = $clog2(a2q_pkg::FB_DEPTH),
  parameter int unsigned WB_AW  = $clog2(a2q_pkg::WB_DEPTH),
  parameter int unsigned PW     = (NUM_PE > 1) ? $clog2(NUM_PE) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration
  input  logic              start,
  input  logic [31:0]       num_nodes,
  input  logic [15:0]       k_in,        // 16-feature words per input node
  input  logic [15:0]       f_out,       // output columns
  input  logic              graph_mode,
  // status
  output logic              busy,
  output logic              done,
  output phase_e            phase,
  output logic              buf_sel,     // 0: buffer 0 is the input buffer
  output logic              track_pass,
  output logic [31:0]       cyc_update,
  output logic [31:0]       cyc_agg,
  // feature buffer (input side, update phase: every bank, same word)
  output logic              fb_rd_en,
  output logic [FB_AW-1:0]  fb_rd_addr,
  // weight buffer
  output logic              wb_rd_en,
  output logic [WB_AW-1:0]  wb_rd_addr,
  // node parameters
  output logic              np_rd_en,
  output logic [FB_AW-1:0]  np_rd_addr,
  output logic              np_wr_en,
  // MAC array
  output logic              arr_start,
  output logic              arr_acc_clear,
  output logic              arr_agg_mode,
  input  logic              arr_done,
  // CSR gather
  output logic              g_start,
  output logic [15:0]       g_group,
  output logic [15:0]       g_chunk,
  output logic [15:0]       g_k_stride,
  input  logic              g_done,
  input  logic              g_more,
  // result write-back (output side, every bank, same word and lane)
  output logic              wr_en,
  output logic [FB_AW-1:0]  wr_addr,
  output logic [15:0]       col,
  // NNS
  output logic              max_clear,
  output logic              max_update,
  output logic              nns_start,
  output logic [PW-1:0]     nns_pe,
  input  logic              nns_done
);

  localparam int unsigned MS = $clog2(N_MAC);
  localparam int unsigned PS = $clog2(NUM_PE);

  typedef enum logic [4:0] {
    S_IDLE,
    U_GROUP, U_COL, U_RD, U_GO, U_WAIT, U_WR,
    A_GROUP, A_COL, A_GATHER, A_GWAIT, A_GO, A_WAIT, A_WR,
    A_NNS, A_NWAIT, A_PWR, S_DONE
  } state_e;
  state_e state;

  logic [15:0] kin_q, fout_q, kout_q, groups_q;
  logic        gmode_q;
  logic [15:0] g, c, k;

  assign kout_q = (fout_q + 16'(N_MAC - 1)) >> MS;

  // Memory and unit requests
  always_comb begin
    fb_rd_en      = (state == U_RD);
    fb_rd_addr    = FB_AW'(32'(g) * 32'(kin_q) + 32'(k));
    wb_rd_en      = (state == U_RD);
    wb_rd_addr    = WB_AW'(32'(c) * 32'(kin_q) + 32'(k));
    np_rd_en      = (state == U_GROUP) || (state == A_GROUP);
    np_rd_addr    = FB_AW'(g);
    np_wr_en      = (state == A_PWR);
    arr_start     = (state == U_GO) || (state == A_GO);
    arr_acc_clear = (k == '0);
    arr_agg_mode  = (phase == PH_AGG);
    g_start       = (state == A_GATHER);
    g_group       = g;
    g_chunk       = k;
    g_k_stride    = kout_q;
    wr_en         = (state == U_WR) || (state == A_WR && !track_pass);
    wr_addr       = FB_AW'(32'(g) * 32'(kout_q) + 32'(c >> MS));
    col           = c;
    max_clear     = (state == A_GROUP);
    max_update    = (state == A_WR) && track_pass;
    nns_start     = (state == A_NNS);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      phase      <= PH_IDLE;
      buf_sel    <= 1'b0;
      track_pass <= 1'b0;
      done       <= 1'b0;
      kin_q      <= '0;
      fout_q     <= '0;
      groups_q   <= '0;
      gmode_q    <= 1'b0;
      g          <= '0;
      c          <= '0;
      k          <= '0;
      nns_pe     <= '0;
      cyc_update <= '0;
      cyc_agg    <= '0;
    end else begin
      done <= 1'b0;
      if (phase == PH_UPDATE) cyc_update <= cyc_update + 1;
      if (phase == PH_AGG)    cyc_agg    <= cyc_agg + 1;
      unique case (state)
        S_IDLE: if (start) begin
          kin_q      <= k_in;
          fout_q     <= f_out;
          groups_q   <= 16'((num_nodes + 32'(NUM_PE - 1)) >> PS);
          gmode_q    <= graph_mode;
          g          <= '0;
          cyc_update <= '0;
          cyc_agg    <= '0;
          phase      <= PH_UPDATE;
          state      <= U_GROUP;
        end
        // ---------------- update phase ----------------
        U_GROUP: begin c <= '0; state <= U_COL; end
        U_COL:   begin k <= '0; state <= U_RD; end
        U_RD:    state <= U_GO;
        U_GO:    state <= U_WAIT;
        U_WAIT: if (arr_done) begin
          if (k == kin_q - 1'b1) state <= U_WR;
          else begin k <= k + 1'b1; state <= U_RD; end
        end
        U_WR: begin
          if (c != fout_q - 1'b1) begin
            c <= c + 1'b1; state <= U_COL;
          end else if (g != groups_q - 1'b1) begin
            g <= g + 1'b1; state <= U_GROUP;
          end else begin
            buf_sel <= ~buf_sel;
            phase   <= PH_AGG;
            g       <= '0;
            state   <= A_GROUP;
          end
        end
        // ---------------- aggregation phase ----------------
        A_GROUP: begin
          c          <= '0;
          track_pass <= gmode_q;
          state      <= A_COL;
        end
        A_COL:    begin k <= '0; state <= A_GATHER; end
        A_GATHER: state <= A_GWAIT;
        A_GWAIT:  if (g_done) state <= A_GO;
        A_GO:     state <= A_WAIT;
        A_WAIT: if (arr_done) begin
          if (g_more) begin k <= k + 1'b1; state <= A_GATHER; end
          else state <= A_WR;
        end
        A_WR: begin
          if (c != fout_q - 1'b1) begin
            c <= c + 1'b1; state <= A_COL;
          end else if (track_pass) begin
            nns_pe <= '0; state <= A_NNS;
          end else if (g != groups_q - 1'b1) begin
            g <= g + 1'b1; state <= A_GROUP;
          end else begin
            state <= S_DONE;
          end
        end
        A_NNS:   state <= A_NWAIT;
        A_NWAIT: if (nns_done) begin
          if (nns_pe == PW'(NUM_PE - 1)) state <= A_PWR;
          else begin nns_pe <= nns_pe + 1'b1; state <= A_NNS; end
        end
        A_PWR: begin
          track_pass <= 1'b0;
          c          <= '0;
          state      <= A_COL;
        end
        S_DONE: begin
          buf_sel <= ~buf_sel;
          phase   <= PH_IDLE;
          done    <= 1'b1;
          state   <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  // The array is only started when it is idle, and only one unit at a time.
  a_one_unit: assert property (@(posedge clk) disable iff (!rst_n)
    !(arr_start && g_start));

endmodule
