// a2q_top: accelerator for GNN inference with per-node mixed-precision
// features (aggregation-aware quantization).
//
// Every node carries its own feature bitwidth. The compute unit is an array of
// NUM_PE engines x 16 bit-serial MACs, so a pass over a node's features costs
// as many cycles as the node has bits, and low-bitwidth nodes make the layer
// faster. A layer runs in two phases under `layer_ctrl`: the update phase
// B = X W (weights 4-bit, one weight column broadcast to all engines, one
// node per engine), then the aggregation X' = A B over the adjacency matrix
// in CSR form (one node row per engine, 16 neighbours per pass, fetched by
// `csr_gather`). Results are rescaled, ReLU'd and re-quantized by one
// `requant` per engine and written to the other feature buffer; the input and
// output buffers swap after each phase. In graph mode each node's output
// step size and bitwidth are chosen by the Nearest Neighbor Strategy unit
// from its largest |value|.
//
// Memories: two 2 MB feature buffers, a 256 KB weight buffer and a 256 KB
// edge buffer (all the paper's sizes), plus a per-node parameter memory and a
// per-column scale table of this design's own. Off-chip memory is not
// modelled: the host loads and reads the memories through the host ports
// while the accelerator is idle (`busy` low).
//
// Per-column scale factors: `cs_u[c]` = s_W(c) / s_B(c) scales the update
// result of column c, `cs_a[c]` = s_B(c) the aggregation result. Per-node
// factors come from the parameter memory: scale_u = s_X(n) (update),
// scale_a = 1 / s_X'(n) (aggregation). All are Q4.12 fixed point.
//
// Timing: `start` while idle runs one layer; `done` pulses at its end, and
// `buf_sel` then names the buffer holding the new features (0: buffer 0).
module a2q_top
  import a2q_pkg::*;
#(
  parameter int unsigned NUM_PE   = a2q_pkg::NUM_PE,
  parameter int unsigned FB_DEPTH = a2q_pkg::FB_DEPTH,
  parameter int unsigned WB_DEPTH = a2q_pkg::WB_DEPTH,
  parameter int unsigned EB_DEPTH = a2q_pkg::EB_DEPTH,
  parameter int unsigned NNS_M    = a2q_pkg::NNS_ENTRIES,
  parameter int unsigned N_COLS   = a2q_pkg::MAX_COLS,
  parameter int unsigned PW       = (NUM_PE > 1) ? $clog2(NUM_PE) : 1,
  parameter int unsigned FB_AW    = $clog2(FB_DEPTH),
  parameter int unsigned WB_AW    = $clog2(WB_DEPTH),
  parameter int unsigned EB_AW    = $clog2(EB_DEPTH),
  parameter int unsigned NNS_IW   = $clog2(NNS_M),
  parameter int unsigned CS_AW    = $clog2(N_COLS)
) (
  input  logic                                clk,
  input  logic                                rst_n,
  // layer configuration
  input  logic                                start,
  input  logic [31:0]                         num_nodes,
  input  logic [15:0]                         k_in,
  input  logic [15:0]                         f_out,
  input  logic                                graph_mode,
  input  logic                                agg_relu,
  input  logic [EB_AW-1:0]                    col_base,
  input  logic [NNS_IW:0]                     nns_entries,
  output logic                                busy,
  output logic                                done,
  output logic                                buf_sel,
  output logic [31:0]                         cyc_update,
  output logic [31:0]                         cyc_agg,
  // host: feature buffers
  input  logic                                host_fb_we,
  input  logic                                host_fb_sel,
  input  logic [PW-1:0]                       host_fb_bank,
  input  logic [FB_AW-1:0]                    host_fb_addr,
  input  logic [MACS_PER_PE-1:0][FEAT_BITS-1:0] host_fb_wdata,
  input  logic                                host_fb_re,
  output logic [MACS_PER_PE-1:0][FEAT_BITS-1:0] host_fb_rdata,
  // host: weight buffer
  input  logic                                host_wb_we,
  input  logic [WB_AW-1:0]                    host_wb_addr,
  input  logic [MACS_PER_PE-1:0][W_BITS-1:0]  host_wb_wdata,
  // host: edge buffer
  input  logic                                host_eb_we,
  input  logic [EB_AW-1:0]                    host_eb_addr,
  input  logic [31:0]                         host_eb_wdata,
  // host: node parameters
  input  logic                                host_np_we,
  input  logic [PW-1:0]                       host_np_bank,
  input  logic [FB_AW-1:0]                    host_np_addr,
  input  node_meta_t                          host_np_wdata,
  // host: column scale table
  input  logic                                host_cs_we,
  input  logic [CS_AW-1:0]                    host_cs_addr,
  input  logic [SCALE_W-1:0]                  host_cs_u,
  input  logic [SCALE_W-1:0]                  host_cs_a,
  // host: NNS table
  input  logic                                host_nns_we,
  input  logic [NNS_IW-1:0]                   host_nns_addr,
  input  logic [VAL_W-1:0]                    host_nns_qmax,
  input  logic [SCALE_W-1:0]                  host_nns_scale,
  input  logic [SCALE_W-1:0]                  host_nns_step,
  input  logic [NBITS_W-1:0]                  host_nns_bits
);

  localparam int unsigned NM = MACS_PER_PE;
  localparam int unsigned MS = $clog2(NM);

  typedef logic [NM-1:0][FEAT_BITS-1:0] fword_t;

  // ---------------- controller ----------------
  phase_e       phase;
  logic         track_pass;
  logic         c_fb_rd_en, c_wb_rd_en, c_np_rd_en, c_np_wr_en;
  logic [FB_AW-1:0] c_fb_rd_addr, c_np_rd_addr, c_wr_addr;
  logic [WB_AW-1:0] c_wb_rd_addr;
  logic         arr_start, arr_acc_clear, arr_agg_mode, arr_busy, arr_done;
  logic         g_start, g_done, g_more, g_busy;
  logic [15:0]  g_group, g_chunk, g_k_stride, col;
  logic         c_wr_en, max_clear, max_update, nns_start, nns_done, nns_busy;
  logic [PW-1:0] nns_pe;

  layer_ctrl #(.NUM_PE(NUM_PE), .N_MAC(NM), .FB_AW(FB_AW), .WB_AW(WB_AW), .PW(PW)) u_ctrl (
    .clk, .rst_n,
    .start, .num_nodes, .k_in, .f_out, .graph_mode,
    .busy, .done, .phase, .buf_sel, .track_pass, .cyc_update, .cyc_agg,
    .fb_rd_en (c_fb_rd_en), .fb_rd_addr (c_fb_rd_addr),
    .wb_rd_en (c_wb_rd_en), .wb_rd_addr (c_wb_rd_addr),
    .np_rd_en (c_np_rd_en), .np_rd_addr (c_np_rd_addr), .np_wr_en (c_np_wr_en),
    .arr_start, .arr_acc_clear, .arr_agg_mode, .arr_done,
    .g_start, .g_group, .g_chunk, .g_k_stride, .g_done, .g_more,
    .wr_en (c_wr_en), .wr_addr (c_wr_addr), .col,
    .max_clear, .max_update, .nns_start, .nns_pe, .nns_done
  );

  // ---------------- feature buffers ----------------
  logic   [1:0][NUM_PE-1:0]             fb_rd_en, fb_wr_en;
  logic   [1:0][NUM_PE-1:0][FB_AW-1:0]  fb_rd_addr, fb_wr_addr;
  fword_t [1:0][NUM_PE-1:0]             fb_rd_data, fb_wr_data;
  logic   [1:0][NUM_PE-1:0][NM-1:0]     fb_wr_be;

  // gather's requests to the buffer holding B
  logic   [NUM_PE-1:0]                  gt_rd_en;
  logic   [NUM_PE-1:0][FB_AW-1:0]       gt_rd_addr;

  // requantized results, one byte per engine
  logic [NUM_PE-1:0][FEAT_BITS-1:0]     rq_q;
  logic [NUM_PE-1:0][VAL_W-1:0]         rq_v;

  logic          host_rd_sel_q;
  logic [PW-1:0] host_rd_bank_q;

  for (genvar u = 0; u < 2; u++) begin : g_fb
    // buffer u is the input (source) buffer when buf_sel == u
    wire is_src = (buf_sel == 1'(u));

    always_comb begin
      for (int b = 0; b < NUM_PE; b++) begin
        fb_rd_en[u][b]   = 1'b0;
        fb_rd_addr[u][b] = c_fb_rd_addr;
        fb_wr_en[u][b]   = 1'b0;
        fb_wr_addr[u][b] = c_wr_addr;
        fb_wr_be[u][b]   = '0;
        fb_wr_data[u][b] = '0;
        if (!busy) begin
          fb_rd_en[u][b]   = host_fb_re && (host_fb_sel == 1'(u)) && (host_fb_bank == PW'(b));
          fb_rd_addr[u][b] = host_fb_addr;
          fb_wr_en[u][b]   = host_fb_we && (host_fb_sel == 1'(u)) && (host_fb_bank == PW'(b));
          fb_wr_addr[u][b] = host_fb_addr;
          fb_wr_be[u][b]   = '1;
          fb_wr_data[u][b] = host_fb_wdata;
        end else if (is_src) begin
          fb_rd_en[u][b]   = (phase == PH_AGG) ? gt_rd_en[b]   : c_fb_rd_en;
          fb_rd_addr[u][b] = (phase == PH_AGG) ? gt_rd_addr[b] : c_fb_rd_addr;
        end else begin
          fb_wr_en[u][b]   = c_wr_en;
          fb_wr_be[u][b]   = NM'(1) << col[MS-1:0];
          for (int l = 0; l < NM; l++) fb_wr_data[u][b][l] = rq_q[b];
        end
      end
    end

    feature_buffer #(.NUM_BANKS(NUM_PE), .LANES(NM), .LANE_W(FEAT_BITS),
                     .DEPTH(FB_DEPTH), .AW(FB_AW)) u_fb (
      .clk,
      .rd_en (fb_rd_en[u]), .rd_addr (fb_rd_addr[u]), .rd_data (fb_rd_data[u]),
      .wr_en (fb_wr_en[u]), .wr_addr (fb_wr_addr[u]),
      .wr_be (fb_wr_be[u]), .wr_data (fb_wr_data[u])
    );
  end

  always_ff @(posedge clk) begin
    if (host_fb_re && !busy) begin
      host_rd_sel_q  <= host_fb_sel;
      host_rd_bank_q <= host_fb_bank;
    end
  end
  assign host_fb_rdata = fb_rd_data[host_rd_sel_q][host_rd_bank_q];

  // source buffer's read data
  fword_t [NUM_PE-1:0] src_data;
  assign src_data = buf_sel ? fb_rd_data[1] : fb_rd_data[0];

  // ---------------- weight buffer ----------------
  logic [NM-1:0][W_BITS-1:0] wb_rd_data;

  weight_buffer #(.LANES(NM), .W_BITS(W_BITS), .DEPTH(WB_DEPTH), .AW(WB_AW)) u_wb (
    .clk,
    .rd_en   (c_wb_rd_en),
    .rd_addr (c_wb_rd_addr),
    .rd_data (wb_rd_data),
    .wr_en   (host_wb_we && !busy),
    .wr_addr (host_wb_addr),
    .wr_data (host_wb_wdata)
  );

  // ---------------- edge buffer ----------------
  logic             e_a_en, e_b_en;
  logic [EB_AW-1:0] e_a_addr, e_b_addr;
  logic [31:0]      e_a_data, e_b_data;

  edge_buffer #(.DEPTH(EB_DEPTH), .AW(EB_AW)) u_eb (
    .clk,
    .a_rd_en (e_a_en), .a_rd_addr (e_a_addr), .a_rd_data (e_a_data),
    .b_rd_en (e_b_en), .b_rd_addr (e_b_addr), .b_rd_data (e_b_data),
    .wr_en   (host_eb_we && !busy),
    .wr_addr (host_eb_addr),
    .wr_data (host_eb_wdata)
  );

  // ---------------- node parameters ----------------
  node_meta_t [NUM_PE-1:0] np_rd_data, np_wr_data;
  logic       [NUM_PE-1:0] np_wr_en;
  logic       [FB_AW-1:0]  np_wr_addr;

  // NNS choices per engine
  logic [NUM_PE-1:0][SCALE_W-1:0] sel_scale, sel_step;
  logic [NUM_PE-1:0][NBITS_W-1:0] sel_bits;

  always_comb begin
    for (int b = 0; b < NUM_PE; b++) begin
      if (!busy) begin
        np_wr_en[b]   = host_np_we && (host_np_bank == PW'(b));
        np_wr_data[b] = host_np_wdata;
      end else begin
        // graph mode: the chosen parameters become the next layer's input ones
        np_wr_en[b]   = c_np_wr_en;
        np_wr_data[b] = np_rd_data[b];
        np_wr_data[b].bits_in   = sel_bits[b];
        np_wr_data[b].signed_in = !agg_relu;
        np_wr_data[b].scale_u   = sel_step[b];
      end
    end
    np_wr_addr = busy ? c_np_rd_addr : host_np_addr;
  end

  node_param_buffer #(.NUM_BANKS(NUM_PE), .DEPTH(FB_DEPTH), .AW(FB_AW)) u_np (
    .clk,
    .rd_en   (c_np_rd_en),
    .rd_addr (c_np_rd_addr),
    .rd_data (np_rd_data),
    .wr_en   (np_wr_en),
    .wr_addr (np_wr_addr),
    .wr_data (np_wr_data)
  );

  // ---------------- column scale table ----------------
  logic [SCALE_W-1:0] cs_u_tab [N_COLS];
  logic [SCALE_W-1:0] cs_a_tab [N_COLS];
  logic [SCALE_W-1:0] col_scale;

  always_ff @(posedge clk) begin
    if (host_cs_we && !busy) begin
      cs_u_tab[host_cs_addr] <= host_cs_u;
      cs_a_tab[host_cs_addr] <= host_cs_a;
    end
  end
  assign col_scale = (phase == PH_AGG) ? cs_a_tab[col[CS_AW-1:0]] : cs_u_tab[col[CS_AW-1:0]];

  // ---------------- CSR gather ----------------
  logic [NUM_PE-1:0][NM-1:0][W_BITS-1:0] g_w;
  logic [NUM_PE-1:0][NM-1:0]             g_mask;

  csr_gather #(.NUM_PE(NUM_PE), .N_MAC(NM), .W_BITS(W_BITS), .FEAT_BITS(FEAT_BITS),
               .FB_AW(FB_AW), .EB_AW(EB_AW)) u_gather (
    .clk, .rst_n,
    .start (g_start), .group (g_group), .chunk (g_chunk), .col (col),
    .k_stride (g_k_stride), .col_base, .num_nodes,
    .a_rd_en (e_a_en), .a_rd_addr (e_a_addr), .a_rd_data (e_a_data),
    .b_rd_en (e_b_en), .b_rd_addr (e_b_addr), .b_rd_data (e_b_data),
    .fb_rd_en (gt_rd_en), .fb_rd_addr (gt_rd_addr), .fb_rd_data (src_data),
    .w_pe (g_w), .mask (g_mask), .more (g_more), .busy (g_busy), .done (g_done)
  );

  // ---------------- compute unit ----------------
  logic [NUM_PE-1:0][NBITS_W-1:0] pe_nbits;
  logic [NUM_PE-1:0]              pe_signed;
  logic signed [PSUM_W-1:0]       psum [NUM_PE];

  // engines whose node lies past the end of the graph get zero bits
  logic [31:0] grp_base;
  assign grp_base = 32'(c_np_rd_addr) * 32'(NUM_PE);

  always_comb begin
    for (int b = 0; b < NUM_PE; b++) begin
      pe_nbits[b]  = (grp_base + 32'(b) < num_nodes) ? np_rd_data[b].bits_in : '0;
      pe_signed[b] = np_rd_data[b].signed_in;
    end
  end

  mac_array #(.NUM_PE(NUM_PE), .N_MAC(NM), .W_BITS(W_BITS), .FEAT_BITS(FEAT_BITS),
              .NBITS_W(NBITS_W), .PSUM_W(PSUM_W)) u_array (
    .clk, .rst_n,
    .start (arr_start), .acc_clear (arr_acc_clear), .agg_mode (arr_agg_mode),
    .x (src_data), .nbits (pe_nbits), .is_signed (pe_signed),
    .w_bcast (wb_rd_data), .w_pe (g_w), .mask (g_mask),
    .busy (arr_busy), .done (arr_done), .psum
  );

  // ---------------- requantizers ----------------
  for (genvar b = 0; b < NUM_PE; b++) begin : g_rq
    wire upd = (phase != PH_AGG);
    requant u_rq (
      .psum       (psum[b]),
      .col_scale  (col_scale),
      .node_scale (upd ? np_rd_data[b].scale_u
                       : (graph_mode ? sel_scale[b] : np_rd_data[b].scale_a)),
      .bits       (upd ? NBITS_W'(W_BITS)
                       : (graph_mode ? sel_bits[b] : np_rd_data[b].bits_out)),
      .out_signed (upd ? 1'b1 : !agg_relu),
      .relu       (upd ? 1'b0 : agg_relu),
      .v_abs      (rq_v[b]),
      .q          (rq_q[b])
    );
  end

  // ---------------- Nearest Neighbor Strategy ----------------
  logic [NUM_PE-1:0][VAL_W-1:0] maxv;
  logic [NNS_IW-1:0]            nns_index;
  logic [SCALE_W-1:0]           nns_scale, nns_step;
  logic [NBITS_W-1:0]           nns_bits;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      maxv      <= '0;
      sel_scale <= '0;
      sel_step  <= '0;
      sel_bits  <= '0;
    end else begin
      for (int b = 0; b < NUM_PE; b++) begin
        if (max_clear) maxv[b] <= '0;
        else if (max_update && rq_v[b] > maxv[b]) maxv[b] <= rq_v[b];
      end
      if (nns_done) begin
        sel_scale[nns_pe] <= nns_scale;
        sel_step[nns_pe]  <= nns_step;
        sel_bits[nns_pe]  <= nns_bits;
      end
    end
  end

  nns_unit #(.M(NNS_M), .VAL_W(VAL_W), .SCALE_W(SCALE_W), .NBITS_W(NBITS_W), .IW(NNS_IW)) u_nns (
    .clk, .rst_n,
    .wr_en (host_nns_we && !busy), .wr_addr (host_nns_addr),
    .wr_qmax (host_nns_qmax), .wr_scale (host_nns_scale),
    .wr_step (host_nns_step), .wr_bits (host_nns_bits),
    .n_entries (nns_entries),
    .start (nns_start), .f (maxv[nns_pe]),
    .busy (nns_busy), .done (nns_done),
    .index (nns_index), .scale (nns_scale), .step (nns_step), .bits (nns_bits)
  );

endmodule
