// tb_a2q_top: end-to-end test of the accelerator at its full default size
// (256 engines x 16 MACs, 2 MB feature buffers, 256 KB weight and edge
// buffers, 1000-entry NNS table).
//
// A random graph of 300 nodes (two row groups, the second one partly empty),
// in-degrees 0..24 sorted in descending order, stored in CSR form, is run
// through three layers and every result is compared with a reference model
// computed here in plain integer arithmetic:
//   layer 1  node mode, 32 signed input features per node with a per-node
//            bitwidth of 2..8 bits (two words per node), 16 outputs, ReLU;
//   layer 2  graph mode (Nearest Neighbor Strategy), 16 -> 16, ReLU;
//   layer 3  graph mode without ReLU, using the bitwidths and step sizes
//            that layer 2 wrote back.
// Both B = X W (read from the buffer it was left in) and X' = A B are
// checked, as is the update-phase cycle count, which must follow the
// bit-serial rule: each 16-feature pass of a row group costs its widest
// node's bitwidth plus 4 cycles. Mechanisms counted, each must occur:
// multi-word accumulation, mixed bitwidths within a pass, multi-chunk
// neighbour rows, buffer swaps, NNS lookups, parameter write-back, clipping
// in the requantizer and ReLU zeroing.
module tb_a2q_top;
  import a2q_pkg::*;

  localparam int NN = 300, P = NUM_PE, NMAC = MACS_PER_PE;
  localparam int F0 = 32, F1 = 16;
  localparam int NE = 1000;
  localparam int COLB = 1024;

  logic clk = 0, rst_n = 0;
  logic start, graph_mode, agg_relu, busy, done, buf_sel;
  logic [31:0] num_nodes, cyc_update, cyc_agg;
  logic [15:0] k_in, f_out;
  logic [15:0] col_base;
  logic [10:0] nns_entries;
  logic host_fb_we, host_fb_sel, host_fb_re;
  logic [7:0] host_fb_bank;
  logic [8:0] host_fb_addr;
  logic [NMAC-1:0][7:0] host_fb_wdata, host_fb_rdata;
  logic host_wb_we;
  logic [14:0] host_wb_addr;
  logic [NMAC-1:0][3:0] host_wb_wdata;
  logic host_eb_we;
  logic [15:0] host_eb_addr;
  logic [31:0] host_eb_wdata;
  logic host_np_we;
  logic [7:0] host_np_bank;
  logic [8:0] host_np_addr;
  node_meta_t host_np_wdata;
  logic host_cs_we;
  logic [9:0] host_cs_addr;
  logic [15:0] host_cs_u, host_cs_a;
  logic host_nns_we;
  logic [9:0] host_nns_addr;
  logic [31:0] host_nns_qmax;
  logic [15:0] host_nns_scale, host_nns_step;
  logic [3:0] host_nns_bits;

  a2q_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // ---------------- watchdog ----------------
  initial begin
    repeat (6000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- mechanism counters ----------------
  int n_accum = 0, n_mixed = 0, n_multichunk = 0, n_swap = 0, n_nns = 0, n_pwb = 0;
  int n_clip = 0, n_relu0 = 0;
  logic buf_sel_q = 1'b0;
  always @(posedge clk) if (rst_n) begin
    buf_sel_q <= buf_sel;
    if (buf_sel != buf_sel_q) n_swap++;
    if (dut.arr_start && dut.phase == PH_UPDATE && !dut.arr_acc_clear) n_accum++;
    if (dut.arr_start && dut.phase == PH_UPDATE) begin
      bit mixed;
      mixed = 0;
      for (int b = 1; b < P; b++) if (dut.pe_nbits[b] != dut.pe_nbits[0]) mixed = 1;
      if (mixed) n_mixed++;
    end
    if (dut.g_done && dut.g_more) n_multichunk++;
    if (dut.nns_done) n_nns++;
    if (dut.c_np_wr_en) n_pwb++;
  end

  // ---------------- graph and model data ----------------
  int rp [NN+1];
  int ci [$];
  int x0 [NN][F0];                 // layer-1 input
  int bits0 [NN];
  int w1 [F0][F1], w2 [F1][F1], w3 [F1][F1];
  int wcur [F0][F1];               // weights of the layer being run
  int su [NN], sa [NN], bo [NN];   // layer-1 node params
  int su2 [NN];                    // layer-2 update step sizes
  int csu [3][F1], csa [3][F1];
  longint qm [NE];
  int ns_scale [NE], ns_step [NE], ns_bits [NE];
  int xin [NN][F1], xb [NN], xs [NN], xsu [NN];   // current layer input
  int bq [NN][F1], xo [NN][F1];

  function automatic int requant_ref(longint p, int cs, int ns, int b, bit sgn, bit relu, output longint vabs);
    longint mag, v, t, r, lim;
    bit neg;
    if (relu && p < 0) p = 0;
    neg = p < 0;
    mag = neg ? -p : p;
    v = mag * cs;
    vabs = (v > 64'hFFFF_FFFF) ? 64'hFFFF_FFFF : v;
    t = v * ns;
    r = (t + (64'sd1 <<< 23)) >>> 24;
    lim = sgn ? (64'sd1 <<< (b - 1)) - 1 : (64'sd1 <<< b) - 1;
    if (b == 0) lim = 0;
    if (r > lim) begin r = lim; n_clip++; end
    return neg ? int'(-r) : int'(r);
  endfunction

  function automatic int sx8(logic [7:0] v);
    return int'($signed(v));
  endfunction

  // ---------------- host tasks ----------------
  task automatic fb_write(bit sel, int bank, int addr, logic [NMAC-1:0][7:0] d);
    @(negedge clk);
    host_fb_we = 1; host_fb_sel = sel; host_fb_bank = 8'(bank); host_fb_addr = 9'(addr);
    host_fb_wdata = d;
    @(negedge clk);
    host_fb_we = 0;
  endtask

  task automatic fb_read(bit sel, int bank, int addr, output logic [NMAC-1:0][7:0] d);
    @(negedge clk);
    host_fb_re = 1; host_fb_sel = sel; host_fb_bank = 8'(bank); host_fb_addr = 9'(addr);
    @(negedge clk);
    host_fb_re = 0;
    d = host_fb_rdata;
  endtask

  task automatic np_write(int n, int bi, bit si, int s_u, int b_o, int s_a);
    @(negedge clk);
    host_np_we = 1; host_np_bank = 8'(n % P); host_np_addr = 9'(n / P);
    host_np_wdata.bits_in = 4'(bi); host_np_wdata.signed_in = si;
    host_np_wdata.scale_u = 16'(s_u); host_np_wdata.bits_out = 4'(b_o);
    host_np_wdata.scale_a = 16'(s_a);
    @(negedge clk);
    host_np_we = 0;
  endtask

  task automatic load_weights(int fin);
    int kin = (fin + NMAC - 1) / NMAC;
    for (int c = 0; c < F1; c++)
      for (int k = 0; k < kin; k++) begin
        @(negedge clk);
        host_wb_we = 1; host_wb_addr = 15'(c * kin + k);
        for (int l = 0; l < NMAC; l++) host_wb_wdata[l] = 4'(wcur[k*NMAC + l][c]);
      end
    @(negedge clk);
    host_wb_we = 0;
  endtask

  task automatic load_col_scales(int layer);
    for (int c = 0; c < F1; c++) begin
      @(negedge clk);
      host_cs_we = 1; host_cs_addr = 10'(c);
      host_cs_u = 16'(csu[layer][c]); host_cs_a = 16'(csa[layer][c]);
    end
    @(negedge clk);
    host_cs_we = 0;
  endtask

  task automatic run_layer(int kin, bit gm, bit relu);
    @(negedge clk);
    k_in = 16'(kin); f_out = 16'(F1); graph_mode = gm; agg_relu = relu; start = 1;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
  endtask

  // reference: update phase and aggregation (node or graph mode)
  task automatic ref_layer(int fin, int layer, bit gm, bit relu,
                           output int upd_cycles);
    longint vabs, acc, fmax [NN];
    longint vv [NN][F1];
    int kin = (fin + NMAC - 1) / NMAC;
    int groups = (NN + P - 1) / P;
    int best, sel [NN];
    longint d, bd;
    // B = X W, 4-bit signed
    for (int n = 0; n < NN; n++)
      for (int c = 0; c < F1; c++) begin
        acc = 0;
        for (int f = 0; f < fin; f++) acc += longint'(xin[n][f]) * wcur[f][c];
        bq[n][c] = requant_ref(acc, csu[layer][c], xsu[n], 4, 1'b1, 1'b0, vabs);
      end
    // X' = A B
    for (int n = 0; n < NN; n++) begin
      fmax[n] = 0;
      for (int c = 0; c < F1; c++) begin
        acc = 0;
        for (int e = rp[n]; e < rp[n+1]; e++) acc += bq[ci[e]][c];
        vv[n][c] = acc;
        void'(requant_ref(acc, csa[layer][c], 0, 1, 1'b1, relu, vabs));
        if (vabs > fmax[n]) fmax[n] = vabs;
      end
    end
    for (int n = 0; n < NN; n++) begin
      if (gm) begin
        best = 0; bd = 64'h7fff_ffff_ffff;
        for (int i = 0; i < NE; i++) begin
          d = fmax[n] - qm[i];
          if (d < 0) d = -d;
          if (d < bd) begin bd = d; best = i; end
        end
        sel[n] = best;
      end
      for (int c = 0; c < F1; c++) begin
        if (relu && vv[n][c] < 0) n_relu0++;
        xo[n][c] = requant_ref(vv[n][c], csa[layer][c],
                               gm ? ns_scale[sel[n]] : sa[n],
                               gm ? ns_bits[sel[n]] : bo[n], !relu, relu, vabs);
      end
    end
    // update-phase cycle count of the bit-serial array
    upd_cycles = 0;
    for (int g = 0; g < groups; g++) begin
      int mb = 0;
      for (int p = 0; p < P; p++) begin
        int n = g * P + p;
        int b = (n < NN) ? xb[n] : 0;     // nodes past the end read as 0 bits
        if (b > mb) mb = b;
      end
      upd_cycles += 1 + F1 * (2 + kin * (mb + 4));
    end
    // next layer's input
    for (int n = 0; n < NN; n++) begin
      for (int c = 0; c < F1; c++) xin[n][c] = xo[n][c];
      if (gm) begin xb[n] = ns_bits[sel[n]]; xsu[n] = ns_step[sel[n]]; end
      else    begin xb[n] = bo[n];           xsu[n] = su2[n];          end
      xs[n] = !relu;
    end
  endtask

  task automatic check_outputs(string tag, int kout_b);
    logic [NMAC-1:0][7:0] d;
    // B sits in the buffer the aggregation read, X' in the one now named by buf_sel
    for (int n = 0; n < NN; n++) begin
      fb_read(!buf_sel, n % P, (n / P) * kout_b, d);
      for (int c = 0; c < F1; c++) begin
        checks++;
        if (sx8(d[c]) != bq[n][c]) begin
          failures++;
          if (failures < 20) $display("FAIL %s B n=%0d c=%0d got %0d exp %0d", tag, n, c, sx8(d[c]), bq[n][c]);
        end
      end
      fb_read(buf_sel, n % P, (n / P) * kout_b, d);
      for (int c = 0; c < F1; c++) begin
        int got = xs[n] ? sx8(d[c]) : int'(d[c]);
        checks++;
        if (got != xo[n][c]) begin
          failures++;
          if (failures < 20) $display("FAIL %s X' n=%0d c=%0d got %0d exp %0d", tag, n, c, got, xo[n][c]);
        end
      end
    end
  endtask

  // ---------------- stimulus ----------------
  initial begin
    int degs [NN];
    int ucyc, fmx;
    logic [NMAC-1:0][7:0] word;
    start = 0; graph_mode = 0; agg_relu = 1; num_nodes = NN; k_in = 0; f_out = 0;
    col_base = 16'(COLB); nns_entries = 11'(NE);
    host_fb_we = 0; host_fb_sel = 0; host_fb_re = 0; host_fb_bank = 0; host_fb_addr = 0; host_fb_wdata = '0;
    host_wb_we = 0; host_wb_addr = 0; host_wb_wdata = '0; host_eb_we = 0; host_eb_addr = 0; host_eb_wdata = 0;
    host_np_we = 0; host_np_bank = 0; host_np_addr = 0; host_np_wdata = '0;
    host_cs_we = 0; host_cs_addr = 0; host_cs_u = 0; host_cs_a = 0;
    host_nns_we = 0; host_nns_addr = 0; host_nns_qmax = 0; host_nns_scale = 0; host_nns_step = 0; host_nns_bits = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // graph: in-degrees sorted in descending order, as the host would order nodes
    foreach (degs[n]) degs[n] = (n < 3) ? 17 + $urandom % 8 : $urandom % 13;
    degs.rsort();
    rp[0] = 0;
    for (int n = 0; n < NN; n++) begin
      for (int e = 0; e < degs[n]; e++) ci.push_back($urandom % NN);
      rp[n+1] = rp[n] + degs[n];
    end
    for (int i = 0; i <= NN; i++) begin
      @(negedge clk); host_eb_we = 1; host_eb_addr = 16'(i); host_eb_wdata = rp[i];
    end
    foreach (ci[i]) begin
      @(negedge clk); host_eb_we = 1; host_eb_addr = 16'(COLB + i); host_eb_wdata = ci[i];
    end
    @(negedge clk); host_eb_we = 0;

    // layer-1 data
    for (int n = 0; n < NN; n++) begin
      bits0[n] = 2 + $urandom % 7;
      for (int f = 0; f < F0; f++) begin
        int lim;
        lim = (1 << (bits0[n] - 1)) - 1;
        x0[n][f] = int'($urandom % (2 * lim + 1)) - lim;
      end
      su[n]  = 300 + $urandom % 1500;
      sa[n]  = 1000 + $urandom % 12000;
      bo[n]  = 1 + $urandom % 8;
      su2[n] = 0;
      xin[n] = '{default: 0};
      for (int f = 0; f < F0 && f < F1; f++) xin[n][f] = 0;
      xb[n] = bits0[n]; xs[n] = 1; xsu[n] = su[n];
    end
    for (int l = 0; l < 3; l++)
      for (int c = 0; c < F1; c++) begin
        csu[l][c] = 200 + $urandom % 3000;
        csa[l][c] = 100 + $urandom % 1500;
      end
    foreach (w1[f, c]) w1[f][c] = int'($urandom % 15) - 7;
    foreach (w2[f, c]) w2[f][c] = int'($urandom % 15) - 7;
    foreach (w3[f, c]) w3[f][c] = int'($urandom % 15) - 7;

    // load layer-1 features into buffer 0, two words per node
    for (int n = 0; n < NN; n++)
      for (int k = 0; k < 2; k++) begin
        for (int l = 0; l < NMAC; l++) word[l] = 8'(x0[n][k*NMAC + l]);
        fb_write(0, n % P, (n / P) * 2 + k, word);
        np_write(n, bits0[n], 1'b1, su[n], bo[n], sa[n]);
      end
    foreach (w1[f, c]) wcur[f][c] = w1[f][c];
    load_weights(F0);
    load_col_scales(0);

    // ---- layer 1: node mode ----
    begin
      // the reference takes the 32 input features from x0
      for (int n = 0; n < NN; n++) begin
        longint vabs, acc;
        for (int c = 0; c < F1; c++) begin
          acc = 0;
          for (int f = 0; f < F0; f++) acc += longint'(x0[n][f]) * w1[f][c];
          bq[n][c] = requant_ref(acc, csu[0][c], su[n], 4, 1'b1, 1'b0, vabs);
        end
      end
    end
    run_layer(2, 1'b0, 1'b1);
    begin
      // aggregation reference for layer 1 (node mode)
      longint vabs, acc;
      int groups = (NN + P - 1) / P;
      for (int n = 0; n < NN; n++)
        for (int c = 0; c < F1; c++) begin
          acc = 0;
          for (int e = rp[n]; e < rp[n+1]; e++) acc += bq[ci[e]][c];
          if (acc < 0) n_relu0++;
          xo[n][c] = requant_ref(acc, csa[0][c], sa[n], bo[n], 1'b0, 1'b1, vabs);
        end
      for (int n = 0; n < NN; n++) xs[n] = 0;
      ucyc = 0;
      for (int g = 0; g < groups; g++) begin
        int mb = 0;
        for (int p = 0; p < P; p++) begin
          int n;
          n = g * P + p;
          if (n < NN && bits0[n] > mb) mb = bits0[n];
        end
        ucyc += 1 + F1 * (2 + 2 * (mb + 4));
      end
    end
    check_outputs("L1", 1);
    checks++;
    if (int'(cyc_update) != ucyc) begin
      failures++;
      $display("FAIL L1 update cycles %0d, bit-serial rule gives %0d", cyc_update, ucyc);
    end
    $display("layer 1: update %0d cycles, aggregation %0d cycles", cyc_update, cyc_agg);

    // next-layer inputs for the reference
    for (int n = 0; n < NN; n++) begin
      for (int c = 0; c < F1; c++) xin[n][c] = xo[n][c];
      xb[n] = bo[n]; xs[n] = 0; su2[n] = 300 + $urandom % 1500; xsu[n] = su2[n];
      np_write(n, bo[n], 1'b0, su2[n], 0, 0);
    end

    // ---- NNS table: q_max spread over the range of layer-2 values ----
    begin
      longint vabs, acc, vmax;
      vmax = 1;
      for (int n = 0; n < NN; n++)
        for (int c = 0; c < F1; c++) begin
          acc = 0;
          for (int f = 0; f < F1; f++) acc += longint'(xin[n][f]) * w2[f][c];
          if (acc > vmax) vmax = acc;
        end
      // generous upper end; aggregated values can exceed a single product
      vmax = vmax * 4096 * 4;
      for (int i = 0; i < NE; i++) begin
        qm[i] = (i == 0) ? 1 : qm[i-1] + 1 + $urandom % (2 * vmax / NE + 1);
        ns_scale[i] = 64 + $urandom % 4000;
        ns_step[i]  = 200 + $urandom % 2000;
        ns_bits[i]  = 1 + $urandom % 8;
        @(negedge clk);
        host_nns_we = 1; host_nns_addr = 10'(i); host_nns_qmax = 32'(qm[i]);
        host_nns_scale = 16'(ns_scale[i]); host_nns_step = 16'(ns_step[i]); host_nns_bits = 4'(ns_bits[i]);
      end
      @(negedge clk); host_nns_we = 0;
    end

    // ---- layer 2: graph mode, ReLU ----
    foreach (w2[f, c]) wcur[f][c] = w2[f][c];
    load_weights(F1);
    load_col_scales(1);
    ref_layer(F1, 1, 1'b1, 1'b1, ucyc);
    run_layer(1, 1'b1, 1'b1);
    check_outputs("L2", 1);
    checks++;
    if (int'(cyc_update) != ucyc) begin
      failures++;
      $display("FAIL L2 update cycles %0d, bit-serial rule gives %0d", cyc_update, ucyc);
    end
    $display("layer 2: update %0d cycles, aggregation %0d cycles", cyc_update, cyc_agg);

    // ---- layer 3: graph mode, no ReLU, parameters written back by layer 2 ----
    foreach (w3[f, c]) wcur[f][c] = w3[f][c];
    load_weights(F1);
    load_col_scales(2);
    ref_layer(F1, 2, 1'b1, 1'b0, ucyc);
    run_layer(1, 1'b1, 1'b0);
    check_outputs("L3", 1);
    checks++;
    if (int'(cyc_update) != ucyc) begin
      failures++;
      $display("FAIL L3 update cycles %0d, bit-serial rule gives %0d", cyc_update, ucyc);
    end
    $display("layer 3: update %0d cycles, aggregation %0d cycles", cyc_update, cyc_agg);

    // ---- mechanisms ----
    $display("mechanisms: accumulate=%0d mixed_bits=%0d multichunk=%0d swaps=%0d nns=%0d writeback=%0d clip=%0d relu0=%0d",
             n_accum, n_mixed, n_multichunk, n_swap, n_nns, n_pwb, n_clip, n_relu0);
    checks += 8;
    if (n_accum == 0)      begin failures++; $display("FAIL no multi-word accumulation"); end
    if (n_mixed == 0)      begin failures++; $display("FAIL no mixed-bitwidth pass"); end
    if (n_multichunk == 0) begin failures++; $display("FAIL no multi-chunk neighbour row"); end
    if (n_swap != 6)       begin failures++; $display("FAIL buffer swaps %0d, expected 6", n_swap); end
    if (n_nns == 0)        begin failures++; $display("FAIL no NNS lookup"); end
    if (n_pwb == 0)        begin failures++; $display("FAIL no parameter write-back"); end
    if (n_clip == 0)       begin failures++; $display("FAIL no clipping"); end
    if (n_relu0 == 0)      begin failures++; $display("FAIL no ReLU zeroing"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
