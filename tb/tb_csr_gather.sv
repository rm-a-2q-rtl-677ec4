// tb_csr_gather: self-checking test of the CSR gather unit with 4 engines of
// 4 MACs, a small edge buffer and a small feature buffer holding B.
// A random graph of 10 nodes (degrees 0..11, so rows span up to three
// chunks, and the last row group is partly empty) is stored in CSR form; for
// every group, column and chunk the gathered weights, masks and the `more`
// flag are compared with a reference walk of the same CSR arrays, and the
// cycle count with the bound of 4 cycles per engine plus 3 per neighbour.
module tb_csr_gather;
  localparam int P = 4, NM = 4, D = 64, ED = 1024, NN = 10, KS = 2, COLB = 100;
  logic clk = 0, rst_n = 0;
  logic start, more, busy, done;
  logic [15:0] group, chunk, col, k_stride;
  logic [9:0]  col_base;
  logic [31:0] num_nodes;
  logic        a_rd_en, b_rd_en;
  logic [9:0]  a_rd_addr, b_rd_addr;
  logic [31:0] a_rd_data, b_rd_data;
  logic [P-1:0]                 fb_rd_en;
  logic [P-1:0][5:0]            fb_rd_addr;
  logic [P-1:0][NM-1:0][7:0]    fb_rd_data;
  logic [P-1:0][NM-1:0][3:0]    w_pe;
  logic [P-1:0][NM-1:0]         mask;
  // memory load ports
  logic        e_we;
  logic [9:0]  e_wa;
  logic [31:0] e_wd;
  logic [P-1:0]              f_we;
  logic [P-1:0][5:0]         f_wa;
  logic [P-1:0][NM-1:0]      f_be;
  logic [P-1:0][NM-1:0][7:0] f_wd;
  int checks = 0, failures = 0;

  int rp [NN+1];
  int ci [$];
  logic [7:0] bval [NN][KS*NM];

  csr_gather #(.NUM_PE(P), .N_MAC(NM), .FB_AW(6), .EB_AW(10)) dut (
    .clk, .rst_n, .start, .group, .chunk, .col, .k_stride, .col_base, .num_nodes,
    .a_rd_en, .a_rd_addr, .a_rd_data, .b_rd_en, .b_rd_addr, .b_rd_data,
    .fb_rd_en, .fb_rd_addr, .fb_rd_data, .w_pe, .mask, .more, .busy, .done
  );

  edge_buffer #(.DEPTH(ED)) u_eb (
    .clk, .a_rd_en, .a_rd_addr, .a_rd_data, .b_rd_en, .b_rd_addr, .b_rd_data,
    .wr_en (e_we), .wr_addr (e_wa), .wr_data (e_wd)
  );

  feature_buffer #(.NUM_BANKS(P), .LANES(NM), .DEPTH(D)) u_fb (
    .clk, .rd_en (fb_rd_en), .rd_addr (fb_rd_addr), .rd_data (fb_rd_data),
    .wr_en (f_we), .wr_addr (f_wa), .wr_be (f_be), .wr_data (f_wd)
  );

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int deg, cyc, bound, nmore;
    bit exp_more;
    start = 0; group = 0; chunk = 0; col = 0; k_stride = 16'(KS); col_base = 10'(COLB);
    num_nodes = NN; e_we = 0; e_wa = 0; e_wd = 0; f_we = '0; f_wa = '0; f_be = '0; f_wd = '0;
    nmore = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // graph
    rp[0] = 0;
    for (int n = 0; n < NN; n++) begin
      deg = (n == 0) ? 11 : $urandom % 12;
      for (int d = 0; d < deg; d++) ci.push_back($urandom % NN);
      rp[n+1] = rp[n] + deg;
    end
    for (int n = 0; n <= NN; n++) begin
      @(negedge clk); e_we = 1; e_wa = 10'(n); e_wd = rp[n];
    end
    foreach (ci[i]) begin
      @(negedge clk); e_we = 1; e_wa = 10'(COLB + i); e_wd = ci[i];
    end
    @(negedge clk); e_we = 0;
    // B, node n in bank n % P, words (n / P) * KS + k
    for (int n = 0; n < NN; n++)
      for (int k = 0; k < KS; k++) begin
        @(negedge clk);
        f_we = '0;
        f_we[n % P] = 1; f_wa[n % P] = 6'((n / P) * KS + k); f_be[n % P] = '1;
        for (int l = 0; l < NM; l++) begin
          bval[n][k*NM + l] = 8'($urandom);
          f_wd[n % P][l] = bval[n][k*NM + l];
        end
      end
    @(negedge clk); f_we = '0;

    for (int g = 0; g < (NN + P - 1) / P; g++)
      for (int c = 0; c < KS * NM; c++)
        for (int k = 0; k < 3; k++) begin
          @(negedge clk);
          group = 16'(g); chunk = 16'(k); col = 16'(c); start = 1;
          @(negedge clk);
          start = 0; cyc = 1;
          while (!done) begin @(negedge clk); cyc++; end
          exp_more = 0; bound = 0;
          for (int p = 0; p < P; p++) begin
            int n;
            n = g * P + p;
            bound += 4;
            if (n < NN && rp[n+1] > rp[n] + (k + 1) * NM) exp_more = 1;
            for (int s = 0; s < NM; s++) begin
              int idx;
              bit v;
              logic [3:0] ew;
              idx = (n < NN) ? rp[n] + k * NM + s : 0;
              v   = (n < NN) && idx < rp[n+1];
              ew  = v ? bval[ci[idx]][c][3:0] : 4'd0;
              if (v) bound += 3;
              checks++;
              if (mask[p][s] != v || (v && w_pe[p][s] != ew)) begin
                failures++;
                if (failures < 10) $display("FAIL g=%0d c=%0d k=%0d p=%0d s=%0d mask=%0d w=%0d exp %0d/%0d",
                                            g, c, k, p, s, mask[p][s], w_pe[p][s], v, ew);
              end
            end
          end
          if (exp_more) nmore++;
          checks++;
          if (more != exp_more) begin failures++; $display("FAIL more g=%0d k=%0d", g, k); end
          checks++;
          if (cyc > bound + 1) begin failures++; $display("FAIL cycles %0d > %0d", cyc, bound + 1); end
        end
    checks++;
    if (nmore == 0) begin failures++; $display("FAIL multi-chunk rows never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
