// tb_mac_array: self-checking test of the compute unit at 8 engines.
// Update mode: one broadcast weight slice, a different bitwidth and sign mode
// per engine; checks every engine's inner product, accumulation over two
// passes, and that `busy` lasts as long as the slowest engine (max nbits + 1
// cycles) with `done` on the first idle cycle. Aggregation mode: per-engine
// weights with a neighbour mask, a one-bit pass; checks the masked sums.
module tb_mac_array;
  localparam int P = 8, N = 16;
  logic clk = 0, rst_n = 0;
  logic start, acc_clear, agg_mode, busy, done;
  logic [P-1:0][N-1:0][7:0] x;
  logic [P-1:0][3:0]        nbits;
  logic [P-1:0]             is_signed;
  logic [N-1:0][3:0]        w_bcast;
  logic [P-1:0][N-1:0][3:0] w_pe;
  logic [P-1:0][N-1:0]      mask;
  logic signed [23:0]       psum [P];
  int checks = 0, failures = 0;

  mac_array #(.NUM_PE(P)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int fval(logic [7:0] b, int m, bit s);
    int v = int'(b & 8'((1 << m) - 1));
    if (s && ((v >> (m - 1)) & 1) != 0) v -= (1 << m);
    return v;
  endfunction

  int ref_sum [P];

  task automatic run_pass(output int cyc);
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
  endtask

  initial begin
    int cyc, mx;
    start = 0; acc_clear = 0; agg_mode = 0; x = '0; nbits = '0; is_signed = '0;
    w_bcast = '0; w_pe = '0; mask = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      agg_mode  = (t % 4 == 3);
      acc_clear = (t % 2 == 0);
      mx = 1;
      for (int p = 0; p < P; p++) begin
        if (acc_clear) ref_sum[p] = 0;
        nbits[p]     = 4'(1 + $urandom % 8);
        is_signed[p] = (nbits[p] > 1) ? 1'($urandom) : 1'b0;
        if (!agg_mode && int'(nbits[p]) > mx) mx = int'(nbits[p]);
        for (int i = 0; i < N; i++) begin
          x[p][i]    = 8'($urandom);
          w_pe[p][i] = 4'($urandom);
          mask[p][i] = 1'($urandom);
        end
      end
      for (int i = 0; i < N; i++) w_bcast[i] = 4'($urandom);
      for (int p = 0; p < P; p++)
        for (int i = 0; i < N; i++)
          if (agg_mode) ref_sum[p] += mask[p][i] ? int'($signed(w_pe[p][i])) : 0;
          else ref_sum[p] += fval(x[p][i], int'(nbits[p]), is_signed[p]) * int'($signed(w_bcast[i]));
      run_pass(cyc);
      checks++;
      if (cyc != mx + 2) begin
        failures++;
        $display("FAIL latency t=%0d agg=%0d cyc=%0d exp=%0d", t, agg_mode, cyc, mx + 2);
      end
      for (int p = 0; p < P; p++) begin
        checks++;
        if (int'(psum[p]) != ref_sum[p]) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d pe=%0d psum=%0d exp=%0d", t, p, psum[p], ref_sum[p]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
