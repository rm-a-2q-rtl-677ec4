// tb_nns_unit: self-checking test of the Nearest Neighbor Strategy lookup.
// Loads 1000 ascending q_max entries with their parameters, then looks up
// random values (and values exactly on and between entries, below the first
// and above the last) and compares with a brute-force nearest search (ties
// to the smaller q_max). Checks the latency bound ceil(log2 n) + 3.
module tb_nns_unit;
  localparam int M = 1000;
  logic clk = 0, rst_n = 0;
  logic wr_en, start, busy, done;
  logic [9:0]  wr_addr, index;
  logic [31:0] wr_qmax, f;
  logic [15:0] wr_scale, wr_step, scale, step;
  logic [3:0]  wr_bits, bits;
  logic [10:0] n_entries;
  int checks = 0, failures = 0;
  int unsigned qm [M];

  nns_unit dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic lookup(input int unsigned fv, input int n);
    int best, cyc, lim;
    longint d, bd;
    @(negedge clk);
    f = fv; start = 1;
    @(negedge clk);
    start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    best = 0; bd = 64'h7fff_ffff_ffff;
    for (int i = 0; i < n; i++) begin
      d = longint'(fv) - longint'(qm[i]);
      if (d < 0) d = -d;
      if (d < bd) begin bd = d; best = i; end
    end
    lim = $clog2(n) + 3;
    checks++;
    if (int'(index) != best || scale != 16'(best * 7 + 1) || step != 16'(best * 3 + 2)
        || bits != 4'(1 + best % 8)) begin
      failures++;
      if (failures < 10) $display("FAIL f=%0d idx=%0d exp=%0d", fv, index, best);
    end
    checks++;
    if (cyc > lim) begin
      failures++;
      $display("FAIL latency %0d > %0d", cyc, lim);
    end
  endtask

  initial begin
    int unsigned acc;
    wr_en = 0; start = 0; f = 0; wr_addr = 0; wr_qmax = 0; wr_scale = 0; wr_step = 0; wr_bits = 0;
    n_entries = 11'(M);
    repeat (2) @(posedge clk);
    rst_n = 1;
    acc = 100;
    for (int i = 0; i < M; i++) begin
      acc += 1 + ($urandom % 500);
      qm[i] = acc;
      @(negedge clk);
      wr_en = 1; wr_addr = 10'(i); wr_qmax = acc;
      wr_scale = 16'(i * 7 + 1); wr_step = 16'(i * 3 + 2); wr_bits = 4'(1 + i % 8);
    end
    @(negedge clk);
    wr_en = 0;
    lookup(0, M);
    lookup(qm[M-1] + 1000, M);
    lookup(qm[0], M);
    lookup(qm[500], M);
    for (int t = 0; t < 1500; t++) lookup($urandom % (qm[M-1] + 200), M);
    // a shorter table
    n_entries = 11'd37;
    for (int t = 0; t < 200; t++) lookup($urandom % (qm[40]), 37);
    n_entries = 11'd1;
    lookup(5, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
