// tb_pe: self-checking test of the processing engine (16 bit-serial MACs).
// Random passes with random per-pass bitwidth (1..8) and sign mode; checks
// the 16-element inner product, accumulation across passes when acc_clear is
// low, and that `done` comes exactly nbits+2 cycles after `start`.
module tb_pe;
  localparam int N = 16;
  logic clk = 0, rst_n = 0;
  logic start, acc_clear, is_signed, busy, done;
  logic [N-1:0][7:0] x;
  logic [N-1:0][3:0] w;
  logic [3:0] nbits;
  logic signed [23:0] psum;
  int checks = 0, failures = 0;

  pe dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
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

  initial begin
    int ref_sum, cyc, m;
    bit s;
    start = 0; acc_clear = 0; is_signed = 0; x = '0; w = '0; nbits = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    ref_sum = 0;
    for (int t = 0; t < 400; t++) begin
      m = 1 + ($urandom % 8);
      s = (m > 1) ? 1'($urandom) : 1'b0;
      @(negedge clk);
      for (int i = 0; i < N; i++) begin
        x[i] = 8'($urandom);
        w[i] = 4'($urandom);
        // keep the container's unused upper bits random: the PE must ignore them
      end
      nbits     = 4'(m);
      is_signed = s;
      acc_clear = (t % 3 == 0);
      if (acc_clear) ref_sum = 0;
      for (int i = 0; i < N; i++) ref_sum += fval(x[i], m, s) * int'($signed(w[i]));
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != m + 2) begin
        failures++;
        $display("FAIL latency m=%0d cyc=%0d", m, cyc);
      end
      checks++;
      if (int'(psum) != ref_sum) begin
        failures++;
        $display("FAIL t=%0d m=%0d s=%0d psum=%0d exp=%0d", t, m, s, psum, ref_sum);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
