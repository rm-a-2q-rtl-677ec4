// tb_bs_mac: self-checking test of the bit-serial MAC cell.
// Feeds random m-bit features (m = 1..8, signed and unsigned) most significant
// bit first against random signed 4-bit weights and checks that the register
// holds w * x after exactly m enabled cycles; also checks that `en` low holds
// the register.
module tb_bs_mac;
  logic clk = 0, rst_n = 0;
  logic en, first, x_bit, neg;
  logic signed [3:0]  w;
  logic signed [11:0] acc;
  int checks = 0, failures = 0;

  bs_mac #(.W_BITS(4), .ACC_W(12)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int m, xi, expect_v, sgn;
    logic [7:0] xb;
    en = 0; first = 0; x_bit = 0; neg = 0; w = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      m   = 1 + ($urandom % 8);
      sgn = $urandom % 2;
      xb  = 8'($urandom);
      w   = 4'($urandom);
      if (sgn && m > 1) begin
        xi = int'(xb[6:0] & ((8'd1 << (m-1)) - 1));
        if (xb[7]) xi = xi - (1 << (m-1));
      end else begin
        sgn = 0;
        xi = int'(xb & 8'((1 << m) - 1));
      end
      expect_v = xi * int'(w);
      for (int i = m - 1; i >= 0; i--) begin
        @(negedge clk);
        en    = 1;
        first = (i == m - 1);
        x_bit = (((xi >> i) & 1) != 0);
        neg   = sgn && (i == m - 1);
      end
      @(negedge clk);
      en = 0;
      checks++;
      if (int'(acc) != expect_v) begin
        failures++;
        $display("FAIL m=%0d x=%0d w=%0d acc=%0d exp=%0d", m, xi, w, acc, expect_v);
      end
      // hold check
      @(negedge clk);
      checks++;
      if (int'(acc) != expect_v) begin
        failures++;
        $display("FAIL hold");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
