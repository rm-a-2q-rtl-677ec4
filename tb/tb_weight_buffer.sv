// tb_weight_buffer: self-checking test of the 256 KB weight buffer at its
// full size: random writes, read-back with one cycle latency.
module tb_weight_buffer;
  localparam int D = 32768;
  logic clk = 0;
  logic rd_en, wr_en;
  logic [14:0] rd_addr, wr_addr;
  logic [15:0][3:0] rd_data, wr_data;
  int checks = 0, failures = 0;
  logic [63:0] model [int];

  weight_buffer dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a, keys[$];
    rd_en = 0; wr_en = 0; rd_addr = 0; wr_addr = 0; wr_data = '0;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      a = (t < 2) ? t * (D - 1) : $urandom % D;
      wr_en = 1; wr_addr = 15'(a); wr_data = {$urandom, $urandom};
      model[a] = wr_data;
    end
    @(negedge clk);
    wr_en = 0;
    foreach (model[k]) keys.push_back(k);
    for (int t = 0; t < 3000; t++) begin
      a = keys[$urandom % keys.size()];
      rd_en = 1; rd_addr = 15'(a);
      @(negedge clk);
      rd_en = 0;
      checks++;
      if (rd_data != model[a]) begin
        failures++;
        if (failures < 10) $display("FAIL addr %0d", a);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
