// tb_edge_buffer: self-checking test of the 256 KB CSR edge buffer at its
// full size: random writes, then simultaneous reads on both ports.
module tb_edge_buffer;
  localparam int D = 65536;
  logic clk = 0;
  logic a_rd_en, b_rd_en, wr_en;
  logic [15:0] a_rd_addr, b_rd_addr, wr_addr;
  logic [31:0] a_rd_data, b_rd_data, wr_data;
  int checks = 0, failures = 0;
  logic [31:0] model [int];

  edge_buffer dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a, b, keys[$];
    a_rd_en = 0; b_rd_en = 0; wr_en = 0; a_rd_addr = 0; b_rd_addr = 0; wr_addr = 0; wr_data = 0;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      a = (t < 2) ? t * (D - 1) : $urandom % D;
      wr_en = 1; wr_addr = 16'(a); wr_data = $urandom;
      model[a] = wr_data;
    end
    @(negedge clk);
    wr_en = 0;
    foreach (model[k]) keys.push_back(k);
    for (int t = 0; t < 4000; t++) begin
      a = keys[$urandom % keys.size()];
      b = keys[$urandom % keys.size()];
      a_rd_en = 1; a_rd_addr = 16'(a);
      b_rd_en = 1; b_rd_addr = 16'(b);
      @(negedge clk);
      a_rd_en = 0; b_rd_en = 0;
      checks += 2;
      if (a_rd_data != model[a]) failures++;
      if (b_rd_data != model[b]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
