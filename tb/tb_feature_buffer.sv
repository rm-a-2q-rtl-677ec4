// tb_feature_buffer: self-checking test of the banked feature buffer at its
// full size (256 banks x 512 words x 16 bytes). Writes random words through
// per-bank ports, partial writes through lane enables, then reads them back
// with per-bank addresses and checks the one-cycle read latency.
module tb_feature_buffer;
  localparam int NB = 256, D = 512, L = 16;
  logic clk = 0;
  logic [NB-1:0]              rd_en, wr_en;
  logic [NB-1:0][8:0]         rd_addr, wr_addr;
  logic [NB-1:0][L-1:0][7:0]  rd_data, wr_data;
  logic [NB-1:0][L-1:0]       wr_be;
  int checks = 0, failures = 0;
  logic [L-1:0][7:0] model [NB][D];
  bit                valid [NB][D];

  feature_buffer dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a;
    rd_en = '0; wr_en = '0; rd_addr = '0; wr_addr = '0; wr_data = '0; wr_be = '0;
    // full-word writes to 64 random words per bank, all banks at once
    for (int t = 0; t < 64; t++) begin
      @(negedge clk);
      for (int b = 0; b < NB; b++) begin
        a = $urandom % D;
        wr_en[b] = 1; wr_addr[b] = 9'(a); wr_be[b] = '1;
        for (int l = 0; l < L; l++) wr_data[b][l] = 8'($urandom);
        model[b][a] = wr_data[b]; valid[b][a] = 1;
      end
    end
    // lane writes: one lane of a written word
    for (int t = 0; t < 64; t++) begin
      @(negedge clk);
      for (int b = 0; b < NB; b++) begin
        int ln;
        do a = $urandom % D; while (!valid[b][a]);
        ln = $urandom % L;
        wr_en[b] = 1'($urandom); wr_addr[b] = 9'(a); wr_be[b] = L'(1) << ln;
        for (int l = 0; l < L; l++) wr_data[b][l] = 8'($urandom);
        if (wr_en[b]) model[b][a][ln] = wr_data[b][ln];
      end
    end
    @(negedge clk);
    wr_en = '0;
    // read back
    for (int t = 0; t < 200; t++) begin
      logic [NB-1:0][8:0] ad;
      for (int b = 0; b < NB; b++) begin
        do a = $urandom % D; while (!valid[b][a]);
        rd_en[b] = 1; rd_addr[b] = 9'(a); ad[b] = 9'(a);
      end
      @(negedge clk);
      rd_en = '0;
      for (int b = 0; b < NB; b++) begin
        checks++;
        if (rd_data[b] != model[b][ad[b]]) begin
          failures++;
          if (failures < 10) $display("FAIL bank %0d addr %0d", b, ad[b]);
        end
      end
      // data must hold while no read is issued
      @(negedge clk);
      checks++;
      if (rd_data[7] != model[7][ad[7]]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
