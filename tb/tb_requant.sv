// tb_requant: self-checking test of the rescale / ReLU / re-quantize unit.
// Random inner products, scale factors, bitwidths and modes are compared
// against a reference in 64-bit integer arithmetic: round half away from
// zero, then clip to +/-(2^(b-1)-1) (signed) or 2^b-1 (unsigned).
module tb_requant;
  logic signed [23:0] psum;
  logic [15:0] col_scale, node_scale;
  logic [3:0]  bits;
  logic        out_signed, relu;
  logic [31:0] v_abs;
  logic [7:0]  q;
  int checks = 0, failures = 0;

  requant dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint p, mag, v, t, r, lim, qexp, vexp;
    bit neg;
    int nclip = 0;
    for (int i = 0; i < 20000; i++) begin
      psum       = 24'($urandom % 40000) - 24'd20000;
      col_scale  = 16'($urandom % 8192);
      node_scale = 16'($urandom % 8192);
      bits       = 4'(1 + $urandom % 8);
      relu       = 1'($urandom);
      out_signed = relu ? 1'b0 : 1'b1;
      if ($urandom % 4 == 0) out_signed = 1'($urandom);
      #1;
      p = longint'(psum);
      if (relu && p < 0) p = 0;
      neg = p < 0;
      mag = neg ? -p : p;
      v = mag * longint'(col_scale);
      t = v * longint'(node_scale);
      r = (t + (64'sd1 <<< 23)) >>> 24;
      lim = out_signed ? (64'sd1 <<< (bits - 1)) - 1 : (64'sd1 <<< bits) - 1;
      if (r > lim) begin r = lim; nclip++; end
      qexp = neg ? -r : r;
      vexp = (v > 64'hFFFF_FFFF) ? 64'hFFFF_FFFF : v;
      checks++;
      if (q != 8'(qexp)) begin
        failures++;
        if (failures < 10) $display("FAIL psum=%0d cs=%0d ns=%0d b=%0d s=%0d relu=%0d q=%0d exp=%0d",
                                    psum, col_scale, node_scale, bits, out_signed, relu, q, qexp);
      end
      checks++;
      if (longint'(v_abs) != vexp) begin
        failures++;
        if (failures < 10) $display("FAIL v_abs %0d exp %0d", v_abs, vexp);
      end
    end
    checks++;
    if (nclip == 0) begin failures++; $display("FAIL no clipping exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
