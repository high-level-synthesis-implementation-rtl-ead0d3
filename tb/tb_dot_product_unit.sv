// tb_dot_product_unit: drives random operands into dot product units of size
// 4 (two adder-tree levels) and 3 (one lane padded with zero) with a randomly
// dropped enable, and checks each result bit for bit against the reference
// z + ((v0*w0 + v1*w1) + (v2*w2 + v3*w3)), and that it appears exactly
// LDOT = 2 + ceil(log2(DP)) enabled cycles after its operands.
module tb_dot_product_unit;
  import mmm_pkg::*;
  import fp_ref_pkg::*;
  localparam int N = 400;

  logic  clk = 0, en = 0;
  fp32_t v [4], w [4], z, r4, r3;
  int    checks = 0, failures = 0, ecyc = 0;
  fp32_t exp4 [int], exp3 [int];

  dot_product_unit #(.DP(4)) u4 (.clk, .en, .v(v), .w(w), .z(z), .r(r4));
  dot_product_unit #(.DP(3)) u3 (.clk, .en, .v(v[0:2]), .w(w[0:2]), .z(z), .r(r3));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference for operands applied at enabled cycle e, due at e + LDOT
  always @(posedge clk) begin
    if (en) begin
      fp32_t p [4];
      for (int d = 0; d < 4; d++) p[d] = f32_mul(v[d], w[d]);
      exp4[ecyc + dot_latency(4)] = f32_add(z, f32_add(f32_add(p[0], p[1]), f32_add(p[2], p[3])));
      exp3[ecyc + dot_latency(3)] = f32_add(z, f32_add(f32_add(p[0], p[1]), f32_add(p[2], FP32_ZERO)));
      ecyc++;
    end
  end

  // check the registered outputs seen in each enabled cycle
  always @(negedge clk) begin
    if (exp4.exists(ecyc)) begin
      checks += 2;
      if (r4 !== exp4[ecyc]) begin failures++; if (failures < 10) $display("FAIL DP=4 at %0d: %h vs %h", ecyc, r4, exp4[ecyc]); end
      if (r3 !== exp3[ecyc]) begin failures++; if (failures < 10) $display("FAIL DP=3 at %0d: %h vs %h", ecyc, r3, exp3[ecyc]); end
    end
  end

  initial begin
    while (ecyc < N) begin
      @(negedge clk);
      #1;
      en = ($urandom_range(3, 0) != 0);
      for (int d = 0; d < 4; d++) begin v[d] = rand_f32(10); w[d] = rand_f32(10); end
      z = rand_f32(12);
    end
    @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
