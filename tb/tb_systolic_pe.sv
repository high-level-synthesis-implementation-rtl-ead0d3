// tb_systolic_pe: checks one processing element with a dot product of size
// 2: the A and B values it forwards are its inputs one cycle late, and its
// partial-sum output is c_in + a.b, where a and b are the values registered
// one cycle before c_in is sampled, appearing LDOT cycles after c_in.
module tb_systolic_pe;
  import mmm_pkg::*;
  import fp_ref_pkg::*;
  localparam int DP = 2;
  localparam int LDOT = dot_latency(DP);
  localparam int N = 300;

  logic  clk = 0, en = 1;
  fp32_t a_in [DP], b_in [DP], a_out [DP], b_out [DP], c_in, c_out;
  fp32_t ha [N][DP], hb [N][DP], hc [N];
  int    checks = 0, failures = 0;

  systolic_pe #(.DP(DP)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < N; t++) begin
      for (int d = 0; d < DP; d++) begin ha[t][d] = rand_f32(10); hb[t][d] = rand_f32(10); end
      hc[t] = rand_f32(12);
    end
    for (int t = 0; t < N; t++) begin
      // inputs of cycle t: A/B of step t, c_in matching the A/B of step t-1
      a_in = ha[t]; b_in = hb[t]; c_in = (t > 0) ? hc[t-1] : FP32_ZERO;
      @(posedge clk);
      #1;
      for (int d = 0; d < DP; d++) begin
        checks += 2;
        if (a_out[d] !== ha[t][d]) failures++;
        if (b_out[d] !== hb[t][d]) failures++;
      end
      // c_out now shows the result for A/B step t-LDOT (c sampled at t-LDOT+1)
      if (t >= LDOT + 1) begin
        int s;
        fp32_t e;
        s = t - LDOT;
        e = f32_add(hc[s], f32_add(f32_mul(ha[s][0], hb[s][0]), f32_mul(ha[s][1], hb[s][1])));
        checks++;
        if (c_out !== e) begin
          failures++;
          if (failures < 10) $display("FAIL cycle %0d c_out %h expected %h", t, c_out, e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
