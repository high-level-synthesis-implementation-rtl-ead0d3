// dot_product_unit: pipelined single-precision dot product plus scalar,
// r = z + sum_{i<DP} v[i]*w[i].
//
// This is the arithmetic of one processing element. Stage 1 registers the DP
// products; ceil(log2(DP)) stages of a balanced adder tree register the
// pairwise sums ((p0+p1)+(p2+p3))...; the last stage adds z, which is carried
// alongside in a delay line. Lanes beyond DP (when DP is not a power of two)
// are fed +0. Inputs are sampled together on a clock edge with en high and the
// result appears LDOT = 2 + ceil(log2(DP)) enabled cycles later; en low holds
// every stage (a pipeline stall). The function and the size d_p come from the
// paper; the stage split, the summation order and hence the latency are this
// design's own (the FPGA tool chooses them there).
module dot_product_unit
  import mmm_pkg::*;
#(
  parameter int DP = 1
) (
  input  logic  clk,
  input  logic  en,
  input  fp32_t v [DP],
  input  fp32_t w [DP],
  input  fp32_t z,
  output fp32_t r
);
  localparam int LV   = $clog2(DP);   // adder tree levels
  localparam int NP2  = 1 << LV;      // lanes rounded up to a power of two

  // tree[l] holds NP2 >> l partial sums after level l (level 0 = products)
  fp32_t tree [LV+1][NP2];
  fp32_t prod_c [DP];
  fp32_t z_d [LV+1];                  // z delayed by 1 + LV cycles
  fp32_t root_sum;

  for (genvar i = 0; i < DP; i++) begin : g_mul
    fp32_mul u_mul (.a(v[i]), .b(w[i]), .p(prod_c[i]));
  end

  always_ff @(posedge clk) begin
    if (en) begin
      for (int i = 0; i < NP2; i++)
        tree[0][i] <= (i < DP) ? prod_c[i] : FP32_ZERO;
      z_d[0] <= z;
      for (int l = 1; l <= LV; l++) z_d[l] <= z_d[l-1];
    end
  end

  for (genvar l = 1; l <= LV; l++) begin : g_lvl
    for (genvar i = 0; i < (NP2 >> l); i++) begin : g_add
      fp32_t s_c;
      fp32_add u_add (.a(tree[l-1][2*i]), .b(tree[l-1][2*i+1]), .s(s_c));
      always_ff @(posedge clk) if (en) tree[l][i] <= s_c;
    end
  end

  fp32_add u_addz (.a(z_d[LV]), .b(tree[LV][0]), .s(root_sum));

  always_ff @(posedge clk) if (en) r <= root_sum;

endmodule
