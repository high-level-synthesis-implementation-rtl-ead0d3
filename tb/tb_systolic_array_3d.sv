// tb_systolic_array_3d: streams random tiles through a small 3 x 4 x (4/2)
// array (two layers of dot product units of size 2) with a randomly dropped
// enable, and checks every result tile bit for bit against a reference that
// adds the layers' dot products in the array's order, and checks that each
// tile leaves exactly LBODY = D0I + D0J - 1 + (D0K/DP)*LDOT enabled cycles
// after it entered.
module tb_systolic_array_3d;
  import mmm_pkg::*;
  import fp_ref_pkg::*;
  localparam int D0I = 3, D0J = 4, D0K = 4, DP = 2;
  localparam int NL = D0K / DP;
  localparam int LBODY = D0I + D0J - 1 + NL * dot_latency(DP);
  localparam int NT = 60;

  logic clk = 0, rst_n = 0, en = 0, in_valid = 0, out_valid;
  fp32_t a_tile [D0I][D0K];
  fp32_t b_tile [D0K][D0J];
  fp32_t c_tile [D0I][D0J];
  fp32_t c_res  [D0I][D0J];
  int checks = 0, failures = 0;

  fp32_t exp_q [NT][D0I][D0J];
  int    t_in [NT];
  int    n_in = 0, n_out = 0, ecyc = 0;

  systolic_array_3d #(.D0I(D0I), .D0J(D0J), .D0K(D0K), .DP(DP)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void new_tile(int n);
    for (int i = 0; i < D0I; i++) for (int k = 0; k < D0K; k++) a_tile[i][k] = rand_f32(8);
    for (int k = 0; k < D0K; k++) for (int j = 0; j < D0J; j++) b_tile[k][j] = rand_f32(8);
    for (int i = 0; i < D0I; i++) for (int j = 0; j < D0J; j++) begin
      fp32_t s;
      s = rand_f32(8);
      c_tile[i][j] = s;
      for (int l = 0; l < NL; l++) begin
        fp32_t t;
        t = f32_mul(a_tile[i][l*DP], b_tile[l*DP][j]);
        for (int d = 1; d < DP; d++) t = f32_add(t, f32_mul(a_tile[i][l*DP+d], b_tile[l*DP+d][j]));
        s = f32_add(s, t);
      end
      exp_q[n][i][j] = s;
    end
  endfunction

  // checker on every enabled edge
  always @(posedge clk) begin
    if (rst_n && en) begin
      ecyc <= ecyc + 1;
      if (in_valid) begin t_in[n_in] = ecyc; n_in++; end
      if (out_valid) begin
        checks++;
        if (ecyc - t_in[n_out] != LBODY) begin
          failures++;
          $display("FAIL latency tile %0d: %0d cycles, expected %0d", n_out, ecyc - t_in[n_out], LBODY);
        end
        for (int i = 0; i < D0I; i++) for (int j = 0; j < D0J; j++) begin
          checks++;
          if (c_res[i][j] !== exp_q[n_out][i][j]) begin
            failures++;
            if (failures < 10) $display("FAIL tile %0d c[%0d][%0d] = %h expected %h",
                                        n_out, i, j, c_res[i][j], exp_q[n_out][i][j]);
          end
        end
        n_out++;
      end
    end
  end

  initial begin
    int sent = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    while (n_out < NT) begin
      @(negedge clk);
      if (en && in_valid) sent++;
      en = ($urandom_range(9, 0) < 7);
      in_valid = (sent < NT) && ($urandom_range(3, 0) != 0);
      if (in_valid && sent < NT) new_tile(sent);
    end
    @(negedge clk);
    checks++;
    if (n_out != NT) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
