// tb_mmm3d_top: end-to-end test of the matrix multiplication kernel at the
// small example size of the connection diagram (a 4 x 3 x 3 grid, dot
// product size 1, 2 values of A and 1 value of B per cycle, so r_A = 6,
// r_B = 9 and C blocks of 36 x 18), multiplying a 72 x 9 matrix by a 9 x 36
// matrix: 2 x 2 blocks of C, 3 k steps each, with random read and write
// stalls. See mmm_tb_body.svh for what is checked.
module tb_mmm3d_top;
  import mmm_pkg::*;
  import fp_ref_pkg::*;
  localparam int D0I = 4, D0J = 3, D0K = 3, DP = 1, BGA = 2, BGB = 1;
  localparam int N_BI = 2, N_BJ = 2, N_K = 3;
  localparam int MAXCYC = 200000;

  logic        clk = 0, rst_n, start, busy, done, stall;
  logic [15:0] n_bi, n_bj, n_k;
  phase_e      phase;
  logic        a_valid, a_ready, b_valid, b_ready, c_valid, c_ready;
  logic [31:0] a_addr, b_addr, c_addr;
  fp32_t       a_data [BGA];
  fp32_t       b_data [BGB];
  fp32_t       c_data [D0J];

  mmm3d_top #(.D0I(D0I), .D0J(D0J), .D0K(D0K), .DP(DP), .BGA(BGA), .BGB(BGB)) dut (.*);

  `include "mmm_tb_body.svh"
endmodule
