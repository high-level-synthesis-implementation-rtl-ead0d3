// systolic_array_3d: the three-dimensional systolic array, a grid of
// D0I x D0J x (D0K/DP) processing elements that adds the product of a
// (D0I x D0K) tile of A and a (D0K x D0J) tile of B to a (D0I x D0J) tile of C
// every cycle.
//
// Layer L of the grid handles the k indices L*DP .. L*DP+DP-1. Values of A
// travel along j through register chains D0J long (one chain per row i and
// per k), values of B travel along i through chains D0I long (one per column j
// and per k), and the partial result of PE(i,j,L) is the scalar input of
// PE(i,j,L+1): the accumulation over k runs upward through the layers. Seen
// from outside the interface is aligned: a tile enters on one enabled cycle
// (a_tile, b_tile, c_tile with in_valid) and the updated tile
// c_res = c_tile + a_tile*b_tile leaves, with out_valid, exactly
// LBODY = D0I + D0J - 1 + (D0K/DP)*LDOT enabled cycles later, one new tile per
// cycle (II = 1). Inside, delay lines skew the inputs so that A row i of layer
// L waits i + L*LDOT cycles, B column j waits j + L*LDOT, C entry (i,j) waits
// i+j+1, and the results are de-skewed by (D0I-1-i)+(D0J-1-j). en low freezes
// the whole array. The grid, the three directions of data flow, the layer
// mapping of k and LBODY follow the paper; the aligned skew/de-skew wrapper is
// this design's way of giving the diagonal activation times of the paper's
// wavefronts to a block-level interface.
module systolic_array_3d
  import mmm_pkg::*;
#(
  parameter int D0I = 28,
  parameter int D0J = 28,
  parameter int D0K = 6,
  parameter int DP  = 1
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,
  input  logic  in_valid,
  input  fp32_t a_tile [D0I][D0K],
  input  fp32_t b_tile [D0K][D0J],
  input  fp32_t c_tile [D0I][D0J],
  output logic  out_valid,
  output fp32_t c_res  [D0I][D0J]
);
  localparam int NL    = D0K / DP;
  localparam int LDOT  = dot_latency(DP);
  localparam int LBODY = D0I + D0J - 1 + NL * LDOT;

  if (D0K % DP != 0) begin : g_bad_dp
    $error("D0K must be a multiple of DP");
  end

  // a_w[i][j][L] feeds PE(i,j,L); b_w likewise; c_w[i][j][L] is the scalar
  // input of PE(i,j,L), c_w[i][j][NL] the top-layer result.
  fp32_t a_w [D0I][D0J+1][NL][DP];
  fp32_t b_w [D0I+1][D0J][NL][DP];
  fp32_t c_w [D0I][D0J][NL+1];

  // input skew of A and B
  for (genvar i = 0; i < D0I; i++) begin : g_skew_a
    for (genvar l = 0; l < NL; l++) begin : g_l
      for (genvar d = 0; d < DP; d++) begin : g_d
        delay_line #(.T(fp32_t), .DEPTH(i + l * LDOT)) u_dl (
          .clk(clk), .en(en), .d(a_tile[i][l*DP+d]), .q(a_w[i][0][l][d]));
      end
    end
  end
  for (genvar j = 0; j < D0J; j++) begin : g_skew_b
    for (genvar l = 0; l < NL; l++) begin : g_l
      for (genvar d = 0; d < DP; d++) begin : g_d
        delay_line #(.T(fp32_t), .DEPTH(j + l * LDOT)) u_dl (
          .clk(clk), .en(en), .d(b_tile[l*DP+d][j]), .q(b_w[0][j][l][d]));
      end
    end
  end

  for (genvar i = 0; i < D0I; i++) begin : g_i
    for (genvar j = 0; j < D0J; j++) begin : g_j
      delay_line #(.T(fp32_t), .DEPTH(i + j + 1)) u_skew_c (
        .clk(clk), .en(en), .d(c_tile[i][j]), .q(c_w[i][j][0]));
      for (genvar l = 0; l < NL; l++) begin : g_l
        systolic_pe #(.DP(DP)) u_pe (
          .clk  (clk),
          .en   (en),
          .a_in (a_w[i][j][l]),
          .b_in (b_w[i][j][l]),
          .c_in (c_w[i][j][l]),
          .a_out(a_w[i][j+1][l]),
          .b_out(b_w[i+1][j][l]),
          .c_out(c_w[i][j][l+1])
        );
      end
      delay_line #(.T(fp32_t), .DEPTH((D0I - 1 - i) + (D0J - 1 - j))) u_deskew (
        .clk(clk), .en(en), .d(c_w[i][j][NL]), .q(c_res[i][j]));
    end
  end

  // valid flag travels with the tile
  logic [LBODY-1:0] vld_sr;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  vld_sr <= '0;
    else if (en) vld_sr <= {vld_sr[LBODY-2:0], in_valid};
  end
  assign out_valid = vld_sr[LBODY-1];

endmodule
