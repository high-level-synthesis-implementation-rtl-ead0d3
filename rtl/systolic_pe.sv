// systolic_pe: one processing element PE(i,j,L) of the three-dimensional
// systolic array.
//
// The PE registers the DP values of A arriving from its left neighbour
// PE(i,j-1,L) and the DP values of B arriving from the neighbour above
// PE(i-1,j,L); the registered values are both the operands of its dot product
// unit and the outputs passed on to PE(i,j+1,L) and PE(i+1,j,L). The partial
// result c_in from the PE below, PE(i,j,L-1) (or the C FIFO for layer 0), is
// the scalar z of the dot product, and c_out goes to PE(i,j,L+1) (or back to
// the C FIFO from the top layer). Timing: a_out/b_out follow a_in/b_in by one
// enabled cycle; c_out = c_in + a.b appears 1 + LDOT enabled cycles after
// a_in/b_in, LDOT after c_in. The neighbour connections and the one register
// between neighbours follow the paper; the register on c_in's timing is this
// design's own.
module systolic_pe
  import mmm_pkg::*;
#(
  parameter int DP = 1
) (
  input  logic  clk,
  input  logic  en,
  input  fp32_t a_in  [DP],
  input  fp32_t b_in  [DP],
  input  fp32_t c_in,
  output fp32_t a_out [DP],
  output fp32_t b_out [DP],
  output fp32_t c_out
);
  fp32_t a_q [DP];
  fp32_t b_q [DP];

  always_ff @(posedge clk) begin
    if (en) begin
      a_q <= a_in;
      b_q <= b_in;
    end
  end

  assign a_out = a_q;
  assign b_out = b_q;

  dot_product_unit #(.DP(DP)) u_dot (
    .clk(clk), .en(en), .v(a_q), .w(b_q), .z(c_in), .r(c_out)
  );
endmodule
