// c_fifo_system: the C FIFO system, D0I x D0J FIFOs that hold one block of C
// (d1i x d1j values) while it is being accumulated.
//
// FIFO (i,j) holds element (i,j) of every (D0I x D0J) tile of the C block, in
// tile order, so a full C block is DEPTH = r_A*r_B words per FIFO. During
// Compute the tiles circulate: pop_all dequeues one whole tile (head) for the
// bottom face of the systolic array and push enqueues the updated tile coming
// out of the top face. During Write, pop_row_en with pop_row = i dequeues only
// the D0J FIFOs of row i, giving D0J consecutive values of one row of C for
// the store unit. Head words are combinational; pushes and pops take effect
// at the clock edge. The FIFO count and the enqueue/dequeue faces follow the
// paper; the separate row-wise dequeue for Write is this design's own.
module c_fifo_system
  import mmm_pkg::*;
#(
  parameter int D0I   = 28,
  parameter int D0J   = 28,
  parameter int DEPTH = 576
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     push,
  input  fp32_t                    din  [D0I][D0J],
  input  logic                     pop_all,
  input  logic                     pop_row_en,
  input  logic [15:0]              pop_row,
  output fp32_t                    head [D0I][D0J],
  output logic [$clog2(DEPTH+1)-1:0] count00
);
  logic [$clog2(DEPTH+1)-1:0] cnt [D0I][D0J];

  for (genvar i = 0; i < D0I; i++) begin : g_i
    logic pop_i;
    assign pop_i = pop_all || (pop_row_en && int'(pop_row) == i);
    for (genvar j = 0; j < D0J; j++) begin : g_j
      c_fifo #(.DEPTH(DEPTH)) u_fifo (
        .clk(clk), .rst_n(rst_n), .push(push), .din(din[i][j]),
        .pop(pop_i), .dout(head[i][j]), .count(cnt[i][j]));
    end
  end

  // occupancy of FIFO (0,0), for monitoring
  assign count00 = cnt[0][0];

  a_one_pop_mode: assert property (@(posedge clk) disable iff (!rst_n)
    !(pop_all && pop_row_en)) else $error("c_fifo_system: both pop modes at once");
endmodule
