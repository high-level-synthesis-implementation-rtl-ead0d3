// mapped_memory: one mapped memory system, the on-chip store between a
// global-memory load unit and one face of the systolic array.
//
// It holds NR x NK independent partitions (NR = d0i for A, d0j for B; NK =
// d0k), one per register chain of the array, so that every chain is fed by
// its own load port at one value per cycle. Each partition keeps two buffers
// of HALF words (HALF = r_B tiles of A, or r_A tiles of B): while the array
// reads the buffer of step k, the global-memory stream fills the other buffer
// with step k+1 (double buffering, "two columns of A, two rows of B").
// Write side: on wr_en, LANES consecutive values wr_data[0..LANES-1] go to the
// partitions (wr_r0 + q, wr_k), q < LANES, at word wr_buf*HALF + wr_idx; wr_r0
// must be a multiple of LANES, so the LANES values always land in distinct
// partitions (one store per partition per cycle). Read side: on rd_en every
// partition reads word rd_buf*HALF + rd_idx, and rd_data is valid on the next
// cycle (registered read, as an M20K block). Partition count and the
// two-step contents follow the paper; the buffer layout, the lane-to-partition
// mapping and the read latency are this design's own.
module mapped_memory
  import mmm_pkg::*;
#(
  parameter int NR    = 28,
  parameter int NK    = 6,
  parameter int HALF  = 24,
  parameter int LANES = 7
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr_en,
  input  logic                     wr_buf,
  input  logic [15:0]              wr_k,
  input  logic [15:0]              wr_r0,
  input  logic [15:0]              wr_idx,
  input  fp32_t                    wr_data [LANES],
  input  logic                     rd_en,
  input  logic                     rd_buf,
  input  logic [15:0]              rd_idx,
  output fp32_t                    rd_data [NR][NK]
);
  localparam int DEPTH = 2 * HALF;
  localparam int AW    = $clog2(DEPTH);

  if (NR % LANES != 0) begin : g_bad_lanes
    $error("NR must be a multiple of LANES");
  end

  logic [AW-1:0] wa, ra;
  assign wa = (wr_buf ? AW'(HALF) : AW'(0)) + AW'(wr_idx);
  assign ra = (rd_buf ? AW'(HALF) : AW'(0)) + AW'(rd_idx);

  for (genvar r = 0; r < NR; r++) begin : g_r
    for (genvar k = 0; k < NK; k++) begin : g_k
      fp32_t mem [DEPTH];
      logic  we;
      assign we = wr_en && (int'(wr_k) == k) && (r >= int'(wr_r0)) && (r < int'(wr_r0) + LANES);
      always_ff @(posedge clk) begin
        if (we) mem[wa] <= wr_data[(r - int'(wr_r0)) % LANES];
        if (rd_en) rd_data[r][k] <= mem[ra];
      end
    end
  end

  a_lane_aligned: assert property (@(posedge clk) disable iff (!rst_n)
    wr_en |-> (int'(wr_r0) % LANES == 0) && (int'(wr_k) < NK) && (int'(wr_idx) < HALF))
    else $error("mapped_memory: misaligned or out-of-range write");
  a_rd_range: assert property (@(posedge clk) disable iff (!rst_n)
    rd_en |-> int'(rd_idx) < HALF)
    else $error("mapped_memory: read index out of range");

endmodule
