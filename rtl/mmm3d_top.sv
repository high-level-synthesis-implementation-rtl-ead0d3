// mmm3d_top: off-chip single-precision matrix multiplication C = A*B built
// around the three-dimensional systolic array.
//
// Data path (one block of C at a time): the A load stream (BGA values per
// beat, A column-major) fills the A mapped memory system, D0I x D0K
// partitions; the B load stream (BGB values per beat, B row-major) fills the
// B mapped memory system, D0J x D0K partitions. Every compute iteration all
// partitions are read at the same address, giving a (D0I x D0K) tile of A and
// a (D0K x D0J) tile of B; together with the matching tile of C dequeued from
// the C FIFO system (or zero for the first k step) they enter the systolic
// array, and the updated C tile leaving the array is enqueued again. When the
// block is complete the C FIFOs are emptied row by row to the C store stream,
// D0J values per beat, C row-major. mmm_controller sequences the phases.
//
// Pipeline: issue (cycle 0, memory read addresses) -> stage 1 (memory data and
// C tile registered) -> systolic array, LBODY cycles -> enqueue. A single
// enable stalls all of it when a load stream has no data in phases 1-2.
// The C FIFO loop requires NT = r_A*r_B >= LBODY + 2, so a tile has left the
// array before it is needed again; this is checked at elaboration.
//
// Ports: start with n_bi = d2i/d1i, n_bj = d2j/d1j, n_k = d2k/d0k; done
// pulses at the end. Each stream is valid/ready with an element address of its
// first value (a_addr, b_addr from the design, c_addr to memory). Defaults are
// the paper's design C: 28 x 28 x 6 grid, dot product size 1, 7 values of A
// and of B per cycle, giving d1i = d1j = 672. The structure follows the
// paper's description of its design; handshakes, tile order and the drain
// before Write are this design's own choices.
module mmm3d_top
  import mmm_pkg::*;
#(
  parameter int D0I = 28,
  parameter int D0J = 28,
  parameter int D0K = 6,
  parameter int DP  = 1,
  parameter int BGA = 7,
  parameter int BGB = 7
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [15:0] n_bi,
  input  logic [15:0] n_bj,
  input  logic [15:0] n_k,
  output logic        busy,
  output logic        done,
  output phase_e      phase,
  output logic        stall,
  // A load stream
  input  logic        a_valid,
  output logic        a_ready,
  output logic [31:0] a_addr,
  input  fp32_t       a_data [BGA],
  // B load stream
  input  logic        b_valid,
  output logic        b_ready,
  output logic [31:0] b_addr,
  input  fp32_t       b_data [BGB],
  // C store stream
  output logic        c_valid,
  input  logic        c_ready,
  output logic [31:0] c_addr,
  output fp32_t       c_data [D0J]
);
  localparam int R_A   = D0I * D0K / BGA;
  localparam int R_B   = D0J * D0K / BGB;
  localparam int NT    = R_A * R_B;
  localparam int LBODY = D0I + D0J - 1 + (D0K / DP) * dot_latency(DP);

  if (NT < LBODY + 2) begin : g_bad_loop
    $error("r_A*r_B must be at least LBODY+2 for the C FIFO loop");
  end

  logic        en, issue, first_k, rd_buf, pop_all, c_load, c_full;
  logic        a_wr_en, a_wr_buf, b_wr_en, b_wr_buf;
  logic [15:0] a_wr_k, a_wr_r0, a_wr_idx, b_wr_k, b_wr_r0, b_wr_idx;
  logic [15:0] a_rd_idx, b_rd_idx, pop_row;
  logic [$clog2(NT+1)-1:0] count00;

  mmm_controller #(.D0I(D0I), .D0J(D0J), .D0K(D0K), .BGA(BGA), .BGB(BGB)) u_ctrl (
    .clk, .rst_n, .start, .n_bi, .n_bj, .n_k, .busy, .done, .phase, .en,
    .a_valid, .a_ready, .a_addr, .a_wr_en, .a_wr_buf, .a_wr_k, .a_wr_r0, .a_wr_idx,
    .b_valid, .b_ready, .b_addr, .b_wr_en, .b_wr_buf, .b_wr_k, .b_wr_r0, .b_wr_idx,
    .issue, .first_k, .rd_buf, .a_rd_idx, .b_rd_idx, .pop_all, .c_full,
    .c_load, .pop_row, .c_valid, .c_ready, .c_addr
  );

  assign stall = busy && !en;

  // mapped memory systems
  fp32_t a_tile [D0I][D0K];
  fp32_t b_part [D0J][D0K];
  fp32_t b_tile [D0K][D0J];

  mapped_memory #(.NR(D0I), .NK(D0K), .HALF(R_B), .LANES(BGA)) u_mem_a (
    .clk, .rst_n,
    .wr_en(a_wr_en), .wr_buf(a_wr_buf), .wr_k(a_wr_k),
    .wr_r0(a_wr_r0), .wr_idx(a_wr_idx),
    .wr_data(a_data),
    .rd_en(issue), .rd_buf(rd_buf), .rd_idx(a_rd_idx),
    .rd_data(a_tile)
  );

  mapped_memory #(.NR(D0J), .NK(D0K), .HALF(R_A), .LANES(BGB)) u_mem_b (
    .clk, .rst_n,
    .wr_en(b_wr_en), .wr_buf(b_wr_buf), .wr_k(b_wr_k),
    .wr_r0(b_wr_r0), .wr_idx(b_wr_idx),
    .wr_data(b_data),
    .rd_en(issue), .rd_buf(rd_buf), .rd_idx(b_rd_idx),
    .rd_data(b_part)
  );

  always_comb
    for (int k = 0; k < D0K; k++)
      for (int j = 0; j < D0J; j++)
        b_tile[k][j] = b_part[j][k];

  // C FIFO system and stage-1 register of the C tile
  fp32_t head  [D0I][D0J];
  fp32_t c_s1  [D0I][D0J];
  fp32_t c_res [D0I][D0J];
  logic  s1_valid, out_valid;

  c_fifo_system #(.D0I(D0I), .D0J(D0J), .DEPTH(NT)) u_cfifo (
    .clk, .rst_n,
    .push(en && out_valid), .din(c_res),
    .pop_all(pop_all), .pop_row_en(c_load), .pop_row(pop_row),
    .head(head), .count00(count00)
  );
  assign c_full = (int'(count00) == NT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  s1_valid <= 1'b0;
    else if (en) s1_valid <= issue;
  end

  always_ff @(posedge clk) begin
    if (issue)
      for (int i = 0; i < D0I; i++)
        for (int j = 0; j < D0J; j++)
          c_s1[i][j] <= first_k ? FP32_ZERO : head[i][j];
  end

  systolic_array_3d #(.D0I(D0I), .D0J(D0J), .D0K(D0K), .DP(DP)) u_array (
    .clk, .rst_n, .en,
    .in_valid(s1_valid), .a_tile(a_tile), .b_tile(b_tile), .c_tile(c_s1),
    .out_valid(out_valid), .c_res(c_res)
  );

  // C store register
  always_ff @(posedge clk) begin
    if (c_load) c_data <= head[int'(pop_row)];
  end

endmodule
