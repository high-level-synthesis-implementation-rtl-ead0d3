// tb_mmm_controller: runs the controller alone for a 2 x 1 grid of C blocks
// with two k steps each (4 x 3 x 3 grid, 2 A values and 1 B value per beat)
// under random stream gaps, and checks against sequences worked out here:
// every accepted A beat address (column-major, column block by column block),
// every accepted B beat address (row-major), the mapped-memory write
// coordinates, the tile indices, buffer select and zero-initialise flag of
// every compute issue, the C beat addresses (row-major) and the done pulse.
module tb_mmm_controller;
  import mmm_pkg::*;
  localparam int D0I = 4, D0J = 3, D0K = 3, BGA = 2, BGB = 1;
  localparam int R_A = D0I * D0K / BGA, R_B = D0J * D0K / BGB, NT = R_A * R_B;
  localparam int D1I = R_B * D0I, D1J = R_A * D0J;
  localparam int NBI = 2, NBJ = 1, NK = 2;
  localparam int D2I = NBI * D1I, D2J = NBJ * D1J;

  logic        clk = 0, rst_n = 0, start = 0;
  logic [15:0] n_bi = 16'(NBI), n_bj = 16'(NBJ), n_k = 16'(NK);
  logic        busy, done, en;
  phase_e      phase;
  logic        a_valid = 0, a_ready, a_wr_en, a_wr_buf, b_valid = 0, b_ready, b_wr_en, b_wr_buf;
  logic [31:0] a_addr, b_addr, c_addr;
  logic [15:0] a_wr_k, a_wr_r0, a_wr_idx, b_wr_k, b_wr_r0, b_wr_idx;
  logic        issue, first_k, rd_buf, pop_all, c_full = 0, c_load, c_valid, c_ready = 0;
  logic [15:0] a_rd_idx, b_rd_idx, pop_row;

  int ea [$], eb [$], ec [$], ei [$];
  int checks = 0, failures = 0, n_done = 0, drain_wait = 0;

  mmm_controller #(.D0I(D0I), .D0J(D0J), .D0K(D0K), .BGA(BGA), .BGB(BGB)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 15) $display("FAIL %s: %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    for (int bi = 0; bi < NBI; bi++)
      for (int bj = 0; bj < NBJ; bj++) begin
        for (int k = 0; k < NK; k++) begin
          for (int kk = 0; kk < D0K; kk++)
            for (int r = 0; r < D1I; r += BGA) ea.push_back((k*D0K + kk)*D2I + bi*D1I + r);
          for (int kk = 0; kk < D0K; kk++)
            for (int c = 0; c < D1J; c += BGB) eb.push_back((k*D0K + kk)*D2J + bj*D1J + c);
          for (int n = 0; n < NT; n++) ei.push_back((k << 16) | ((n / R_A) << 8) | (n % R_A));
        end
        for (int r = 0; r < D1I; r++)
          for (int jj = 0; jj < R_A; jj++) ec.push_back((bi*D1I + r)*D2J + bj*D1J + jj*D0J);
      end
  end

  always @(posedge clk) begin
    if (rst_n) begin
      if (a_valid && a_ready) begin
        int e;
        e = ea.pop_front();
        expect_eq("A address", int'(a_addr), e);
        expect_eq("A write partition row", int'(a_wr_r0) + int'(a_wr_idx) * D0I, (e % D2I) % D1I);
        expect_eq("A write k", int'(a_wr_k), (e / D2I) % D0K);
        expect_eq("A write buffer", int'(a_wr_buf), (e / D2I / D0K) % 2);
      end
      if (b_valid && b_ready) begin
        int e;
        e = eb.pop_front();
        expect_eq("B address", int'(b_addr), e);
        expect_eq("B write partition col", int'(b_wr_r0) + int'(b_wr_idx) * D0J, (e % D2J) % D1J);
      end
      if (a_wr_en != (a_valid && a_ready)) expect_eq("A write enable", 1, 0);
      if (issue) begin
        int e;
        e = ei.pop_front();
        expect_eq("issue ii", int'(a_rd_idx), (e >> 8) & 255);
        expect_eq("issue jj", int'(b_rd_idx), e & 255);
        expect_eq("issue buffer", int'(rd_buf), (e >> 16) % 2);
        expect_eq("issue zero-init", int'(first_k), int'((e >> 16) == 0));
        expect_eq("issue pops", int'(pop_all), int'((e >> 16) != 0));
      end
      if (c_valid && c_ready) expect_eq("C address", int'(c_addr), ec.pop_front());
      if (c_load && int'(pop_row) >= D0I) expect_eq("C pop row in range", int'(pop_row), 0);
      if (done) n_done++;
      // random stream behaviour; valid held until accepted
      if (!a_valid || a_ready) a_valid <= ($urandom_range(3, 0) != 0);
      if (!b_valid || b_ready) b_valid <= ($urandom_range(3, 0) != 0);
      c_ready <= ($urandom_range(3, 0) != 0);
      // the C FIFOs report full some cycles into the drain
      if (phase == PH_DRAIN) begin drain_wait++; c_full <= (drain_wait > 5); end
      else begin drain_wait = 0; c_full <= 0; end
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    wait (n_done > 0);
    repeat (5) @(posedge clk);
    expect_eq("A beats left", ea.size(), 0);
    expect_eq("B beats left", eb.size(), 0);
    expect_eq("issues left", ei.size(), 0);
    expect_eq("C beats left", ec.size(), 0);
    expect_eq("done pulses", n_done, 1);
    expect_eq("idle at end", int'(busy), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
