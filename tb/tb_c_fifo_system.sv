// tb_c_fifo_system: runs a 2 x 3 C FIFO system of depth 5 through the way the
// kernel uses it: five tiles pushed, several rounds of simultaneous pop_all
// and push (circulation of a C block), then row-wise pops; heads and the
// occupancy of FIFO (0,0) are checked against queue models every cycle.
module tb_c_fifo_system;
  import mmm_pkg::*;
  localparam int D0I = 2, D0J = 3, DEPTH = 5;

  logic        clk = 0, rst_n = 0, push = 0, pop_all = 0, pop_row_en = 0;
  logic [15:0] pop_row = 0;
  fp32_t       din  [D0I][D0J];
  fp32_t       head [D0I][D0J];
  logic [$clog2(DEPTH+1)-1:0] count00;
  fp32_t       q [D0I][D0J][$];
  int checks = 0, failures = 0;

  c_fifo_system #(.D0I(D0I), .D0J(D0J), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_state();
    checks++;
    if (int'(count00) != q[0][0].size()) begin
      failures++; $display("FAIL count00 %0d vs %0d", count00, q[0][0].size());
    end
    for (int i = 0; i < D0I; i++) for (int j = 0; j < D0J; j++)
      if (q[i][j].size() > 0) begin
        checks++;
        if (head[i][j] !== q[i][j][0]) begin
          failures++;
          if (failures < 10) $display("FAIL head (%0d,%0d) %h vs %h", i, j, head[i][j], q[i][j][0]);
        end
      end
  endtask

  // one clock with the given controls; the model follows the same edge
  task automatic step(input bit ps, input bit pa, input bit pr, input int row);
    @(negedge clk);
    push = ps; pop_all = pa; pop_row_en = pr; pop_row = 16'(row);
    for (int i = 0; i < D0I; i++) for (int j = 0; j < D0J; j++) din[i][j] = $urandom;
    @(posedge clk);
    for (int i = 0; i < D0I; i++) for (int j = 0; j < D0J; j++) begin
      if (pa || (pr && row == i)) void'(q[i][j].pop_front());
      if (ps) q[i][j].push_back(din[i][j]);
    end
    @(negedge clk);
    push = 0; pop_all = 0; pop_row_en = 0;
    #1 check_state();
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < DEPTH; n++) step(1, 0, 0, 0);
    for (int n = 0; n < 3 * DEPTH; n++) step(1, 1, 0, 0);
    for (int n = 0; n < DEPTH; n++) begin
      step(0, 0, 1, 0);
      step(0, 0, 1, 1);
    end
    checks++;
    if (count00 != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
