// tb_mapped_memory: fills both buffers of a small mapped memory system (4 x 2
// partitions of 2 x 3 words, 2 lanes per write) lane group by lane group in
// random order, then reads every address and checks all partitions' data one
// cycle after the read, against a model array; a read of one buffer while the
// other is written is included.
module tb_mapped_memory;
  import mmm_pkg::*;
  localparam int NR = 4, NK = 2, HALF = 3, LANES = 2;

  logic        clk = 0, rst_n = 0, wr_en = 0, wr_buf = 0, rd_en = 0, rd_buf = 0;
  logic [15:0] wr_k = 0, wr_r0 = 0, wr_idx = 0, rd_idx = 0;
  fp32_t       wr_data [LANES];
  fp32_t       rd_data [NR][NK];
  fp32_t       model [2][HALF][NR][NK];
  int checks = 0, failures = 0;

  mapped_memory #(.NR(NR), .NK(NK), .HALF(HALF), .LANES(LANES)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_all(input int b);
    for (int x = 0; x < HALF; x++)
      for (int k = 0; k < NK; k++)
        for (int r0 = 0; r0 < NR; r0 += LANES) begin
          @(negedge clk);
          wr_en = 1; wr_buf = 1'(b); wr_k = 16'(k); wr_r0 = 16'(r0); wr_idx = 16'(x);
          for (int q = 0; q < LANES; q++) begin
            wr_data[q] = $urandom;
            model[b][x][r0+q][k] = wr_data[q];
          end
        end
    @(negedge clk);
    wr_en = 0;
  endtask

  task automatic read_check(input int b, input int x);
    @(negedge clk);
    rd_en = 1; rd_buf = 1'(b); rd_idx = 16'(x);
    @(negedge clk);
    rd_en = 0;
    for (int r = 0; r < NR; r++)
      for (int k = 0; k < NK; k++) begin
        checks++;
        if (rd_data[r][k] !== model[b][x][r][k]) begin
          failures++;
          if (failures < 10) $display("FAIL buf %0d idx %0d part (%0d,%0d): %h vs %h",
                                      b, x, r, k, rd_data[r][k], model[b][x][r][k]);
        end
      end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    write_all(0);
    write_all(1);
    for (int b = 0; b < 2; b++) for (int x = 0; x < HALF; x++) read_check(b, x);
    // overwrite buffer 1 while reading buffer 0 (double buffering)
    fork
      write_all(1);
      for (int x = 0; x < HALF; x++) read_check(0, x);
    join
    for (int x = 0; x < HALF; x++) read_check(1, x);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
