// tb_fp32_mul: checks the single-precision multiplier against the reference
// product computed in double precision and rounded to single, on random
// normal operands (including products that overflow or flush to zero) and on
// hand-picked special values.
module tb_fp32_mul;
  import fp_ref_pkg::*;
  logic [31:0] a, b, p;
  int checks = 0, failures = 0;

  fp32_mul dut (.a(a), .b(b), .p(p));

  task automatic check(input logic [31:0] x, input logic [31:0] y, input logic [31:0] exp_p);
    a = x; b = y;
    #1;
    checks++;
    if (p !== exp_p) begin
      failures++;
      if (failures < 10) $display("FAIL %h * %h = %h, expected %h", x, y, p, exp_p);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(32'h3F80_0000, 32'h4000_0000, 32'h4000_0000);  // 1 * 2 = 2
    check(32'h4040_0000, 32'hC080_0000, 32'hC140_0000);  // 3 * -4 = -12
    check(32'h0000_0000, 32'h4000_0000, 32'h0000_0000);  // 0 * 2
    check(32'h7F80_0000, 32'h0000_0000, 32'h7FC0_0000);  // inf * 0
    check(32'h7F80_0000, 32'hBF80_0000, 32'hFF80_0000);  // inf * -1
    for (int n = 0; n < 20000; n++) begin
      logic [31:0] x, y;
      x = rand_f32((n % 3 == 0) ? 100 : 20);
      y = rand_f32((n % 3 == 0) ? 100 : 20);
      check(x, y, f32_mul(x, y));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
