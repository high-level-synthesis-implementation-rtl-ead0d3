// tb_fp32_add: checks the single-precision adder against the reference sum
// computed in double precision and rounded to single, on random operands of
// close and distant exponents (so both alignment shifts and cancellation are
// exercised) and on special values.
module tb_fp32_add;
  import fp_ref_pkg::*;
  logic [31:0] a, b, s;
  int checks = 0, failures = 0;

  fp32_add dut (.a(a), .b(b), .s(s));

  task automatic check(input logic [31:0] x, input logic [31:0] y, input logic [31:0] exp_s);
    a = x; b = y;
    #1;
    checks++;
    if (s !== exp_s) begin
      failures++;
      if (failures < 10) $display("FAIL %h + %h = %h, expected %h", x, y, s, exp_s);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(32'h3F80_0000, 32'h4000_0000, 32'h4040_0000);  // 1 + 2 = 3
    check(32'h4040_0000, 32'hC040_0000, 32'h0000_0000);  // 3 - 3 = +0
    check(32'h0000_0000, 32'hC000_0000, 32'hC000_0000);  // 0 + -2
    check(32'h7F80_0000, 32'hFF80_0000, 32'h7FC0_0000);  // inf - inf
    check(32'h7F7F_FFFF, 32'h7F7F_FFFF, 32'h7F80_0000);  // overflow
    for (int n = 0; n < 30000; n++) begin
      logic [31:0] x, y;
      x = rand_f32(30);
      case (n % 4)
        0: y = rand_f32(30);
        1: y = {~x[31], x[30:23], 23'($urandom)};           // cancellation
        2: y = {1'($urandom), 8'(int'(x[30:23]) - int'($urandom_range(3, 0))), 23'($urandom)};
        default: y = {1'($urandom), 8'(int'(x[30:23]) - int'($urandom_range(30, 20))), 23'($urandom)};
      endcase
      check(x, y, f32_add(x, y));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
