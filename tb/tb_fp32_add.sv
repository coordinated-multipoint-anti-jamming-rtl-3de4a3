// tb_fp32_add: checks the fp32 adder against exact double-precision sums
// rounded to single precision. Random operands with nearby exponents (exact
// reference), near-cancellation pairs, large exponent gaps and special cases.
module tb_fp32_add;
  import fp_ref_pkg::*;
  logic [31:0] a, b, y;
  int checks = 0, failures = 0;

  fp32_add dut (.a(a), .b(b), .y(y));

  task automatic check(logic [31:0] e);
    #1;
    checks++;
    if (y !== e) begin
      failures++;
      if (failures < 10) $display("FAIL add %h + %h = %h expected %h", a, b, y, e);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 20000; i++) begin
      a = rand_fp32(12);
      b = rand_fp32(12);
      check(to_fp32(to_real(a) + to_real(b)));
    end
    // near cancellation: b = -(a with a few low bits changed)
    for (int i = 0; i < 5000; i++) begin
      a = rand_fp32(20);
      b = {~a[31], a[30:8], 8'($urandom)};
      check(to_fp32(to_real(a) + to_real(b)));
    end
    // exponent gaps of 20..27 (still exact in double)
    for (int i = 0; i < 5000; i++) begin
      a = rand_fp32(3);
      b = {1'($urandom), 8'(int'(a[30:23]) - 20 - int'($urandom % 8)), 23'($urandom)};
      check(to_fp32(to_real(a) + to_real(b)));
    end
    a = 32'h3f80_0000; b = 32'hbf80_0000; check(32'h0000_0000);       // 1 - 1
    a = 32'h3f80_0000; b = 32'h0000_0000; check(32'h3f80_0000);       // 1 + 0
    a = 32'h0000_0000; b = 32'hc040_0000; check(32'hc040_0000);       // 0 + -3
    a = 32'h7f80_0000; b = 32'h3f80_0000; check(32'h7f80_0000);       // inf + 1
    a = 32'h7f7f_ffff; b = 32'h7f7f_ffff; check(32'h7f80_0000);       // overflow
    a = 32'h3f80_0000; b = 32'h3380_0000; check(32'h3f80_0000);       // 1 + 2^-24 tie -> even
    a = 32'h3f80_0001; b = 32'h3380_0000; check(32'h3f80_0002);       // tie -> even (up)
    a = 32'h0080_0001; b = 32'h8080_0000; check(32'h0000_0000);       // result subnormal -> 0
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
