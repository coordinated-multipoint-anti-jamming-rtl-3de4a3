// tb_fp32_mul: checks the fp32 multiplier against double-precision products
// rounded to single precision (exact reference, bit-for-bit comparison), plus
// zero, infinity, overflow and underflow cases.
module tb_fp32_mul;
  import fp_ref_pkg::*;
  logic [31:0] a, b, y, exp_y;
  int checks = 0, failures = 0;

  fp32_mul dut (.a(a), .b(b), .y(y));

  task automatic check(logic [31:0] e);
    #1;
    checks++;
    if (y !== e) begin
      failures++;
      if (failures < 10) $display("FAIL mul %h * %h = %h expected %h", a, b, y, e);
    end
  endtask

  initial begin
    // watchdog (combinational block: a fixed amount of simulated time)
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 20000; i++) begin
      a = rand_fp32(60);
      b = rand_fp32(60);
      check(to_fp32(to_real(a) * to_real(b)));
    end
    // specials
    a = 32'h3f80_0000; b = 32'h4000_0000; check(32'h4000_0000);       // 1*2
    a = 32'h0000_0000; b = 32'h4000_0000; check(32'h0000_0000);       // 0*2
    a = 32'h8000_0000; b = 32'h4000_0000; check(32'h8000_0000);       // -0*2
    a = 32'h7f80_0000; b = 32'hc000_0000; check(32'hff80_0000);       // inf*-2
    a = 32'h7f80_0000; b = 32'h0000_0000; check(32'h7fc0_0000);       // inf*0
    a = 32'h7f00_0000; b = 32'h7f00_0000; check(32'h7f80_0000);       // overflow
    a = 32'h0100_0000; b = 32'h0100_0000; check(32'h0000_0000);       // underflow
    a = 32'h3fc0_0000; b = 32'h3fc0_0000; check(32'h4010_0000);       // 1.5*1.5
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
