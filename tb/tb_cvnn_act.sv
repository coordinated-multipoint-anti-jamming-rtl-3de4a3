// tb_cvnn_act: checks the activation stage: CReLU zeroes each negative part
// separately, Sum+Abs returns |re + im| (fp32-rounded) with a zero imaginary
// part, ACT_NONE passes the value; the output is registered one cycle later
// and carries the tag.
module tb_cvnn_act;
  import cvnn_pkg::*;
  import fp_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic x_valid, y_valid;
  cplx_t x, y;
  act_mode_e mode;
  logic [7:0] x_tag, y_tag;
  int checks = 0, failures = 0;
  int n_neg_re = 0, n_neg_sum = 0;

  cvnn_act #(.TAG_W(8)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cplx_t e;
    logic [31:0] s;
    x_valid = 0; x = '0; mode = ACT_NONE; x_tag = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      x = '{re: rand_fp32(10), im: rand_fp32(10)};
      mode = act_mode_e'($urandom % 3);
      x_tag = 8'(i);
      x_valid = 1;
      unique case (mode)
        ACT_CRELU:  begin e.re = x.re[31] ? 32'h0 : x.re; e.im = x.im[31] ? 32'h0 : x.im;
                          if (x.re[31]) n_neg_re++; end
        ACT_SUMABS: begin s = to_fp32(to_real(x.re) + to_real(x.im)); e.re = {1'b0, s[30:0]}; e.im = 32'h0;
                          if (s[31]) n_neg_sum++; end
        default:    e = x;
      endcase
      @(negedge clk);
      x_valid = 0;
      checks++;
      if (!y_valid || y !== e || y_tag !== 8'(i)) begin
        failures++;
        if (failures < 10) $display("FAIL mode %0d x=%h/%h y=%h/%h exp %h/%h", mode, x.re, x.im, y.re, y.im, e.re, e.im);
      end
    end
    checks++;
    if (n_neg_re == 0 || n_neg_sum == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
