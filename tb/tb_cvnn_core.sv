// tb_cvnn_core: unit test of the pipelined complex linear-layer engine.
//
// Runs the core with CPB = 4 (16 lanes, latency 5 + log2(8) = 8) and with
// random neurons of 1 to 4 beats, random activation modes and random idle
// cycles between beats. The expected result of each neuron is computed with
// fp32 rounding after every operation in the core's order (products, pairwise
// tree, beat accumulation, bias, activation) and compared bit for bit. The
// latency from the last beat of a neuron to its result is checked on every
// neuron, and a back-to-back stream checks one beat per cycle throughput.
module tb_cvnn_core;
  import cvnn_pkg::*;
  import fp_ref_pkg::*;

  localparam int CPB = 4;
  localparam int LAT = 5 + $clog2(2 * CPB);
  localparam int NN  = 300;      // neurons

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic      in_valid, in_first, in_last;
  cplx_t     in_x [CPB], in_w [CPB], in_bias, out_y;
  act_mode_e in_mode;
  logic [7:0] in_tag, out_tag;
  logic      out_valid;

  cvnn_core #(.CPB(CPB), .TAG_W(8)) dut (.*);

  int checks = 0, failures = 0, cycle = 0;
  cplx_t exp_q [$];
  int    exp_cyc [$];
  logic [7:0] exp_tag [$];
  int n_crelu = 0, n_sumabs = 0, n_none = 0, n_multi = 0, n_gap = 0;

  function automatic logic [31:0] fadd(logic [31:0] a, logic [31:0] b);
    return to_fp32(to_real(a) + to_real(b));
  endfunction
  function automatic logic [31:0] fmul(logic [31:0] a, logic [31:0] b);
    return to_fp32(to_real(a) * to_real(b));
  endfunction
  function automatic logic [31:0] rnd();
    return to_fp32((real'(int'($urandom % 20001)) - 10000.0) / 10000.0);
  endfunction

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n && out_valid) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("FAIL: unexpected result");
      end else begin
        cplx_t e;
        int    c;
        logic [7:0] tg;
        e = exp_q.pop_front(); c = exp_cyc.pop_front(); tg = exp_tag.pop_front();
        if (out_y !== e || out_tag !== tg || cycle - c != LAT) begin
          failures++;
          if (failures < 10)
            $display("FAIL: y=%h/%h exp %h/%h tag %0d/%0d latency %0d/%0d",
                     out_y.re, out_y.im, e.re, e.im, out_tag, tg, cycle - c, LAT);
        end
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_first = 0; in_last = 0; in_mode = ACT_NONE; in_tag = 0;
    in_bias = '0;
    for (int k = 0; k < CPB; k++) begin in_x[k] = '0; in_w[k] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < NN; n++) begin
      automatic int nb = 1 + ($urandom % 4);
      logic [31:0] accr, acci, yr, yi, s, p;
      logic [31:0] tr [2*CPB], ti [2*CPB];
      cplx_t e;
      act_mode_e m;
      m = act_mode_e'($urandom % 3);
      if (nb > 1) n_multi++;
      for (int b = 0; b < nb; b++) begin
        if (n >= 20 && ($urandom % 3) == 0) begin
          n_gap++;
          @(negedge clk); in_valid = 0;
          @(posedge clk);
        end
        @(negedge clk);
        if (b == 0) in_bias = '{re: rnd(), im: rnd()};
        for (int k = 0; k < CPB; k++) begin
          in_x[k] = '{re: rnd(), im: rnd()};
          in_w[k] = '{re: rnd(), im: rnd()};
          tr[2*k] = fmul(in_w[k].re, in_x[k].re);
          p = fmul(in_w[k].im, in_x[k].im); tr[2*k+1] = {~p[31], p[30:0]};
          ti[2*k] = fmul(in_w[k].re, in_x[k].im);
          ti[2*k+1] = fmul(in_w[k].im, in_x[k].re);
        end
        for (int w = CPB; w >= 1; w = w / 2)
          for (int i = 0; i < w; i++) begin
            tr[i] = fadd(tr[2*i], tr[2*i+1]);
            ti[i] = fadd(ti[2*i], ti[2*i+1]);
          end
        if (b == 0) begin accr = tr[0]; acci = ti[0]; end
        else begin accr = fadd(accr, tr[0]); acci = fadd(acci, ti[0]); end
        in_valid = 1; in_first = (b == 0); in_last = (b == nb - 1);
        in_mode = m; in_tag = 8'(n);
        if (b == nb - 1) begin
          yr = fadd(accr, in_bias.re); yi = fadd(acci, in_bias.im);
          unique case (m)
            ACT_CRELU:  begin e.re = yr[31] ? 32'h0 : yr; e.im = yi[31] ? 32'h0 : yi; n_crelu++; end
            ACT_SUMABS: begin s = fadd(yr, yi); e.re = {1'b0, s[30:0]}; e.im = 32'h0; n_sumabs++; end
            default:    begin e.re = yr; e.im = yi; n_none++; end
          endcase
          exp_q.push_back(e); exp_cyc.push_back(cycle); exp_tag.push_back(8'(n));
        end
        @(posedge clk);
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (LAT + 5) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL: %0d results missing", exp_q.size()); end
    checks++;
    if (!(n_crelu > 0 && n_sumabs > 0 && n_none > 0 && n_multi > 0 && n_gap > 0)) begin
      failures++; $display("FAIL: a case never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
