// tb_act_buf: small feature buffers (CPB = 4, N_IN = 10, H1 = 6, H2 = 5,
// T = 3). Writes the network input and layer results, then reads every row
// of every buffer (registered, one cycle after rd_en) and the step sizes.
// Checks the row packing, the zero padding of the partial last row, that an
// input write past N_IN is dropped, and that mu keeps only the real part.
module tb_act_buf;
  import cvnn_pkg::*;
  localparam int CPB = 4, N_IN = 10, H1 = 6, H2 = 5, T = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_wr_en, in_wr_im, res_wr_en, rd_en;
  logic [3:0] in_wr_idx;
  fp32_t in_wr_data, mu_data;
  logic [1:0] res_layer, rd_layer;
  logic [2:0] res_neuron;
  cplx_t res_data;
  logic [1:0] rd_beat;
  cplx_t rd_x [CPB];
  logic [1:0] mu_idx;
  cplx_t rx0 [12], rh1 [8], rh2 [8];
  fp32_t rmu [T];
  int checks = 0, failures = 0;

  act_buf #(.CPB(CPB), .N_IN(N_IN), .H1(H1), .H2(H2), .T(T),
            .IDX_W(4), .NRN_W(3), .BT_W(2), .T_W(2)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic rd_check(int layer, int nb, cplx_t ref_row []);
    for (int b = 0; b < nb; b++) begin
      @(negedge clk);
      rd_en = 1; rd_layer = 2'(layer); rd_beat = 2'(b);
      @(negedge clk);
      rd_en = 0;
      for (int k = 0; k < CPB; k++) begin
        checks++;
        if (rd_x[k] !== ref_row[b*CPB+k]) begin
          failures++;
          if (failures < 10) $display("FAIL layer %0d beat %0d k %0d: %h exp %h", layer, b, k, rd_x[k], ref_row[b*CPB+k]);
        end
      end
    end
  endtask

  initial begin
    cplx_t a [];
    in_wr_en = 0; in_wr_im = 0; res_wr_en = 0; rd_en = 0; in_wr_idx = 0; in_wr_data = 0;
    res_layer = 0; rd_layer = 0; res_neuron = 0; res_data = '0; rd_beat = 0; mu_idx = 0;
    foreach (rx0[i]) rx0[i] = '0;
    foreach (rh1[i]) rh1[i] = '0;
    foreach (rh2[i]) rh2[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 12; i++)       // 10 and 11 are past N_IN: dropped
      for (int p = 0; p < 2; p++) begin
        @(negedge clk);
        in_wr_en = 1; in_wr_idx = 4'(i); in_wr_im = p[0]; in_wr_data = $urandom;
        if (i < N_IN) begin
          if (p == 0) rx0[i].re = in_wr_data; else rx0[i].im = in_wr_data;
        end
      end
    @(negedge clk); in_wr_en = 0;
    for (int o = 0; o < H1; o++) begin
      @(negedge clk); res_wr_en = 1; res_layer = 0; res_neuron = 3'(o);
      res_data = '{re: $urandom, im: $urandom}; rh1[o] = res_data;
    end
    for (int o = 0; o < H2; o++) begin
      @(negedge clk); res_wr_en = 1; res_layer = 1; res_neuron = 3'(o);
      res_data = '{re: $urandom, im: $urandom}; rh2[o] = res_data;
    end
    for (int o = 0; o < T; o++) begin
      @(negedge clk); res_wr_en = 1; res_layer = 2; res_neuron = 3'(o);
      res_data = '{re: $urandom, im: $urandom}; rmu[o] = res_data.re;
    end
    @(negedge clk); res_wr_en = 0;
    a = new[12]; foreach (a[i]) a[i] = rx0[i]; rd_check(0, 3, a);
    a = new[8];  foreach (a[i]) a[i] = rh1[i]; rd_check(1, 2, a);
    a = new[8];  foreach (a[i]) a[i] = rh2[i]; rd_check(2, 2, a);
    for (int t = 0; t < T; t++) begin
      mu_idx = 2'(t);
      #1;
      checks++;
      if (mu_data !== rmu[t]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
