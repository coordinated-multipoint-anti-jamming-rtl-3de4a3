// tb_weight_mem: fills a small banked weight memory (CPB = 4, 8 banks,
// 20 rows) and the bias array word by word, then reads every row and bias
// back through the registered read port (data one cycle after rd_en) and
// compares with the written values.
module tb_weight_mem;
  import cvnn_pkg::*;
  localparam int CPB = 4, ROWS = 20, MAXO = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic wr_w_en, wr_b_en, wr_b_im, rd_en;
  logic [4:0] wr_row, rd_row;
  logic [2:0] wr_lane;
  logic [1:0] wr_b_layer, rd_b_layer;
  logic [2:0] wr_b_neuron, rd_b_neuron;
  fp32_t wr_data;
  cplx_t rd_w [CPB];
  cplx_t rd_bias;
  logic [31:0] ref_w [ROWS][2*CPB];
  logic [31:0] ref_b [3][MAXO][2];
  int checks = 0, failures = 0;

  weight_mem #(.CPB(CPB), .ROWS(ROWS), .MAXO(MAXO), .ROW_W(5), .NRN_W(3)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_w_en = 0; wr_b_en = 0; wr_b_im = 0; rd_en = 0; wr_row = 0; rd_row = 0; wr_lane = 0;
    wr_b_layer = 0; rd_b_layer = 0; wr_b_neuron = 0; rd_b_neuron = 0; wr_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++)
      for (int k = 0; k < 2 * CPB; k++) begin
        @(negedge clk);
        wr_w_en = 1; wr_row = 5'(r); wr_lane = 3'(k); wr_data = $urandom;
        ref_w[r][k] = wr_data;
      end
    for (int l = 0; l < 3; l++)
      for (int o = 0; o < MAXO; o++)
        for (int p = 0; p < 2; p++) begin
          @(negedge clk);
          wr_w_en = 0; wr_b_en = 1; wr_b_layer = 2'(l); wr_b_neuron = 3'(o); wr_b_im = p[0];
          wr_data = $urandom; ref_b[l][o][p] = wr_data;
        end
    @(negedge clk);
    wr_b_en = 0;
    for (int r = ROWS - 1; r >= 0; r--) begin
      automatic int l = r % 3, o = r % MAXO;
      @(negedge clk);
      rd_en = 1; rd_row = 5'(r); rd_b_layer = 2'(l); rd_b_neuron = 3'(o);
      @(negedge clk);
      rd_en = 0;
      for (int k = 0; k < CPB; k++) begin
        checks++;
        if (rd_w[k].re !== ref_w[r][2*k] || rd_w[k].im !== ref_w[r][2*k+1]) begin
          failures++;
          if (failures < 10) $display("FAIL row %0d lane %0d", r, k);
        end
      end
      checks++;
      if (rd_bias.re !== ref_b[l][o][0] || rd_bias.im !== ref_b[l][o][1]) begin
        failures++;
        if (failures < 10) $display("FAIL bias %0d %0d", l, o);
      end
      // read data must hold while rd_en is low
      @(negedge clk);
      checks++;
      if (rd_w[0].re !== ref_w[r][0]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
