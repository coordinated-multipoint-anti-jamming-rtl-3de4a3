// weight_mem: on-chip weight and bias store of the three network layers.
//
// Weights are kept in 2*CPB banks of 32-bit words so that one row, the CPB
// complex weights of one beat, is read in a single cycle by the 128-lane core
// (bank 2k holds Re w_k, bank 2k+1 holds Im w_k). Rows are laid out in the
// order the controller consumes them: layer 1 neuron 0 beat 0, beat 1, ...,
// then neuron 1, ..., then layer 2 and layer 3, so the controller's read
// address is a plain running counter. Biases are a separate small array
// indexed by {layer, neuron, re/im}.
// The paper loads its trained network into FPGA block RAM (Table II lists 40
// BRAMs); the banking and layouts are this design's choice. At the default
// sizes the weights take 542 rows x 64 words = 34,688 words (1.11 Mbit).
// Ports: one 32-bit write port (from the AXI slave), one registered read port:
// rd_row/rd_bias_* sampled when rd_en is high, rd_w/rd_bias valid the next
// cycle.
module weight_mem
  import cvnn_pkg::*;
#(
  parameter int unsigned CPB    = CPB_DEF,
  parameter int unsigned ROWS   = 542,
  parameter int unsigned MAXO   = 64,                 // largest layer width
  parameter int unsigned ROW_W  = clog2_min1(ROWS),
  parameter int unsigned NRN_W  = clog2_min1(MAXO),
  parameter int unsigned LANE_W = $clog2(2 * CPB)
) (
  input  logic              clk,
  input  logic              rst_n,
  // write port
  input  logic              wr_w_en,       // weight word write
  input  logic [ROW_W-1:0]  wr_row,
  input  logic [LANE_W-1:0] wr_lane,
  input  logic              wr_b_en,       // bias word write
  input  logic [1:0]        wr_b_layer,
  input  logic [NRN_W-1:0]  wr_b_neuron,
  input  logic              wr_b_im,
  input  fp32_t             wr_data,
  // read port
  input  logic              rd_en,
  input  logic [ROW_W-1:0]  rd_row,
  input  logic [1:0]        rd_b_layer,
  input  logic [NRN_W-1:0]  rd_b_neuron,
  output cplx_t             rd_w [CPB],
  output cplx_t             rd_bias
);
  for (genvar k = 0; k < 2 * CPB; k++) begin : g_bank
    fp32_t bank [ROWS];
    fp32_t q;
    always_ff @(posedge clk) begin
      if (wr_w_en && wr_lane == LANE_W'(k)) bank[wr_row] <= wr_data;
      if (rd_en) q <= bank[rd_row];
    end
    if (k % 2 == 0) begin : g_re
      assign rd_w[k/2].re = q;
    end else begin : g_im
      assign rd_w[k/2].im = q;
    end
  end

  cplx_t bias [3][MAXO];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < 3; l++)
        for (int o = 0; o < int'(MAXO); o++) bias[l][o] <= '0;
      rd_bias <= '0;
    end else begin
      if (wr_b_en && wr_b_layer < 2'd3 && int'(wr_b_neuron) < int'(MAXO)) begin
        if (wr_b_im) bias[wr_b_layer][wr_b_neuron].im <= wr_data;
        else         bias[wr_b_layer][wr_b_neuron].re <= wr_data;
      end
      if (rd_en) rd_bias <= bias[rd_b_layer][rd_b_neuron];
    end
  end
endmodule
