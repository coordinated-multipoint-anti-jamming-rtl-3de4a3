// act_buf: feature buffers of the network.
//
// Holds the network input x0 (N_IN complex values: the least-squares initial
// beamformer, the Euclidean gradient and the Riemannian gradient, N_r = 64
// each, concatenated in that order), the outputs of layer 1 (H1) and layer 2
// (H2), and the T predicted step sizes. Each feature buffer is organised in
// rows of CPB complex values so that the core receives one full row per
// cycle; entries past the layer width stay zero, which pads a partial last
// beat. The buffer read for a layer is: layer 1 <- input, layer 2 <- h1,
// layer 3 <- h2; results are written to h1, h2 and mu respectively.
// What the network reads and outputs follows the paper (Fig. 2); the storage
// organisation is this design's choice.
// Timing: rd_row is registered (data one cycle after rd_en). Host writes of
// the input and core result writes take effect at the clock edge. mu is read
// combinationally by index.
module act_buf
  import cvnn_pkg::*;
#(
  parameter int unsigned CPB   = CPB_DEF,
  parameter int unsigned N_IN  = N_IN_DEF,
  parameter int unsigned H1    = H1_DEF,
  parameter int unsigned H2    = H2_DEF,
  parameter int unsigned T     = T_DEF,
  parameter int unsigned IDX_W = clog2_min1(N_IN),
  parameter int unsigned NRN_W = clog2_min1(H1 > H2 ? (H1 > T ? H1 : T) : (H2 > T ? H2 : T)),
  parameter int unsigned BT_W  = clog2_min1(ceil_div(N_IN, CPB)),
  parameter int unsigned T_W   = clog2_min1(T)
) (
  input  logic             clk,
  input  logic             rst_n,
  // host write of the network input (one real or imaginary word)
  input  logic             in_wr_en,
  input  logic [IDX_W-1:0] in_wr_idx,
  input  logic             in_wr_im,
  input  fp32_t            in_wr_data,
  // core result write: layer 0 -> h1, 1 -> h2, 2 -> mu (real part)
  input  logic             res_wr_en,
  input  logic [1:0]       res_layer,
  input  logic [NRN_W-1:0] res_neuron,
  input  cplx_t            res_data,
  // row read for the core
  input  logic             rd_en,
  input  logic [1:0]       rd_layer,
  input  logic [BT_W-1:0]  rd_beat,
  output cplx_t            rd_x [CPB],
  // step-size read
  input  logic [T_W-1:0]   mu_idx,
  output fp32_t            mu_data
);
  localparam int unsigned B0 = ceil_div(N_IN, CPB);
  localparam int unsigned B1 = ceil_div(H1, CPB);
  localparam int unsigned B2 = ceil_div(H2, CPB);

  cplx_t x0 [B0*CPB];
  cplx_t h1 [B1*CPB];
  cplx_t h2 [B2*CPB];
  fp32_t mu [T];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(B0*CPB); i++) x0[i] <= '0;
      for (int i = 0; i < int'(B1*CPB); i++) h1[i] <= '0;
      for (int i = 0; i < int'(B2*CPB); i++) h2[i] <= '0;
      for (int i = 0; i < int'(T); i++)      mu[i] <= '0;
      for (int k = 0; k < int'(CPB); k++)    rd_x[k] <= '0;
    end else begin
      if (in_wr_en && int'(in_wr_idx) < int'(N_IN)) begin
        if (in_wr_im) x0[in_wr_idx].im <= in_wr_data;
        else          x0[in_wr_idx].re <= in_wr_data;
      end
      if (res_wr_en) begin
        unique case (res_layer)
          2'd0:    if (int'(res_neuron) < int'(H1)) h1[res_neuron] <= res_data;
          2'd1:    if (int'(res_neuron) < int'(H2)) h2[res_neuron] <= res_data;
          default: if (int'(res_neuron) < int'(T))  mu[T_W'(res_neuron)] <= res_data.re;
        endcase
      end
      if (rd_en) begin
        for (int k = 0; k < int'(CPB); k++) begin
          unique case (rd_layer)
            2'd0:    rd_x[k] <= (int'(rd_beat) < int'(B0)) ? x0[int'(rd_beat)*CPB + k] : '0;
            2'd1:    rd_x[k] <= (int'(rd_beat) < int'(B1)) ? h1[int'(rd_beat)*CPB + k] : '0;
            default: rd_x[k] <= (int'(rd_beat) < int'(B2)) ? h2[int'(rd_beat)*CPB + k] : '0;
          endcase
        end
      end
    end
  end

  assign mu_data = (int'(mu_idx) < int'(T)) ? mu[mu_idx] : FP32_ZERO;
endmodule
