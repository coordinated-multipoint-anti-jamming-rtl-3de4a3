// cvnn_act: activation stage of the complex network, one register deep.
//
// The paper's hardware network uses CReLU after layers 1 and 2 (ReLU applied
// to the real and the imaginary part separately) and, after layer 3, adds the
// real and imaginary parts and takes the absolute value so that every
// predicted step size is non-negative (Fig. 12: CReLU, "+", Abs).
//   ACT_CRELU : y = (max(re,0), max(im,0))
//   ACT_SUMABS: y = (|re + im|, 0)
//   ACT_NONE  : y = x
// Negative zero is treated as negative and becomes +0 under CReLU.
// Timing: y is registered; y_valid follows x_valid by one cycle. The tag
// travels with the data.
module cvnn_act
  import cvnn_pkg::*;
#(
  parameter int unsigned TAG_W = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             x_valid,
  input  cplx_t            x,
  input  act_mode_e        mode,
  input  logic [TAG_W-1:0] x_tag,
  output logic             y_valid,
  output cplx_t            y,
  output logic [TAG_W-1:0] y_tag
);
  fp32_t sum;
  cplx_t y_d;

  fp32_add u_sum (.a(x.re), .b(x.im), .y(sum));

  always_comb begin
    unique case (mode)
      ACT_CRELU: begin
        y_d.re = x.re[31] ? FP32_ZERO : x.re;
        y_d.im = x.im[31] ? FP32_ZERO : x.im;
      end
      ACT_SUMABS: begin
        y_d.re = {1'b0, sum[30:0]};
        y_d.im = FP32_ZERO;
      end
      default: y_d = x;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y_valid <= 1'b0;
      y       <= '0;
      y_tag   <= '0;
    end else begin
      y_valid <= x_valid;
      if (x_valid) begin
        y     <= y_d;
        y_tag <= x_tag;
      end
    end
  end
endmodule
