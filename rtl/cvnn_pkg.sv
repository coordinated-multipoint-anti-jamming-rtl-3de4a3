// cvnn_pkg: types and constants shared by the step-size prediction accelerator.
//
// The accelerator evaluates a three-layer complex-valued neural network whose
// output is the set of T step sizes mu_1..mu_T used by the unfolded Riemannian
// gradient iterations of the analog beamformer. Numbers follow the paper where
// it gives them: N_r = 64 antennas per access point, T = 15 step sizes,
// 128 fp32 lanes, 11-cycle core latency. The hidden widths (64) are this
// design's choice; the paper does not state them.
package cvnn_pkg;

  typedef logic [31:0] fp32_t;

  typedef struct packed {
    fp32_t re;
    fp32_t im;
  } cplx_t;

  // Activation applied at the end of the core pipeline.
  typedef enum logic [1:0] {
    ACT_NONE   = 2'd0,  // linear output
    ACT_CRELU  = 2'd1,  // ReLU on real and imaginary part separately (layers 1, 2)
    ACT_SUMABS = 2'd2   // |re + im| (output layer: non-negative step size)
  } act_mode_e;

  localparam int unsigned NR        = 64;      // antennas per AP (paper)
  localparam int unsigned N_IN_DEF  = 3 * NR;  // [w_LS ; grad_E ; grad_R] complex inputs
  localparam int unsigned H1_DEF    = 64;      // hidden width, layer 1 (assumed)
  localparam int unsigned H2_DEF    = 64;      // hidden width, layer 2 (assumed)
  localparam int unsigned T_DEF     = 15;      // step sizes (paper: output size T = 15)
  localparam int unsigned CPB_DEF   = 32;      // complex terms per beat: 4*32 = 128 lanes
  localparam int unsigned CORE_LAT  = 11;      // core latency in cycles (paper)

  localparam fp32_t FP32_ZERO = 32'h0000_0000;

  function automatic int unsigned ceil_div(int unsigned a, int unsigned b);
    return (a + b - 1) / b;
  endfunction

  function automatic int unsigned clog2_min1(int unsigned v);
    return (v <= 2) ? 1 : $clog2(v);
  endfunction

endpackage
