// cvnn_core: pipelined complex linear-layer engine with 4*CPB fp32 lanes.
//
// Each beat carries CPB complex inputs x_k and CPB complex weights w_k of one
// output neuron. A complex product is split into four real products
// (the paper's real/imaginary decomposition of complex multiplication):
//     re += wr*xr - wi*xi        im += wr*xi + wi*xr
// so CPB = 32 complex terms occupy 4*32 = 128 multiplier lanes, the paper's
// lane count. Two balanced fp32 adder trees (real path and imaginary path,
// log2(2*CPB) levels each) reduce the beat to one complex partial sum. The
// partial sums of the beats of a neuron are accumulated (in_first restarts
// the sum, in_last closes it), the neuron's bias is added and the activation
// (cvnn_act) is applied.
//
// Pipeline registers: input, products, LEVELS tree levels, accumulator, bias,
// activation. Latency from a beat with in_last to out_valid is
//     LAT = 5 + log2(2*CPB)  = 11 cycles for CPB = 32,
// the paper's "11-cycle initial latency". One beat is accepted per cycle with
// no stall; once full the engine performs 128 multiplies per cycle. How the
// 11 cycles split into stages, the tree reduction and the accumulator are
// this design's choices: the paper gives only the lane count and the latency.
// The beats of one neuron must be presented without another neuron's beats in
// between (gaps with in_valid low are allowed). CPB must be a power of two.
module cvnn_core
  import cvnn_pkg::*;
#(
  parameter int unsigned CPB   = CPB_DEF,
  parameter int unsigned TAG_W = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic             in_first,
  input  logic             in_last,
  input  cplx_t            in_x [CPB],
  input  cplx_t            in_w [CPB],
  input  cplx_t            in_bias,
  input  act_mode_e        in_mode,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output cplx_t            out_y,
  output logic [TAG_W-1:0] out_tag
);
  localparam int unsigned NT     = 2 * CPB;          // terms per tree
  localparam int unsigned LEVELS = $clog2(NT);

  typedef struct packed {
    logic             first;
    logic             last;
    cplx_t            bias;
    act_mode_e        mode;
    logic [TAG_W-1:0] tag;
  } meta_t;

  // ---------------- stage 1: input register ----------------
  logic  s1_valid;
  meta_t s1_meta;
  cplx_t s1_x [CPB];
  cplx_t s1_w [CPB];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_meta  <= '0;
      for (int k = 0; k < CPB; k++) begin
        s1_x[k] <= '0;
        s1_w[k] <= '0;
      end
    end else begin
      s1_valid <= in_valid;
      if (in_valid) begin
        s1_meta <= '{first: in_first, last: in_last, bias: in_bias,
                     mode: in_mode, tag: in_tag};
        s1_x    <= in_x;
        s1_w    <= in_w;
      end
    end
  end

  // ---------------- stage 2: 4*CPB real multiplier lanes ----------------
  fp32_t prod_rr [CPB], prod_ii [CPB], prod_ri [CPB], prod_ir [CPB];
  for (genvar k = 0; k < CPB; k++) begin : g_lane
    fp32_mul u_rr (.a(s1_w[k].re), .b(s1_x[k].re), .y(prod_rr[k]));
    fp32_mul u_ii (.a(s1_w[k].im), .b(s1_x[k].im), .y(prod_ii[k]));
    fp32_mul u_ri (.a(s1_w[k].re), .b(s1_x[k].im), .y(prod_ri[k]));
    fp32_mul u_ir (.a(s1_w[k].im), .b(s1_x[k].re), .y(prod_ir[k]));
  end

  // tree storage: level 0 holds the registered products, level l+1 the
  // registered sums of level l (only the first NT >> (l+1) entries are used)
  fp32_t tre [LEVELS+1][NT];
  fp32_t tim [LEVELS+1][NT];
  fp32_t sre [LEVELS][NT/2];
  fp32_t sim [LEVELS][NT/2];
  logic  tvalid [LEVELS+1];
  meta_t tmeta  [LEVELS+1];

  // ---------------- stages 3..2+LEVELS: adder trees ----------------
  for (genvar l = 0; l < LEVELS; l++) begin : g_lvl
    for (genvar i = 0; i < int'(NT >> (l + 1)); i++) begin : g_add
      fp32_add u_re (.a(tre[l][2*i]), .b(tre[l][2*i+1]), .y(sre[l][i]));
      fp32_add u_im (.a(tim[l][2*i]), .b(tim[l][2*i+1]), .y(sim[l][i]));
    end
    for (genvar i = int'(NT >> (l + 1)); i < int'(NT / 2); i++) begin : g_unused
      assign sre[l][i] = FP32_ZERO;
      assign sim[l][i] = FP32_ZERO;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l <= int'(LEVELS); l++) begin
        tvalid[l] <= 1'b0;
        tmeta[l]  <= '0;
        for (int k = 0; k < int'(NT); k++) begin
          tre[l][k] <= '0;
          tim[l][k] <= '0;
        end
      end
    end else begin
      tvalid[0] <= s1_valid;
      if (s1_valid) begin
        tmeta[0] <= s1_meta;
        for (int k = 0; k < int'(CPB); k++) begin
          tre[0][2*k]   <= prod_rr[k];
          tre[0][2*k+1] <= {~prod_ii[k][31], prod_ii[k][30:0]};  // - wi*xi
          tim[0][2*k]   <= prod_ri[k];
          tim[0][2*k+1] <= prod_ir[k];
        end
      end
      for (int l = 0; l < int'(LEVELS); l++) begin
        tvalid[l+1] <= tvalid[l];
        if (tvalid[l]) begin
          tmeta[l+1] <= tmeta[l];
          for (int k = 0; k < int'(NT / 2); k++) begin
            tre[l+1][k] <= sre[l][k];
            tim[l+1][k] <= sim[l][k];
          end
        end
      end
    end
  end

  // ---------------- accumulator over the beats of a neuron ----------------
  fp32_t acc_re_sum, acc_im_sum;
  cplx_t acc;
  logic  acc_valid;
  meta_t acc_meta;

  fp32_add u_acc_re (.a(acc.re), .b(tre[LEVELS][0]), .y(acc_re_sum));
  fp32_add u_acc_im (.a(acc.im), .b(tim[LEVELS][0]), .y(acc_im_sum));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      acc_valid <= 1'b0;
      acc_meta  <= '0;
    end else begin
      acc_valid <= tvalid[LEVELS] && tmeta[LEVELS].last;
      if (tvalid[LEVELS]) begin
        acc_meta <= tmeta[LEVELS];
        if (tmeta[LEVELS].first) acc <= '{re: tre[LEVELS][0], im: tim[LEVELS][0]};
        else                     acc <= '{re: acc_re_sum,     im: acc_im_sum};
      end
    end
  end

  // ---------------- bias ----------------
  fp32_t b_re, b_im;
  cplx_t bsum;
  logic  b_valid;
  meta_t b_meta;

  fp32_add u_b_re (.a(acc.re), .b(acc_meta.bias.re), .y(b_re));
  fp32_add u_b_im (.a(acc.im), .b(acc_meta.bias.im), .y(b_im));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bsum    <= '0;
      b_valid <= 1'b0;
      b_meta  <= '0;
    end else begin
      b_valid <= acc_valid;
      if (acc_valid) begin
        bsum   <= '{re: b_re, im: b_im};
        b_meta <= acc_meta;
      end
    end
  end

  // ---------------- activation ----------------
  cvnn_act #(.TAG_W(TAG_W)) u_act (
    .clk     (clk),
    .rst_n   (rst_n),
    .x_valid (b_valid),
    .x       (bsum),
    .mode    (b_meta.mode),
    .x_tag   (b_meta.tag),
    .y_valid (out_valid),
    .y       (out_y),
    .y_tag   (out_tag)
  );
endmodule
