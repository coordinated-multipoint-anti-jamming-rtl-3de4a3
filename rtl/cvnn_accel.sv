// cvnn_accel: step-size prediction accelerator (programmable-logic side).
//
// In the deep-unfolded analog beamformer, each access point runs T Riemannian
// gradient iterations whose step sizes mu_1..mu_T are predicted by a small
// complex-valued neural network. The processing system (ARM) computes the
// network input - the least-squares initial beamformer, its Euclidean
// gradient and its Riemannian gradient, N_r = 64 complex values each - and
// this block evaluates the network:
//     h1 = CReLU(W1 x + b1), h2 = CReLU(W2 h1 + b2), mu = |Re(W3 h2 + b3) + Im(W3 h2 + b3)|
// with complex weights, the paper's three-layer hardware network. The
// processing system then uses mu in its own iterations.
//
// Structure: axil_slave (AXI4-Lite) -> address decode -> weight_mem, act_buf
// and control registers; layer_ctrl issues one beat per cycle; the weight row
// and the input row are read in one cycle and fed to cvnn_core (4*CPB = 128
// fp32 multiplier lanes, 11-cycle latency); its results go back into act_buf.
// One inference takes sum_l(BEATS_l*OUT_l) + 3*(LAT+1) = 578 cycles at the
// defaults (N_IN = 192, H1 = H2 = 64, T = 15, CPB = 32).
//
// Register map (byte addresses, 32-bit words, fp32 values as IEEE-754 bits):
//   0x00000  CTRL    W: bit0 = start, bit1 = clear done
//   0x00004  STATUS  R: bit0 = busy, bit1 = done (also drives irq)
//   0x00008  CYCLES  R: busy cycles of the last inference
//   0x0000C  CONFIG  R: {T[7:0], CPB[7:0], N_IN[15:0]}
//   0x01000 + 4t                 MU[t]    R
//   0x04000 + 8i (+4 for Im)     input x0[i]              W
//   0x08000 + 4*{layer[1:0], neuron[8:0], im}   bias    W
//   0x40000 + 4*(row*2*CPB + lane)              weights W (lane 2k Re, 2k+1 Im of w_k)
// Writes to the input, bias and weight regions are dropped while busy.
// The paper gives the network, the lane count, the latency and the AXI link;
// the register map, memory layouts and control protocol are this design's.
module cvnn_accel
  import cvnn_pkg::*;
#(
  parameter int unsigned CPB    = CPB_DEF,
  parameter int unsigned N_IN   = N_IN_DEF,
  parameter int unsigned H1     = H1_DEF,
  parameter int unsigned H2     = H2_DEF,
  parameter int unsigned T      = T_DEF,
  parameter int unsigned ADDR_W = 20
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [ADDR_W-1:0] s_awaddr,
  input  logic              s_awvalid,
  output logic              s_awready,
  input  logic [31:0]       s_wdata,
  input  logic [3:0]        s_wstrb,
  input  logic              s_wvalid,
  output logic              s_wready,
  output logic [1:0]        s_bresp,
  output logic              s_bvalid,
  input  logic              s_bready,
  input  logic [ADDR_W-1:0] s_araddr,
  input  logic              s_arvalid,
  output logic              s_arready,
  output logic [31:0]       s_rdata,
  output logic [1:0]        s_rresp,
  output logic              s_rvalid,
  input  logic              s_rready,
  output logic              irq
);
  localparam int unsigned B0     = ceil_div(N_IN, CPB);
  localparam int unsigned B1     = ceil_div(H1, CPB);
  localparam int unsigned B2     = ceil_div(H2, CPB);
  localparam int unsigned ROWS   = H1 * B0 + H2 * B1 + T * B2;
  localparam int unsigned MAXO   = (H1 > H2) ? ((H1 > T) ? H1 : T) : ((H2 > T) ? H2 : T);
  localparam int unsigned MAXB   = (B0 > B1) ? ((B0 > B2) ? B0 : B2) : ((B1 > B2) ? B1 : B2);
  localparam int unsigned ROW_W  = clog2_min1(ROWS);
  localparam int unsigned NRN_W  = clog2_min1(MAXO);
  localparam int unsigned BT_W   = clog2_min1(MAXB);
  localparam int unsigned LANE_W = $clog2(2 * CPB);
  localparam int unsigned IDX_W  = clog2_min1(N_IN);
  localparam int unsigned T_W    = clog2_min1(T);
  localparam int unsigned TAG_W  = 2 + NRN_W;

  // ---------------- AXI4-Lite ----------------
  logic              reg_wr, reg_rd;
  logic [ADDR_W-1:0] reg_waddr, reg_raddr;
  logic [31:0]       reg_wdata, reg_rdata;

  axil_slave #(.ADDR_W(ADDR_W)) u_axil (
    .clk, .rst_n,
    .s_awaddr, .s_awvalid, .s_awready, .s_wdata, .s_wstrb, .s_wvalid, .s_wready,
    .s_bresp, .s_bvalid, .s_bready, .s_araddr, .s_arvalid, .s_arready,
    .s_rdata, .s_rresp, .s_rvalid, .s_rready,
    .reg_wr, .reg_waddr, .reg_wdata, .reg_rd, .reg_raddr, .reg_rdata
  );

  // ---------------- controller ----------------
  logic             busy, done, done_flag, start;
  logic [31:0]      cycles;
  logic             iss_valid, iss_first, iss_last;
  logic [1:0]       iss_layer;
  logic [NRN_W-1:0] iss_neuron;
  logic [BT_W-1:0]  iss_beat;
  logic [ROW_W-1:0] iss_row;
  act_mode_e        iss_mode;
  logic             res_valid;
  cplx_t            res_y;
  logic [TAG_W-1:0] res_tag;

  layer_ctrl #(
    .CPB(CPB), .N_IN(N_IN), .H1(H1), .H2(H2), .T(T),
    .ROW_W(ROW_W), .NRN_W(NRN_W), .BT_W(BT_W)
  ) u_ctrl (
    .clk, .rst_n, .start, .res_valid, .busy, .done, .cycles,
    .issue_valid(iss_valid), .issue_first(iss_first), .issue_last(iss_last),
    .issue_layer(iss_layer), .issue_neuron(iss_neuron), .issue_beat(iss_beat),
    .issue_row(iss_row), .issue_mode(iss_mode)
  );

  // ---------------- address decode (writes) ----------------
  wire [ADDR_W-1:0] w_off   = reg_waddr - ADDR_W'(32'h40000);
  wire              in_wgt  = reg_waddr >= ADDR_W'(32'h40000);
  wire              in_bias = !in_wgt && reg_waddr[ADDR_W-1:14] == (ADDR_W-14)'(2);  // 0x08000
  wire              in_inp  = !in_wgt && reg_waddr[ADDR_W-1:14] == (ADDR_W-14)'(1);  // 0x04000
  wire              in_ctrl = reg_waddr == '0;
  wire [ADDR_W-3:0] w_word  = w_off[ADDR_W-1:2];
  wire              w_ok    = int'(w_word >> LANE_W) < int'(ROWS);

  assign start = reg_wr && in_ctrl && reg_wdata[0];

  // ---------------- memories ----------------
  cplx_t rd_w [CPB];
  cplx_t rd_x [CPB];
  cplx_t rd_bias;
  fp32_t mu_data;

  weight_mem #(.CPB(CPB), .ROWS(ROWS), .MAXO(MAXO), .ROW_W(ROW_W), .NRN_W(NRN_W)) u_wmem (
    .clk, .rst_n,
    .wr_w_en     (reg_wr && in_wgt && w_ok && !busy),
    .wr_row      (ROW_W'(w_word >> LANE_W)),
    .wr_lane     (w_word[LANE_W-1:0]),
    .wr_b_en     (reg_wr && in_bias && !busy),
    .wr_b_layer  (reg_waddr[13:12]),
    .wr_b_neuron (NRN_W'(reg_waddr[11:3])),
    .wr_b_im     (reg_waddr[2]),
    .wr_data     (reg_wdata),
    .rd_en       (iss_valid),
    .rd_row      (iss_row),
    .rd_b_layer  (iss_layer),
    .rd_b_neuron (iss_neuron),
    .rd_w        (rd_w),
    .rd_bias     (rd_bias)
  );

  act_buf #(.CPB(CPB), .N_IN(N_IN), .H1(H1), .H2(H2), .T(T),
            .IDX_W(IDX_W), .NRN_W(NRN_W), .BT_W(BT_W), .T_W(T_W)) u_abuf (
    .clk, .rst_n,
    .in_wr_en   (reg_wr && in_inp && !busy),
    .in_wr_idx  (IDX_W'(reg_waddr[13:3])),
    .in_wr_im   (reg_waddr[2]),
    .in_wr_data (reg_wdata),
    .res_wr_en  (res_valid),
    .res_layer  (res_tag[TAG_W-1 -: 2]),
    .res_neuron (res_tag[NRN_W-1:0]),
    .res_data   (res_y),
    .rd_en      (iss_valid),
    .rd_layer   (iss_layer),
    .rd_beat    (iss_beat),
    .rd_x       (rd_x),
    .mu_idx     (T_W'(reg_raddr[11:2])),
    .mu_data    (mu_data)
  );

  // beat metadata delayed to line up with the one-cycle memory reads
  logic             c_valid, c_first, c_last;
  act_mode_e        c_mode;
  logic [TAG_W-1:0] c_tag;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_valid <= 1'b0;
      c_first <= 1'b0;
      c_last  <= 1'b0;
      c_mode  <= ACT_NONE;
      c_tag   <= '0;
    end else begin
      c_valid <= iss_valid;
      c_first <= iss_first;
      c_last  <= iss_last;
      c_mode  <= iss_mode;
      c_tag   <= {iss_layer, iss_neuron};
    end
  end

  cvnn_core #(.CPB(CPB), .TAG_W(TAG_W)) u_core (
    .clk, .rst_n,
    .in_valid (c_valid),
    .in_first (c_first),
    .in_last  (c_last),
    .in_x     (rd_x),
    .in_w     (rd_w),
    .in_bias  (rd_bias),
    .in_mode  (c_mode),
    .in_tag   (c_tag),
    .out_valid(res_valid),
    .out_y    (res_y),
    .out_tag  (res_tag)
  );

  // ---------------- status and read mux ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done_flag <= 1'b0;
    end else if (done) begin
      done_flag <= 1'b1;
    end else if (reg_wr && in_ctrl && reg_wdata[1]) begin
      done_flag <= 1'b0;
    end else if (start && !busy) begin
      done_flag <= 1'b0;
    end
  end
  assign irq = done_flag;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      reg_rdata <= '0;
    end else if (reg_rd) begin
      if (reg_raddr[ADDR_W-1:12] == (ADDR_W-12)'(1))
        reg_rdata <= mu_data;
      else begin
        unique case (reg_raddr)
          ADDR_W'(32'h4):  reg_rdata <= {30'd0, done_flag, busy};
          ADDR_W'(32'h8):  reg_rdata <= cycles;
          ADDR_W'(32'hC):  reg_rdata <= {8'(T), 8'(CPB), 16'(N_IN)};
          default:         reg_rdata <= '0;
        endcase
      end
    end
  end
endmodule
