// tb_cvnn_accel: end-to-end test of the step-size prediction accelerator at
// its default sizes (192 complex inputs, 64/64 hidden, 15 outputs, 128 lanes).
//
// Over AXI4-Lite, with random back-pressure on the B and R channels, it loads
// random complex weights, biases and inputs, starts an inference, waits for
// the interrupt and reads the 15 step sizes. The reference model evaluates
// the same network with fp32 rounding after every operation, in the order the
// 128-lane core uses (products, pairwise tree, beat accumulation, bias,
// activation), so results must agree bit for bit.
// It runs NRUN = 10 inferences, one per access point of the paper's L = 10
// deployment (the network being shared by
// all of them), and checks:
//   * every mu_t, and that mu_t >= 0;
//   * the cycle count against sum_l(BEATS_l*OUT_l) + 3*(LAT+1), LAT = 11;
//   * that a start and an input write issued while busy are ignored;
//   * that every mechanism occurred: multi-beat accumulation, CReLU clamping,
//     Sum+Abs of a negative sum, layer barrier, AXI back-pressure.
module tb_cvnn_accel;
  import fp_ref_pkg::*;

  localparam int N_IN = 192, H1 = 64, H2 = 64, T = 15, CPB = 32;
  localparam int LAT  = 11;
  localparam int B0 = (N_IN + CPB - 1) / CPB, B1 = (H1 + CPB - 1) / CPB, B2 = (H2 + CPB - 1) / CPB;
  localparam int ROWS = H1 * B0 + H2 * B1 + T * B2;
  localparam int NRUN = 10;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [19:0] awaddr, araddr;
  logic        awvalid, wvalid, bready, arvalid, rready;
  logic        awready, wready, bvalid, arready, rvalid, irq;
  logic [31:0] wdata, rdata;
  logic [1:0]  bresp, rresp;

  cvnn_accel dut (
    .clk, .rst_n,
    .s_awaddr(awaddr), .s_awvalid(awvalid), .s_awready(awready),
    .s_wdata(wdata), .s_wstrb(4'hf), .s_wvalid(wvalid), .s_wready(wready),
    .s_bresp(bresp), .s_bvalid(bvalid), .s_bready(bready),
    .s_araddr(araddr), .s_arvalid(arvalid), .s_arready(arready),
    .s_rdata(rdata), .s_rresp(rresp), .s_rvalid(rvalid), .s_rready(rready),
    .irq
  );

  int checks = 0, failures = 0;
  int n_bp = 0, n_clamp = 0, n_negsum = 0, n_multibeat = 0, n_barrier = 0;
  int n_busy_start = 0, n_busy_write = 0;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", msg);
    end
  endtask

  // ---------------- AXI4-Lite master ----------------
  task automatic axi_write(logic [19:0] a, logic [31:0] d);
    int dly;
    awaddr <= a; wdata <= d; awvalid <= 1; wvalid <= 1;
    dly = $urandom % 4;
    bready <= (dly == 0);
    do @(posedge clk); while (!(awvalid && awready));
    awvalid <= 0; wvalid <= 0;
    while (!bvalid) @(posedge clk);
    if (dly != 0) begin
      n_bp++;
      repeat (dly) @(posedge clk);
      bready <= 1;
      @(posedge clk);
      while (!bvalid) @(posedge clk);
    end else begin
      while (!(bvalid && bready)) @(posedge clk);
    end
    check(bresp == 2'b00, "BRESP");
    bready <= 0;
    @(posedge clk);
  endtask

  task automatic axi_read(logic [19:0] a, output logic [31:0] d);
    int dly;
    araddr <= a; arvalid <= 1;
    dly = $urandom % 4;
    rready <= 0;
    do @(posedge clk); while (!(arvalid && arready));
    arvalid <= 0;
    while (!rvalid) @(posedge clk);
    if (dly != 0) begin
      n_bp++;
      repeat (dly) @(posedge clk);
    end
    rready <= 1;
    @(posedge clk);
    d = rdata;
    rready <= 0;
    @(posedge clk);
  endtask

  // ---------------- reference network ----------------
  logic [31:0] W1r [H1][N_IN], W1i [H1][N_IN];
  logic [31:0] W2r [H2][H1],   W2i [H2][H1];
  logic [31:0] W3r [T][H2],    W3i [T][H2];
  logic [31:0] Br [3][64], Bi [3][64];
  logic [31:0] xr [N_IN], xi [N_IN];
  logic [31:0] h1r [H1], h1i [H1], h2r [H2], h2i [H2], mu_ref [T];

  function automatic logic [31:0] fadd(logic [31:0] a, logic [31:0] b);
    return to_fp32(to_real(a) + to_real(b));
  endfunction
  function automatic logic [31:0] fmul(logic [31:0] a, logic [31:0] b);
    return to_fp32(to_real(a) * to_real(b));
  endfunction

  // one complex neuron, same operation order as the core
  task automatic neuron(input int nin, input logic [31:0] wr [], input logic [31:0] wi [],
                        input logic [31:0] ar [], input logic [31:0] ai [],
                        input logic [31:0] br, input logic [31:0] bi,
                        output logic [31:0] yr, output logic [31:0] yi);
    logic [31:0] tr [2*CPB], ti [2*CPB];
    logic [31:0] accr, acci;
    int nb = (nin + CPB - 1) / CPB;
    for (int b = 0; b < nb; b++) begin
      for (int k = 0; k < CPB; k++) begin
        automatic int j = b * CPB + k;
        logic [31:0] xr_, xi_, wr_, wi_, p;
        xr_ = (j < nin) ? ar[j] : 32'h0; xi_ = (j < nin) ? ai[j] : 32'h0;
        wr_ = (j < nin) ? wr[j] : 32'h0; wi_ = (j < nin) ? wi[j] : 32'h0;
        tr[2*k] = fmul(wr_, xr_);
        p = fmul(wi_, xi_); tr[2*k+1] = {~p[31], p[30:0]};
        ti[2*k] = fmul(wr_, xi_);
        ti[2*k+1] = fmul(wi_, xr_);
      end
      for (int n = CPB; n >= 1; n = n / 2)
        for (int i = 0; i < n; i++) begin
          tr[i] = fadd(tr[2*i], tr[2*i+1]);
          ti[i] = fadd(ti[2*i], ti[2*i+1]);
        end
      if (b == 0) begin accr = tr[0]; acci = ti[0]; end
      else begin accr = fadd(accr, tr[0]); acci = fadd(acci, ti[0]); end
    end
    yr = fadd(accr, br);
    yi = fadd(acci, bi);
  endtask

  task automatic reference();
    logic [31:0] yr, yi, s;
    logic [31:0] wr [], wi [], ar [], ai [];
    ar = new[N_IN]; ai = new[N_IN];
    foreach (xr[j]) begin ar[j] = xr[j]; ai[j] = xi[j]; end
    for (int o = 0; o < H1; o++) begin
      wr = new[N_IN]; wi = new[N_IN];
      foreach (wr[j]) begin wr[j] = W1r[o][j]; wi[j] = W1i[o][j]; end
      neuron(N_IN, wr, wi, ar, ai, Br[0][o], Bi[0][o], yr, yi);
      if (yr[31] || yi[31]) n_clamp++;
      h1r[o] = yr[31] ? 32'h0 : yr; h1i[o] = yi[31] ? 32'h0 : yi;
    end
    ar = new[H1]; ai = new[H1];
    foreach (h1r[j]) begin ar[j] = h1r[j]; ai[j] = h1i[j]; end
    for (int o = 0; o < H2; o++) begin
      wr = new[H1]; wi = new[H1];
      foreach (wr[j]) begin wr[j] = W2r[o][j]; wi[j] = W2i[o][j]; end
      neuron(H1, wr, wi, ar, ai, Br[1][o], Bi[1][o], yr, yi);
      if (yr[31] || yi[31]) n_clamp++;
      h2r[o] = yr[31] ? 32'h0 : yr; h2i[o] = yi[31] ? 32'h0 : yi;
    end
    ar = new[H2]; ai = new[H2];
    foreach (h2r[j]) begin ar[j] = h2r[j]; ai[j] = h2i[j]; end
    for (int o = 0; o < T; o++) begin
      wr = new[H2]; wi = new[H2];
      foreach (wr[j]) begin wr[j] = W3r[o][j]; wi[j] = W3i[o][j]; end
      neuron(H2, wr, wi, ar, ai, Br[2][o], Bi[2][o], yr, yi);
      s = fadd(yr, yi);
      if (s[31]) n_negsum++;
      mu_ref[o] = {1'b0, s[30:0]};
    end
  endtask

  function automatic logic [31:0] rnd(real scale);
    return to_fp32(scale * (real'(int'($urandom % 20001)) - 10000.0) / 10000.0);
  endfunction

  // ---------------- stimulus ----------------
  initial begin
    int cyc_start, cyc_irq;
    logic [31:0] d;
    awvalid = 0; wvalid = 0; bready = 0; arvalid = 0; rready = 0;
    awaddr = 0; araddr = 0; wdata = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    // random network
    for (int o = 0; o < H1; o++) for (int j = 0; j < N_IN; j++) begin W1r[o][j] = rnd(0.15); W1i[o][j] = rnd(0.15); end
    for (int o = 0; o < H2; o++) for (int j = 0; j < H1; j++)   begin W2r[o][j] = rnd(0.3);  W2i[o][j] = rnd(0.3);  end
    for (int o = 0; o < T; o++)  for (int j = 0; j < H2; j++)   begin W3r[o][j] = rnd(0.3);  W3i[o][j] = rnd(0.3);  end
    for (int l = 0; l < 3; l++)  for (int o = 0; o < 64; o++)   begin Br[l][o] = rnd(0.2);   Bi[l][o] = rnd(0.2);   end

    // load weights in row order: layer-major, neuron, beat, lane
    begin
      automatic int row = 0;
      for (int o = 0; o < H1; o++) for (int b = 0; b < B0; b++) begin
        for (int k = 0; k < CPB; k++) begin
          automatic int j = b * CPB + k;
          axi_write(20'h40000 + 20'((row * 2 * CPB + 2 * k) * 4),     (j < N_IN) ? W1r[o][j] : 32'h0);
          axi_write(20'h40000 + 20'((row * 2 * CPB + 2 * k + 1) * 4), (j < N_IN) ? W1i[o][j] : 32'h0);
        end
        row++;
      end
      for (int o = 0; o < H2; o++) for (int b = 0; b < B1; b++) begin
        for (int k = 0; k < CPB; k++) begin
          automatic int j = b * CPB + k;
          axi_write(20'h40000 + 20'((row * 2 * CPB + 2 * k) * 4),     (j < H1) ? W2r[o][j] : 32'h0);
          axi_write(20'h40000 + 20'((row * 2 * CPB + 2 * k + 1) * 4), (j < H1) ? W2i[o][j] : 32'h0);
        end
        row++;
      end
      for (int o = 0; o < T; o++) for (int b = 0; b < B2; b++) begin
        for (int k = 0; k < CPB; k++) begin
          automatic int j = b * CPB + k;
          axi_write(20'h40000 + 20'((row * 2 * CPB + 2 * k) * 4),     (j < H2) ? W3r[o][j] : 32'h0);
          axi_write(20'h40000 + 20'((row * 2 * CPB + 2 * k + 1) * 4), (j < H2) ? W3i[o][j] : 32'h0);
        end
        row++;
      end
      check(row == ROWS, "row count");
    end
    for (int l = 0; l < 3; l++) begin
      automatic int no = (l == 0) ? H1 : (l == 1) ? H2 : T;
      for (int o = 0; o < no; o++) begin
        axi_write(20'h08000 + 20'((l << 12) | (o << 3)),     Br[l][o]);
        axi_write(20'h08000 + 20'((l << 12) | (o << 3) | 4), Bi[l][o]);
      end
    end
    axi_read(20'h0000C, d);
    check(d == {8'(T), 8'(CPB), 16'(N_IN)}, "CONFIG register");

    for (int run = 0; run < NRUN; run++) begin
      logic [31:0] keep;
      for (int j = 0; j < N_IN; j++) begin
        xr[j] = rnd(1.0); xi[j] = rnd(1.0);
        axi_write(20'h04000 + 20'(j * 8),     xr[j]);
        axi_write(20'h04000 + 20'(j * 8 + 4), xi[j]);
      end
      reference();

      cyc_start = cycle;
      axi_write(20'h00000, 32'h1);
      // start again and overwrite an input while busy: both must be ignored
      axi_read(20'h00004, d);
      check(d[0] == 1'b1, "busy after start");
      axi_write(20'h00000, 32'h1);
      n_busy_start++;
      keep = xr[0];
      axi_write(20'h04000, 32'h4120_0000);
      n_busy_write++;
      while (!irq) @(posedge clk);
      cyc_irq = cycle;
      axi_read(20'h00008, d);
      check(d == 32'(H1 * B0 + H2 * B1 + T * B2 + 3 * (LAT + 1)),
            $sformatf("cycle count %0d, expected %0d", d, H1 * B0 + H2 * B1 + T * B2 + 3 * (LAT + 1)));
      check(cyc_irq - cyc_start < int'(d) + 20, "irq arrives right after the inference");
      axi_read(20'h00004, d);
      check(d[1:0] == 2'b10, "done and not busy");
      for (int t = 0; t < T; t++) begin
        axi_read(20'h01000 + 20'(t * 4), d);
        check(d == mu_ref[t], $sformatf("run %0d mu[%0d] = %h, expected %h", run, t, d, mu_ref[t]));
        check(d[31] == 1'b0, "mu non-negative");
      end
      axi_write(20'h00000, 32'h2);
      axi_read(20'h00004, d);
      check(d[1] == 1'b0, "done cleared");
      n_multibeat += H1 + H2 + T;   // every neuron spans >= 2 beats
      n_barrier   += 2;
      check(keep == xr[0], "input unchanged");
    end

    check(n_bp > 0,         "AXI back-pressure occurred");
    check(n_clamp > 0,      "CReLU clamped a negative part");
    check(n_negsum > 0,     "Sum+Abs folded a negative sum");
    check(n_multibeat > 0 && B0 > 1, "multi-beat accumulation");
    check(n_barrier > 0,    "layer barrier");
    check(n_busy_start > 0 && n_busy_write > 0, "busy-time accesses");
    $display("mechanisms: backpressure=%0d clamp=%0d negsum=%0d multibeat=%0d barrier=%0d busy_start=%0d busy_write=%0d",
             n_bp, n_clamp, n_negsum, n_multibeat, n_barrier, n_busy_start, n_busy_write);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cycle = 0;
  always @(posedge clk) begin
    cycle++;
    if (cycle > 2_000_000) begin
      failures++;
      $display("watchdog expired");
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end
endmodule
