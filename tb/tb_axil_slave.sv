// tb_axil_slave: AXI4-Lite transactions against the slave with a model
// register file on its register bus (read data one cycle after reg_rd).
// Random addresses and data, random delays on AW vs W presentation and on
// bready/rready. Checks that every write reaches the register bus exactly once
// with its address and data, that reads return the register contents, that
// responses are OKAY and that responses are held while not accepted.
module tb_axil_slave;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [19:0] s_awaddr, s_araddr, reg_waddr, reg_raddr;
  logic s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready;
  logic s_arvalid, s_arready, s_rvalid, s_rready, reg_wr, reg_rd;
  logic [31:0] s_wdata, s_rdata, reg_wdata, reg_rdata;
  logic [3:0] s_wstrb;
  logic [1:0] s_bresp, s_rresp;
  logic [31:0] regs [16];
  int checks = 0, failures = 0, n_wr = 0, n_hold = 0;

  axil_slave #(.ADDR_W(20)) dut (.*);

  always_ff @(posedge clk) begin
    if (reg_wr) begin
      regs[reg_waddr[5:2]] <= reg_wdata;
      n_wr <= n_wr + 1;
    end
    if (reg_rd) reg_rdata <= regs[reg_raddr[5:2]];
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(logic [19:0] a, logic [31:0] d);
    int w0 = n_wr;
    int lag = $urandom % 3;
    @(negedge clk);
    s_awaddr = a; s_awvalid = 1; s_wdata = d;
    repeat (lag) @(negedge clk);
    s_wvalid = 1;
    #1;
    while (!(s_awready && s_wready)) begin @(negedge clk); #1; end
    @(negedge clk);
    s_awvalid = 0; s_wvalid = 0;
    while (!s_bvalid) @(negedge clk);
    repeat ($urandom % 3) begin
      @(negedge clk);
      n_hold++;
      checks++; if (!s_bvalid) failures++;
    end
    s_bready = 1;
    checks++; if (s_bresp != 2'b00) failures++;
    @(negedge clk); s_bready = 0;
    checks++; if (n_wr != w0 + 1) begin failures++; $display("FAIL: write count"); end
  endtask

  task automatic rd(logic [19:0] a, output logic [31:0] d);
    @(negedge clk);
    s_araddr = a; s_arvalid = 1;
    #1;
    while (!s_arready) begin @(negedge clk); #1; end
    @(negedge clk);
    s_arvalid = 0;
    while (!s_rvalid) @(negedge clk);
    repeat ($urandom % 3) begin
      @(negedge clk);
      n_hold++;
      checks++; if (!s_rvalid) failures++;
    end
    d = s_rdata;
    s_rready = 1;
    checks++; if (s_rresp != 2'b00) failures++;
    @(negedge clk); s_rready = 0;
  endtask

  initial begin
    logic [31:0] model [16];
    logic [31:0] d;
    s_awaddr = 0; s_awvalid = 0; s_wvalid = 0; s_wdata = 0; s_wstrb = 4'hf; s_bready = 0;
    s_araddr = 0; s_arvalid = 0; s_rready = 0;
    foreach (regs[i]) begin regs[i] = 0; model[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      automatic int r = $urandom % 16;
      if ($urandom % 2) begin
        d = $urandom;
        wr(20'(r * 4), d);
        model[r] = d;
      end else begin
        rd(20'(r * 4), d);
        checks++;
        if (d !== model[r]) begin
          failures++;
          if (failures < 10) $display("FAIL read reg %0d: %h expected %h", r, d, model[r]);
        end
      end
    end
    checks++; if (n_hold == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
