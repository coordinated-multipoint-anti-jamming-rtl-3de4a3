// axil_slave: AXI4-Lite slave through which the ARM processing system loads
// the network and its inputs, starts an inference and reads the step sizes.
//
// The paper exchanges data between the processing system and the
// programmable logic over AXI; the choice of AXI4-Lite (32-bit data, one
// outstanding transaction per direction) is this design's.
// It converts bus transactions into a simple register-bus:
//   write: an AW and a W beat are accepted together (awready = wready, both
//          high only when both valids are high and no response is pending);
//          reg_wr pulses for one cycle with reg_waddr/reg_wdata, and the OKAY
//          response is held on B until bready.
//   read:  an AR beat pulses reg_rd with reg_raddr; reg_rdata must be valid
//          the next cycle; it is captured and held on R until rready.
// Write strobes are ignored: every write is a full 32-bit word.
module axil_slave #(
  parameter int unsigned ADDR_W = 20
) (
  input  logic              clk,
  input  logic              rst_n,
  // AXI4-Lite slave
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
  // register bus
  output logic              reg_wr,
  output logic [ADDR_W-1:0] reg_waddr,
  output logic [31:0]       reg_wdata,
  output logic              reg_rd,
  output logic [ADDR_W-1:0] reg_raddr,
  input  logic [31:0]       reg_rdata
);
  logic rd_pend;   // read issued, data arrives this cycle

  assign s_awready = s_awvalid && s_wvalid && !s_bvalid;
  assign s_wready  = s_awready;
  assign s_arready = !s_rvalid && !rd_pend;
  assign s_bresp   = 2'b00;
  assign s_rresp   = 2'b00;

  assign reg_wr    = s_awvalid && s_awready;
  assign reg_waddr = s_awaddr;
  assign reg_wdata = s_wdata;
  assign reg_rd    = s_arvalid && s_arready;
  assign reg_raddr = s_araddr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_bvalid <= 1'b0;
      s_rvalid <= 1'b0;
      s_rdata  <= '0;
      rd_pend  <= 1'b0;
    end else begin
      if (reg_wr)                    s_bvalid <= 1'b1;
      else if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      rd_pend <= reg_rd;
      if (rd_pend) begin
        s_rvalid <= 1'b1;
        s_rdata  <= reg_rdata;
      end else if (s_rvalid && s_rready) begin
        s_rvalid <= 1'b0;
      end
    end
  end

  // AXI rules on the slave's outputs: a response stays valid and stable until
  // it is accepted.
  a_b_hold: assert property (@(posedge clk) disable iff (!rst_n)
                             s_bvalid && !s_bready |=> s_bvalid);
  a_r_hold: assert property (@(posedge clk) disable iff (!rst_n)
                             s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata));

  wire unused_strb = ^s_wstrb;
endmodule
