// fp32_add: combinational IEEE-754 single-precision adder.
//
// Used in the lane reduction trees, the beat accumulator, the bias add and the
// output layer's real+imaginary sum. Classic guard/round/sticky datapath:
// order the operands by magnitude, align the smaller one with a sticky
// right shift, add or subtract, renormalise, round to nearest even.
// Policy (this design's choice; the paper only says "32-bit floating point"):
// subnormals flush to zero on input and output, exact cancellation gives +0,
// an Inf/NaN operand is passed through (Inf - Inf returns the larger operand,
// i.e. an infinity, not NaN), overflow saturates to infinity.
// Interface: a, b in, y = a + b out, combinational.
module fp32_add (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  logic [31:0] x, z;          // |x| >= |z|
  logic [7:0]  ex, ez, d;
  logic [26:0] mx, mz, mzs;   // 1.f plus guard, round, sticky
  logic [27:0] s;             // sum with carry bit
  logic [4:0]  lz;
  logic [9:0]  e;
  logic [23:0] m;
  logic        g, r, st, up;
  logic [24:0] mr;
  logic        zero_x, zero_z;

  always_comb begin
    if (a[30:0] >= b[30:0]) begin x = a; z = b; end
    else                    begin x = b; z = a; end
    ex = x[30:23]; ez = z[30:23];
    zero_x = (ex == 8'h00);
    zero_z = (ez == 8'h00);
    mx = {1'b1, x[22:0], 3'b000};
    mz = {1'b1, z[22:0], 3'b000};
    d  = ex - ez;
    // sticky alignment shift
    mzs = 27'd0;
    if (d >= 8'd27) begin
      mzs = {26'd0, |mz};
    end else begin
      mzs = mz >> d;
      if ((mz & ((27'd1 << d) - 27'd1)) != 27'd0) mzs[0] = 1'b1;
    end
    if (x[31] == z[31]) s = {1'b0, mx} + {1'b0, mzs};
    else                s = {1'b0, mx} - {1'b0, mzs};

    e  = {2'b00, ex};
    lz = 5'd0;
    if (s[27]) begin
      s = {1'b0, s[27:2], s[1] | s[0]};
      e = e + 10'd1;
    end else begin
      // leading-zero count: the highest set bit wins
      for (int i = 0; i <= 26; i++) begin
        if (s[i]) lz = 5'(26 - i);
      end
      s = s << lz;
      e = e - {5'd0, lz};
    end
    m  = s[26:3];
    g  = s[2]; r = s[1]; st = s[0];
    up = g & (r | st | m[0]);
    mr = {1'b0, m} + {24'd0, up};
    if (mr[24]) begin
      mr = mr >> 1;
      e  = e + 10'd1;
    end

    if (ex == 8'hff) begin
      y = x;
    end else if (zero_x) begin
      y = 32'h0000_0000;               // both operands zero (or subnormal)
    end else if (zero_z) begin
      y = x;
    end else if (s[26:0] == 27'd0) begin
      y = 32'h0000_0000;               // exact cancellation
    end else if (e[9] || e == 10'd0) begin
      y = {x[31], 31'd0};              // underflow: flush to zero
    end else if (e >= 10'd255) begin
      y = {x[31], 8'hff, 23'd0};
    end else begin
      y = {x[31], e[7:0], mr[22:0]};
    end
  end
endmodule
