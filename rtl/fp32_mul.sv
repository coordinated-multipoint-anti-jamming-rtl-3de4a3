// fp32_mul: combinational IEEE-754 single-precision multiplier.
//
// One of the two arithmetic primitives of a lane. The paper states that its
// lanes compute in 32-bit floating point; the rounding and special-value
// policy below is this design's choice:
//   * round to nearest, ties to even;
//   * subnormal inputs are read as zero and subnormal results flush to signed
//     zero (flush-to-zero, as FPGA floating-point cores commonly do);
//   * an Inf or NaN operand yields a quiet NaN if the other operand is zero or
//     NaN, and a signed infinity otherwise; overflow saturates to infinity.
// Interface: a, b in, y out, purely combinational (the caller registers).
module fp32_mul (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  logic        sa, sb, sy;
  logic [7:0]  ea, eb;
  logic [23:0] ma, mb;
  logic [47:0] p;
  logic [22:0] frac;
  logic        g, st, up;
  logic [9:0]  e;      // signed-ish exponent with room for over/underflow
  logic [23:0] fr_r;   // rounded fraction with carry

  always_comb begin
    sa = a[31]; sb = b[31]; sy = sa ^ sb;
    ea = a[30:23]; eb = b[30:23];
    ma = {1'b1, a[22:0]};
    mb = {1'b1, b[22:0]};
    p  = ma * mb;
    if (p[47]) begin
      frac = p[46:24]; g = p[23]; st = |p[22:0];
      e    = {2'b00, ea} + {2'b00, eb} - 10'd126;
    end else begin
      frac = p[45:23]; g = p[22]; st = |p[21:0];
      e    = {2'b00, ea} + {2'b00, eb} - 10'd127;
    end
    up   = g & (st | frac[0]);
    fr_r = {1'b0, frac} + {23'd0, up};
    if (fr_r[23]) e = e + 10'd1;

    if (ea == 8'hff || eb == 8'hff) begin
      if ((ea == 8'hff && a[22:0] != 0) || (eb == 8'hff && b[22:0] != 0) ||
          ea == 8'h00 || eb == 8'h00)
        y = 32'h7fc0_0000;
      else
        y = {sy, 8'hff, 23'd0};
    end else if (ea == 8'h00 || eb == 8'h00) begin
      y = {sy, 31'd0};
    end else if (e[9]) begin                 // negative: underflow
      y = {sy, 31'd0};
    end else if (e == 10'd0) begin           // would be subnormal: flush
      y = {sy, 31'd0};
    end else if (e >= 10'd255) begin
      y = {sy, 8'hff, 23'd0};
    end else begin
      y = {sy, e[7:0], fr_r[22:0]};
    end
  end
endmodule
