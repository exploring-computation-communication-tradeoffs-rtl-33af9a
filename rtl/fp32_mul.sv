// fp32_mul: combinational IEEE-754 single-precision multiplier.
//
// Rounds to nearest, ties to even. Subnormal inputs are read as zero and
// results below the normal range are flushed to zero; overflow gives
// infinity; an infinity or NaN operand gives infinity or NaN (inf * 0 = NaN).
// The compute units of the stereo accelerator need 32-bit floating point; the
// flush-to-zero simplification is this implementation's choice.
module fp32_mul (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  logic        sa, sb, sy;
  logic [7:0]  ea, eb;
  logic [47:0] p;
  logic [24:0] m;
  logic        g, st;
  logic signed [10:0] e;

  always_comb begin
    sa = a[31]; sb = b[31]; sy = sa ^ sb;
    ea = a[30:23]; eb = b[30:23];
    p  = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    if (p[47]) begin
      m  = {1'b0, p[47:24]};
      g  = p[23];
      st = |p[22:0];
      e  = 11'(ea) + 11'(eb) - 11'sd126;
    end else begin
      m  = {1'b0, p[46:23]};
      g  = p[22];
      st = |p[21:0];
      e  = 11'(ea) + 11'(eb) - 11'sd127;
    end
    if (g && (st || m[0])) m = m + 1'b1;
    if (m[24]) begin
      m = m >> 1;
      e = e + 1'b1;
    end
    if (ea == 8'hFF || eb == 8'hFF) begin
      if ((ea == 8'hFF && a[22:0] != '0) || (eb == 8'hFF && b[22:0] != '0) ||
          ea == 8'h00 || eb == 8'h00)
        y = 32'h7FC0_0000;                 // NaN
      else
        y = {sy, 8'hFF, 23'd0};            // infinity
    end else if (ea == 8'h00 || eb == 8'h00) begin
      y = {sy, 31'd0};                     // zero (subnormals flushed)
    end else if (e >= 11'sd255) begin
      y = {sy, 8'hFF, 23'd0};
    end else if (e <= 11'sd0) begin
      y = {sy, 31'd0};
    end else begin
      y = {sy, e[7:0], m[22:0]};
    end
  end
endmodule
