// fp32_add: combinational IEEE-754 single-precision adder.
//
// Aligns the smaller operand with guard, round and sticky bits, adds or
// subtracts the significands, renormalises and rounds to nearest, ties to
// even. Subnormal inputs are read as zero and tiny results flushed to zero;
// exact cancellation gives +0; infinities and NaN propagate (inf - inf = NaN).
// The compute units of the stereo accelerator need 32-bit floating point; the
// flush-to-zero simplification is this implementation's choice.
module fp32_add (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  logic [31:0] larger, lesser;
  logic [7:0]  eb, es, d;
  logic [26:0] mb, ms, ms_sh;
  logic [27:0] s;
  logic [24:0] m;
  logic signed [9:0] e;
  logic        sub;
  int          lz;

  always_comb begin
    lz = 0;
    if (a[30:0] >= b[30:0]) begin larger = a; lesser = b; end
    else                    begin larger = b; lesser = a; end
    eb  = larger[30:23];
    es  = lesser[30:23];
    sub = larger[31] ^ lesser[31];
    d   = eb - es;
    mb  = {1'b1, larger[22:0], 3'b000};
    ms  = (es == 8'h00) ? 27'd0 : {1'b1, lesser[22:0], 3'b000};
    if (d >= 8'd27) ms_sh = {26'd0, |ms};
    else            ms_sh = (ms >> d) | 27'((ms & ((27'd1 << d) - 1'b1)) != '0);
    s  = sub ? ({1'b0, mb} - {1'b0, ms_sh}) : ({1'b0, mb} + {1'b0, ms_sh});
    e  = 10'(eb);
    if (s[27]) begin
      s = {1'b0, s[27:2], s[1] | s[0]};
      e = e + 1'b1;
    end else begin
      lz = 27;
      for (int i = 0; i <= 26; i++) begin
        if (s[i]) lz = 26 - i;        // highest set bit wins
      end
      if (lz < 27) begin
        s = s << lz;
        e = e - 10'(lz);
      end
    end
    m = {1'b0, s[26:3]};
    if (s[2] && (s[1] || s[0] || m[0])) m = m + 1'b1;
    if (m[24]) begin
      m = m >> 1;
      e = e + 1'b1;
    end
    if (eb == 8'hFF) begin
      if (larger[22:0] != '0 || (es == 8'hFF && sub)) y = 32'h7FC0_0000;
      else                                          y = larger;
    end else if (eb == 8'h00) begin
      y = 32'd0;                                    // both operands zero
    end else if (s == '0) begin
      y = 32'd0;                                    // exact cancellation
    end else if (e >= 10'sd255) begin
      y = {larger[31], 8'hFF, 23'd0};
    end else if (e <= 10'sd0) begin
      y = {larger[31], 31'd0};
    end else begin
      y = {larger[31], e[7:0], m[22:0]};
    end
  end
endmodule
