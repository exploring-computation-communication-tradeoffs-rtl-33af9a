// bssa_cu: streaming compute unit of the bilateral-space stereo accelerator.
//
// Evaluates one grid vertex per cycle through a seven-stage FP32 pipeline
// that follows the compute-unit diagram of the source design:
//   1  s0 = n0+n1,  s1 = n2+n3,  s2 = n4+n5      (three adders)
//   2  sum = s0 + s1 + s2                          (wide adder)
//   3  m = sum * a
//   4  k = m <<< 3, taken as m * 8 on the exponent (the diagram prints
//      "<<< 3" on a floating-point value; this reading is an assumption)
//   5  t = k + b
//   6  u = t * w
//   7  y = u * w   (the last multiplier takes the same operand as the one
//                   before it, as drawn)
// All arithmetic is IEEE-754 single precision with round-to-nearest-even and
// flush-to-zero (fp32_add / fp32_mul).
//
// Interface: valid/ready on both sides; the whole pipeline holds when the
// output is valid and not taken, so in_ready = out_ready || !out_valid. A tag
// travels with each vertex. Latency: 7 cycles; throughput: 1 vertex/cycle.
module bssa_cu
  import bssa_pkg::*;
#(
  parameter int unsigned TAG_W = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  vertex_t          in_vtx,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [FPW-1:0]   out_data,
  output logic [TAG_W-1:0] out_tag
);

  localparam int unsigned L = CU_LATENCY;

  logic             v   [L];
  logic [TAG_W-1:0] tag [L];
  logic [FPW-1:0]   a_p [4], b_p [4], w_p [6];
  logic [FPW-1:0]   s0, s1, s2, sum, m, k, t, u, y;
  logic [FPW-1:0]   s0_d, s1_d, s2_d, s01_d, sum_d, m_d, t_d, u_d, y_d;
  logic             adv;

  assign adv       = out_ready || !v[L-1];
  assign in_ready  = adv;
  assign out_valid = v[L-1];
  assign out_data  = y;
  assign out_tag   = tag[L-1];

  fp32_add u_a0 (.a(in_vtx.nbr[0]), .b(in_vtx.nbr[1]), .y(s0_d));
  fp32_add u_a1 (.a(in_vtx.nbr[2]), .b(in_vtx.nbr[3]), .y(s1_d));
  fp32_add u_a2 (.a(in_vtx.nbr[4]), .b(in_vtx.nbr[5]), .y(s2_d));
  fp32_add u_a3 (.a(s0), .b(s1), .y(s01_d));
  fp32_add u_a4 (.a(s01_d), .b(s2), .y(sum_d));
  fp32_mul u_m0 (.a(sum), .b(a_p[1]), .y(m_d));
  fp32_add u_a5 (.a(k), .b(b_p[3]), .y(t_d));
  fp32_mul u_m1 (.a(t), .b(w_p[4]), .y(u_d));
  fp32_mul u_m2 (.a(u), .b(w_p[5]), .y(y_d));

  // x8: add 3 to the exponent of a normal number; zero, inf and NaN unchanged
  function automatic logic [FPW-1:0] times8(input logic [FPW-1:0] x);
    if (x[30:23] == 8'h00 || x[30:23] == 8'hFF) return x;
    else if (x[30:23] >= 8'd252)                return {x[31], 8'hFF, 23'd0};
    else                                        return {x[31], x[30:23] + 8'd3, x[22:0]};
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < L; i++) begin v[i] <= 1'b0; tag[i] <= '0; end
      for (int i = 0; i < 4; i++) begin a_p[i] <= '0; b_p[i] <= '0; end
      for (int i = 0; i < 6; i++) w_p[i] <= '0;
      {s0, s1, s2, sum, m, k, t, u, y} <= '0;
    end else if (adv) begin
      v[0]   <= in_valid;
      tag[0] <= in_tag;
      for (int i = 1; i < L; i++) begin v[i] <= v[i-1]; tag[i] <= tag[i-1]; end
      a_p[0] <= in_vtx.a; b_p[0] <= in_vtx.b; w_p[0] <= in_vtx.w;
      for (int i = 1; i < 4; i++) begin a_p[i] <= a_p[i-1]; b_p[i] <= b_p[i-1]; end
      for (int i = 1; i < 6; i++) w_p[i] <= w_p[i-1];
      s0  <= s0_d;  s1 <= s1_d;  s2 <= s2_d;   // stage 1
      sum <= sum_d;                             // stage 2
      m   <= m_d;                               // stage 3
      k   <= times8(m);                         // stage 4
      t   <= t_d;                               // stage 5
      u   <= u_d;                               // stage 6
      y   <= y_d;                               // stage 7
    end
  end

endmodule
