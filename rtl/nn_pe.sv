// nn_pe: one processing element of the NN processing unit.
//
// Each PE holds its own weight memory and one multiply-add. The PEs form a
// systolic chain: a token (valid, weight address, 26-bit partial sum) enters
// at the left, the PE adds x*w to the partial sum and hands the token to the
// right neighbour. The input x is taken from the broadcast d_in bus when the
// sequencer raises this PE's x_latch, and stays in the PE for a whole pass,
// while the neurons of the layer stream past it one per cycle.
//
// Widths follow the PE datapath of the source design: 8-bit input and weight,
// 16-bit product, 26-bit adder. The weight-memory depth (512), the two-cycle
// per-PE latency (synchronous weight read, then multiply-add) and the signed
// formats are this implementation's choices.
//
// Timing: chain_out carries the token chain_in had two cycles earlier.
// Weights are written through wr_en/wr_addr/wr_data at any time the PU idles.
module nn_pe
  import nn_pkg::*;
#(
  parameter int unsigned WDEPTH = 1 << WMEM_AW
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // broadcast input bus
  input  logic signed [DW-1:0]     x_bus,
  input  logic                     x_latch,
  // weight load port
  input  logic                     wr_en,
  input  logic [WMEM_AW-1:0]       wr_addr,
  input  logic signed [DW-1:0]     wr_data,
  // systolic chain
  input  chain_t                   chain_in,
  output chain_t                   chain_out
);

  logic signed [DW-1:0] wmem [WDEPTH];
  logic signed [DW-1:0] x_q;
  logic signed [DW-1:0] w_q;
  chain_t               tok_a;
  logic signed [PW-1:0] prod;

  always_ff @(posedge clk) begin
    if (wr_en) wmem[wr_addr] <= wr_data;
    w_q <= wmem[chain_in.waddr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_q       <= '0;
      tok_a     <= '0;
      chain_out <= '0;
    end else begin
      if (x_latch) x_q <= x_bus;
      tok_a <= chain_in;
      chain_out.valid <= tok_a.valid;
      chain_out.waddr <= tok_a.waddr;
      chain_out.psum  <= tok_a.psum + AW'(prod);
    end
  end

  // MUL: 8 x 8 signed -> 16-bit product
  assign prod = x_q * w_q;

endmodule
