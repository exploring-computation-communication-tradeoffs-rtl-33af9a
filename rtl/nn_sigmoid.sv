// nn_sigmoid: LUT-based activation unit of the NN processing unit.
//
// A bus carries the partial-sum output of every PE in the chain to this unit.
// When a neuron's sum is complete it leaves the PE that holds the layer's last
// input of the final pass; the sequencer names that PE in tap_sel, and the
// unit picks its token when sig_en is high. The 26-bit sum is shifted right by
// SIG_SHIFT, saturated to a signed 8-bit index and looked up in a 256-entry
// table, giving an 8-bit activation.
//
// The 256-entry table and the per-PE taps come from the source design. The
// index mapping (input range -8..+8 in steps of 1/16 for the Q1.7 x Q3.5
// product format) and the table being writable, so that the host loads the
// sigmoid samples, are this implementation's choices.
//
// Timing: out_valid/out_data/out_tag follow the selected tap by two cycles
// (index register, then synchronous table read).
module nn_sigmoid
  import nn_pkg::*;
#(
  parameter int unsigned N_PE      = 8,
  parameter int unsigned SIG_SHIFT = XFRAC + WFRAC - 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  chain_t                     taps [N_PE],
  input  logic [$clog2(N_PE)-1:0]    tap_sel,
  input  logic                       sig_en,
  // table load port
  input  logic                       lut_we,
  input  logic [7:0]                 lut_addr,
  input  logic [DW-1:0]              lut_data,
  // activation out
  output logic                       out_valid,
  output logic [DW-1:0]              out_data
);

  logic [DW-1:0]        lut [256];
  chain_t               tok;
  logic signed [AW-1:0] shifted;
  logic [7:0]           idx_d, idx_q;
  logic                 v_q;

  assign tok     = taps[tap_sel];
  assign shifted = tok.psum >>> SIG_SHIFT;

  always_comb begin
    if (shifted > AW'(signed'(127)))       idx_d = 8'd255;
    else if (shifted < -AW'(signed'(128))) idx_d = 8'd0;
    else                                   idx_d = 8'(shifted) ^ 8'h80;
  end

  always_ff @(posedge clk) begin
    if (lut_we) lut[lut_addr] <= lut_data;
    out_data <= lut[idx_q];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q       <= 1'b0;
      idx_q     <= '0;
      out_valid <= 1'b0;
    end else begin
      v_q       <= sig_en && tok.valid;
      idx_q     <= idx_d;
      out_valid <= v_q;
    end
  end

endmodule
