// nn_pu: neural-network processing unit for face authentication.
//
// A single processing unit evaluates a multilayer perceptron (400-8-1 by
// default: a 20x20 face window in, one match score out) with N_PE
// processing elements in a systolic chain, a LUT sigmoid unit, an
// accumulator FIFO for layers wider than the chain, a sigmoid FIFO in front
// of the output port, an activation SRAM and a micro-coded sequencer.
//
// Dataflow per pass (see nn_sequencer): N_PE inputs are read from SRAM onto
// the broadcast d_in bus and latched one per PE; then the layer's neurons
// stream down the chain one per cycle, each PE adding input*weight to the
// neuron's partial sum. The head sum is the neuron's 8-bit offset (aligned to
// the product scale, i.e. the bias times an input of 1.0) on the first pass
// and the partial sum fed back through the accumulator FIFO on later passes.
// After the last pass the sum goes through the sigmoid unit; the 8-bit
// activation is written back to SRAM (input of the next layer) and, for the
// output layer, pushed to the sigmoid FIFO and out on d_out.
//
// From the source design: one PU, 8 PEs (the energy-optimal count it
// reports), 8-bit datapath, per-PE weight memories, 16-bit products, 26-bit
// adder chain, offset input, acc/sig FIFOs, 256-entry sigmoid LUT, SRAM and
// sequencer. This implementation's choices: memory depths, Q1.7/Q3.5
// formats, the configuration port, the microcode format and the
// valid/ready output.
//
// Interface: load weights, offsets, sigmoid table, microcode and input SRAM
// through cfg_* while idle; pulse start; activations leave on d_out_*; done
// pulses when the microcode reaches UOP_END.
module nn_pu
  import nn_pkg::*;
#(
  parameter int unsigned N_PE       = 8,
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // configuration / data load
  input  logic                      cfg_we,
  input  cfg_sel_e                  cfg_sel,
  input  logic [$clog2(N_PE)-1:0]   cfg_pe,
  input  logic [9:0]                cfg_addr,
  input  logic [63:0]               cfg_data,
  // control
  input  logic                      start,
  output logic                      busy,
  output logic                      done,
  // output activations
  output logic                      d_out_valid,
  input  logic                      d_out_ready,
  output logic [DW-1:0]             d_out,
  // observability
  output logic [31:0]               stall_cycles,
  output logic [31:0]               passes_done
);

  localparam int unsigned PEW = $clog2(N_PE);

  // ---------------- sequencer ----------------
  logic                 sram_re, head_issue, head_from_acc, final_pass, to_out;
  logic [SRAM_AW-1:0]   sram_raddr, sram_waddr;
  logic [N_PE-1:0]      x_latch;
  logic [OFF_AW-1:0]    off_raddr;
  logic [WMEM_AW-1:0]   head_waddr;
  logic [PEW-1:0]       tap_sel;
  logic                 sig_valid;
  logic [DW-1:0]        sig_data;
  logic [4:0]           sig_space;
  chain_t               chain [N_PE+1];

  nn_sequencer #(.N_PE(N_PE)) u_seq (
    .clk, .rst_n, .start, .busy, .done,
    .uc_we      (cfg_we && cfg_sel == CFG_UCODE),
    .uc_addr    (cfg_addr[UCODE_AW-1:0]),
    .uc_data    (cfg_data[$bits(ucode_t)-1:0]),
    .sram_re, .sram_raddr, .x_latch,
    .head_issue, .head_from_acc, .off_raddr, .head_waddr,
    .final_pass, .tap_sel, .to_out,
    .tail_valid (chain[N_PE].valid),
    .sig_valid, .sram_waddr, .sig_space,
    .stall_cycles, .passes_done
  );

  // ---------------- activation SRAM ----------------
  logic signed [DW-1:0] sram [1 << SRAM_AW];
  logic signed [DW-1:0] d_in;

  always_ff @(posedge clk) begin
    if (cfg_we && cfg_sel == CFG_SRAM) sram[cfg_addr[SRAM_AW-1:0]] <= cfg_data[DW-1:0];
    else if (sig_valid)                sram[sram_waddr]             <= sig_data;
    if (sram_re) d_in <= sram[sram_raddr];
  end

  // ---------------- offset memory and chain head ----------------
  logic signed [DW-1:0] offmem [1 << OFF_AW];
  logic signed [DW-1:0] off_q;
  logic                 head_v, head_acc;
  logic [WMEM_AW-1:0]   head_wa;
  logic                 acc_out_valid, acc_in_ready;
  logic [AW-1:0]        acc_out_data;
  logic [$clog2(FIFO_DEPTH+1)-1:0] acc_count;
  logic signed [AW-1:0] acc_q;

  always_ff @(posedge clk) begin
    if (cfg_we && cfg_sel == CFG_OFFSET) offmem[cfg_addr[OFF_AW-1:0]] <= cfg_data[DW-1:0];
    off_q <= offmem[off_raddr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head_v   <= 1'b0;
      head_acc <= 1'b0;
      head_wa  <= '0;
      acc_q    <= '0;
    end else begin
      head_v   <= head_issue;
      head_acc <= head_from_acc;
      head_wa  <= head_waddr;
      acc_q    <= acc_out_data;
    end
  end

  always_comb begin
    chain[0].valid = head_v;
    chain[0].waddr = head_wa;
    // offset: 8-bit bias widened to the 16-bit product scale (bias * 1.0)
    chain[0].psum  = head_acc ? acc_q : (AW'(off_q) <<< XFRAC);
  end

  // ---------------- PE chain ----------------
  chain_t taps [N_PE];
  for (genvar i = 0; i < N_PE; i++) begin : g_pe
    nn_pe u_pe (
      .clk, .rst_n,
      .x_bus    (d_in),
      .x_latch  (x_latch[i]),
      .wr_en    (cfg_we && cfg_sel == CFG_WEIGHT && cfg_pe == PEW'(i)),
      .wr_addr  (cfg_addr[WMEM_AW-1:0]),
      .wr_data  (cfg_data[DW-1:0]),
      .chain_in (chain[i]),
      .chain_out(chain[i+1])
    );
    assign taps[i] = chain[i+1];
  end

  // ---------------- accumulator FIFO ----------------
  sync_fifo #(.WIDTH(AW), .DEPTH(FIFO_DEPTH)) u_acc_fifo (
    .clk, .rst_n,
    .in_valid (chain[N_PE].valid && !final_pass),
    .in_ready (acc_in_ready),
    .in_data  (chain[N_PE].psum),
    .out_valid(acc_out_valid),
    .out_ready(head_issue && head_from_acc),
    .out_data (acc_out_data),
    .count    (acc_count)
  );

  // ---------------- sigmoid unit and FIFO ----------------
  logic                  sfifo_ready;
  logic [$clog2(FIFO_DEPTH+1)-1:0] sfifo_count;

  nn_sigmoid #(.N_PE(N_PE)) u_sig (
    .clk, .rst_n,
    .taps, .tap_sel,
    .sig_en   (final_pass),
    .lut_we   (cfg_we && cfg_sel == CFG_SIGLUT),
    .lut_addr (cfg_addr[7:0]),
    .lut_data (cfg_data[DW-1:0]),
    .out_valid(sig_valid),
    .out_data (sig_data)
  );

  sync_fifo #(.WIDTH(DW), .DEPTH(FIFO_DEPTH)) u_sig_fifo (
    .clk, .rst_n,
    .in_valid (sig_valid && to_out),
    .in_ready (sfifo_ready),
    .in_data  (sig_data),
    .out_valid(d_out_valid),
    .out_ready(d_out_ready),
    .out_data (d_out),
    .count    (sfifo_count)
  );

  assign sig_space = 5'(FIFO_DEPTH - sfifo_count);

  a_acc_avail: assert property (@(posedge clk) disable iff (!rst_n)
    (head_issue && head_from_acc) |-> acc_out_valid)
    else $error("nn_pu: accumulator FIFO empty at pass head");

endmodule
