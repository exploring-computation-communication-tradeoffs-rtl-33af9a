// nn_pkg: types and constants shared by the neural-network processing unit
// (PE chain, sigmoid unit, sequencer, PU). The 8-bit data, 16-bit product and
// 26-bit accumulator widths are the widths printed on the PE datapath of the
// source design; the fixed-point formats (activations Q1.7, weights Q3.5) and
// the microcode encoding are this implementation's own choice.
package nn_pkg;

  localparam int unsigned DW  = 8;   // data and weight width
  localparam int unsigned PW  = 16;  // multiplier product width
  localparam int unsigned AW  = 26;  // accumulator / partial-sum width
  localparam int unsigned WFRAC = 5; // fraction bits of a weight (Q3.5)
  localparam int unsigned XFRAC = 7; // fraction bits of an activation (Q1.7)

  localparam int unsigned SRAM_AW  = 9;   // 512-byte activation SRAM
  localparam int unsigned WMEM_AW  = 9;   // 512 weights per PE
  localparam int unsigned OFF_AW   = 5;   // 32 neuron offsets (biases)
  localparam int unsigned UCODE_AW = 3;   // 8 microcode words

  // Vertical microcode: one word describes one fully connected layer; the
  // sequencer decodes it into input-load passes and neuron streams.
  typedef enum logic [1:0] {
    UOP_END   = 2'd0,   // stop, raise done
    UOP_LAYER = 2'd1    // evaluate one layer
  } uop_e;

  typedef struct packed {
    uop_e                op;
    logic                to_out;  // also push activations to the output FIFO
    logic [9:0]          n_in;    // inputs of the layer (1..1023)
    logic [4:0]          n_out;   // neurons of the layer (1..16)
    logic [SRAM_AW-1:0]  src;     // SRAM address of the first input
    logic [SRAM_AW-1:0]  dst;     // SRAM address of the first output
    logic [WMEM_AW-1:0]  wbase;   // weight-memory address of the layer
    logic [OFF_AW-1:0]   obase;   // offset-memory address of the layer
  } ucode_t;                      // 2+1+10+5+9+9+9+4 = 49 bits

  // Configuration targets of the PU load port.
  typedef enum logic [2:0] {
    CFG_WEIGHT = 3'd0,
    CFG_OFFSET = 3'd1,
    CFG_SIGLUT = 3'd2,
    CFG_UCODE  = 3'd3,
    CFG_SRAM   = 3'd4
  } cfg_sel_e;

  // Token that travels down the PE chain with each partial sum.
  typedef struct packed {
    logic                  valid;
    logic [WMEM_AW-1:0]    waddr;  // weight address of this neuron in this pass
    logic signed [AW-1:0]  psum;
  } chain_t;

endpackage
