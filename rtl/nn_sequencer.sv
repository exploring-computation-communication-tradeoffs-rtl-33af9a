// nn_sequencer: vertically micro-coded controller of the NN processing unit.
//
// The microcode memory holds one word per fully connected layer (see
// nn_pkg::ucode_t) and ends with UOP_END. For a layer of n_in inputs and
// n_out neurons on N_PE PEs the sequencer runs ceil(n_in/N_PE) passes:
//   LOAD   read the pass's inputs from SRAM onto the d_in bus, one per cycle,
//          and latch input j of the pass into PE j;
//   SPACE  (last pass of an output layer only) stall until the sigmoid FIFO
//          has room for n_out activations;
//   STREAM issue n_out chain tokens, one per cycle: on the first pass the head
//          sum is the neuron's offset, on later passes it is popped from the
//          accumulator FIFO; the weight address runs on by one per token;
//   DRAIN  wait until all n_out sums have come out, either into the
//          accumulator FIFO (not last pass) or through the sigmoid unit into
//          SRAM at dst.. (last pass; the tap is the PE that held the last input),
//          and until every token has also left the end of the chain, so a
//          short last pass leaves nothing behind for the next layer.
// The source design gives the sequencer's role (commands to the PEs as inputs
// arrive and outputs are produced) and that it is vertically micro-coded; the
// word format, the pass structure and the drain between passes are this
// implementation's choices.
//
// Timing: x_latch is one cycle after sram_re (synchronous SRAM). head_issue
// requests a token that the PU forms on the next cycle.
module nn_sequencer
  import nn_pkg::*;
#(
  parameter int unsigned N_PE = 8
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  output logic                       busy,
  output logic                       done,
  // microcode load
  input  logic                       uc_we,
  input  logic [UCODE_AW-1:0]        uc_addr,
  input  ucode_t                     uc_data,
  // input loading
  output logic                       sram_re,
  output logic [SRAM_AW-1:0]         sram_raddr,
  output logic [N_PE-1:0]            x_latch,
  // chain head
  output logic                       head_issue,
  output logic                       head_from_acc,
  output logic [OFF_AW-1:0]          off_raddr,
  output logic [WMEM_AW-1:0]         head_waddr,
  // pass state
  output logic                       final_pass,
  output logic [$clog2(N_PE)-1:0]    tap_sel,
  output logic                       to_out,
  input  logic                       tail_valid,
  input  logic                       sig_valid,
  output logic [SRAM_AW-1:0]         sram_waddr,
  input  logic [4:0]                 sig_space,
  output logic [31:0]                stall_cycles,
  output logic [31:0]                passes_done
);

  typedef enum logic [2:0] {S_IDLE, S_FETCH, S_LOAD, S_LWAIT, S_SPACE, S_STREAM, S_DRAIN} state_e;
  localparam int unsigned PEW = $clog2(N_PE);

  state_e               state;
  ucode_t               ucode [1 << UCODE_AW];
  ucode_t               cur;
  logic [UCODE_AW-1:0]  pc;
  logic [9:0]           in_left;   // inputs not yet loaded in this layer
  logic [PEW:0]         cnt;       // inputs in the current pass
  logic [PEW:0]         ld_j;
  logic [SRAM_AW-1:0]   in_ptr;
  logic [4:0]           n_cnt;     // tokens issued in this pass
  logic [4:0]           out_cnt;   // results seen in this pass
  logic [4:0]           tail_cnt;  // tokens that left the end of the chain
  logic                 first_pass;
  logic [SRAM_AW-1:0]   wr_ptr;
  logic [N_PE-1:0]      latch_d;

  always_ff @(posedge clk) begin
    if (uc_we) ucode[uc_addr] <= uc_data;
  end

  assign busy       = (state != S_IDLE);
  assign sram_raddr = in_ptr;
  assign sram_re    = (state == S_LOAD);
  assign head_issue = (state == S_STREAM);
  assign head_from_acc = !first_pass;
  assign off_raddr  = cur.obase + OFF_AW'(n_cnt);
  assign to_out     = cur.to_out;
  assign sram_waddr = wr_ptr;

  always_comb begin
    latch_d = '0;
    if (state == S_LOAD) latch_d[ld_j[PEW-1:0]] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      cur          <= '0;
      pc           <= '0;
      in_left      <= '0;
      cnt          <= '0;
      ld_j         <= '0;
      in_ptr       <= '0;
      n_cnt        <= '0;
      out_cnt      <= '0;
      tail_cnt     <= '0;
      first_pass   <= 1'b1;
      final_pass   <= 1'b0;
      tap_sel      <= '0;
      head_waddr   <= '0;
      wr_ptr       <= '0;
      x_latch      <= '0;
      done         <= 1'b0;
      stall_cycles <= '0;
      passes_done  <= '0;
    end else begin
      done    <= 1'b0;
      x_latch <= latch_d;
      case (state)
        S_IDLE: if (start) begin
          pc    <= '0;
          state <= S_FETCH;
        end
        S_FETCH: begin
          cur <= ucode[pc];
          if (ucode[pc].op != UOP_LAYER) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            in_left    <= ucode[pc].n_in;
            in_ptr     <= ucode[pc].src;
            head_waddr <= ucode[pc].wbase;
            wr_ptr     <= ucode[pc].dst;
            first_pass <= 1'b1;
            ld_j       <= '0;
            if (ucode[pc].n_in <= 10'(N_PE)) begin
              cnt        <= (PEW+1)'(ucode[pc].n_in);
              final_pass <= 1'b1;
            end else begin
              cnt        <= (PEW+1)'(N_PE);
              final_pass <= 1'b0;
            end
            state <= S_LOAD;
          end
        end
        S_LOAD: begin
          in_ptr <= in_ptr + 1'b1;
          ld_j   <= ld_j + 1'b1;
          if (ld_j == cnt - 1'b1) begin
            tap_sel <= PEW'(cnt - 1'b1);
            in_left <= in_left - 10'(cnt);
            state   <= S_LWAIT;
          end
        end
        S_LWAIT: begin
          n_cnt    <= '0;
          out_cnt  <= '0;
          tail_cnt <= '0;
          state   <= (final_pass && cur.to_out) ? S_SPACE : S_STREAM;
        end
        S_SPACE: begin
          if (sig_space >= cur.n_out) state <= S_STREAM;
          else stall_cycles <= stall_cycles + 1'b1;
        end
        S_STREAM: begin
          n_cnt      <= n_cnt + 1'b1;
          head_waddr <= head_waddr + 1'b1;
          if (n_cnt == cur.n_out - 1'b1) state <= S_DRAIN;
        end
        S_DRAIN: begin
          if (out_cnt == cur.n_out && tail_cnt == cur.n_out) begin
            passes_done <= passes_done + 1'b1;
            if (final_pass) begin
              pc    <= pc + 1'b1;
              state <= S_FETCH;
            end else begin
              first_pass <= 1'b0;
              ld_j       <= '0;
              if (in_left <= 10'(N_PE)) begin
                cnt        <= (PEW+1)'(in_left);
                final_pass <= 1'b1;
              end else begin
                cnt        <= (PEW+1)'(N_PE);
              end
              state <= S_LOAD;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
      // results of the pass in flight
      if (state == S_STREAM || state == S_DRAIN) begin
        if (final_pass ? sig_valid : tail_valid) out_cnt <= out_cnt + 1'b1;
        if (tail_valid) tail_cnt <= tail_cnt + 1'b1;
      end
      if (final_pass && sig_valid) wr_ptr <= wr_ptr + 1'b1;
    end
  end

endmodule
