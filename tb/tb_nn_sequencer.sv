// tb_nn_sequencer: self-checking test of the micro-coded NN sequencer.
// Runs a two-layer program (20 inputs -> 3 neurons -> 2 neurons, 8 PEs) with a
// model of the PE chain that answers each chain token 10 cycles later, and
// checks the command stream: SRAM read addresses, the one-hot PE latch
// order, the number of tokens and their weight addresses, offset versus
// accumulator heads, the sigmoid tap of the partial last pass, SRAM write
// addresses of the activations, pass count and the done pulse.
module tb_nn_sequencer;
  import nn_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, busy, done, uc_we = 0;
  logic [2:0] uc_addr = 0;
  ucode_t uc_data = '0;
  logic sram_re, head_issue, head_from_acc, final_pass, to_out;
  logic [8:0] sram_raddr, sram_waddr, head_waddr;
  logic [7:0] x_latch;
  logic [3:0] off_raddr;
  logic [2:0] tap_sel;
  logic tail_valid, sig_valid;
  logic [4:0] sig_space = 5'd16;
  logic [31:0] stall_cycles, passes_done;

  nn_sequencer #(.N_PE(8)) dut (.*);

  int checks = 0, failures = 0;
  logic [15:0] resp;        // delay line of answered tokens
  logic [15:0] resp_final;
  int reads [$], latches [$], waddrs [$], accs [$], taps [$], writes [$];

  assign tail_valid = resp[9];
  assign sig_valid  = resp[9] && resp_final[9];

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always_ff @(posedge clk) begin
    resp       <= {resp[14:0], head_issue};
    resp_final <= {resp_final[14:0], final_pass};
    if (sram_re) reads.push_back(sram_raddr);
    if (x_latch != 0) latches.push_back($clog2(x_latch));
    if (head_issue) begin waddrs.push_back(head_waddr); accs.push_back(head_from_acc); end
    if (sig_valid) begin taps.push_back(tap_sel); writes.push_back(sram_waddr); end
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int cyc = 0;
    resp = 0; resp_final = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    uc_we = 1;
    uc_addr = 0; uc_data = '{op: UOP_LAYER, to_out: 0, n_in: 20, n_out: 3, src: 9'd100, dst: 9'd200, wbase: 9'd40, obase: 4'd2};
    @(negedge clk);
    uc_addr = 1; uc_data = '{op: UOP_LAYER, to_out: 1, n_in: 3, n_out: 2, src: 9'd200, dst: 9'd300, wbase: 9'd60, obase: 4'd5};
    @(negedge clk);
    uc_addr = 2; uc_data = '0;
    @(negedge clk);
    uc_we = 0;
    start = 1; @(negedge clk); start = 0;
    while (!done) begin @(negedge clk); cyc++; end
    $display("program done in %0d cycles", cyc);
    chk(reads.size() == 23, $sformatf("sram reads %0d expected 23", reads.size()));
    for (int k = 0; k < 20 && k < reads.size(); k++) chk(reads[k] == 100 + k, $sformatf("read %0d addr %0d", k, reads[k]));
    for (int k = 0; k < 3 && 20 + k < reads.size(); k++) chk(reads[20 + k] == 200 + k, $sformatf("layer-2 read %0d addr %0d", k, reads[20 + k]));
    chk(latches.size() == 23, "latch count");
    for (int k = 0; k < latches.size(); k++) chk(latches[k] == ((k < 20) ? k % 8 : k - 20), $sformatf("latch %0d to PE %0d", k, latches[k]));
    chk(waddrs.size() == 11, $sformatf("tokens %0d expected 11", waddrs.size()));
    for (int k = 0; k < 9 && k < waddrs.size(); k++) begin
      chk(waddrs[k] == 40 + k, $sformatf("token %0d waddr %0d", k, waddrs[k]));
      chk(accs[k] == (k >= 3), $sformatf("token %0d acc head %0d", k, accs[k]));
    end
    for (int k = 9; k < waddrs.size(); k++) chk(waddrs[k] == 60 + k - 9 && accs[k] == 0, "layer-2 token");
    chk(taps.size() == 5, "activation count");
    for (int k = 0; k < taps.size(); k++) begin
      chk(taps[k] == ((k < 3) ? 3 : 2), $sformatf("activation %0d tap %0d", k, taps[k]));
      chk(writes[k] == ((k < 3) ? 200 + k : 300 + k - 3), $sformatf("activation %0d written at %0d", k, writes[k]));
    end
    chk(passes_done == 4, $sformatf("passes %0d expected 4", passes_done));
    chk(!busy, "busy after done");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
