// tb_nn_pu: self-checking test of the NN processing unit.
//
// Loads random weights, offsets and inputs plus a sampled sigmoid table,
// runs three networks back to back and compares every activation on d_out
// with an integer reference model of the same fixed-point arithmetic:
//   a(n) = LUT[ sat8( ((off(n) << 7) + sum_k x(k) * w(n,k)) >>> 8 ) + 128 ]
// Net 1 is the 400-8-1 face authentication topology (50 passes per hidden
// neuron through the accumulator FIFO). Net 2 (20-8-1) has a short last
// pass, so the sigmoid tap is not the last PE and the tokens still in the
// chain must not leak into the next layer. Net 3 (20-10-12) needs two passes
// in its second layer and holds d_out_ready low so the sequencer must stall
// for sigmoid-FIFO space.
module tb_nn_pu;
  import nn_pkg::*;

  localparam int N_PE = 8;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic            cfg_we = 0;
  cfg_sel_e        cfg_sel = CFG_WEIGHT;
  logic [2:0]      cfg_pe = 0;
  logic [9:0]      cfg_addr = 0;
  logic [63:0]     cfg_data = 0;
  logic            start = 0, busy, done;
  logic            d_out_valid, d_out_ready = 1;
  logic [7:0]      d_out;
  logic [31:0]     stall_cycles, passes_done;

  nn_pu #(.N_PE(N_PE)) dut (.*);

  int checks = 0, failures = 0;
  byte signed w1 [16][400], w2 [16][16], o1 [16], o2 [16];
  byte signed x [400];
  byte unsigned lut [256];
  byte unsigned hid [16], outv [16];

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cfg(cfg_sel_e s, int pe, int addr, longint data);
    @(negedge clk);
    cfg_we = 1; cfg_sel = s; cfg_pe = 3'(pe); cfg_addr = 10'(addr); cfg_data = 64'(data);
    @(negedge clk);
    cfg_we = 0;
  endtask

  function automatic byte unsigned act(int sum);
    int s = sum >>> 8;
    if (s > 127) s = 127;
    if (s < -128) s = -128;
    return lut[s + 128];
  endfunction

  task automatic run_net(int nin, int nh, int no, int hold);
    ucode_t u;
    int passes1, cyc, got;
    passes1 = (nin + N_PE - 1) / N_PE;
    for (int n = 0; n < nh; n++) begin
      o1[n] = byte'($urandom_range(0, 40)) - 8'sd20;
      for (int k = 0; k < nin; k++) w1[n][k] = byte'($urandom_range(0, 16)) - 8'sd8;
    end
    for (int n = 0; n < no; n++) begin
      o2[n] = byte'($urandom_range(0, 40)) - 8'sd20;
      for (int k = 0; k < nh; k++) w2[n][k] = byte'($urandom_range(0, 60)) - 8'sd30;
    end
    for (int k = 0; k < nin; k++) x[k] = byte'($urandom_range(0, 127));
    // memories
    for (int k = 0; k < nin; k++) cfg(CFG_SRAM, 0, k, x[k]);
    for (int p = 0; p < passes1; p++)
      for (int n = 0; n < nh; n++)
        for (int j = 0; j < N_PE; j++)
          cfg(CFG_WEIGHT, j, p * nh + n, (p * N_PE + j < nin) ? w1[n][p * N_PE + j] : 0);
    for (int p = 0; p < (nh + N_PE - 1) / N_PE; p++)
      for (int n = 0; n < no; n++)
        for (int j = 0; j < N_PE; j++)
          cfg(CFG_WEIGHT, j, passes1 * nh + p * no + n, (p * N_PE + j < nh) ? w2[n][p * N_PE + j] : 0);
    for (int n = 0; n < nh; n++) cfg(CFG_OFFSET, 0, n, o1[n]);
    for (int n = 0; n < no; n++) cfg(CFG_OFFSET, 0, nh + n, o2[n]);
    u = '0; u.op = UOP_LAYER; u.to_out = 1; u.n_in = 10'(nin); u.n_out = 5'(nh);
    u.src = 0; u.dst = 9'd400; u.wbase = 0; u.obase = 0;
    cfg(CFG_UCODE, 0, 0, longint'(u));
    u.n_in = 10'(nh); u.n_out = 5'(no); u.src = 9'd400; u.dst = 9'd420;
    u.wbase = 9'(passes1 * nh); u.obase = 5'(nh);
    cfg(CFG_UCODE, 0, 1, longint'(u));
    u = '0; u.op = UOP_END;
    cfg(CFG_UCODE, 0, 2, longint'(u));
    // reference
    for (int n = 0; n < nh; n++) begin
      int s = int'(o1[n]) <<< 7;
      for (int k = 0; k < nin; k++) s += int'(x[k]) * int'(w1[n][k]);
      hid[n] = act(s);
    end
    for (int n = 0; n < no; n++) begin
      int s = int'(o2[n]) <<< 7;
      for (int k = 0; k < nh; k++) s += int'(byte'(hid[k])) * int'(w2[n][k]);
      outv[n] = act(s);
    end
    // run
    d_out_ready = (hold == 0);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 0; got = 0;
    while (got < nh + no) begin
      @(posedge clk);
      cyc++;
      if (hold != 0 && cyc == hold) d_out_ready <= 1;
      if (d_out_valid && d_out_ready) begin
        byte unsigned exp_v = (got < nh) ? hid[got] : outv[got - nh];
        checks++;
        if (d_out !== exp_v) begin
          failures++;
          $display("net %0d-%0d-%0d: activation %0d got %0d expected %0d", nin, nh, no, got, d_out, exp_v);
        end
        got++;
      end
    end
    while (busy) @(posedge clk);
    $display("net %0d-%0d-%0d done in %0d cycles, passes=%0d stall=%0d", nin, nh, no, cyc, passes_done, stall_cycles);
  endtask

  initial begin
    for (int i = 0; i < 256; i++) begin
      real xv;
      int  v;
      xv = (i - 128) / 16.0;
      v  = int'(128.0 / (1.0 + $exp(-xv)));
      lut[i] = (v > 127) ? 8'd127 : 8'(v);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 256; i++) cfg(CFG_SIGLUT, 0, i, lut[i]);
    run_net(400, 8, 1, 0);
    checks++;
    if (passes_done != 51) begin failures++; $display("passes %0d expected 51", passes_done); end
    run_net(20, 8, 1, 0);
    run_net(20, 10, 12, 200);
    checks++;
    if (stall_cycles == 0) begin failures++; $display("no sigmoid-FIFO stall seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
