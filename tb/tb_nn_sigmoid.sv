// tb_nn_sigmoid: self-checking test of the sigmoid unit.
// Loads a sampled sigmoid table, drives random partial sums on all PE taps
// with a random tap selection and checks, two cycles later, the table entry
// at sat8(psum >>> 8) + 128 from the selected tap, including sums far
// outside the table range (saturation) and no output when sig_en is low.
module tb_nn_sigmoid;
  import nn_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  chain_t      taps [8];
  logic [2:0]  tap_sel = 0;
  logic        sig_en = 0, lut_we = 0;
  logic [7:0]  lut_addr = 0, lut_data = 0;
  logic        out_valid;
  logic [7:0]  out_data;

  nn_sigmoid #(.N_PE(8)) dut (.*);

  int checks = 0, failures = 0;
  byte unsigned lut [256];
  logic [8:0] exp_q [$];   // {valid, value}

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 8; i++) taps[i] = '0;
    for (int i = 0; i < 256; i++) begin
      real xv;
      int  v;
      xv = (i - 128) / 16.0;
      v  = int'(128.0 / (1.0 + $exp(-xv)));
      lut[i] = (v > 127) ? 8'd127 : 8'(v);
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < 256; i++) begin
      lut_we = 1; lut_addr = 8'(i); lut_data = lut[i]; @(negedge clk);
    end
    lut_we = 0;
    for (int i = 0; i < 600; i++) begin
      int s, idx;
      for (int t = 0; t < 8; t++) begin
        taps[t].valid = ($urandom_range(0, 4) != 0);
        taps[t].psum  = (i % 5 == 0) ? 26'($urandom) : 26'(int'($urandom_range(0, 80000)) - 40000);
      end
      tap_sel = 3'($urandom);
      sig_en  = ($urandom_range(0, 5) != 0);
      s = int'(taps[tap_sel].psum) >>> 8;
      idx = (s > 127) ? 255 : (s < -128) ? 0 : s + 128;
      exp_q.push_back({sig_en && taps[tap_sel].valid, lut[idx]});
      @(negedge clk);
      if (i >= 1) begin
        logic [8:0] e;
        e = exp_q.pop_front();
        checks++;
        if (out_valid !== e[8] || (e[8] && out_data !== e[7:0])) begin
          failures++;
          if (failures < 10) $display("sample %0d: got %b/%0d expected %b/%0d", i - 1, out_valid, out_data, e[8], e[7:0]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
