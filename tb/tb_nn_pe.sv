// tb_nn_pe: self-checking test of one NN processing element.
// Loads random weights, latches an input from the bus, sends a token per
// cycle with a random weight address and partial sum, and checks that each
// token leaves exactly two cycles later with psum + x*w (signed 8x8 product,
// 26-bit sum), then repeats with a new latched input.
module tb_nn_pe;
  import nn_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic signed [7:0] x_bus = 0, wr_data = 0;
  logic              x_latch = 0, wr_en = 0;
  logic [8:0]        wr_addr = 0;
  chain_t            chain_in = '0, chain_out;

  nn_pe dut (.*);

  int checks = 0, failures = 0;
  byte signed w [512];
  chain_t exp_q [$];

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int a = 0; a < 512; a++) begin
      w[a] = byte'($urandom);
      wr_en = 1; wr_addr = 9'(a); wr_data = w[a]; @(negedge clk);
    end
    wr_en = 0;
    for (int round = 0; round < 4; round++) begin
      byte signed xv;
      xv = byte'($urandom);
      x_bus = xv; x_latch = 1; @(negedge clk); x_latch = 0; x_bus = byte'($urandom);
      for (int i = 0; i < 100; i++) begin
        chain_t e;
        chain_in.valid = ($urandom_range(0, 3) != 0);
        chain_in.waddr = 9'($urandom);
        chain_in.psum  = 26'($urandom) >>> 1;
        e = chain_in;
        e.psum = chain_in.psum + 26'(int'(xv) * int'(w[chain_in.waddr]));
        exp_q.push_back(e);
        @(negedge clk);
        if (i >= 1) begin
          chain_t ex;
          ex = exp_q.pop_front();
          checks++;
          if (chain_out !== ex) begin
            failures++;
            if (failures < 10) $display("round %0d token %0d: got %p expected %p", round, i - 1, chain_out, ex);
          end
        end
      end
      chain_in = '0;
      repeat (2) @(negedge clk);
      exp_q.delete();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
