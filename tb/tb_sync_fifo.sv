// tb_sync_fifo: self-checking test of the FIFO used for the accumulator and
// sigmoid queues. Random pushes and pops (never pushing when full) are checked
// against a queue model for order, data, count, full and empty, including
// simultaneous push and pop and wrap-around of the pointers.
module tb_sync_fifo;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic        in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [25:0] in_data = 0, out_data;
  logic [4:0]  count;

  sync_fifo #(.WIDTH(26), .DEPTH(16)) dut (.*);

  int checks = 0, failures = 0;
  logic [25:0] model [$];

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      checks++;
      if (count != 5'(model.size()) || in_ready != (model.size() < 16) || out_valid != (model.size() > 0) ||
          (model.size() > 0 && out_data !== model[0])) begin
        failures++;
        if (failures < 10) $display("step %0d: count %0d model %0d", i, count, model.size());
      end
      in_valid  = in_ready && ($urandom_range(0, 99) < ((i / 500) % 2 ? 70 : 35));
      out_ready = ($urandom_range(0, 99) < 50);
      in_data   = 26'($urandom);
      @(posedge clk);
      if (out_valid && out_ready) void'(model.pop_front());
      if (in_valid && in_ready) model.push_back(in_data);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
