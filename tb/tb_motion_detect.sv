// tb_motion_detect: self-checking test of the tile-sum motion detector.
// Streams five 32x24 frames: the first (always motion), an identical copy
// (no motion), a copy with one tile brightened (one changed tile), a copy
// with small noise under the threshold (no motion) and one with three
// changed tiles tested against min_tiles = 2. Changed-tile counts come from a
// tile-sum model in the testbench.
module tb_motion_detect;
  localparam int W = 32, H = 24, T = 8;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic        pix_valid = 0;
  logic [7:0]  pix = 0;
  logic [15:0] thr = 16'd200, min_tiles = 16'd1;
  logic        frame_done, motion;
  logic [15:0] changed_tiles;

  motion_detect #(.IMG_W(W), .IMG_H(H), .TILE(T)) dut (.*);

  int checks = 0, failures = 0;
  byte unsigned img [H][W], prev [H][W];
  bit first = 1;
  int seen = 0;
  logic got_motion;
  logic [15:0] got_changed;

  always @(posedge clk) if (frame_done) begin
    seen++; got_motion = motion; got_changed = changed_tiles;
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int model_changed();
    int n = 0;
    for (int ty = 0; ty < H / T; ty++)
      for (int tx = 0; tx < W / T; tx++) begin
        int a = 0, b = 0, d;
        for (int y = 0; y < T; y++)
          for (int x = 0; x < T; x++) begin
            a += img[ty*T+y][tx*T+x];
            b += first ? 0 : prev[ty*T+y][tx*T+x];
          end
        d = (a > b) ? a - b : b - a;
        if (!first && d > thr) n++;
      end
    return n;
  endfunction

  task automatic send(int exp_motion);
    int n, seen0;
    n = model_changed();
    seen0 = seen;
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        @(negedge clk); pix_valid = 1; pix = img[y][x];
        if ($urandom_range(0, 3) == 0) begin @(negedge clk); pix_valid = 0; end
      end
    @(negedge clk); pix_valid = 0;
    repeat (2) @(negedge clk);
    checks++;
    if (seen != seen0 + 1 || got_motion != exp_motion[0] || got_changed != 16'(n)) begin
      failures++;
      $display("frame: done=%0d motion=%b (exp %0d) changed=%0d (exp %0d)", seen - seen0, got_motion, exp_motion, got_changed, n);
    end
    prev = img; first = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) img[y][x] = 8'($urandom_range(20, 200));
    send(1);
    send(0);
    for (int y = 8; y < 16; y++) for (int x = 16; x < 24; x++) img[y][x] = img[y][x] + 8'd10;
    send(1);
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) if ((x + y) % 7 == 0) img[y][x] = img[y][x] + 8'd1;
    send(0);
    min_tiles = 16'd2;
    for (int y = 0; y < 8; y++) for (int x = 0; x < 24; x++) img[y][x] = img[y][x] - 8'd15;
    send(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
