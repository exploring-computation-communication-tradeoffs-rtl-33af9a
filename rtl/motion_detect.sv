// motion_detect: frame-level motion detector in front of the face detector.
//
// Pixels arrive in raster order, one per pix_valid. The frame is cut into
// TILE x TILE tiles; the detector sums each tile's pixels while they stream
// past (one accumulator per tile column, reused for every tile row) and, as
// the last pixel of a tile arrives, compares the sum with the same tile's sum
// from the previous frame. A tile whose sum changed by more than thr counts as
// changed. After the last pixel of the frame, frame_done pulses with motion
// high when at least min_tiles tiles changed, or when this is the first frame
// since reset (there is no previous frame to compare with; changed_tiles is
// then 0).
//
// The source design only names this block: an optional stage that lets frames
// without motion skip the more expensive stages. The tile-sum differencing,
// the tile size and the thresholds are this implementation's choices.
//
// Timing: frame_done/motion/changed_tiles are registered and valid on the
// cycle after the frame's last pixel. Storage: one sum per tile.
module motion_detect #(
  parameter int unsigned IMG_W = 160,
  parameter int unsigned IMG_H = 120,
  parameter int unsigned TILE  = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        pix_valid,
  input  logic [7:0]  pix,
  input  logic [15:0] thr,
  input  logic [15:0] min_tiles,
  output logic        frame_done,
  output logic        motion,
  output logic [15:0] changed_tiles
);

  localparam int unsigned TX   = IMG_W / TILE;
  localparam int unsigned TY   = IMG_H / TILE;
  localparam int unsigned SUMW = $clog2(TILE * TILE * 255 + 1);
  localparam int unsigned XW   = $clog2(IMG_W);
  localparam int unsigned YW   = $clog2(IMG_H);
  localparam int unsigned TW   = $clog2(TILE);
  localparam int unsigned TXW  = (TX > 1) ? $clog2(TX) : 1;
  localparam int unsigned TAW  = $clog2(TX * TY);

  logic [SUMW-1:0] acc  [TX];
  logic [SUMW-1:0] prev [TX * TY];
  logic [XW-1:0]   x;
  logic [YW-1:0]   y;
  logic            first_frame;
  logic [15:0]     changed;

  logic [TXW-1:0]  tx;
  logic [TAW-1:0]  taddr;
  logic            tile_first, tile_last, frame_last;
  logic [SUMW-1:0] sum_now, old_sum, diff;

  assign tx         = TXW'(x >> TW);
  assign taddr      = TAW'((y >> TW) * TX + (x >> TW));
  assign tile_first = (x[TW-1:0] == '0) && (y[TW-1:0] == '0);
  assign tile_last  = (x[TW-1:0] == '1) && (y[TW-1:0] == '1);
  assign frame_last = (x == XW'(IMG_W - 1)) && (y == YW'(IMG_H - 1));
  assign sum_now    = (tile_first ? '0 : acc[tx]) + SUMW'(pix);
  assign old_sum    = prev[taddr];
  assign diff       = (sum_now > old_sum) ? sum_now - old_sum : old_sum - sum_now;

  always_ff @(posedge clk) begin
    if (pix_valid) begin
      acc[tx] <= sum_now;
      if (tile_last) prev[taddr] <= sum_now;
    end
  end

  // changed-tile count including the current pixel's tile; tiles of the
  // first frame are not compared because the previous-frame memory is empty
  logic [15:0] ch;
  assign ch = changed + ((tile_last && !first_frame && diff > SUMW'(thr)) ? 16'd1 : 16'd0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x             <= '0;
      y             <= '0;
      first_frame   <= 1'b1;
      changed       <= '0;
      frame_done    <= 1'b0;
      motion        <= 1'b0;
      changed_tiles <= '0;
    end else begin
      frame_done <= 1'b0;
      if (pix_valid) begin
        if (x == XW'(IMG_W - 1)) begin
          x <= '0;
          y <= (y == YW'(IMG_H - 1)) ? '0 : y + 1'b1;
        end else begin
          x <= x + 1'b1;
        end
        if (frame_last) begin
          frame_done    <= 1'b1;
          motion        <= first_frame || (ch >= min_tiles);
          changed_tiles <= ch;
          first_frame   <= 1'b0;
          changed       <= '0;
        end else begin
          changed <= ch;
        end
      end
    end
  end

endmodule
