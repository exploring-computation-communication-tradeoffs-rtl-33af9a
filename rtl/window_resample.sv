// window_resample: crops a detected face window and resamples it to the
// network's 20x20 input.
//
// For output pixel (i, j) of the 20x20 grid it reads the frame buffer at
// (x + floor(i*scale/256), y + floor(j*scale/256)), i.e. nearest-neighbour
// sampling with the window's Q8.8 scale factor, and writes the pixel, halved
// to the Q1.7 activation format, into the network's input SRAM at j*20+i.
// The source design feeds detected faces to a 20x20-input network but does not
// say how the window is brought to that size; nearest-neighbour sampling is
// this implementation's choice.
//
// Timing: one frame-buffer read per cycle, write one cycle later (synchronous
// frame buffer); 401 cycles from start to done.
module window_resample #(
  parameter int unsigned IMG_W = 160,
  parameter int unsigned IMG_H = 120,
  parameter int unsigned NWIN  = 20
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              start,
  input  logic [7:0]                        win_x,
  input  logic [7:0]                        win_y,
  input  logic [15:0]                       scale,
  output logic                              busy,
  output logic                              done,
  // frame buffer read port
  output logic [$clog2(IMG_W*IMG_H)-1:0]    fb_raddr,
  input  logic [7:0]                        fb_rdata,
  // network SRAM write port
  output logic                              wr_en,
  output logic [8:0]                        wr_addr,
  output logic [7:0]                        wr_data
);

  localparam int unsigned FAW = $clog2(IMG_W * IMG_H);

  logic [4:0]  i, j;
  logic        run, rd_v;
  logic [8:0]  rd_idx, idx;
  logic [15:0] ox, oy;

  assign ox       = 16'((32'(i) * 32'(scale)) >> 8);
  assign oy       = 16'((32'(j) * 32'(scale)) >> 8);
  assign fb_raddr = FAW'((32'(win_y) + 32'(oy)) * IMG_W + 32'(win_x) + 32'(ox));
  assign busy     = run || rd_v;
  assign wr_en    = rd_v;
  assign wr_addr  = rd_idx;
  assign wr_data  = {1'b0, fb_rdata[7:1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      i <= '0; j <= '0; run <= 1'b0; rd_v <= 1'b0; rd_idx <= '0; idx <= '0; done <= 1'b0;
    end else begin
      done   <= 1'b0;
      rd_v   <= run;
      rd_idx <= idx;
      if (rd_v && !run) done <= 1'b1;
      if (start && !run) begin
        run <= 1'b1; i <= '0; j <= '0; idx <= '0;
      end else if (run) begin
        idx <= idx + 1'b1;
        if (i == 5'(NWIN - 1)) begin
          i <= '0;
          if (j == 5'(NWIN - 1)) run <= 1'b0;
          else j <= j + 1'b1;
        end else begin
          i <= i + 1'b1;
        end
      end
    end
  end

endmodule
