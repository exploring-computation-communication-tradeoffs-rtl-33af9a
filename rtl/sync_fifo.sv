// sync_fifo: single-clock first-in first-out buffer.
//
// Used as the accumulator FIFO (partial sums that leave the end of the PE
// chain and re-enter at its head on the next pass) and as the sigmoid FIFO
// (activations waiting for the output port) of the NN processing unit. The
// source design names both FIFOs and their data widths (26 and 8 bits); the
// depth and the valid/ready style are this implementation's choices.
//
// Interface: push when in_valid && in_ready, pop when out_valid && out_ready.
// out_data shows the oldest entry whenever out_valid is high (first-word
// fall-through). in_ready is low when full; a push to a full FIFO is a
// protocol error caught by an assertion.
module sync_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int unsigned PTRW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PTRW-1:0]  wr_ptr, rd_ptr;
  logic             do_push, do_pop;

  assign in_ready  = (count < DEPTH[$clog2(DEPTH+1)-1:0]);
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];
  assign do_push   = in_valid && in_ready;
  assign do_pop    = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= (wr_ptr == PTRW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (do_pop)  rd_ptr <= (rd_ptr == PTRW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      count <= count + ($clog2(DEPTH+1))'(do_push) - ($clog2(DEPTH+1))'(do_pop);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid |-> in_ready)
    else $error("sync_fifo: push while full");

endmodule
