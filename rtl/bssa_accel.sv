// bssa_accel: bilateral-grid filter accelerator (compute units + controller).
//
// The host prepares the bilateral grid and streams its vertices in over an
// AXI-Stream slave port; the accelerator filters them and streams the results
// back over an AXI-Stream master port. N_CU compute units (12, the number
// that fits the DSP budget of the evaluation board in the source design) run
// side by side: each stream beat carries N_CU vertex slots, slot i goes to
// compute unit i, and tkeep marks which slots hold a vertex. The controller
// keeps the units in lockstep: every unit receives a token on every accepted
// beat (an empty slot travels as a bubble tagged not-kept), so all pipelines
// advance together under the one downstream tready, and result beats come
// out in input order with the input beat's tkeep and tlast.
//
// From the source design: AXI-Stream in and out, a controller, 12 parallel
// streaming FP32 compute units, 125 MHz clock. The wide N_CU-slot beat and the
// lockstep control are this implementation's choices (the source does not
// give the stream width or the controller's insides).
//
// Timing: results of a beat appear CU_LATENCY (7) cycles after it is
// accepted; with m_axis_tready high one beat, N_CU vertices, per cycle.
module bssa_accel
  import bssa_pkg::*;
#(
  parameter int unsigned N_CU = 12
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // AXI-Stream slave: grid vertices from DMA
  input  logic                      s_axis_tvalid,
  output logic                      s_axis_tready,
  input  vertex_t [N_CU-1:0]        s_axis_tdata,
  input  logic [N_CU-1:0]           s_axis_tkeep,
  input  logic                      s_axis_tlast,
  // AXI-Stream master: filtered values to DMA
  output logic                      m_axis_tvalid,
  input  logic                      m_axis_tready,
  output logic [N_CU-1:0][FPW-1:0]  m_axis_tdata,
  output logic [N_CU-1:0]           m_axis_tkeep,
  output logic                      m_axis_tlast,
  // statistics
  output logic [31:0]               vertices_done,
  output logic [31:0]               frames_done
);

  logic [N_CU-1:0] cu_in_ready, cu_out_valid;
  logic [1:0]      cu_out_tag [N_CU];

  for (genvar i = 0; i < N_CU; i++) begin : g_cu
    bssa_cu #(.TAG_W(2)) u_cu (
      .clk, .rst_n,
      .in_valid  (s_axis_tvalid),
      .in_ready  (cu_in_ready[i]),
      .in_vtx    (s_axis_tdata[i]),
      .in_tag    ({s_axis_tlast, s_axis_tkeep[i]}),
      .out_valid (cu_out_valid[i]),
      .out_ready (m_axis_tready),
      .out_data  (m_axis_tdata[i]),
      .out_tag   (cu_out_tag[i])
    );
    assign m_axis_tkeep[i] = cu_out_tag[i][0];
  end

  assign s_axis_tready = cu_in_ready[0];
  assign m_axis_tvalid = cu_out_valid[0];
  assign m_axis_tlast  = cu_out_tag[0][1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vertices_done <= '0;
      frames_done   <= '0;
    end else if (m_axis_tvalid && m_axis_tready) begin
      vertices_done <= vertices_done + 32'($countones(m_axis_tkeep));
      if (m_axis_tlast) frames_done <= frames_done + 1'b1;
    end
  end

  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    (cu_out_valid == '0 || cu_out_valid == '1) && (cu_in_ready == '0 || cu_in_ready == '1))
    else $error("bssa_accel: compute units out of lockstep");

  a_axis_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (m_axis_tvalid && !m_axis_tready) |=> m_axis_tvalid && $stable(m_axis_tdata))
    else $error("bssa_accel: AXI-Stream output changed while stalled");

endmodule
