// tb_bssa_accel: self-checking test of the 12-unit BSSA accelerator.
// Streams beats of 12 random vertices with random tkeep and a tlast every
// fifth beat, first with m_axis_tready always high (checks one beat per cycle
// and the 7-cycle latency: B beats take B + 7 cycles), then with random
// back-pressure. Every kept result is compared bit for bit with the
// single-precision reference, and tkeep, tlast and the vertex/frame counters
// are checked.
module tb_bssa_accel;
  import bssa_pkg::*;
  import fp_ref_pkg::*;
  localparam int NCU = 12;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #4 clk = ~clk;   // 125 MHz

  logic                     s_axis_tvalid = 0, s_axis_tready, s_axis_tlast = 0;
  vertex_t [NCU-1:0]        s_axis_tdata = '0;
  logic [NCU-1:0]           s_axis_tkeep = '0;
  logic                     m_axis_tvalid, m_axis_tready = 1, m_axis_tlast;
  logic [NCU-1:0][31:0]     m_axis_tdata;
  logic [NCU-1:0]           m_axis_tkeep;
  logic [31:0]              vertices_done, frames_done;

  bssa_accel #(.N_CU(NCU)) dut (.*);

  int checks = 0, failures = 0, beats_out = 0, kept = 0, lasts = 0;
  logic [NCU-1:0][31:0] exp_d [$];
  logic [NCU-1:0]       exp_k [$];
  logic                 exp_l [$];

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] model(vertex_t v);
    logic [31:0] s;
    s = fadd(fadd(fadd(v.nbr[0], v.nbr[1]), fadd(v.nbr[2], v.nbr[3])), fadd(v.nbr[4], v.nbr[5]));
    s = fadd(fmul(fmul(s, v.a), 32'h4100_0000), v.b);
    return fmul(fmul(s, v.w), v.w);
  endfunction

  always @(posedge clk) if (rst_n && m_axis_tvalid && m_axis_tready) begin
    logic [NCU-1:0][31:0] d;
    logic [NCU-1:0] k;
    logic l;
    d = exp_d.pop_front(); k = exp_k.pop_front(); l = exp_l.pop_front();
    checks++;
    if (m_axis_tkeep !== k || m_axis_tlast !== l) begin failures++; $display("beat %0d: keep/last mismatch", beats_out); end
    for (int i = 0; i < NCU; i++) if (k[i]) begin
      checks++;
      if (m_axis_tdata[i] !== d[i]) begin
        failures++;
        if (failures < 10) $display("beat %0d slot %0d: got %h expected %h", beats_out, i, m_axis_tdata[i], d[i]);
      end
    end
    kept += $countones(k);
    if (l) lasts++;
    beats_out++;
  end

  task automatic make_beat(int n);
    logic [NCU-1:0][31:0] d;
    for (int i = 0; i < NCU; i++) begin
      for (int j = 0; j < 6; j++) s_axis_tdata[i].nbr[j] = frand();
      s_axis_tdata[i].a = frand(); s_axis_tdata[i].b = frand(); s_axis_tdata[i].w = frand();
      d[i] = model(s_axis_tdata[i]);
    end
    s_axis_tkeep = ($urandom_range(0, 3) == 0) ? NCU'($urandom) : '1;
    s_axis_tlast = (n % 5 == 4);
    exp_d.push_back(d); exp_k.push_back(s_axis_tkeep); exp_l.push_back(s_axis_tlast);
  endtask

  initial begin
    int B = 60, t0, t1, sent = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // full rate
    t0 = $time;
    for (int n = 0; n < B; n++) begin
      make_beat(n);
      s_axis_tvalid = 1;
      @(posedge clk);
      checks++; if (!s_axis_tready) begin failures++; $display("stalled at full rate"); end
      @(negedge clk);
    end
    s_axis_tvalid = 0;
    while (beats_out < B) @(negedge clk);
    t1 = $time;
    checks++;
    if ((t1 - t0) / 8 != B + CU_LATENCY) begin failures++; $display("%0d beats took %0d cycles, expected %0d", B, (t1 - t0) / 8, B + CU_LATENCY); end
    // back-pressure
    for (int n = B; n < 2 * B; n++) begin
      make_beat(n);
      s_axis_tvalid = 1;
      m_axis_tready = ($urandom_range(0, 1) != 0);
      @(posedge clk);
      while (!s_axis_tready) begin @(negedge clk); m_axis_tready = ($urandom_range(0, 1) != 0); @(posedge clk); end
      @(negedge clk);
    end
    s_axis_tvalid = 0; m_axis_tready = 1;
    repeat (20) @(negedge clk);
    checks++; if (beats_out != 2 * B) begin failures++; $display("beats out %0d", beats_out); end
    checks++; if (vertices_done != kept || frames_done != lasts || lasts != 2 * B / 5) begin failures++; $display("counters %0d/%0d", vertices_done, frames_done); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
