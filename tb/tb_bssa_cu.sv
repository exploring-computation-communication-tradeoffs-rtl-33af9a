// tb_bssa_cu: self-checking test of one BSSA compute unit.
//
// Streams random vertices through the unit with a randomly stalling
// out_ready and compares each result bit for bit with a reference built from
// correctly rounded single-precision steps:
//   y = (((n0+n1)+(n2+n3))+(n4+n5)) * a * 8 + b, then * w * w.
// Also checks the 7-cycle latency and one-result-per-cycle throughput, and a
// few exact cases (cancellation to zero, ties in rounding).
module tb_bssa_cu;
  import bssa_pkg::*;
  import fp_ref_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic           in_valid = 0, in_ready, out_valid, out_ready = 1;
  vertex_t        in_vtx = '0;
  logic [1:0]     in_tag = 0, out_tag;
  logic [31:0]    out_data;

  bssa_cu #(.TAG_W(2)) dut (.*);

  int checks = 0, failures = 0;
  logic [31:0] expq [$];
  int N = 400;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] model(vertex_t v);
    logic [31:0] s;
    s = fadd(fadd(fadd(v.nbr[0], v.nbr[1]), fadd(v.nbr[2], v.nbr[3])), fadd(v.nbr[4], v.nbr[5]));
    s = fmul(s, v.a);
    s = fmul(s, 32'h4100_0000);   // 8.0
    s = fadd(s, v.b);
    s = fmul(s, v.w);
    return fmul(s, v.w);
  endfunction

  // output checker
  initial begin
    int got = 0;
    @(posedge rst_n);
    forever begin
      @(posedge clk);
      if (out_valid && out_ready) begin
        logic [31:0] e;
        e = expq.pop_front();
        checks++;
        if (out_data !== e) begin
          failures++;
          if (failures < 10) $display("result %0d: got %h expected %h", got, out_data, e);
        end
        got++;
      end
    end
  end

  initial begin
    int t0, lat;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // latency: one vertex into an empty pipe
    @(negedge clk);
    for (int j = 0; j < 6; j++) in_vtx.nbr[j] = frand();
    in_vtx.a = frand(); in_vtx.b = frand(); in_vtx.w = frand();
    expq.push_back(model(in_vtx));
    in_valid = 1; @(negedge clk); in_valid = 0;
    lat = 1;
    while (!out_valid) begin @(negedge clk); lat++; end
    checks++;
    if (lat != CU_LATENCY) begin failures++; $display("latency %0d expected %0d", lat, CU_LATENCY); end
    @(negedge clk);
    // directed: n0 = -n1 etc. gives exact zero
    in_vtx.nbr[0] = 32'h3fc0_0000; in_vtx.nbr[1] = 32'hbfc0_0000;
    in_vtx.nbr[2] = 32'h4000_0000; in_vtx.nbr[3] = 32'hc000_0000;
    in_vtx.nbr[4] = 32'h0;         in_vtx.nbr[5] = 32'h0;
    in_vtx.a = 32'h3f80_0000; in_vtx.b = 32'h3f80_0001; in_vtx.w = 32'h3f80_0001;
    expq.push_back(model(in_vtx));
    in_valid = 1; @(negedge clk); in_valid = 0;
    // throughput with out_ready high: N vertices in N cycles
    t0 = 0;
    for (int i = 0; i < N; i++) begin
      for (int j = 0; j < 6; j++) in_vtx.nbr[j] = frand();
      in_vtx.a = frand(); in_vtx.b = frand(); in_vtx.w = frand();
      expq.push_back(model(in_vtx));
      in_valid = 1;
      @(posedge clk);
      if (!in_ready) t0++;
      @(negedge clk);
    end
    in_valid = 0;
    checks++; if (t0 != 0) begin failures++; $display("input stalled %0d times with out_ready high", t0); end
    // random back-pressure
    for (int i = 0; i < N; i++) begin
      for (int j = 0; j < 6; j++) in_vtx.nbr[j] = frand();
      in_vtx.a = frand(); in_vtx.b = frand(); in_vtx.w = frand();
      in_valid = 1;
      out_ready = ($urandom_range(0, 2) != 0);
      @(posedge clk);
      while (!in_ready) begin @(negedge clk); out_ready = ($urandom_range(0, 2) != 0); @(posedge clk); end
      expq.push_back(model(in_vtx));
      @(negedge clk);
    end
    in_valid = 0; out_ready = 1;
    repeat (20) @(negedge clk);
    checks++; if (expq.size() != 0) begin failures++; $display("%0d results missing", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
