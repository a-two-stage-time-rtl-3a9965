// tb_edge_detect: self-checking test of edge_detect.
//
// Drives pulses with random picosecond phase against a 100 MHz clock whose
// rising edges fall at 5 ns + k*10 ns, and measures the edge1/edge2 widths
// with simulation timestamps. The expected width is computed from the pulse
// edge times alone: from the pulse edge to the (EXT_CYCLES+1)-th rising clock
// edge after it. Two instances are checked, the default (one extra period)
// and EXT_CYCLES = 0 (residual to the very next clock edge).
module tb_edge_detect;
  timeunit 1ns;
  timeprecision 1ps;

  int checks = 0;
  int failures = 0;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic pulse = 1'b0;
  logic e1_a, e2_a, s_a, e1_b, e2_b, s_b;

  always #5 clk = ~clk;

  edge_detect dut_a (.clk, .rst_n, .pulse_i(pulse), .edge1_o(e1_a), .edge2_o(e2_a), .sampled_o(s_a));
  edge_detect #(.EXT_CYCLES(0)) dut_b (.clk, .rst_n, .pulse_i(pulse), .edge1_o(e1_b), .edge2_o(e2_b), .sampled_o(s_b));

  // Time stamps of the edges of each output.
  realtime r1a, f1a, r2a, f2a, r1b, f1b, r2b, f2b;
  always @(posedge e1_a) r1a = $realtime;
  always @(negedge e1_a) f1a = $realtime;
  always @(posedge e2_a) r2a = $realtime;
  always @(negedge e2_a) f2a = $realtime;
  always @(posedge e1_b) r1b = $realtime;
  always @(negedge e1_b) f1b = $realtime;
  always @(posedge e2_b) r2b = $realtime;
  always @(negedge e2_b) f2b = $realtime;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  // First rising clock edge strictly after t (edges at 5 + 10k ns).
  function automatic real next_edge(input real t);
    return 5.0 + 10.0 * ($floor((t - 5.0) / 10.0) + 1.0);
  endfunction

  function automatic bit close(input real a, input real b);
    return (a - b < 0.0015) && (b - a < 0.0015);
  endfunction

  initial begin
    #100us;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real t_r, t_f, w, d;
    int unsigned ps;
    #1ns;
    #12ns rst_n = 1'b1;
    for (int i = 0; i < 60; i++) begin
      // random phase, avoiding exact coincidence with a clock edge
      do ps = $urandom_range(1, 9999); while (ps == 5000);
      #(real'(ps) / 1000.0);
      t_r = $realtime;
      pulse = 1'b1;
      do ps = $urandom_range(30000, 200000); while (((int'($realtime * 1000.0) + ps) % 10000) == 5000);
      w = real'(ps) / 1000.0;
      #(w);
      t_f = $realtime;
      pulse = 1'b0;
      #40;
      d = next_edge(t_r);
      check(close(r1a, t_r) && close(f1a - r1a, d + 10.0 - t_r),
            $sformatf("edge1 ext=1 width %f expected %f", f1a - r1a, d + 10.0 - t_r));
      check(close(r1b, t_r) && close(f1b - r1b, d - t_r),
            $sformatf("edge1 ext=0 width %f expected %f", f1b - r1b, d - t_r));
      d = next_edge(t_f);
      check(close(r2a, t_f) && close(f2a - r2a, d + 10.0 - t_f),
            $sformatf("edge2 ext=1 width %f expected %f", f2a - r2a, d + 10.0 - t_f));
      check(close(r2b, t_f) && close(f2b - r2b, d - t_f),
            $sformatf("edge2 ext=0 width %f expected %f", f2b - r2b, d - t_f));
      check(!s_a && !s_b && !e1_a && !e2_a, "outputs idle after pulse");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
