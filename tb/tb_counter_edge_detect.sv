// tb_counter_edge_detect: self-checking test of the first-stage counter and
// edge detector.
//
// For pulses of random width (20..300 ns) and phase it checks that
//  * N0 equals the number of clock edges inside the pulse minus one,
//  * the edge1/edge2 residual widths (measured with timestamps) equal the
//    distance from the pulse edge to the second clock edge after it,
//  * the identity W = N0*T + T + e1 - e2 holds to the picosecond, with the
//    extra clock period of both residuals cancelling.
module tb_counter_edge_detect;
  timeunit 1ns;
  timeprecision 1ps;

  int checks = 0;
  int failures = 0;

  logic       clk = 1'b0;
  logic       rst_n = 1'b0;
  logic       pulse = 1'b0;
  logic       e1, e2, active, ovf, valid;
  logic [7:0] n0;

  always #5 clk = ~clk;

  counter_edge_detect dut (.clk, .rst_n, .pulse_i(pulse), .edge1_o(e1), .edge2_o(e2),
                           .active_o(active), .n0_o(n0), .n0_ovf_o(ovf), .n0_valid_o(valid));

  realtime r1, f1, r2, f2;
  int unsigned n_valid = 0;
  always @(posedge e1) r1 = $realtime;
  always @(negedge e1) f1 = $realtime;
  always @(posedge e2) r2 = $realtime;
  always @(negedge e2) f2 = $realtime;
  always @(posedge valid) n_valid++;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

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
    real t_r, t_f, w, ea, eb, rec;
    int  k, nv;
    int unsigned ps;
    #12 rst_n = 1'b1;
    for (int i = 0; i < 60; i++) begin
      do ps = $urandom_range(1, 9999); while (ps == 5000);
      #(real'(ps) / 1000.0);
      t_r = $realtime;
      do ps = $urandom_range(20000, 300000); while (((int'(t_r * 1000.0) + ps) % 10000) == 5000);
      w = real'(ps) / 1000.0;
      k = 0;
      for (real e = next_edge(t_r); e < t_r + w; e += 10.0) k++;
      nv = n_valid;
      pulse = 1'b1;
      #(w);
      t_f = $realtime;
      pulse = 1'b0;
      #50;
      ea = next_edge(t_r) + 10.0 - t_r;
      eb = next_edge(t_f) + 10.0 - t_f;
      check(n_valid == nv + 1 && n0 == 8'(k - 1) && !ovf,
            $sformatf("N0 %0d expected %0d", n0, k - 1));
      check(close(f1 - r1, ea) && close(f2 - r2, eb), "residual widths");
      rec = real'(n0) * 10.0 + 10.0 + (f1 - r1) - (f2 - r2);
      check(close(rec, w), $sformatf("reconstructed %f true %f", rec, w));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
