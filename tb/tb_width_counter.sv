// tb_width_counter: self-checking test of width_counter.
//
// Pulses of random width and picosecond phase are counted against a 100 MHz
// clock (rising edges at 5 ns + k*10 ns). The expected count is the number of
// clock edges strictly inside the pulse, worked out from the edge times; the
// strobe must come on the second rising clock edge after the pulse falls. A
// 2.7 us pulse checks saturation at 255 and the overflow flag.
module tb_width_counter;
  timeunit 1ns;
  timeprecision 1ps;

  int checks = 0;
  int failures = 0;

  logic       clk = 1'b0;
  logic       rst_n = 1'b0;
  logic       pulse = 1'b0;
  logic       active, ovf, valid;
  logic [7:0] count;
  realtime    t_valid;

  always #5 clk = ~clk;

  width_counter dut (.clk, .rst_n, .pulse_i(pulse), .active_o(active), .count_o(count),
                     .ovf_o(ovf), .valid_o(valid));

  int unsigned n_valid = 0;
  always @(posedge valid) begin
    n_valid++;
    t_valid = $realtime;
  end

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

  initial begin
    #200us;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one_pulse(input real w);
    real t_r, t_f;
    int  k, nv;
    int unsigned ps;
    do ps = $urandom_range(1, 9999); while (ps == 5000);
    #(real'(ps) / 1000.0);
    t_r = $realtime;
    k = 0;
    for (real e = next_edge(t_r); e < t_r + w; e += 10.0) k++;
    nv = n_valid;
    pulse = 1'b1;
    #(w);
    t_f = $realtime;
    pulse = 1'b0;
    #50;
    check(n_valid == nv + 1, "exactly one strobe");
    if (k > 255) check(count == 8'd255 && ovf, $sformatf("saturation, count %0d", count));
    else         check(count == 8'(k) && !ovf, $sformatf("count %0d expected %0d (w=%f)", count, k, w));
    check(t_valid - next_edge(t_f) > 9.99 && t_valid - next_edge(t_f) < 10.01,
          "strobe on the second clock edge after the fall");
  endtask

  initial begin
    real w;
    int unsigned ps;
    #12 rst_n = 1'b1;
    check(!valid && !active, "idle after reset");
    for (int i = 0; i < 80; i++) begin
      do ps = $urandom_range(12000, 400000); while (ps % 10000 == 0);
      w = real'(ps) / 1000.0;
      one_pulse(w);
    end
    one_pulse(2700.3);
    one_pulse(55.5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
