// tb_time_stretch_unit: self-checking test of the stretcher model.
//
// Input pulses from 2 to 25 ns are applied and the output width and delay are
// measured with timestamps. The expectation comes from the component values:
// discharge at I2/C1, recharge at I1/C1, comparator threshold VTH, giving
//   out = w*(1 + I2/I1) - (VDD-VTH)*(C1/I2 + C1/I1)
// (clamped where the capacitor empties), and an output that rises
// (VDD-VTH)*C1/I2 after the input. A 0.5 ns pulse must give no output.
// A second instance with a recharge droop of 0.3 is checked against a
// step-by-step numerical integration of dV/dt = I1/C1*(1 - 0.3*V/5 V).
// A third instance with 47 ps input-referred jitter gets 300 pulses of
// 10 ns: the mean output width must match the ideal one within 120 ps (4
// standard errors) and the spread must be 47 ps * 11 = 517 ps within 15 %.
module tb_time_stretch_unit;
  timeunit 1ns;
  timeprecision 1ps;

  int checks = 0;
  int failures = 0;

  logic vin = 1'b0;
  logic vout, vout_d, vout_j;
  realtime t_up, t_dn, td_up, td_dn;
  int unsigned n_up = 0;

  time_stretch_unit dut (.vin, .vout);
  time_stretch_unit #(.DROOP(0.3)) dut_droop (.vin, .vout(vout_d));
  time_stretch_unit #(.JITTER_PS(47.0)) dut_jit (.vin, .vout(vout_j));

  always @(posedge vout) begin t_up = $realtime; n_up++; end
  always @(negedge vout) t_dn = $realtime;
  always @(posedge vout_d) td_up = $realtime;
  always @(negedge vout_d) td_dn = $realtime;
  realtime tj_up, tj_dn;
  always @(posedge vout_j) tj_up = $realtime;
  always @(negedge vout_j) tj_dn = $realtime;

  // Output width with droop by explicit integration (0.1 ps steps while
  // recharging); the discharge part is linear.
  function automatic real droop_width(input real w, input real ron, input real roff);
    real v, t;
    v = 5.0 - ron * w;
    if (v < 0.0) v = 0.0;
    t = 0.0;
    while (v < 4.8) begin
      v += roff * (1.0 - 0.3 * v / 5.0) * 0.0001;
      t += 0.0001;
    end
    return (w - 0.2 / ron) + t;
  endfunction

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  initial begin
    #300us;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real ron, roff, w, t0, exp_w, vlow, nu;
    ron  = 100.0 / 470.0;   // V/ns
    roff = 10.0 / 470.0;
    #10;
    for (int i = 0; i < 24; i++) begin
      w  = 2.0 + real'(i) + real'($urandom_range(0, 999)) / 1000.0;
      nu = n_up;
      t0 = $realtime;
      vin = 1'b1;
      #(w);
      vin = 1'b0;
      #900;
      vlow  = (5.0 - ron * w < 0.0) ? 0.0 : 5.0 - ron * w;
      exp_w = (w - 0.2 / ron) + (4.8 - vlow) / roff;
      check(n_up == nu + 1, "one output pulse");
      check((t_dn - t_up) - exp_w < 0.003 && exp_w - (t_dn - t_up) < 0.003,
            $sformatf("w=%f out %f expected %f", w, t_dn - t_up, exp_w));
      check((t_up - t0) - 0.2 / ron < 0.002 && 0.2 / ron - (t_up - t0) < 0.002, "output delay");
      exp_w = droop_width(w, ron, roff);
      check((td_dn - td_up) - exp_w < 0.003 && exp_w - (td_dn - td_up) < 0.003,
            $sformatf("droop: w=%f out %f expected %f", w, td_dn - td_up, exp_w));
    end
    nu = n_up;
    vin = 1'b1;
    #0.5;
    vin = 1'b0;
    #100;
    check(n_up == nu && vout == 1'b0, "sub-threshold pulse ignored");
    // jitter
    begin
      real d, sum, sum2, mean, sd;
      sum = 0.0; sum2 = 0.0;
      exp_w = (10.0 - 0.2 / ron) + (4.8 - (5.0 - ron * 10.0)) / roff;
      for (int i = 0; i < 300; i++) begin
        vin = 1'b1;
        #10;
        vin = 1'b0;
        #240;
        d = (tj_dn - tj_up) - exp_w;
        sum += d;
        sum2 += d * d;
      end
      mean = sum / 300.0;
      sd   = $sqrt(sum2 / 300.0 - mean * mean);
      $display("jitter: mean offset %0.1f ps, rms %0.1f ps (expected 517 ps)", 1000.0 * mean, 1000.0 * sd);
      check(mean < 0.12 && mean > -0.12, "jitter: mean output width unbiased");
      check(sd > 0.517 * 0.85 && sd < 0.517 * 1.15, "jitter: output spread 11 x 47 ps");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
