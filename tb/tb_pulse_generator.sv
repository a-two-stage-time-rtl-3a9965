// tb_pulse_generator: self-checking test of the RC-delay pulse generator model.
//
// For several settings of R1 it fires the generator, alternately from the
// push-button input and from the trigger input, holds the start level for
// 300 ns and releases it, then checks that exactly one pulse appeared, that its
// width is (R1 - R2) * C * ln 2, and that it starts R2 * C * ln 2 after the
// start edge (R2 = 1 kOhm, C = 10 pF, threshold at half the 5 V swing).
module tb_pulse_generator;
  timeunit 1ns;
  timeprecision 1ps;

  int checks = 0;
  int failures = 0;

  logic        sw = 1'b0;
  logic        trig = 1'b0;
  int unsigned r1 = 2000;
  logic        vgen;
  realtime     t_up, t_dn;
  int unsigned n_up = 0;

  pulse_generator dut (.sw_i(sw), .trig_i(trig), .r1_ohm_i(r1), .vgen_o(vgen));

  always @(posedge vgen) begin t_up = $realtime; n_up++; end
  always @(negedge vgen) t_dn = $realtime;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  initial begin
    #100us;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real t0, exp_w, exp_d;
    int unsigned nu;
    #10;
    for (int i = 0; i < 20; i++) begin
      r1 = 1300 + 250 * i + $urandom_range(0, 99);
      nu = n_up;
      t0 = $realtime;
      if (i % 2 == 0) sw = 1'b1; else trig = 1'b1;
      #300;
      sw = 1'b0;
      trig = 1'b0;
      #300;
      exp_w = real'(r1 - 1000) * 10.0e-3 * $ln(2.0);
      exp_d = 1000.0 * 10.0e-3 * $ln(2.0);
      check(n_up == nu + 1, "exactly one pulse");
      check((t_dn - t_up) - exp_w < 0.002 && exp_w - (t_dn - t_up) < 0.002,
            $sformatf("R1=%0d width %f expected %f", r1, t_dn - t_up, exp_w));
      check((t_up - t0) - exp_d < 0.002 && exp_d - (t_up - t0) < 0.002, "pulse delay");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
