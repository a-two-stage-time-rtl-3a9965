// tb_stretch_lut: self-checking test of the calibration look-up table.
//
// 1) After reset the table is the ideal line out = 11*in, so a lookup of 11*y
//    must return y (within rounding).
// 2) A nonlinear calibration curve out(in) = 11*in - 10.5 ns - 0.05*(in-4)^2
//    (widths in ns) is written through the calibration port; lookups at random
//    x are compared with a piecewise-linear interpolation computed here in
//    floating point from the same points, including the extended end segments.
// 3) The result appears exactly one cycle after the request.
module tb_stretch_lut;
  timeunit 1ns;
  timeprecision 1ps;
  import tdc_pkg::*;

  localparam int NPTS = 53;
  localparam int IN0  = 4000;
  localparam int STEP = 500;

  int checks = 0;
  int failures = 0;

  logic       clk = 1'b0;
  logic       rst_n = 1'b0;
  logic       we = 1'b0;
  logic [5:0] addr = '0;
  ps_t        wdata = '0;
  ps_t        x = '0;
  logic       xv = 1'b0;
  ps_t        y;
  logic       yv;
  real        outk [NPTS];

  always #5 clk = ~clk;

  stretch_lut dut (.clk, .rst_n, .cal_we_i(we), .cal_addr_i(addr), .cal_out_ps_i(wdata),
                   .x_i(x), .x_valid_i(xv), .y_o(y), .y_valid_o(yv));

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

  // Reference interpolation in ps.
  function automatic real ref_interp(input real xv_ps);
    int k = 0;
    for (int j = 1; j < NPTS - 1; j++) if (outk[j] <= xv_ps) k = j;
    return real'(IN0 + k * STEP) + real'(STEP) * (xv_ps - outk[k]) / (outk[k + 1] - outk[k]);
  endfunction

  task automatic lookup(input int xps, output int yps);
    @(negedge clk);
    x  = ps_t'(xps);
    xv = 1'b1;
    @(negedge clk);
    xv = 1'b0;
    check(yv, "result valid one cycle later");
    yps = int'(y);
    @(negedge clk);
    check(!yv, "valid is a single-cycle strobe");
  endtask

  initial begin
    int  yps, xps, tru;
    real inn, r;
    #12 rst_n = 1'b1;
    // ideal table
    for (int i = 0; i < 20; i++) begin
      tru = $urandom_range(2000, 32000);
      lookup(11 * tru, yps);
      check(yps - tru <= 1 && tru - yps <= 1, $sformatf("ideal table: %0d -> %0d", tru, yps));
    end
    // calibrate with a nonlinear curve
    for (int k = 0; k < NPTS; k++) begin
      inn = real'(IN0 + k * STEP) / 1000.0;
      outk[k] = $floor(1000.0 * (11.0 * inn - 10.5 - 0.05 * (inn - 4.0) * (inn - 4.0)));
      @(negedge clk);
      we = 1'b1;
      addr = 6'(k);
      wdata = ps_t'(int'(outk[k]));
    end
    @(negedge clk);
    we = 1'b0;
    for (int i = 0; i < 200; i++) begin
      xps = $urandom_range(20000, 320000);
      lookup(xps, yps);
      r = ref_interp(real'(xps));
      check(real'(yps) - r < 1.01 && r - real'(yps) < 1.01,
            $sformatf("x=%0d y=%0d expected %f", xps, yps, r));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
