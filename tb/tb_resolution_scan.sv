// tb_resolution_scan: resolution and bias of the whole TDC versus input width,
// for several ways of filling the calibration tables.
//
// Six boards with nonlinear stretchers (recharge droop 0.3) receive the
// same input pulses. Their tables are filled as follows:
//   0 fine   - exact stretcher output widths, 0.5 ns input steps (53/41 points)
//   1 coarse - exact output widths, 2 ns input steps (14/11 points)
//   2 raw    - left at the ideal gain-11 reset contents
//   3 cal05  - 0.5 ns steps, output widths measured by a counter of 0.5 ns LSB
//   4 cal2   - 0.5 ns steps, output widths measured by a counter of 2 ns LSB
//   5 jitter - as fine, but the stretchers add the prototype's measured
//              jitter: 47 ps (first stage) and 170 ps (each second-stage
//              unit: 120 ps stretching and 120 ps edge detection in
//              quadrature), all referred to the stretcher input
// The calibration counter is modelled as counting the edges of a clock of
// period LSB, with random phase, that fall inside the stretched pulse. The
// three stretchers are identical, so one measured curve fills all three
// tables. Then widths 10..20 ns in 1 ns steps, 40 random clock phases each,
// are converted, and per width the bias (mean error) and RMS spread are
// printed.
// Checks: fine, coarse and cal05 stay within 30/30/60 ps bias and 60/60/70 ps
// RMS (the quantization limit is about 35-45 ps); uncalibrated tables are
// off by more than 200 ps somewhere; the 2 ns LSB calibration shows a larger
// worst-case bias than the 0.5 ns one while its RMS stays below 70 ps; with
// jitter the RMS lies between 40 and 100 ps at every width (the prototype's
// budget is 67 ps, its measurement 63 ps at 10 ns and 60-100 ps over
// 10-20 ns).
module tb_resolution_scan;
  timeunit 1ns;
  timeprecision 1ps;
  import tdc_pkg::*;

  localparam int NB = 6;

  int checks = 0;
  int failures = 0;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic ext = 1'b0;
  logic we [NB] = '{default: 1'b0};
  lut_sel_e sel = LUT_S0;
  logic [CAL_AW-1:0] addr = '0;
  ps_t  wdata = '0;
  logic s0o [NB];
  ps_t  w [NB];
  logic wv [NB];

  always #5 clk = ~clk;

  for (genvar b = 0; b < NB; b++) begin : g_board
    tdc_event_t ev;
    logic busy, evv, vgen, e1, e2, s1o, s2o, toav;
    ps_t  toa;
    tdc_board #(
      .S_DROOP     (0.3),
      .S0_JITTER_PS  (b == 5 ? 47.0 : 0.0),
      .S12_JITTER_PS (b == 5 ? 170.0 : 0.0),
      .S0_NPTS     (b == 1 ? 14 : 53),
      .S12_NPTS    (b == 1 ? 11 : 41),
      .LUT_STEP_PS (b == 1 ? 2000 : 500)
    ) u_board (
      .clk, .rst_n, .button_i(1'b0), .start_i(1'b0), .r1_ohm_i(2000), .ext_pulse_i(ext), .hit_i(1'b0),
      .busy_o(busy), .cal_we_i(we[b]), .cal_sel_i(sel), .cal_addr_i(addr), .cal_out_ps_i(wdata),
      .ev_o(ev), .ev_valid_o(evv), .width_ps_o(w[b]), .width_valid_o(wv[b]), .toa_ps_o(toa), .toa_valid_o(toav),
      .vgen_o(vgen), .s0_out_o(s0o[b]), .edge1_o(e1), .edge2_o(e2), .s1_out_o(s1o), .s2_out_o(s2o));
  end

  realtime t_r, t_f;
  always @(posedge s0o[0]) t_r = $realtime;
  always @(negedge s0o[0]) t_f = $realtime;

  int  n_w [NB] = '{default: 0};
  ps_t last_w [NB];
  always @(posedge clk) for (int b = 0; b < NB; b++) if (wv[b]) begin n_w[b]++; last_w[b] = w[b]; end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  initial begin
    #5ms;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_cal(input int b, input lut_sel_e s, input int k, input int v);
    @(negedge clk);
    sel = s; addr = CAL_AW'(k); wdata = ps_t'(v);
    we[b] = 1'b1;
    @(negedge clk);
    we[b] = 1'b0;
  endtask

  // Calibration counter with LSB lsb_ps and random phase: number of its clock
  // edges inside a pulse of width w_ps, times the LSB.
  function automatic int counted(input int w_ps, input int lsb_ps);
    int u = $urandom_range(0, lsb_ps - 1);
    return ((w_ps + u) / lsb_ps) * lsb_ps;
  endfunction

  function automatic real absr(input real x);
    return x < 0.0 ? -x : x;
  endfunction

  initial begin
    int    outps [53];
    int    tab [NB][53];
    int    nw [NB];
    real   sum [NB], sum2 [NB], err, bias, rms, win;
    real   max_bias [NB], max_rms [NB], min_rms [NB];
    string names [NB] = '{"fine", "coarse", "raw", "cal05", "cal2", "jitter"};
    #12 rst_n = 1'b1;
    #100;
    // calibration sweep: 4.0 .. 30.0 ns in 0.5 ns steps
    for (int k = 0; k < 53; k++) begin
      #(real'($urandom_range(1, 9999)) / 1000.0);
      ext = 1'b1;
      #(4.0 + 0.5 * real'(k));
      ext = 1'b0;
      #1200;
      outps[k] = int'((t_f - t_r) * 1000.0);
      tab[0][k] = outps[k];
      tab[3][k] = counted(outps[k], 500);
      tab[4][k] = counted(outps[k], 2000);
      tab[5][k] = outps[k];
    end
    for (int b = 0; b < NB; b++) begin
      if (b == 2) continue;
      for (int k = 0; k < 53; k++) begin
        if (b == 1) begin
          if (k % 4 != 0) continue;
          write_cal(b, LUT_S0, k / 4, outps[k]);
          if (k / 4 < 11) begin
            write_cal(b, LUT_S1, k / 4, outps[k]);
            write_cal(b, LUT_S2, k / 4, outps[k]);
          end
        end else begin
          write_cal(b, LUT_S0, k, tab[b][k]);
          if (k < 41) begin
            write_cal(b, LUT_S1, k, tab[b][k]);
            write_cal(b, LUT_S2, k, tab[b][k]);
          end
        end
      end
    end
    // scan
    for (int b = 0; b < NB; b++) begin max_bias[b] = 0.0; max_rms[b] = 0.0; min_rms[b] = 1.0e9; end
    $write("width_ns");
    for (int b = 0; b < NB; b++) $write("  %6s_bias %6s_rms", names[b], names[b]);
    $write("   (ps)\n");
    for (int wi = 10; wi <= 20; wi++) begin
      for (int b = 0; b < NB; b++) begin sum[b] = 0.0; sum2[b] = 0.0; end
      for (int r = 0; r < 40; r++) begin
        win = real'(wi) + real'($urandom_range(0, 20)) / 1000.0 - 0.01;
        for (int b = 0; b < NB; b++) nw[b] = n_w[b];
        #(real'($urandom_range(1, 9999)) / 1000.0);
        ext = 1'b1;
        #(win);
        ext = 1'b0;
        #1200;
        for (int b = 0; b < NB; b++) begin
          check(n_w[b] == nw[b] + 1, $sformatf("%s: one result", names[b]));
          err = real'(last_w[b]) - 1000.0 * win;
          sum[b] += err;
          sum2[b] += err * err;
        end
      end
      $write("%8d", wi);
      for (int b = 0; b < NB; b++) begin
        bias = sum[b] / 40.0;
        rms  = $sqrt(sum2[b] / 40.0 - bias * bias);
        $write("  %11.1f %10.1f", bias, rms);
        if (absr(bias) > max_bias[b]) max_bias[b] = absr(bias);
        if (rms > max_rms[b]) max_rms[b] = rms;
        if (rms < min_rms[b]) min_rms[b] = rms;
      end
      $write("\n");
    end
    for (int b = 0; b < NB; b++)
      $display("%-6s worst |bias| %7.1f ps, rms %6.1f .. %6.1f ps", names[b], max_bias[b], min_rms[b], max_rms[b]);
    check(max_bias[0] < 30.0 && max_rms[0] < 60.0, "fine calibration within 30 ps bias / 60 ps rms");
    check(max_bias[1] < 30.0 && max_rms[1] < 60.0, "coarse calibration within 30 ps bias / 60 ps rms");
    check(max_bias[2] > 200.0, "uncalibrated tables show a large bias");
    check(max_bias[3] < 60.0 && max_rms[3] < 70.0, "0.5 ns LSB calibration within 60 ps bias / 70 ps rms");
    check(max_rms[4] < 70.0, "2 ns LSB calibration keeps rms below 70 ps");
    check(max_bias[4] > max_bias[3], "2 ns LSB calibration adds bias over 0.5 ns LSB");
    check(min_rms[5] > 40.0 && max_rms[5] < 100.0, "with jitter the RMS is 40..100 ps at every width");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
