// tb_toa_dead_time: time-of-arrival measurement with the half-cycle offset,
// and the dead time it costs.
//
// The board runs with TOA_OFFSET_HALVES = 1, so a hit becomes a pulse of
// (time to the next rising clock edge) + 5 ns, i.e. 5..15 ns for TOA
// 0..10 ns. The tables are first calibrated with injected pulses of known
// width (as in the end-to-end test). Then 60 hits at random clock phases
// are converted. Checked: one event and one TOA result per hit, each TOA
// within 0.2 ns of the truth, and a dead time (event conv_cycles) no longer
// than the two stretched pulses allow: S0 output for 15 ns plus S2 output
// for a 20 ns residual plus 4 cycles, about 400 ns. The largest dead time
// seen is printed; the prototype quotes about 300 ns for this case with
// residuals that are not extended by a clock period.
module tb_toa_dead_time;
  timeunit 1ns;
  timeprecision 1ps;
  import tdc_pkg::*;

  int checks = 0;
  int failures = 0;

  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic        ext = 1'b0;
  logic        hit = 1'b0;
  logic        we = 1'b0;
  lut_sel_e    sel = LUT_S0;
  logic [CAL_AW-1:0] addr = '0;
  ps_t         wdata = '0;
  logic        busy, evv, wv, toav;
  tdc_event_t  ev;
  ps_t         w, toa;
  logic        vgen, s0o, e1, e2, s1o, s2o;

  always #5 clk = ~clk;

  tdc_board #(.TOA_OFFSET_HALVES(1)) dut (
    .clk, .rst_n, .button_i(1'b0), .start_i(1'b0), .r1_ohm_i(2000), .ext_pulse_i(ext), .hit_i(hit),
    .busy_o(busy), .cal_we_i(we), .cal_sel_i(sel), .cal_addr_i(addr), .cal_out_ps_i(wdata),
    .ev_o(ev), .ev_valid_o(evv), .width_ps_o(w), .width_valid_o(wv), .toa_ps_o(toa), .toa_valid_o(toav),
    .vgen_o(vgen), .s0_out_o(s0o), .edge1_o(e1), .edge2_o(e2), .s1_out_o(s1o), .s2_out_o(s2o));

  realtime t_s0r, t_s0f;
  always @(posedge s0o) t_s0r = $realtime;
  always @(negedge s0o) t_s0f = $realtime;

  int unsigned n_ev = 0, n_toa = 0;
  tdc_event_t  last_ev;
  ps_t         last_toa;
  always @(posedge clk) if (rst_n) begin
    if (evv)  begin n_ev++; last_ev = ev; end
    if (toav) begin n_toa++; last_toa = toa; end
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  initial begin
    #1ms;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real outw, want, err, sum2;
    int unsigned ps, ne, nt;
    int max_dead;
    #12 rst_n = 1'b1;
    #100;
    // calibration, 4.0 .. 30.0 ns in 0.5 ns steps
    for (int k = 0; k < 53; k++) begin
      #(real'($urandom_range(1, 9999)) / 1000.0);
      ext = 1'b1;
      #(4.0 + 0.5 * real'(k));
      ext = 1'b0;
      #800;
      outw = t_s0f - t_s0r;
      for (int s = 0; s < 3; s++) begin
        if (s == 0 || k < 41) begin
          @(negedge clk);
          we = 1'b1; sel = lut_sel_e'(s); addr = CAL_AW'(k);
          wdata = ps_t'(int'(outw * 1000.0));
          @(negedge clk);
          we = 1'b0;
        end
      end
    end
    // hits
    max_dead = 0;
    sum2 = 0.0;
    for (int i = 0; i < 60; i++) begin
      do ps = $urandom_range(1, 9999); while (ps == 5000);
      @(posedge clk);
      #(real'(ps) / 1000.0);
      want = 10.0 - real'(ps) / 1000.0;
      ne = n_ev; nt = n_toa;
      hit = 1'b1;
      #2 hit = 1'b0;
      #1500;
      err = real'(last_toa) / 1000.0 - want;
      sum2 += err * err;
      check(n_ev == ne + 1 && n_toa == nt + 1 && !last_ev.timeout, "one complete event and TOA result per hit");
      check(err < 0.2 && err > -0.2, $sformatf("TOA %0d ps, true %f ns", last_toa, want));
      check(real'(last_ev.conv_cycles) * 10.0 <= (11.0 * 15.0 - 10.5) + (11.0 * 20.0 - 10.5) + 40.0,
            $sformatf("dead time %0d cycles", last_ev.conv_cycles));
      if (int'(last_ev.conv_cycles) > max_dead) max_dead = int'(last_ev.conv_cycles);
    end
    $display("TOA rms error %0.1f ps, largest dead time %0d cycles (%0d ns)",
             1000.0 * $sqrt(sum2 / 60.0), max_dead, 10 * max_dead);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
