// tb_tdc_board: end-to-end test of the whole TDC at its default parameters:
// pulse generator, three stretcher models and the FPGA logic.
//
//  1. Calibration: pulses of known width (4 ns + k*0.5 ns) are injected at
//     the first stretcher; its output width is measured with timestamps (the
//     role of the oscilloscope) and written into the look-up tables. The three
//     stretchers have identical component values, so the S0 curve also serves
//     S1 and S2.
//  2. Measurement: pulses of 7..23 ns are injected directly and the
//     reconstructed width must be within 0.2 ns of the truth (two 83 ps LSB
//     residual errors plus interpolation).
//  3. The FPGA fires the on-board generator (start_i) and the push-button
//     fires it (button_i); the expected width is (R1 - 1k) * 10 pF * ln 2.
//  4. The dead time (event conv_cycles) must stay under the bound set by the
//     two stretched pulses: (11w - 10.5 ns) + (11*20 ns - 10.5 ns) + 4 cycles.
//  5. Time of arrival: hits at random times go to hit_i; the FPGA forms a
//     pulse from the hit to the second rising clock edge (10..20 ns), which
//     the chain measures; toa_ps_o must be within 0.2 ns of the time from
//     the hit to the next rising clock edge. No TOA result may appear for
//     conversions without a hit.
// Each mechanism (calibration, direct, FPGA-triggered and button-triggered
// conversions, TOA conversions, nonzero second-stage counts) is counted and
// must occur.
module tb_tdc_board;
  timeunit 1ns;
  timeprecision 1ps;
  import tdc_pkg::*;

  int checks = 0;
  int failures = 0;

  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic        button = 1'b0;
  logic        start = 1'b0;
  int unsigned r1 = 2000;
  logic        ext = 1'b0;
  logic        hit = 1'b0;
  ps_t         toa;
  logic        toav;
  logic        busy;
  logic        we = 1'b0;
  lut_sel_e    sel = LUT_S0;
  logic [CAL_AW-1:0] addr = '0;
  ps_t         wdata = '0;
  tdc_event_t  ev;
  logic        evv;
  ps_t         w;
  logic        wv;
  logic        vgen, s0o, e1, e2, s1o, s2o;

  always #5 clk = ~clk;

  tdc_board dut (
    .clk, .rst_n, .button_i(button), .start_i(start), .r1_ohm_i(r1), .ext_pulse_i(ext), .hit_i(hit),
    .busy_o(busy), .cal_we_i(we), .cal_sel_i(sel), .cal_addr_i(addr), .cal_out_ps_i(wdata),
    .ev_o(ev), .ev_valid_o(evv), .width_ps_o(w), .width_valid_o(wv), .toa_ps_o(toa), .toa_valid_o(toav),
    .vgen_o(vgen), .s0_out_o(s0o), .edge1_o(e1), .edge2_o(e2), .s1_out_o(s1o), .s2_out_o(s2o));

  realtime t_s0r, t_s0f;
  always @(posedge s0o) t_s0r = $realtime;
  always @(negedge s0o) t_s0f = $realtime;

  int unsigned n_ev = 0, n_w = 0, n_toa_res = 0;
  tdc_event_t  last_ev;
  ps_t         last_w, last_toa;
  always @(posedge clk) if (rst_n) begin
    if (evv) begin n_ev++; last_ev = ev; end
    if (wv)  begin n_w++;  last_w = w; end
    if (toav) begin n_toa_res++; last_toa = toa; end
  end

  int n_cal = 0, n_direct = 0, n_trig = 0, n_button = 0, n_toa = 0, n_fine = 0;
  int max_dead_10ns = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  initial begin
    #2ms;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic random_phase();
    #(real'($urandom_range(1, 9999)) / 1000.0);
  endtask

  // Checks the event and width that follow a pulse of true width win (ns).
  task automatic check_result(input real win, input int unsigned ne, input int unsigned nw,
                              input string tag);
    real err, bound;
    check(n_ev == ne + 1 && !last_ev.timeout, {tag, ": one complete event"});
    check(n_w == nw + 1, {tag, ": one width"});
    err = real'(last_w) / 1000.0 - win;
    check(err < 0.2 && err > -0.2, $sformatf("%s: width %0d ps, true %f ns", tag, last_w, win));
    bound = (11.0 * win - 10.5) + (11.0 * 20.0 - 10.5) + 40.0;
    check(real'(last_ev.conv_cycles) * 10.0 <= bound,
          $sformatf("%s: dead time %0d cycles", tag, last_ev.conv_cycles));
    if (last_ev.n1 != 0 && last_ev.n2 != 0) n_fine++;
    if (win > 9.5 && win < 10.5 && int'(last_ev.conv_cycles) > max_dead_10ns)
      max_dead_10ns = int'(last_ev.conv_cycles);
  endtask

  initial begin
    real inw, outw, win;
    int unsigned ne, nw;
    #12 rst_n = 1'b1;
    #100;
    // 1. calibration
    for (int k = 0; k < 53; k++) begin
      inw = 4.0 + 0.5 * real'(k);
      random_phase();
      ext = 1'b1;
      #(inw);
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
          n_cal++;
        end
      end
    end
    // 2. direct pulses
    for (int i = 0; i < 40; i++) begin
      win = 7.0 + real'($urandom_range(0, 16000)) / 1000.0;
      random_phase();
      ne = n_ev; nw = n_w;
      ext = 1'b1;
      #(win);
      ext = 1'b0;
      #1500;
      check_result(win, ne, nw, "direct");
      n_direct++;
    end
    // 3. FPGA-triggered and push-button pulses from the on-board generator
    for (int i = 0; i < 16; i++) begin
      r1 = 1000 + 1010 + 100 * i + $urandom_range(0, 99);
      win = real'(r1 - 1000) * 10.0e-3 * $ln(2.0);
      random_phase();
      ne = n_ev; nw = n_w;
      if (i % 2 == 0) begin
        @(negedge clk) start = 1'b1;
        @(negedge clk) start = 1'b0;
        #2000;
        n_trig++;
      end else begin
        button = 1'b1;
        #300;
        button = 1'b0;
        #1700;
        n_button++;
      end
      check_result(win, ne, nw, (i % 2 == 0) ? "trigger" : "button");
    end
    check(n_toa_res == 0, "no TOA result without a hit");
    // 5. time of arrival
    for (int i = 0; i < 20; i++) begin
      real want, err;
      int unsigned ps, nt;
      do ps = $urandom_range(1, 9999); while (ps == 5000);
      @(posedge clk);
      #(real'(ps) / 1000.0);
      want = 10.0 - real'(ps) / 1000.0;
      ne = n_ev; nt = n_toa_res;
      hit = 1'b1;
      #2 hit = 1'b0;
      #2500;
      err = real'(last_toa) / 1000.0 - want;
      check(n_ev == ne + 1 && n_toa_res == nt + 1, "toa: one event and one TOA result");
      check(err < 0.2 && err > -0.2, $sformatf("toa: %0d ps, true %f ns", last_toa, want));
      n_toa++;
    end
    check(n_cal > 0, "calibration happened");
    check(n_direct > 0, "direct conversions happened");
    check(n_trig > 0, "FPGA-triggered conversions happened");
    check(n_button > 0, "button-triggered conversions happened");
    check(n_toa > 0, "TOA conversions happened");
    check(n_fine > 0, "second-stage counts seen");
    $display("mechanisms: cal_writes=%0d direct=%0d fpga_trigger=%0d button=%0d toa=%0d fine=%0d",
             n_cal, n_direct, n_trig, n_button, n_toa, n_fine);
    $display("max dead time for ~10 ns inputs: %0d cycles", max_dead_10ns);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
