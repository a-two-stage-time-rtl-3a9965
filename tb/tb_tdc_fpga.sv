// tb_tdc_fpga: end-to-end test of the FPGA logic with ideal stretchers.
//
// The testbench plays the analog side: it drives a first-stage stretched pulse
// of known width W0 (random phase, 100..300 ns), and stretches the edge1/edge2
// residuals it receives by exactly 11 before returning them. With the reset
// tables (ideal gain 11) the reconstructed input width W0/11 must be within
// 2*T/121 (~165 ps) of the truth, the LSB bound of two quantized residuals.
// It also checks the counts against values worked out from the timestamps,
// the trigger output on start_i and a timeout when the S2 return is withheld.
// Finally 30 hits at random times go to hit_i; the TOA pulse is stretched by
// 11 and fed back as the S0 pulse, and toa_ps_o must match the time from the
// hit to the next rising clock edge within the same bound. Conversions not
// started by a hit must not raise toa_valid_o.
module tb_tdc_fpga;
  timeunit 1ns;
  timeprecision 1ps;
  import tdc_pkg::*;

  int checks = 0;
  int failures = 0;

  logic       clk = 1'b0;
  logic       rst_n = 1'b0;
  logic       start = 1'b0;
  logic       trig, busy;
  logic       s0 = 1'b0, s1 = 1'b0, s2 = 1'b0;
  logic       e1, e2;
  tdc_event_t ev;
  logic       evv;
  ps_t        w;
  logic       wv;
  bit         block_s2 = 1'b0;
  logic       hit = 1'b0;
  logic       toa_pulse;
  ps_t        toa;
  logic       toav;

  always #5 clk = ~clk;

  tdc_fpga dut (.clk, .rst_n, .start_i(start), .trig_o(trig), .busy_o(busy),
                .hit_i(hit), .toa_pulse_o(toa_pulse),
                .s0_pulse_i(s0), .edge1_o(e1), .edge2_o(e2), .s1_pulse_i(s1), .s2_pulse_i(s2),
                .cal_we_i(1'b0), .cal_sel_i(LUT_S0), .cal_addr_i('0), .cal_out_ps_i('0),
                .ev_o(ev), .ev_valid_o(evv), .width_ps_o(w), .width_valid_o(wv),
                .toa_ps_o(toa), .toa_valid_o(toav));

  // Ideal x11 stretchers for the residuals.
  realtime t1r, t2r;
  always @(posedge e1) begin t1r = $realtime; s1 = 1'b1; end
  always @(negedge e1) fork begin automatic real d = 10.0 * ($realtime - t1r); #(d); s1 = 1'b0; end join_none
  always @(posedge e2) begin t2r = $realtime; if (!block_s2) s2 = 1'b1; end
  always @(negedge e2) fork begin automatic real d = 10.0 * ($realtime - t2r); #(d); s2 = 1'b0; end join_none

  // Ideal x11 first stretcher for the TOA pulse.
  realtime t0r;
  always @(posedge toa_pulse) if (rst_n) begin t0r = $realtime; s0 = 1'b1; end
  always @(negedge toa_pulse) if (rst_n) fork begin automatic real d = 10.0 * ($realtime - t0r); #(d); s0 = 1'b0; end join_none

  int unsigned n_ev = 0, n_w = 0, n_toa = 0;
  ps_t         last_toa;
  tdc_event_t  last_ev;
  ps_t         last_w;
  always @(posedge clk) if (rst_n) begin
    if (evv) begin n_ev++; last_ev = ev; end
    if (wv)  begin n_w++;  last_w = w; end
    if (toav) begin n_toa++; last_toa = toa; end
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
    #500us;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic measure(input real w0, input bit expect_timeout);
    real t_r, t_f, win, err;
    int  k;
    int unsigned ne, nw;
    int unsigned ps;
    do ps = $urandom_range(1, 9999); while (ps == 5000);
    #(real'(ps) / 1000.0);
    ne = n_ev; nw = n_w;
    t_r = $realtime;
    s0 = 1'b1;
    #(w0);
    t_f = $realtime;
    s0 = 1'b0;
    k = 0;
    for (real e = next_edge(t_r); e < t_f; e += 10.0) k++;
    #1500;
    check(n_ev == ne + 1, "one event");
    check(last_ev.timeout == expect_timeout, "timeout flag");
    check(last_ev.n0 == count_t'(k - 1), $sformatf("N0 %0d expected %0d", last_ev.n0, k - 1));
    if (!expect_timeout) begin
      win = w0 / 11.0;
      err = real'(last_w) / 1000.0 - win;
      check(n_w == nw + 1, "one width result");
      check(err < 0.166 && err > -0.166, $sformatf("width %0d ps, true %f ns", last_w, win));
    end else begin
      check(n_w == nw, "no width result for a timed-out event");
    end
  endtask

  initial begin
    int unsigned ps;
    int tcount;
    #12 rst_n = 1'b1;
    for (int i = 0; i < 40; i++) begin
      ps = $urandom_range(100000, 300000);
      measure(real'(ps) / 1000.0, 1'b0);
    end
    block_s2 = 1'b1;
    measure(150.0, 1'b1);
    block_s2 = 1'b0;
    // trigger output
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    tcount = 0;
    while (trig) begin tcount++; @(negedge clk); end
    check(tcount == 20, "trigger length");
    measure(123.4, 1'b0);
    check(n_toa == 0, "no TOA result without a hit");
    // time of arrival
    for (int i = 0; i < 30; i++) begin
      real t_hit, want, err;
      int unsigned nt, nw;
      do ps = $urandom_range(1, 9999); while (ps == 5000);
      #(real'(ps) / 1000.0);
      nt = n_toa; nw = n_w;
      t_hit = $realtime;
      hit = 1'b1;
      #2 hit = 1'b0;
      want = next_edge(t_hit) - t_hit;
      #2500;
      err = real'(last_toa) / 1000.0 - want;
      check(n_toa == nt + 1 && n_w == nw + 1, "one TOA result per hit");
      check(err < 0.166 && err > -0.166, $sformatf("TOA %0d ps, true %f ns", last_toa, want));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
