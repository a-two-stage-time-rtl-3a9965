// tb_width_reconstruct: self-checking test of the width reconstruction.
//
// With the reset (ideal, gain 11) tables the result must equal
//   ((N0 + 1)*T + N1*T/11 - N2*T/11) / 11
// computed here in floating point, within a few picoseconds of integer
// rounding. Then the S1 table is recalibrated with an offset curve and the
// result must follow. The result must arrive exactly two cycles after the
// counts, and back-to-back events must each produce a result.
module tb_width_reconstruct;
  timeunit 1ns;
  timeprecision 1ps;
  import tdc_pkg::*;

  int checks = 0;
  int failures = 0;

  logic       clk = 1'b0;
  logic       rst_n = 1'b0;
  logic       we = 1'b0;
  lut_sel_e   sel = LUT_S0;
  logic [5:0] addr = '0;
  ps_t        wdata = '0;
  count_t     n0 = '0, n1 = '0, n2 = '0;
  logic       evv = 1'b0;
  ps_t        w;
  logic       wv;

  always #5 clk = ~clk;

  width_reconstruct dut (.clk, .rst_n, .cal_we_i(we), .cal_sel_i(sel), .cal_addr_i(addr),
                         .cal_out_ps_i(wdata), .n0_i(n0), .n1_i(n1), .n2_i(n2), .ev_valid_i(evv),
                         .width_ps_o(w), .width_valid_o(wv));

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

  real expq [$];
  int  nres = 0;
  always @(negedge clk) if (wv) begin
    real e;
    e = expq.pop_front();
    nres++;
    check(real'(w) - e < 3.0 && e - real'(w) < 3.0, $sformatf("width %0d expected %f", w, e));
  end

  // e1 = in-width of S1 for a measured out-width; s1_ofs models a recalibrated table.
  real s1_ofs = 0.0;

  task automatic send(input int a, input int b, input int c);
    real e1, e2;
    @(negedge clk);
    n0 = count_t'(a); n1 = count_t'(b); n2 = count_t'(c); evv = 1'b1;
    e1 = (real'(b) * 10000.0 + s1_ofs) / 11.0;
    e2 = real'(c) * 10000.0 / 11.0;
    expq.push_back((real'(a + 1) * 10000.0 + e1 - e2) / 11.0);
  endtask

  initial begin
    int sent;
    #12 rst_n = 1'b1;
    // latency: one event, result two cycles later
    send(10, 15, 12);
    @(negedge clk);
    evv = 1'b0;
    check(!wv, "no result after one cycle");
    @(negedge clk);
    check(wv, "result after two cycles");
    sent = 1;
    // back-to-back
    for (int i = 0; i < 100; i++) begin
      send($urandom_range(5, 30), $urandom_range(8, 22), $urandom_range(8, 22));
      sent++;
    end
    @(negedge clk);
    evv = 1'b0;
    repeat (4) @(negedge clk);
    // recalibrate S1: out = 11*in - 10500 ps
    s1_ofs = 10500.0;
    for (int k = 0; k < 41; k++) begin
      @(negedge clk);
      we = 1'b1; sel = LUT_S1; addr = 6'(k);
      wdata = ps_t'(11 * (4000 + 500 * k) - 10500);
    end
    @(negedge clk);
    we = 1'b0;
    for (int i = 0; i < 50; i++) begin
      send($urandom_range(5, 30), $urandom_range(8, 22), $urandom_range(8, 22));
      sent++;
      @(negedge clk);
      evv = 1'b0;
    end
    repeat (4) @(negedge clk);
    check(nres == sent && expq.size() == 0, $sformatf("%0d results for %0d events", nres, sent));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
