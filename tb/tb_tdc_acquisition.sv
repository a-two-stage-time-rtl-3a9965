// tb_tdc_acquisition: self-checking test of the acquisition controller.
//
// Counts N0/N1/N2 are presented as single-cycle strobes in random order and
// with random gaps after a burst of activity. Checked: one event per
// conversion carrying the right counts; conv_cycles equal to the cycles from
// the first active cycle to the last strobe (inclusive); the trigger lasting
// TRIG_CYCLES cycles when start_i is used; a timeout event when a count never
// arrives (after TIMEOUT_CYCLES cycles); the overflow flag being passed on.
module tb_tdc_acquisition;
  timeunit 1ns;
  timeprecision 1ps;
  import tdc_pkg::*;

  int checks = 0;
  int failures = 0;

  logic       clk = 1'b0;
  logic       rst_n = 1'b0;
  logic       start = 1'b0;
  logic       trig, busy, active = 1'b0;
  count_t     n [3];
  logic [2:0] ovf = '0;
  logic [2:0] v = '0;
  tdc_event_t ev;
  logic       evv;
  int unsigned n_ev = 0;
  tdc_event_t last_ev;

  always #5 clk = ~clk;

  tdc_acquisition dut (
    .clk, .rst_n, .start_i(start), .trig_o(trig), .busy_o(busy), .active_i(active),
    .n0_i(n[0]), .n0_ovf_i(ovf[0]), .n0_valid_i(v[0]),
    .n1_i(n[1]), .n1_ovf_i(ovf[1]), .n1_valid_i(v[1]),
    .n2_i(n[2]), .n2_ovf_i(ovf[2]), .n2_valid_i(v[2]),
    .ev_o(ev), .ev_valid_o(evv));

  always @(posedge clk) if (evv) begin n_ev++; last_ev = ev; end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  initial begin
    #200us;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // One conversion: activity for act_len cycles, strobes at given cycle offsets
  // (counted from the first active cycle; -1 = never).
  task automatic conversion(input int t0, input int t1, input int t2, input int act_len,
                            input logic [2:0] ovf_in, input bit expect_timeout);
    int     tv [3];
    int     last, ne;
    count_t c [3];
    tv[0] = t0; tv[1] = t1; tv[2] = t2;
    for (int j = 0; j < 3; j++) c[j] = count_t'($urandom_range(1, 200));
    last = 0;
    for (int j = 0; j < 3; j++) if (tv[j] > last) last = tv[j];
    ne = n_ev;
    for (int cyc = 0; cyc < 130; cyc++) begin
      @(negedge clk);
      active = (cyc < act_len);
      v = '0;
      for (int j = 0; j < 3; j++) if (tv[j] == cyc) begin v[j] = 1'b1; n[j] = c[j]; ovf[j] = ovf_in[j]; end
    end
    @(negedge clk);
    active = 1'b0; v = '0; ovf = '0;
    repeat (3) @(negedge clk);
    check(n_ev == ne + 1, "one event per conversion");
    check(last_ev.timeout == expect_timeout, "timeout flag");
    check(last_ev.overflow == |ovf_in, "overflow flag");
    if (!expect_timeout) begin
      check(last_ev.n0 == c[0] && last_ev.n1 == c[1] && last_ev.n2 == c[2], "counts");
      check(last_ev.conv_cycles == count_t'(last + 1),
            $sformatf("conv_cycles %0d expected %0d", last_ev.conv_cycles, last + 1));
    end
    check(!busy, "idle after event");
  endtask

  initial begin
    int a, b, cc, tcount;
    #12 rst_n = 1'b1;
    for (int i = 0; i < 30; i++) begin
      a  = $urandom_range(5, 25);
      b  = $urandom_range(2, 20);
      cc = $urandom_range(a, 45);
      conversion(a, b, cc, a - 1, 3'($urandom_range(0, 7) == 0 ? 3'b010 : 3'b000), 1'b0);
    end
    // timeout: N2 never arrives
    conversion(10, 4, -1, 9, 3'b000, 1'b1);
    // trigger: pulse start_i while idle
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    tcount = 0;
    while (trig) begin
      tcount++;
      @(negedge clk);
    end
    check(tcount == 20, $sformatf("trigger length %0d", tcount));
    check(busy, "busy while waiting for the triggered pulse");
    conversion(12, 3, 30, 11, 3'b000, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
