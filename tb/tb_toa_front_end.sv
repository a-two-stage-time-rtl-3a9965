// tb_toa_front_end: checks the TOA pulse former.
//
// Two instances, offset one clock cycle (default) and half a cycle, receive
// the same 2 ns hits at random times. For every accepted hit the pulse must
// rise at the hit and be (time to the next rising clock edge) + offset wide,
// to within 1 ps, and hit_taken_o must pulse once. Also checked: a second
// hit during the pulse or during the hold-off is ignored, and so is a hit
// while busy_i is high.
module tb_toa_front_end;
  timeunit 1ns;
  timeprecision 1ps;

  localparam realtime T = 10.0;

  int checks = 0;
  int failures = 0;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic hit = 1'b0;
  logic busy = 1'b0;
  logic pulse [2];
  logic taken [2];

  always #5 clk = ~clk;

  toa_front_end dut_full (
    .clk, .rst_n, .hit_i(hit), .busy_i(busy), .toa_pulse_o(pulse[0]), .hit_taken_o(taken[0]));
  toa_front_end #(.OFFSET_HALVES(1)) dut_half (
    .clk, .rst_n, .hit_i(hit), .busy_i(busy), .toa_pulse_o(pulse[1]), .hit_taken_o(taken[1]));

  realtime t_rise [2], t_fall [2];
  int      n_rise [2] = '{0, 0};
  int      n_taken [2] = '{0, 0};
  always @(posedge pulse[0]) begin t_rise[0] = $realtime; n_rise[0]++; end
  always @(negedge pulse[0]) t_fall[0] = $realtime;
  always @(posedge pulse[1]) begin t_rise[1] = $realtime; n_rise[1]++; end
  always @(negedge pulse[1]) t_fall[1] = $realtime;
  always @(posedge clk) for (int i = 0; i < 2; i++) if (taken[i]) n_taken[i]++;

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

  task automatic fire();
    hit = 1'b1;
    #2;
    hit = 1'b0;
  endtask

  // Wait until a random time inside a clock period, away from the edges.
  task automatic random_phase(output realtime t_hit, output realtime t_edge);
    int ph;
    ph = $urandom_range(20, 9980);
    @(posedge clk);
    #(real'(ph) / 1000.0);
    t_hit  = $realtime;
    t_edge = t_hit - real'(ph) / 1000.0 + T;
  endtask

  initial begin
    realtime t_hit, t_edge, want, got;
    int nr [2], nt [2];
    #12 rst_n = 1'b1;
    #100;
    for (int k = 0; k < 60; k++) begin
      nr = n_rise; nt = n_taken;
      random_phase(t_hit, t_edge);
      fire();
      // a second hit while the first pulse is high (mode 0..2: in the pulse,
      // in the hold-off, none)
      if (k % 3 == 0) begin
        #3;
        fire();
      end else if (k % 3 == 1) begin
        #(2.0 * T + 3.0);
        fire();
      end
      #(8.0 * T);
      for (int i = 0; i < 2; i++) begin
        want = (t_edge - t_hit) + (i == 0 ? T : T / 2.0);
        got  = t_fall[i] - t_rise[i];
        check(n_rise[i] == nr[i] + 1, $sformatf("inst %0d hit %0d: one pulse", i, k));
        check(n_taken[i] == nt[i] + 1, $sformatf("inst %0d hit %0d: one hit_taken", i, k));
        check(t_rise[i] - t_hit < 0.001 && t_rise[i] - t_hit > -0.001,
              $sformatf("inst %0d hit %0d: rises with the hit", i, k));
        check(got - want < 0.001 && got - want > -0.001,
              $sformatf("inst %0d hit %0d: width %0.3f want %0.3f", i, k, got, want));
      end
    end
    // hits while busy are ignored; the first hit after busy falls is taken
    nr = n_rise;
    @(negedge clk) busy = 1'b1;
    #(3.0 * T);
    for (int k = 0; k < 5; k++) begin
      random_phase(t_hit, t_edge);
      fire();
    end
    #(5.0 * T);
    for (int i = 0; i < 2; i++) check(n_rise[i] == nr[i], $sformatf("inst %0d: hit while busy ignored", i));
    @(negedge clk) busy = 1'b0;
    #(3.0 * T);
    random_phase(t_hit, t_edge);
    fire();
    #(5.0 * T);
    for (int i = 0; i < 2; i++) check(n_rise[i] == nr[i] + 1, $sformatf("inst %0d: hit after busy taken", i));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
