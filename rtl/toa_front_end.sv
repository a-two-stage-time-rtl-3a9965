// toa_front_end: turns a discriminated hit into a pulse whose width the TDC
// measures, for time-of-arrival (TOA) use.
//
// The pulse rises with the hit and falls on a clock edge: OFFSET_HALVES = 2
// ends it on the second rising edge after the hit, OFFSET_HALVES = 1 on the
// first falling edge after the first rising edge. Its width is therefore
//   width = toa + OFFSET_HALVES * T/2,
// where toa (0 .. T) is the time from the hit to the next rising clock edge.
// The added offset keeps the pulse out of the stretchers' nonlinear region
// below about 5 ns: a 0..10 ns TOA range becomes 10..20 ns (one cycle, the
// default) or 5..15 ns (half a cycle). Adding the offset follows the
// prototype's description; the circuit that does it is this design's own.
//
// How it works: the hit toggles a flip-flop clocked by hit_i. A copy of the
// toggle is shifted along with the clock (q[0], q[1] on rising edges, qn on
// the falling edge after q[0]); the pulse is high while the toggle and the
// selected copy differ, so it needs no asynchronous clear. Hits are accepted
// only while armed: not busy, no pulse in flight, and HOLDOFF_CYCLES after
// the last accepted hit, which covers the cycles until the acquisition
// reports busy. A hit arriving while not armed is ignored. The toggle
// flip-flop sees no clock during reset, so the output stays masked after
// reset until the toggle and all its copies agree. Like any
// asynchronous input, a hit close to a clock edge can make the sampling
// flip-flops metastable; this is not modelled.
//
// Interface: hit_i (asynchronous, rising edge = hit), busy_i from the
// acquisition, toa_pulse_o to the first stretcher, hit_taken_o high for one
// cycle after the first rising clock edge following an accepted hit.
module toa_front_end #(
  parameter int unsigned OFFSET_HALVES  = 2,
  parameter int unsigned HOLDOFF_CYCLES = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic hit_i,
  input  logic busy_i,
  output logic toa_pulse_o,
  output logic hit_taken_o
);
  timeunit 1ns;
  timeprecision 1ps;

  if (OFFSET_HALVES < 1 || OFFSET_HALVES > 2) begin : g_bad_offset
    $error("toa_front_end: OFFSET_HALVES must be 1 or 2");
  end

  logic       tog;
  logic [1:0] q;
  logic       qn;
  logic       end_tog;
  logic       arm;
  logic       settled;
  logic [$clog2(HOLDOFF_CYCLES+1)-1:0] holdoff;

  // Accept a hit only when armed and the previous toggle has been sampled.
  always_ff @(posedge hit_i or negedge rst_n) begin
    if (!rst_n)                 tog <= 1'b0;
    else if (arm && tog == q[0]) tog <= ~tog;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) q <= '0;
    else        q <= {q[0], tog};
  end

  always_ff @(negedge clk or negedge rst_n) begin
    if (!rst_n) qn <= 1'b0;
    else        qn <= q[0];
  end

  assign end_tog     = (OFFSET_HALVES == 1) ? qn : q[1];
  assign toa_pulse_o = (tog ^ end_tog) & settled;
  assign hit_taken_o = (q[0] ^ q[1]) & settled;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      holdoff <= '0;
      arm     <= 1'b0;
      settled <= 1'b0;
    end else begin
      if (tog == q[0] && q[0] == q[1] && q[1] == qn) settled <= 1'b1;
      if (hit_taken_o)       holdoff <= ($bits(holdoff))'(HOLDOFF_CYCLES);
      else if (holdoff != 0) holdoff <= holdoff - 1'b1;
      arm <= settled && !busy_i && !hit_taken_o && holdoff == 0 && tog == q[0] && q[0] == q[1] && q[1] == qn;
    end
  end
endmodule
