// edge_detect: turns the first-stage stretched pulse into the two residual
// pulses that the second stretching stage measures.
//
//   edge1 : high from the pulse rising edge until a later rising clock edge
//   edge2 : high from the pulse falling edge until a later rising clock edge
//
// The pulse is sampled on every rising clock edge into a shift register of
// EXT_CYCLES+1 flip-flops; q_last is the oldest sample. edge1 = pulse & ~q_last
// and edge2 = ~pulse & q_last, so each residual ends on the (EXT_CYCLES+1)-th
// rising clock edge after the pulse edge it starts on. With EXT_CYCLES = 0 this
// is exactly "edge to the next clock rising edge" (0..T wide); the default of 1
// adds one whole clock period (T..2T wide) so that the second-stage stretchers
// never see a pulse shorter than their linear range. The added period is the
// same for both residuals and cancels in edge1 - edge2.
//
// Interface: clk (100 MHz), rst_n (async, active low), pulse_i (asynchronous
// stretched pulse); edge1_o/edge2_o are asynchronous outputs meant to drive the
// second-stage stretchers; sampled_o is the first synchronous sample of pulse_i.
// The flip-flop-plus-gate structure follows the prototype's description; the
// exact gates, the extension by a clock period and its default are this
// design's choices. The outputs mix an asynchronous input with flip-flop
// outputs on purpose: their widths carry the sub-period timing information.
module edge_detect #(
  parameter int unsigned EXT_CYCLES = 1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic pulse_i,
  output logic edge1_o,
  output logic edge2_o,
  output logic sampled_o
);
  timeunit 1ns;
  timeprecision 1ps;

  logic [EXT_CYCLES:0] q;
  logic                q_last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) q <= '0;
    else        q <= (q << 1) | (EXT_CYCLES+1)'(pulse_i);
  end

  assign q_last    = q[EXT_CYCLES];
  assign sampled_o = q[0];
  assign edge1_o   = pulse_i & ~q_last;
  assign edge2_o   = ~pulse_i & q_last;
endmodule
