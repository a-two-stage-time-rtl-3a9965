// pulse_generator: behavioural model (not synthesizable) of the on-board
// RC-delay pulse generator that provides ns-wide test pulses.
//
// A start signal vstart (the push-button through comparator U4, or a trigger
// from the FPGA) charges two RC nodes at once: vcap1 through the variable R1
// and vcap2 through R2 = 1 kOhm, both into 10 pF. Comparator U2 goes high when
// vcap2 rises above vth; comparator U1 is high while vcap1 is still below vth;
// the AND gate U3 outputs the interval between the two crossings:
//     width = (R1 - R2) * C * ln(V_HIGH / (V_HIGH - VTH)),
// about 6.93 ps per ohm of R1 - R2 with vth = V_HIGH/2. When vstart falls, vcap2
// drops below vth before vcap1 does, so no second pulse appears, provided
// vstart stayed high long enough (a few R1*C) for both nodes to settle.
// The model delays each comparator by the exact RC crossing time measured
// from a fully settled node.
//
// Interface: sw_i (push-button), trig_i (FPGA trigger), r1_ohm_i (setting of
// the variable resistor, sampled at each vstart edge), vgen_o (pulse).
// Component values follow the prototype schematic; combining the button and the
// FPGA trigger with an OR, and V_HIGH = 5 V, are this design's assumptions.
module pulse_generator #(
  parameter real R2_OHM = 1000.0,
  parameter real C_PF   = 10.0,
  parameter real V_HIGH = 5.0,
  parameter real VTH    = 2.5
) (
  input  logic        sw_i,
  input  logic        trig_i,
  input  int unsigned r1_ohm_i,
  output logic        vgen_o
);
  timeunit 1ns;
  timeprecision 1ps;

  logic        vstart;
  logic        vcap1_disc;
  logic        vcap2_disc;
  int unsigned gen1;
  int unsigned gen2;

  assign vstart = sw_i | trig_i;
  assign vgen_o = vcap1_disc & vcap2_disc;

  // Time for an RC node to cross VTH after its driver steps (ns; ohm*pF = ps).
  function automatic real t_rise(input real r_ohm);
    return r_ohm * C_PF * 1.0e-3 * $ln(V_HIGH / (V_HIGH - VTH));
  endfunction
  function automatic real t_fall(input real r_ohm);
    return r_ohm * C_PF * 1.0e-3 * $ln(V_HIGH / VTH);
  endfunction

  task automatic set1(input real d, input logic level, input int unsigned tag);
    fork begin #(d); if (gen1 == tag) vcap1_disc = level; end join_none
  endtask
  task automatic set2(input real d, input logic level, input int unsigned tag);
    fork begin #(d); if (gen2 == tag) vcap2_disc = level; end join_none
  endtask

  initial begin
    vcap1_disc = 1'b1;  // vcap1 = 0 V < vth
    vcap2_disc = 1'b0;  // vcap2 = 0 V < vth
    gen1 = 0;
    gen2 = 0;
  end

  always @(vstart) begin
    gen1 = gen1 + 1;
    gen2 = gen2 + 1;
    if (vstart) begin
      set1(t_rise(real'(r1_ohm_i)), 1'b0, gen1);
      set2(t_rise(R2_OHM), 1'b1, gen2);
    end else begin
      set1(t_fall(real'(r1_ohm_i)), 1'b1, gen1);
      set2(t_fall(R2_OHM), 1'b0, gen2);
    end
  end
endmodule
