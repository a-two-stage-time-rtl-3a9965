// time_stretch_unit: behavioural model (not synthesizable) of the analog
// time-stretching cell: a capacitor C1 held at VDD, discharged quickly by I2
// while the input is high and recharged slowly by I1 afterwards, followed by a
// comparator that outputs high while the capacitor is below VTH.
//
// The model tracks the capacitor voltage between input edges in closed form
// and computes the exact time at which it crosses VTH, so the output edges
// land on the picosecond grid:
//   discharge (vin high): dV/dt = -I2/C1, down to 0 V;
//   recharge  (vin low) : dV/dt = +I1/C1 * (1 - DROOP * V/VDD), up to VDD.
// With DROOP = 0 (the ideal circuit) an input of width w that discharges
// below VTH gives an output of width
//     w * (1 + I2/I1) - (VDD - VTH) * (C1/I2 + C1/I1),
// i.e. stretching factor 1 + I2/I1 = 11 with the default currents, minus a
// fixed offset (10.5 ns at VTH = 4.8 V) that vanishes as VTH approaches VDD.
// Inputs shorter than (VDD-VTH)*C1/I2 (~0.94 ns) give no output. DROOP > 0
// lets the recharge current fall as the voltage rises, as the measured
// prototype does; the stretching then becomes nonlinear and has to be
// calibrated. 0 <= DROOP < 1.
//
// Interface: vin (input pulse), vout (stretched pulse), both digital. The
// currents, capacitor, supply and threshold default to the prototype's
// component values (I1 = 10 mA, I2 = 100 mA, C1 = 470 pF, 5 V, vth 4.8 V).
// The droop law is this model's own simple stand-in for the measured
// behaviour, which is described only qualitatively. JITTER_PS > 0 adds
// Gaussian noise to the end of each output pulse, with an RMS of
// JITTER_PS * (1 + I2/I1), i.e. JITTER_PS referred to the input; the
// prototype measured about 47 ps for the first stage and up to 120 ps for
// the second-stage units. Noise is drawn with $urandom (Box-Muller). The
// default 0 gives exact edges. Comparator delay is not modelled.
module time_stretch_unit #(
  parameter real VDD   = 5.0,
  parameter real VTH   = 4.8,
  parameter real I1_MA = 10.0,
  parameter real I2_MA = 100.0,
  parameter real C1_PF = 470.0,
  parameter real DROOP = 0.0,
  parameter real JITTER_PS = 0.0
) (
  input  logic vin,
  output logic vout
);
  timeunit 1ns;
  timeprecision 1ps;

  // Slopes in volts per nanosecond: (mA / pF) = 1e-3/1e-12 V/s = 1 V/ns.
  localparam real RATE_ON  = I2_MA / C1_PF;
  localparam real RATE_OFF = I1_MA / C1_PF;

  // Output jitter RMS in ns: input-referred jitter times the nominal factor.
  localparam real SIGMA_NS = JITTER_PS * 1.0e-3 * (1.0 + I2_MA / I1_MA);

  // Recharge dV/dt = RATE_OFF - K_DROOP * V.
  localparam real K_DROOP  = RATE_OFF * DROOP / VDD;

  real         vcap_q;    // capacitor voltage at time t_q
  realtime     t_q;
  logic        charging;  // recharging (vin low) since t_q
  int unsigned gen;       // invalidates pending comparator events
  real         t_end;     // delay to the output's falling edge

  function automatic real clamp_v(input real v);
    if (v < 0.0) return 0.0;
    if (v > VDD) return VDD;
    return v;
  endfunction

  // Capacitor voltage now, from the last breakpoint.
  function automatic real vcap_now();
    real dt;
    dt = $realtime - t_q;
    if (!charging)          return clamp_v(vcap_q - RATE_ON * dt);
    if (K_DROOP == 0.0)     return clamp_v(vcap_q + RATE_OFF * dt);
    return clamp_v(RATE_OFF / K_DROOP + (vcap_q - RATE_OFF / K_DROOP) * $exp(-K_DROOP * dt));
  endfunction

  // Recharge time from v0 up to VTH.
  function automatic real t_recharge(input real v0);
    if (K_DROOP == 0.0) return (VTH - v0) / RATE_OFF;
    return $ln((RATE_OFF / K_DROOP - v0) / (RATE_OFF / K_DROOP - VTH)) / K_DROOP;
  endfunction

  // Standard normal deviate (Box-Muller).
  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom) + 1.0) / 4294967297.0;
    u2 = real'($urandom) / 4294967296.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  task automatic schedule(input real delay_ns, input logic level, input int unsigned tag);
    fork
      begin
        #(delay_ns);
        if (gen == tag) vout = level;
      end
    join_none
  endtask

  initial begin
    vcap_q   = VDD;
    t_q      = 0.0;
    charging = 1'b1;
    gen    = 0;
    vout   = 1'b0;
  end

  always @(vin) begin
    vcap_q = vcap_now();
    t_q    = $realtime;
    gen    = gen + 1;
    charging = !vin;
    if (vin) begin
      if (vcap_q > VTH) schedule((vcap_q - VTH) / RATE_ON, 1'b1, gen);
    end else begin
      if (vcap_q < VTH) begin
        t_end = t_recharge(vcap_q);
        if (SIGMA_NS > 0.0) t_end = t_end + SIGMA_NS * gauss();
        schedule(t_end < 0.0 ? 0.0 : t_end, 1'b0, gen);
      end
    end
  end
endmodule
