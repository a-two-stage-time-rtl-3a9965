// tdc_board: the complete two-stage time-stretching TDC prototype, the
// on-board pulse generator and three analog stretchers (behavioural models)
// wired to the FPGA logic (tdc_fpga, synthesizable).
//
//   pulse_generator -> S0 time_stretch_unit -> tdc_fpga (N0, edge detect)
//   tdc_fpga edge1  -> S1 time_stretch_unit -> tdc_fpga (N1)
//   tdc_fpga edge2  -> S2 time_stretch_unit -> tdc_fpga (N2)
//
// A measurement starts either with the push-button (button_i) or with start_i,
// which makes the FPGA fire the pulse generator. The generated pulse, whose
// width is set by r1_ohm_i, is stretched ~11x by S0; the FPGA counts whole
// clock periods in it, cuts out the two residuals at its edges, which S1/S2
// stretch again, counts them, and reports the event and the reconstructed
// input width. ext_pulse_i lets a test inject a pulse of exact width directly
// at the S0 input (ORed with the generator output), standing in for an
// external source. hit_i is a discriminated hit for time-of-arrival use: the
// FPGA turns it into a pulse from the hit to a clock edge plus one cycle,
// drives that into S0 (ORed with the other sources) and reports the time of
// arrival on toa_ps_o. All three stretchers share the same component values by
// default, as in the prototype. S_DROOP bends the stretchers' curves and
// S0_JITTER_PS / S12_JITTER_PS add input-referred timing noise to the first
// and second stage (all 0 by default: ideal, noise-free stretchers). Not synthesizable as a whole: it contains
// the analog models; tdc_fpga is the synthesizable part.
module tdc_board
  import tdc_pkg::*;
#(
  parameter real S_VTH          = 4.8,
  parameter real S_I1_MA        = 10.0,
  parameter real S_I2_MA        = 100.0,
  parameter real S_C1_PF        = 470.0,
  parameter real S_DROOP        = 0.0,
  parameter real S0_JITTER_PS   = 0.0,
  parameter real S12_JITTER_PS  = 0.0,
  parameter int unsigned EXT_CYCLES     = 1,
  parameter int unsigned TRIG_CYCLES    = 20,
  parameter int unsigned TIMEOUT_CYCLES = 100,
  parameter int unsigned S0_NPTS        = 53,
  parameter int          S0_IN0_PS      = 4000,
  parameter int unsigned S12_NPTS       = 41,
  parameter int          S12_IN0_PS     = 4000,
  parameter int          LUT_STEP_PS    = 500,
  parameter int unsigned TOA_OFFSET_HALVES = 2
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        button_i,
  input  logic        start_i,
  input  int unsigned r1_ohm_i,
  input  logic        ext_pulse_i,
  input  logic        hit_i,
  output logic        busy_o,
  input  logic        cal_we_i,
  input  lut_sel_e    cal_sel_i,
  input  logic [CAL_AW-1:0] cal_addr_i,
  input  ps_t         cal_out_ps_i,
  output tdc_event_t  ev_o,
  output logic        ev_valid_o,
  output ps_t         width_ps_o,
  output logic        width_valid_o,
  output ps_t         toa_ps_o,
  output logic        toa_valid_o,
  // probes of the analog chain
  output logic        vgen_o,
  output logic        s0_out_o,
  output logic        edge1_o,
  output logic        edge2_o,
  output logic        s1_out_o,
  output logic        s2_out_o
);
  timeunit 1ns;
  timeprecision 1ps;

  logic trig;
  logic s0_in;
  logic toa_pulse;

  pulse_generator u_pgen (
    .sw_i     (button_i),
    .trig_i   (trig),
    .r1_ohm_i (r1_ohm_i),
    .vgen_o   (vgen_o)
  );

  assign s0_in = vgen_o | ext_pulse_i | toa_pulse;

  time_stretch_unit #(.VTH(S_VTH), .I1_MA(S_I1_MA), .I2_MA(S_I2_MA), .C1_PF(S_C1_PF), .DROOP(S_DROOP), .JITTER_PS(S0_JITTER_PS)) u_s0 (
    .vin (s0_in), .vout (s0_out_o)
  );
  time_stretch_unit #(.VTH(S_VTH), .I1_MA(S_I1_MA), .I2_MA(S_I2_MA), .C1_PF(S_C1_PF), .DROOP(S_DROOP), .JITTER_PS(S12_JITTER_PS)) u_s1 (
    .vin (edge1_o), .vout (s1_out_o)
  );
  time_stretch_unit #(.VTH(S_VTH), .I1_MA(S_I1_MA), .I2_MA(S_I2_MA), .C1_PF(S_C1_PF), .DROOP(S_DROOP), .JITTER_PS(S12_JITTER_PS)) u_s2 (
    .vin (edge2_o), .vout (s2_out_o)
  );

  tdc_fpga #(
    .EXT_CYCLES     (EXT_CYCLES),
    .TRIG_CYCLES    (TRIG_CYCLES),
    .TIMEOUT_CYCLES (TIMEOUT_CYCLES),
    .S0_NPTS        (S0_NPTS),
    .S0_IN0_PS      (S0_IN0_PS),
    .S12_NPTS       (S12_NPTS),
    .S12_IN0_PS     (S12_IN0_PS),
    .LUT_STEP_PS    (LUT_STEP_PS),
    .TOA_OFFSET_HALVES (TOA_OFFSET_HALVES)
  ) u_fpga (
    .clk, .rst_n,
    .start_i       (start_i),
    .trig_o        (trig),
    .busy_o        (busy_o),
    .hit_i         (hit_i),
    .toa_pulse_o   (toa_pulse),
    .s0_pulse_i    (s0_out_o),
    .edge1_o       (edge1_o),
    .edge2_o       (edge2_o),
    .s1_pulse_i    (s1_out_o),
    .s2_pulse_i    (s2_out_o),
    .cal_we_i      (cal_we_i),
    .cal_sel_i     (cal_sel_i),
    .cal_addr_i    (cal_addr_i),
    .cal_out_ps_i  (cal_out_ps_i),
    .ev_o          (ev_o),
    .ev_valid_o    (ev_valid_o),
    .width_ps_o    (width_ps_o),
    .width_valid_o (width_valid_o),
    .toa_ps_o      (toa_ps_o),
    .toa_valid_o   (toa_valid_o)
  );
endmodule
