// tdc_fpga: all digital logic of the two-stage time-stretching TDC, as held by
// the FPGA next to the analog stretchers.
//
//   s0_pulse_i -> counter_edge_detect -> N0, and edge1_o / edge2_o to the
//                 second-stage stretchers S1 / S2
//   s1_pulse_i -> width_counter -> N1
//   s2_pulse_i -> width_counter -> N2
//   N0, N1, N2 -> tdc_acquisition -> event (ev_o, ev_valid_o)
//   event      -> width_reconstruct -> width_ps_o (input width in ps)
//
//   hit_i      -> toa_front_end -> toa_pulse_o (to the S0 input) and, after
//                 the conversion, toa_ps_o = width - offset
//
// trig_o fires the pulse generator when start_i is pulsed. Events closed by
// a timeout are reported on ev_o but not reconstructed. The calibration
// port writes the look-up tables of width_reconstruct (one entry per cycle).
// All counters run on the single 100 MHz clock clk. Timing: an event leaves
// two clock edges after the last stretched pulse ends; its width two cycles
// later. A conversion started by an accepted hit also reports toa_ps_o, the
// time from the hit to the next rising clock edge, with toa_valid_o
// alongside width_valid_o. The partition and the counting clock follow the
// prototype; the interfaces are this design's choices.
module tdc_fpga
  import tdc_pkg::*;
#(
  parameter int unsigned EXT_CYCLES     = 1,
  parameter int unsigned TRIG_CYCLES    = 20,
  parameter int unsigned TIMEOUT_CYCLES = 100,
  parameter int          EDGE1_CORR_PS  = 0,
  parameter int          EDGE2_CORR_PS  = 0,
  parameter int unsigned S0_NPTS        = 53,
  parameter int          S0_IN0_PS      = 4000,
  parameter int unsigned S12_NPTS       = 41,
  parameter int          S12_IN0_PS     = 4000,
  parameter int          LUT_STEP_PS    = 500,
  parameter int unsigned TOA_OFFSET_HALVES = 2
) (
  input  logic       clk,
  input  logic       rst_n,
  // control
  input  logic       start_i,
  output logic       trig_o,
  output logic       busy_o,
  // time-of-arrival input
  input  logic       hit_i,
  output logic       toa_pulse_o,
  // analog front end
  input  logic       s0_pulse_i,
  output logic       edge1_o,
  output logic       edge2_o,
  input  logic       s1_pulse_i,
  input  logic       s2_pulse_i,
  // calibration of the look-up tables
  input  logic       cal_we_i,
  input  lut_sel_e   cal_sel_i,
  input  logic [CAL_AW-1:0] cal_addr_i,
  input  ps_t        cal_out_ps_i,
  // results
  output tdc_event_t ev_o,
  output logic       ev_valid_o,
  output ps_t        width_ps_o,
  output logic       width_valid_o,
  output ps_t        toa_ps_o,
  output logic       toa_valid_o
);
  timeunit 1ns;
  timeprecision 1ps;

  count_t n0, n1, n2;
  logic   n0_ovf, n1_ovf, n2_ovf;
  logic   n0_valid, n1_valid, n2_valid;
  logic   act0, act1, act2;
  logic   hit_taken;
  logic   toa_pending;

  toa_front_end #(.OFFSET_HALVES(TOA_OFFSET_HALVES)) u_toa (
    .clk, .rst_n,
    .hit_i       (hit_i),
    .busy_i      (busy_o),
    .toa_pulse_o (toa_pulse_o),
    .hit_taken_o (hit_taken)
  );

  // Remember that the conversion in progress was started by a hit.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                 toa_pending <= 1'b0;
    else if (hit_taken)                         toa_pending <= 1'b1;
    else if (width_valid_o)                     toa_pending <= 1'b0;
    else if (ev_valid_o && ev_o.timeout)        toa_pending <= 1'b0;
  end

  assign toa_valid_o = width_valid_o && toa_pending;
  assign toa_ps_o    = width_ps_o - ps_t'(TOA_OFFSET_HALVES * CLK_PERIOD_PS / 2);

  counter_edge_detect #(.CNT_W(CNT_W), .EXT_CYCLES(EXT_CYCLES)) u_stage0 (
    .clk, .rst_n,
    .pulse_i    (s0_pulse_i),
    .edge1_o    (edge1_o),
    .edge2_o    (edge2_o),
    .active_o   (act0),
    .n0_o       (n0),
    .n0_ovf_o   (n0_ovf),
    .n0_valid_o (n0_valid)
  );

  width_counter #(.CNT_W(CNT_W)) u_cnt1 (
    .clk, .rst_n,
    .pulse_i  (s1_pulse_i),
    .active_o (act1),
    .count_o  (n1),
    .ovf_o    (n1_ovf),
    .valid_o  (n1_valid)
  );

  width_counter #(.CNT_W(CNT_W)) u_cnt2 (
    .clk, .rst_n,
    .pulse_i  (s2_pulse_i),
    .active_o (act2),
    .count_o  (n2),
    .ovf_o    (n2_ovf),
    .valid_o  (n2_valid)
  );

  tdc_acquisition #(.TRIG_CYCLES(TRIG_CYCLES), .TIMEOUT_CYCLES(TIMEOUT_CYCLES)) u_acq (
    .clk, .rst_n,
    .start_i    (start_i),
    .trig_o     (trig_o),
    .busy_o     (busy_o),
    .active_i   (act0 | act1 | act2),
    .n0_i       (n0), .n0_ovf_i (n0_ovf), .n0_valid_i (n0_valid),
    .n1_i       (n1), .n1_ovf_i (n1_ovf), .n1_valid_i (n1_valid),
    .n2_i       (n2), .n2_ovf_i (n2_ovf), .n2_valid_i (n2_valid),
    .ev_o       (ev_o),
    .ev_valid_o (ev_valid_o)
  );

  width_reconstruct #(
    .T_PS          (CLK_PERIOD_PS),
    .S0_NPTS       (S0_NPTS),
    .S0_IN0_PS     (S0_IN0_PS),
    .S12_NPTS      (S12_NPTS),
    .S12_IN0_PS    (S12_IN0_PS),
    .STEP_PS       (LUT_STEP_PS),
    .EDGE1_CORR_PS (EDGE1_CORR_PS),
    .EDGE2_CORR_PS (EDGE2_CORR_PS)
  ) u_recon (
    .clk, .rst_n,
    .cal_we_i      (cal_we_i),
    .cal_sel_i     (cal_sel_i),
    .cal_addr_i    (cal_addr_i),
    .cal_out_ps_i  (cal_out_ps_i),
    .n0_i          (ev_o.n0),
    .n1_i          (ev_o.n1),
    .n2_i          (ev_o.n2),
    .ev_valid_i    (ev_valid_o && !ev_o.timeout),
    .width_ps_o    (width_ps_o),
    .width_valid_o (width_valid_o)
  );
endmodule
