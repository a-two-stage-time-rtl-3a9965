// width_reconstruct: computes the TDC result, the input pulse width, from the
// three counts of one conversion.
//
// With T the clock period, the first-stage stretched pulse is
//     W0 = N0*T + T + e1 - e2,
// where e1 and e2 are the edge1/edge2 residuals. Each residual is recovered
// from its second-stage count by that stage's look-up table, ei = LUTi(Ni*T),
// plus a constant correction EDGEi_CORR_PS for the fixed delay and offset of
// the edge-detection path. The input width is then LUT0(W0). With constant
// stretching factors this is the familiar
//     width = (N0*T + N1*T/S1 + T - N2*T/S2) / S0.
// Any constant added to both residuals (such as the extra clock period of
// edge_detect) cancels in e1 - e2.
//
// Pipeline: ev_valid_i -> (1 cycle, LUT1/LUT2) -> W0 -> (1 cycle, LUT0) ->
// width_valid_o, so the result follows its counts by two cycles. A new event
// may enter every cycle. Calibration writes go to the table chosen by
// cal_sel_i. The formula follows the prototype; the fixed-point format
// (integer picoseconds), the table geometry and the pipeline are this
// design's choices.
module width_reconstruct
  import tdc_pkg::*;
#(
  parameter int unsigned T_PS          = CLK_PERIOD_PS,
  parameter int unsigned S0_NPTS       = 53,
  parameter int          S0_IN0_PS     = 4000,
  parameter int unsigned S12_NPTS      = 41,
  parameter int          S12_IN0_PS    = 4000,
  parameter int          STEP_PS       = 500,
  parameter int          EDGE1_CORR_PS = 0,
  parameter int          EDGE2_CORR_PS = 0
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          cal_we_i,
  input  lut_sel_e      cal_sel_i,
  input  logic [CAL_AW-1:0] cal_addr_i,
  input  ps_t           cal_out_ps_i,
  input  count_t        n0_i,
  input  count_t        n1_i,
  input  count_t        n2_i,
  input  logic          ev_valid_i,
  output ps_t           width_ps_o,
  output logic          width_valid_o
);
  timeunit 1ns;
  timeprecision 1ps;

  ps_t    e1, e2, w0;
  logic   e_valid;
  logic   e2_valid;
  count_t n0_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          n0_q <= '0;
    else if (ev_valid_i) n0_q <= n0_i;
  end

  stretch_lut #(.NPTS(S12_NPTS), .IN0_PS(S12_IN0_PS), .STEP_PS(STEP_PS)) u_lut1 (
    .clk, .rst_n,
    .cal_we_i     (cal_we_i && cal_sel_i == LUT_S1),
    .cal_addr_i   (cal_addr_i),
    .cal_out_ps_i (cal_out_ps_i),
    .x_i          (ps_t'(n1_i) * ps_t'(T_PS)),
    .x_valid_i    (ev_valid_i),
    .y_o          (e1),
    .y_valid_o    (e_valid)
  );

  stretch_lut #(.NPTS(S12_NPTS), .IN0_PS(S12_IN0_PS), .STEP_PS(STEP_PS)) u_lut2 (
    .clk, .rst_n,
    .cal_we_i     (cal_we_i && cal_sel_i == LUT_S2),
    .cal_addr_i   (cal_addr_i),
    .cal_out_ps_i (cal_out_ps_i),
    .x_i          (ps_t'(n2_i) * ps_t'(T_PS)),
    .x_valid_i    (ev_valid_i),
    .y_o          (e2),
    .y_valid_o    (e2_valid)
  );

  assign w0 = (ps_t'(n0_q) + 1) * ps_t'(T_PS)
            + (e1 + ps_t'(EDGE1_CORR_PS)) - (e2 + ps_t'(EDGE2_CORR_PS));

  stretch_lut #(.NPTS(S0_NPTS), .IN0_PS(S0_IN0_PS), .STEP_PS(STEP_PS)) u_lut0 (
    .clk, .rst_n,
    .cal_we_i     (cal_we_i && cal_sel_i == LUT_S0),
    .cal_addr_i   (cal_addr_i),
    .cal_out_ps_i (cal_out_ps_i),
    .x_i          (w0),
    .x_valid_i    (e_valid && e2_valid),
    .y_o          (width_ps_o),
    .y_valid_o    (width_valid_o)
  );
endmodule
