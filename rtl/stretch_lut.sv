// stretch_lut: converts the measured output width of one time-stretching unit
// back to its input width with a piecewise-linear calibration table.
//
// The stretchers are not linear enough for a single stretching factor, so each
// unit is calibrated: known input widths IN0_PS + k*STEP_PS (k = 0..NPTS-1) are
// injected and the resulting output widths out[k] are written into this table
// through the calibration port. A lookup finds the segment k with
// out[k] <= x < out[k+1] (the end segments are extended) and returns
//     y = IN0_PS + k*STEP_PS + STEP_PS * (x - out[k]) / (out[k+1] - out[k]).
// After reset the table holds the ideal line out[k] = RESET_GAIN * in[k]
// (gain 11 = 1 + I2/I1 of the prototype's stretcher), so it is usable before
// calibration. out[] must increase with k.
//
// Interface: x_i/x_valid_i in, y_o/y_valid_o out one clock later (the segment
// search and the division are combinational, then registered). cal_we_i writes
// cal_out_ps_i into entry cal_addr_i. All widths are signed picoseconds.
// The interpolated table follows the prototype's calibration method, and its
// 0.5 ns default step is the prototype's; the table range, reset contents and
// the single-cycle datapath are this design's choices.
module stretch_lut
  import tdc_pkg::*;
#(
  parameter int unsigned NPTS       = 53,
  parameter int          IN0_PS     = 4000,
  parameter int          STEP_PS    = 500,
  parameter int          RESET_GAIN = 11,
  localparam int unsigned AW        = $clog2(NPTS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          cal_we_i,
  input  logic [CAL_AW-1:0] cal_addr_i,
  input  ps_t           cal_out_ps_i,
  input  ps_t           x_i,
  input  logic          x_valid_i,
  output ps_t           y_o,
  output logic          y_valid_o
);
  timeunit 1ns;
  timeprecision 1ps;

  ps_t out_tab [NPTS];

  if (NPTS < 2 || NPTS > 2**CAL_AW) begin : g_bad_npts
    $error("stretch_lut: NPTS must be 2..%0d", 2**CAL_AW);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < NPTS; k++) out_tab[k] <= ps_t'(RESET_GAIN * (IN0_PS + k * STEP_PS));
    end else if (cal_we_i && int'(cal_addr_i) < NPTS) begin
      out_tab[cal_addr_i] <= cal_out_ps_i;
    end
  end

  // Segment search: count the inner points at or below x.
  logic [AW-1:0] seg;
  always_comb begin
    seg = '0;
    for (int k = 1; k < NPTS - 1; k++)
      if (out_tab[k] <= x_i) seg = AW'(k);
  end

  ps_t                   lo;
  ps_t                   hi;
  logic signed [63:0]    num;
  logic signed [63:0]    den;
  ps_t                   frac;
  ps_t                   y_next;

  always_comb begin
    lo     = out_tab[seg];
    hi     = out_tab[seg + 1'b1];
    num    = 64'(signed'(x_i - lo)) * 64'(STEP_PS);
    den    = 64'(signed'(hi - lo));
    frac   = (den > 0) ? ps_t'(num / den) : '0;
    y_next = ps_t'(IN0_PS) + ps_t'(seg) * ps_t'(STEP_PS) + frac;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y_o       <= '0;
      y_valid_o <= 1'b0;
    end else begin
      y_valid_o <= x_valid_i;
      if (x_valid_i) y_o <= y_next;
    end
  end
endmodule
