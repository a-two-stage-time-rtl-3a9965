// tdc_pkg: constants and types shared by the two-stage time-stretching TDC.
//
// The counters run from one 100 MHz clock (10 ns period). Counts are CNT_W bits
// wide; widths on the reconstruction path are signed picosecond integers. One
// conversion of the TDC yields three counts: N0 (whole clock cycles inside the
// first-stage stretched pulse), N1 and N2 (second-stage stretched edge1/edge2
// residuals). The 100 MHz clock follows the prototype; the widths and the
// event record layout are this design's own choice.
package tdc_pkg;
  timeunit 1ns;
  timeprecision 1ps;

  // Clock period of the counting clock in picoseconds (100 MHz).
  localparam int unsigned CLK_PERIOD_PS = 10000;
  // Counter width. A 10 ns input stretched by ~11 gives ~11 counts, a 25 ns
  // input ~28 counts; 8 bits leave ample headroom.
  localparam int unsigned CNT_W = 8;
  // Width of picosecond quantities on the reconstruction path.
  localparam int unsigned PS_W = 32;
  // Calibration table address width: up to 64 points per table.
  localparam int unsigned CAL_AW = 6;

  typedef logic [CNT_W-1:0]        count_t;
  typedef logic signed [PS_W-1:0]  ps_t;

  // One conversion as gathered by the acquisition controller.
  typedef struct packed {
    logic   timeout;      // not all three counts arrived in time
    logic   overflow;     // a counter saturated
    count_t n0;           // whole clock cycles in the first-stage stretched pulse
    count_t n1;           // clock cycles in the stretched edge1 residual
    count_t n2;           // clock cycles in the stretched edge2 residual
    count_t conv_cycles;  // clock cycles from first activity to the last count
  } tdc_event_t;

  // Selects which look-up table a calibration write goes to.
  typedef enum logic [1:0] {
    LUT_S0 = 2'd0,
    LUT_S1 = 2'd1,
    LUT_S2 = 2'd2
  } lut_sel_e;
endpackage
