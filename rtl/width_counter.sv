// width_counter: measures an asynchronous pulse in periods of the counting
// clock.
//
// The pulse is sampled on every rising clock edge; the counter counts the
// edges at which the sample was high. Once the sample returns low the count K
// is presented on count_o with a one-cycle valid_o strobe and the counter
// clears for the next pulse. For a pulse of width W with random phase to the
// clock, K*T is an unbiased estimate of W (K is floor or ceil of W/T). This is
// the plain "100 MHz counter" of the prototype, used for the second-stage
// counts N1 and N2 and, inside counter_edge_detect, for N0. The count
// saturates at its maximum and flags ovf_o.
//
// Timing: valid_o rises two clock edges after the falling edge of pulse_i
// (one edge to sample it low, one to register the result). active_o is the
// synchronous sample and is high while the pulse is being counted.
// Only the counting function is given by the prototype; sampling with a single
// flip-flop, the saturation and the strobe interface are this design's choices.
module width_counter #(
  parameter int unsigned CNT_W = tdc_pkg::CNT_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             pulse_i,
  output logic             active_o,
  output logic [CNT_W-1:0] count_o,
  output logic             ovf_o,
  output logic             valid_o
);
  timeunit 1ns;
  timeprecision 1ps;

  logic             samp;
  logic [CNT_W-1:0] cnt;
  logic             sat;

  assign active_o = samp;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      samp    <= 1'b0;
      cnt     <= '0;
      sat     <= 1'b0;
      count_o <= '0;
      ovf_o   <= 1'b0;
      valid_o <= 1'b0;
    end else begin
      samp    <= pulse_i;
      valid_o <= 1'b0;
      if (samp) begin
        if (cnt == '1) sat <= 1'b1;
        else           cnt <= cnt + 1'b1;
      end else if (cnt != '0) begin
        count_o <= cnt;
        ovf_o   <= sat;
        valid_o <= 1'b1;
        cnt     <= '0;
        sat     <= 1'b0;
      end
    end
  end
endmodule
