// counter_edge_detect: the first-stage measurement of the TDC.
//
// It receives the pulse stretched by the first time-stretching unit (S0) and
//  * counts N0, the number of whole clock periods inside the pulse, and
//  * produces the residual pulses edge1 and edge2 for the second stage.
// With K the number of rising clock edges that fall inside the pulse, the
// first edge after the pulse rises is e1 after it and the first edge after the
// pulse falls is e2 after that, so the pulse is (K-1)*T + T + e1 - e2 wide.
// N0 = K-1 is therefore the count of whole periods between the first and the
// last clock edge inside the pulse, matching W = N0*T + T + e1 - e2 used for
// reconstruction. A pulse that holds no clock edge produces no count at all;
// that cannot happen for stretched pulses of the intended range (> 10 ns).
//
// Interface: see ports. n0_valid_o strobes for one cycle two clock edges after
// the pulse falls. edge1_o/edge2_o are asynchronous (see edge_detect). The
// block split follows the prototype's "counter and edge detect" function; the
// K-1 convention is derived from its width formula.
module counter_edge_detect #(
  parameter int unsigned CNT_W      = tdc_pkg::CNT_W,
  parameter int unsigned EXT_CYCLES = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             pulse_i,
  output logic             edge1_o,
  output logic             edge2_o,
  output logic             active_o,
  output logic [CNT_W-1:0] n0_o,
  output logic             n0_ovf_o,
  output logic             n0_valid_o
);
  timeunit 1ns;
  timeprecision 1ps;

  logic             sampled;
  logic             cnt_active;
  logic [CNT_W-1:0] k;

  edge_detect #(.EXT_CYCLES(EXT_CYCLES)) u_edge (
    .clk       (clk),
    .rst_n     (rst_n),
    .pulse_i   (pulse_i),
    .edge1_o   (edge1_o),
    .edge2_o   (edge2_o),
    .sampled_o (sampled)
  );

  width_counter #(.CNT_W(CNT_W)) u_cnt (
    .clk      (clk),
    .rst_n    (rst_n),
    .pulse_i  (pulse_i),
    .active_o (cnt_active),
    .count_o  (k),
    .ovf_o    (n0_ovf_o),
    .valid_o  (n0_valid_o)
  );

  // The counter only reports K >= 1, so K-1 never wraps.
  assign n0_o = k - 1'b1;

  // The edge detector and the counter each hold a sample of pulse_i taken on
  // the same clock edge; a synthesis tool may merge the two flip-flops. N0
  // and the residuals are only consistent if both see the same samples.
  assign active_o = sampled;

  always_comb begin
    if (rst_n) begin
      a_same_sample: assert final (sampled == cnt_active)
        else $error("edge detector and counter disagree on the pulse sample");
    end
  end
endmodule
