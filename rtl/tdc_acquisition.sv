// tdc_acquisition: the data-acquisition controller of the TDC.
//
// One conversion produces three counts that finish in no fixed order: N0 when
// the first-stage stretched pulse ends, N1 and N2 when the stretched edge1 and
// edge2 residuals end. This controller
//  * optionally fires the on-board pulse generator (trig_o high for
//    TRIG_CYCLES cycles) when start_i is pulsed while idle,
//  * opens a conversion at the first sign of activity (active_i, the OR of the
//    counters' synchronous samples), whether the pulse came from its own
//    trigger or from outside (for instance the push-button),
//  * collects N0, N1 and N2, and emits one tdc_event_t with ev_valid_o when all
//    three are in, together with conv_cycles, the number of clock cycles from
//    the first activity to the last count: the measured dead time,
//  * closes the conversion with timeout set if the counts are not complete
//    within TIMEOUT_CYCLES cycles of opening it.
// busy_o is high from the trigger (or first activity) until the event leaves.
//
// States: IDLE -> COLLECT -> IDLE. A trigger opens the conversion at once, and
// trig_o runs down its own counter while the counts are being collected,
// because the stretched pulse starts a few ns after the trigger.
// Only "data acquisition" and an FPGA-generated trigger are named by the
// prototype; the state machine, the event layout, the 1 us timeout (the dead
// time the application must stay under) and the trigger length are this
// design's choices.
module tdc_acquisition
  import tdc_pkg::*;
#(
  parameter int unsigned TRIG_CYCLES    = 20,
  parameter int unsigned TIMEOUT_CYCLES = 100
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start_i,
  output logic       trig_o,
  output logic       busy_o,
  input  logic       active_i,
  input  count_t     n0_i,
  input  logic       n0_ovf_i,
  input  logic       n0_valid_i,
  input  count_t     n1_i,
  input  logic       n1_ovf_i,
  input  logic       n1_valid_i,
  input  count_t     n2_i,
  input  logic       n2_ovf_i,
  input  logic       n2_valid_i,
  output tdc_event_t ev_o,
  output logic       ev_valid_o
);
  timeunit 1ns;
  timeprecision 1ps;

  typedef enum logic {ST_IDLE, ST_COLLECT} state_e;

  state_e      state;
  logic [15:0] timer;
  logic [15:0] trig_cnt;
  logic        started;
  logic [2:0]  got;
  logic [2:0]  got_next;
  tdc_event_t  ev;

  assign got_next = got | {n2_valid_i, n1_valid_i, n0_valid_i};
  assign trig_o   = (trig_cnt != '0);
  assign busy_o   = (state != ST_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= ST_IDLE;
      timer      <= '0;
      trig_cnt   <= '0;
      started    <= 1'b0;
      got        <= '0;
      ev         <= '0;
      ev_o       <= '0;
      ev_valid_o <= 1'b0;
    end else begin
      ev_valid_o <= 1'b0;
      if (trig_cnt != '0) trig_cnt <= trig_cnt - 1'b1;
      if (n0_valid_i) begin ev.n0 <= n0_i; ev.overflow <= ev.overflow | n0_ovf_i; end
      if (n1_valid_i) begin ev.n1 <= n1_i; ev.overflow <= ev.overflow | n1_ovf_i; end
      if (n2_valid_i) begin ev.n2 <= n2_i; ev.overflow <= ev.overflow | n2_ovf_i; end
      unique case (state)
        ST_IDLE: begin
          timer   <= '0;
          got     <= got_next;
          started <= active_i;
          ev.conv_cycles <= count_t'(active_i);
          if (start_i && !active_i && got_next == '0) begin
            state    <= ST_COLLECT;
            trig_cnt <= 16'(TRIG_CYCLES);
          end else if (active_i || got_next != '0) begin
            state <= ST_COLLECT;
          end
        end
        ST_COLLECT: begin
          timer <= timer + 1'b1;
          got   <= got_next;
          if (active_i) started <= 1'b1;
          if ((started || active_i) && ev.conv_cycles != '1)
            ev.conv_cycles <= ev.conv_cycles + 1'b1;
          if (got_next == 3'b111 || timer == 16'(TIMEOUT_CYCLES - 1)) begin
            ev_o       <= ev;
            ev_o.n0    <= n0_valid_i ? n0_i : ev.n0;
            ev_o.n1    <= n1_valid_i ? n1_i : ev.n1;
            ev_o.n2    <= n2_valid_i ? n2_i : ev.n2;
            ev_o.overflow <= ev.overflow | (n0_valid_i & n0_ovf_i) |
                             (n1_valid_i & n1_ovf_i) | (n2_valid_i & n2_ovf_i);
            ev_o.conv_cycles <= ((started || active_i) && ev.conv_cycles != '1) ?
                                ev.conv_cycles + 1'b1 : ev.conv_cycles;
            ev_o.timeout <= (got_next != 3'b111);
            ev_valid_o <= 1'b1;
            state      <= ST_IDLE;
            got        <= '0;
            started    <= 1'b0;
            ev         <= '0;
          end
        end
        default: state <= ST_IDLE;
      endcase
    end
  end
endmodule
