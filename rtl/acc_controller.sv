// acc_controller -- adaptive countermeasure controller (two-threshold
// hysteresis per countermeasure cell).
//
// What it does: every power sensor has an adaptive countermeasure cell
// (ACC) beside it. The controller turns a cell on as soon as the leakage
// detector raises the alarm of its sensor (metric above Th_high) and turns
// it off once the metric has fallen below Th_low. Between the two thresholds a cell keeps its
// state, so protection is spent only where and while leakage shows, and a
// metric that hovers around one threshold does not make the cell chatter.
//
// How it works: one two-state machine (ACC_OFF / ACC_ON) per cell,
// evaluated whenever the detector delivers new metrics:
//     OFF -> ON   when alarm      (the detector's metric > Th_high)
//     ON  -> OFF  when metric < th_low
// `acc_en` is the registered state vector. An alarm wins over a metric
// below th_low in the same update (possible only with th_low > Th_high, a
// setting left to software).
//
// Interface and timing:
//   en         - controller on; while low every cell is held off.
//   in_valid   - one-cycle strobe with fresh `alarm` and `metric` values.
//   alarm[i]   - the detector's alarm of sensor i.
//   metric[i]  - the detector's leakage metric of sensor i.
//   acc_en[i]  - enable of cell i, changes in the cycle after `in_valid`.
//
// The alarm triggering the cell, the two thresholds and their meaning
// follow the design; evaluating only on new metrics and the enable input
// are this implementation's choices.
`timescale 1ns/1ps
module acc_controller #(
  parameter int unsigned N_SENSORS = lsd_pkg::N_SENSORS_DEF,
  parameter int unsigned METRIC_W  = lsd_pkg::METRIC_W_DEF
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  input  logic                 in_valid,
  input  logic [N_SENSORS-1:0] alarm,
  input  logic [METRIC_W-1:0]  metric [N_SENSORS],
  input  logic [METRIC_W-1:0]  th_low,
  output logic [N_SENSORS-1:0] acc_en
);

  import lsd_pkg::*;

  acc_state_e state [N_SENSORS];
  acc_state_e state_next [N_SENSORS];

  always_comb begin
    for (int i = 0; i < int'(N_SENSORS); i++) begin
      state_next[i] = state[i];
      if (!en) begin
        state_next[i] = ACC_OFF;
      end else if (in_valid) begin
        unique case (state[i])
          ACC_OFF: if (alarm[i])           state_next[i] = ACC_ON;
          ACC_ON:  if (!alarm[i] && metric[i] < th_low) state_next[i] = ACC_OFF;
        endcase
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(N_SENSORS); i++) state[i] <= ACC_OFF;
    end else begin
      for (int i = 0; i < int'(N_SENSORS); i++) begin
        state[i] <= state_next[i];
      end
    end
  end

  always_comb begin
    for (int i = 0; i < int'(N_SENSORS); i++) acc_en[i] = (state[i] == ACC_ON);
  end

  // cells change only on a metric update or when the controller is off
  a_change_on_update: assert property (@(posedge clk) disable iff (!rst_n)
    (acc_en != $past(acc_en)) |-> ($past(in_valid) || !$past(en)));

endmodule
