// leakage_monitor_top -- real-time power side-channel leakage monitor with
// adaptive countermeasure control.
//
// What it does: a grid of N_SENSORS ring-oscillator power sensors is spread
// over the chip. Every sampling window each sensor's oscillation count is
// read out, the leakage detector turns it into a per-sensor leakage metric
// and alarm, and the countermeasure controller switches the adaptive
// countermeasure cell (ACC) next to that sensor on above Th_high and off
// below Th_low. The host processor configures and reads everything through
// the co-processor register interface.
//
// Data flow (one lane per sensor, all lanes in lock step):
//   ro_sensor -> ro_counter --count--> leakage_detector --alarm, metric--> acc_controller -> acc_en
//                   ^ sample_timer
//   sensor_coproc: CTRL / WINDOW / TH_HIGH / TH_LOW / REF in, COUNT / METRIC / ALARM / ACC_EN out
//
// Timing: the sample strobe closes a window in cycle t; counts are valid in
// t+1, metrics and alarms in t+2, ACC enables in t+3. So an ACC reacts
// within one window plus three clocks of the reading that crossed Th_high.
//
// Interface:
//   clk, rst_n   - system clock, active-low asynchronous reset.
//   bus_req/rsp  - processor register bus (lsd_pkg structs, map in
//                  sensor_coproc).
//   droop[i]     - stands for the local supply drop at sensor i; it only
//                  feeds the behavioural ring-oscillator models and is the
//                  physical coupling between the watched logic and the
//                  sensor, not a pin of the real chip.
//   acc_en[i]    - enable of the ACC next to sensor i. The ACCs themselves
//                  (the local countermeasures) are outside this module.
//   alarm[i]     - sensor i currently sees leakage (metric above Th_high);
//                  names the location of the leakage.
//   irq          - any bit of the sticky alarm log set, for the processor.
//
// The chain sensor -> detection -> controller -> ACC, one ACC per sensor,
// the two thresholds and the processor access as a co-processor follow the
// design. The leakage metric, the bus and register map, the sample window,
// widths and reset values are this implementation's choices; the ring
// oscillators are behavioural models (see ro_sensor), so this module is
// synthesizable only with them replaced by the real oscillator cells.
`timescale 1ns/1ps
module leakage_monitor_top #(
  parameter int unsigned N_SENSORS   = lsd_pkg::N_SENSORS_DEF,
  parameter int unsigned CNT_W       = lsd_pkg::CNT_W_DEF,
  parameter int unsigned METRIC_W    = lsd_pkg::METRIC_W_DEF,
  parameter int unsigned EMA_SHIFT   = lsd_pkg::EMA_SHIFT_DEF,
  parameter int unsigned WINDOW_RST  = lsd_pkg::WINDOW_DEF,
  parameter int unsigned RO_STAGES   = 31,
  parameter int unsigned RO_STAGE_PS = 100,
  parameter int unsigned RO_DROOP_PS = 2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  lsd_pkg::bus_req_t    bus_req,
  output lsd_pkg::bus_rsp_t    bus_rsp,
  input  logic [7:0]           droop [N_SENSORS],
  output logic [N_SENSORS-1:0] acc_en,
  output logic [N_SENSORS-1:0] alarm,
  output logic                 irq
);

  import lsd_pkg::*;

  // configuration
  logic                 sensors_on, det_en, ctrl_en;
  logic [WIN_W-1:0]     window;
  logic [METRIC_W-1:0]  th_high, th_low;
  logic [CNT_W-1:0]     ref_cnt [N_SENSORS];
  // data path
  logic                 sample;
  logic [N_SENSORS-1:0] ro_clk;
  logic [N_SENSORS-1:0] cnt_valid;
  logic [CNT_W-1:0]     count  [N_SENSORS];
  logic [METRIC_W-1:0]  metric [N_SENSORS];
  logic                 det_valid;
  logic                 rd_valid;
  logic [N_SENSORS-1:0] alarm_log;

  sample_timer #(.WIN_W(WIN_W)) u_timer (
    .clk, .rst_n, .run(sensors_on), .window, .sample
  );

  for (genvar i = 0; i < int'(N_SENSORS); i++) begin : g_sensor
    ro_sensor #(
      .STAGES(RO_STAGES), .STAGE_PS(RO_STAGE_PS), .DROOP_PS_PER_LSB(RO_DROOP_PS)
    ) u_ro (
      .en(sensors_on), .droop(droop[i]), .osc(ro_clk[i])
    );

    ro_counter #(.CNT_W(CNT_W)) u_cnt (
      .clk, .rst_n, .ro_clk(ro_clk[i]), .sample,
      .count(count[i]), .valid(cnt_valid[i])
    );
  end

  // all read-outs close their windows together
  assign rd_valid = &cnt_valid;

  leakage_detector #(
    .N_SENSORS(N_SENSORS), .CNT_W(CNT_W), .METRIC_W(METRIC_W), .EMA_SHIFT(EMA_SHIFT)
  ) u_det (
    .clk, .rst_n, .en(det_en), .in_valid(rd_valid),
    .count, .ref_cnt, .th_high, .metric, .out_valid(det_valid), .alarm
  );

  acc_controller #(.N_SENSORS(N_SENSORS), .METRIC_W(METRIC_W)) u_ctrl (
    .clk, .rst_n, .en(ctrl_en), .in_valid(det_valid),
    .alarm, .metric, .th_low, .acc_en
  );

  sensor_coproc #(
    .N_SENSORS(N_SENSORS), .CNT_W(CNT_W), .METRIC_W(METRIC_W), .WINDOW_RST(WINDOW_RST)
  ) u_coproc (
    .clk, .rst_n, .req(bus_req), .rsp(bus_rsp),
    .sensors_on, .det_en, .ctrl_en, .window, .th_high, .th_low, .ref_cnt,
    .sample_valid(rd_valid), .count, .metric, .alarm, .acc_en,
    .alarm_log
  );

  assign irq = |alarm_log;

endmodule
