// leakage_detector -- per-sensor leakage metric and alarm.
//
// What it does: for every power sensor it keeps a leakage metric that rises
// while the measured power departs from the power the same spot draws under
// random, secret-independent activity, and falls again when it returns. A
// sensor whose metric is above Th_high raises its bit of `alarm`, which
// names the place on the chip where the leakage shows.
//
// How it works: the processor stores, per sensor, a reference count `ref`
// characterised beforehand with random inputs. On every new reading
// (`in_valid`) each lane forms the absolute deviation |count - ref| and
// folds it into an exponential moving average,
//     metric <= metric + floor((dev - metric) / 2^EMA_SHIFT),
// all lanes in parallel. The average smooths single noisy windows so that
// the metric drifts over many windows like the curve the design uses to
// explain its two thresholds.
//
// Interface and timing:
//   en         - detector on; while low the metrics are held at 0 and no
//                alarm is raised.
//   in_valid   - one-cycle strobe, `count` holds a fresh reading for all
//                sensors.
//   count[i]   - RO edges in the last window of sensor i.
//   ref_cnt[i] - characterised reference count of sensor i.
//   th_high    - alarm threshold.
//   metric[i]  - registered, updated in the cycle after `in_valid`.
//   out_valid  - one-cycle pulse together with the updated metrics.
//   alarm[i]   - metric[i] > th_high, registered with the metric.
//
// The detector's role (metric per sensor, alarm naming the source) follows
// the design, which leaves the metric itself open; the deviation-from-
// reference average is this implementation's choice, the simplest
// distribution-based metric that can run in hardware every window.
`timescale 1ns/1ps
module leakage_detector #(
  parameter int unsigned N_SENSORS = lsd_pkg::N_SENSORS_DEF,
  parameter int unsigned CNT_W     = lsd_pkg::CNT_W_DEF,
  parameter int unsigned METRIC_W  = lsd_pkg::METRIC_W_DEF,
  parameter int unsigned EMA_SHIFT = lsd_pkg::EMA_SHIFT_DEF
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                en,
  input  logic                in_valid,
  input  logic [CNT_W-1:0]    count   [N_SENSORS],
  input  logic [CNT_W-1:0]    ref_cnt [N_SENSORS],
  input  logic [METRIC_W-1:0] th_high,
  output logic [METRIC_W-1:0] metric  [N_SENSORS],
  output logic                out_valid,
  output logic [N_SENSORS-1:0] alarm
);

  // one guard bit above the larger of the two widths, plus a sign bit
  localparam int unsigned W = ((CNT_W > METRIC_W) ? CNT_W : METRIC_W) + 2;

  logic [METRIC_W-1:0] metric_next [N_SENSORS];

  always_comb begin
    for (int i = 0; i < int'(N_SENSORS); i++) begin
      logic [CNT_W-1:0]    dev;
      logic [METRIC_W-1:0] dev_sat;
      logic signed [W-1:0] diff;
      logic signed [W-1:0] step;
      dev = (count[i] >= ref_cnt[i]) ? count[i] - ref_cnt[i] : ref_cnt[i] - count[i];
      if (CNT_W > METRIC_W && (dev >> METRIC_W) != '0) dev_sat = '1;
      else                                             dev_sat = METRIC_W'(dev);
      diff = $signed(W'(dev_sat)) - $signed(W'(metric[i]));
      step = diff >>> EMA_SHIFT;
      metric_next[i] = METRIC_W'($signed(W'(metric[i])) + step);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      alarm     <= '0;
      for (int i = 0; i < int'(N_SENSORS); i++) metric[i] <= '0;
    end else if (!en) begin
      out_valid <= 1'b0;
      alarm     <= '0;
      for (int i = 0; i < int'(N_SENSORS); i++) metric[i] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int i = 0; i < int'(N_SENSORS); i++) begin
          metric[i] <= metric_next[i];
          alarm[i]  <= metric_next[i] > th_high;
        end
      end
    end
  end

endmodule
