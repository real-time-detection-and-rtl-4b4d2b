// tb_leakage_detector -- self-checking test of the per-sensor leakage metric.
//
// Random readings and reference counts are fed to four lanes; a reference
// model in this file (integer arithmetic, written independently of the
// RTL) tracks each lane's moving average of |count - ref| with saturation
// to METRIC_W bits and the alarm against Th_high. Checked after every
// reading: all metrics, the alarm vector, and that out_valid follows
// in_valid by exactly one cycle. Readings come with random gaps, the
// threshold changes during the run, and disabling the detector must clear
// metrics and alarms. Phases with a steady large deviation drive metrics
// up past the threshold and back down, so alarms rise and fall.
`timescale 1ns/1ps
module tb_leakage_detector;

  localparam int unsigned N     = 4;
  localparam int unsigned CNT_W = 16;
  localparam int unsigned MW    = 12;
  localparam int unsigned SH    = 3;

  logic             clk = 0, rst_n = 0, en = 0, in_valid = 0;
  logic [CNT_W-1:0] count [N];
  logic [CNT_W-1:0] ref_cnt [N];
  logic [MW-1:0]    th_high;
  logic [MW-1:0]    metric [N];
  logic             out_valid;
  logic [N-1:0]     alarm;

  int checks = 0, failures = 0;
  int model_m [N];
  int alarms_seen = 0, alarms_cleared = 0;
  logic [N-1:0] prev_alarm = '0;

  leakage_detector #(.N_SENSORS(N), .CNT_W(CNT_W), .METRIC_W(MW), .EMA_SHIFT(SH)) dut (
    .clk, .rst_n, .en, .in_valid, .count, .ref_cnt, .th_high, .metric, .out_valid, .alarm);

  always #5ns clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int floor_div(input int a, input int b);
    return (a >= 0) ? a / b : -((-a + b - 1) / b);
  endfunction

  // one reading: drive, update the model, compare one cycle later
  task automatic reading(input int dev_scale);
    for (int i = 0; i < N; i++) begin
      int d;
      count[i] = CNT_W'($urandom_range(0, 60000));
      if (dev_scale >= 0) begin
        d = $urandom_range(0, dev_scale);
        count[i] = CNT_W'(int'(ref_cnt[i]) + (($urandom_range(0, 1) == 1) ? d : -d));
      end
    end
    @(negedge clk);
    in_valid = 1;
    @(negedge clk);
    in_valid = 0;
    check(out_valid === 1'b1, "out_valid missing one cycle after in_valid");
    for (int i = 0; i < N; i++) begin
      int c, r, dev;
      c = int'(count[i]); r = int'(ref_cnt[i]);
      dev = (c >= r) ? c - r : r - c;
      if (dev > (1 << MW) - 1) dev = (1 << MW) - 1;
      model_m[i] = model_m[i] + floor_div(dev - model_m[i], 1 << SH);
      check(int'(metric[i]) == model_m[i],
            $sformatf("lane %0d metric %0d, expected %0d", i, metric[i], model_m[i]));
      check(alarm[i] == (model_m[i] > int'(th_high)),
            $sformatf("lane %0d alarm %0b, metric %0d th %0d", i, alarm[i], model_m[i], th_high));
    end
    alarms_seen    += $countones(alarm & ~prev_alarm);
    alarms_cleared += $countones(~alarm & prev_alarm);
    prev_alarm = alarm;
    @(negedge clk);
    check(out_valid === 1'b0, "out_valid longer than one cycle");
    repeat ($urandom_range(0, 3)) @(negedge clk);
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) begin
      ref_cnt[i] = CNT_W'($urandom_range(1000, 50000));
      count[i]   = '0;
      model_m[i] = 0;
    end
    th_high = 12'd300;
    repeat (3) @(negedge clk);
    rst_n = 1;
    en    = 1;
    // quiet: small deviations, metric stays low
    repeat (40) reading(40);
    // leaking: large deviations push the metric over Th_high
    repeat (60) reading(1200);
    // quiet again: metric decays, alarms fall
    repeat (80) reading(20);
    // random readings, some far beyond METRIC_W (saturation)
    th_high = 12'd2000;
    repeat (60) reading(-1);
    // disable clears everything
    @(negedge clk); en = 0;
    @(negedge clk);
    for (int i = 0; i < N; i++) begin
      check(metric[i] == '0, "metric not cleared by disable");
      model_m[i] = 0;
    end
    check(alarm == '0, "alarm not cleared by disable");
    en = 1;
    prev_alarm = '0;
    th_high = 12'd100;
    repeat (40) reading(800);
    check(alarms_seen > 0,    "no alarm was ever raised");
    check(alarms_cleared > 0, "no alarm ever fell");
    $display("alarms raised=%0d cleared=%0d", alarms_seen, alarms_cleared);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
