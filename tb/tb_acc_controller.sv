// tb_acc_controller -- self-checking test of the two-threshold
// countermeasure controller.
//
// Each of four lanes gets its own metric waveform: a slow triangle that
// crosses both thresholds, a metric parked between the thresholds, one that
// touches the thresholds exactly, and random values. A reference model here
// keeps one on/off bit per lane (on when the alarm, metric > Th_high, is
// set; off when metric < Th_low; else unchanged) and the enables are compared one cycle
// after every update. Also checked: nothing changes without in_valid, and
// disabling the controller turns every cell off. Turn-on and turn-off
// events are counted and must both occur.
`timescale 1ns/1ps
module tb_acc_controller;

  localparam int unsigned N  = 4;
  localparam int unsigned MW = 16;

  logic          clk = 0, rst_n = 0, en = 0, in_valid = 0;
  logic [MW-1:0] metric [N];
  logic [MW-1:0] th_high = 16'd600, th_low = 16'd200;
  logic [N-1:0]  acc_en;
  logic [N-1:0]  alarm = '0;

  int checks = 0, failures = 0;
  int ons = 0, offs = 0;
  bit model [N];

  acc_controller #(.N_SENSORS(N), .METRIC_W(MW)) dut (
    .clk, .rst_n, .en, .in_valid, .alarm, .metric, .th_low, .acc_en);

  always #5ns clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic update(input int m [N]);
    bit was_on [N];
    // the alarm is the detector's comparison with Th_high
    for (int i = 0; i < N; i++) begin
      metric[i] = MW'(m[i]);
      alarm[i]  = m[i] > int'(th_high);
    end
    @(negedge clk);
    in_valid = 1;
    @(negedge clk);
    in_valid = 0;
    for (int i = 0; i < N; i++) begin
      was_on[i] = model[i];
      if (!model[i] && m[i] > int'(th_high)) model[i] = 1;
      else if (model[i] && m[i] < int'(th_low)) model[i] = 0;
      if (model[i] && !was_on[i]) ons++;
      if (!model[i] && was_on[i]) offs++;
      check(acc_en[i] == model[i],
            $sformatf("lane %0d metric %0d: acc_en %0b expected %0b", i, m[i], acc_en[i], model[i]));
    end
    // metric moves without a strobe: nothing may change
    for (int i = 0; i < N; i++) begin
      metric[i] = MW'($urandom_range(0, 1000));
      alarm[i]  = $urandom_range(0, 1) == 1;
    end
    @(negedge clk);
    for (int i = 0; i < N; i++)
      check(acc_en[i] == model[i], $sformatf("lane %0d changed without in_valid", i));
  endtask

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int m [N];
    for (int i = 0; i < N; i++) begin metric[i] = '0; model[i] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    check(acc_en == '0, "cells not off after reset");
    en = 1;
    for (int t = 0; t < 400; t++) begin
      int tri_v;
      tri_v = (t % 200 < 100) ? (t % 100) * 8 : 800 - (t % 100) * 8;  // 0..792..0
      m[0] = tri_v;
      m[1] = 300 + (t % 7) * 40;                                      // 300..540, between
      m[2] = (t % 4 == 0) ? 600 : (t % 4 == 1) ? 601 : (t % 4 == 2) ? 200 : 199;
      m[3] = $urandom_range(0, 900);
      update(m);
      if (t == 250) begin th_high = 16'd400; th_low = 16'd350; end
    end
    // disable: all cells off at once
    m = '{default: 900};
    update(m);
    @(negedge clk); en = 0;
    @(negedge clk);
    check(acc_en == '0, "cells not off after disable");
    for (int i = 0; i < N; i++) if (model[i]) begin model[i] = 0; offs++; end
    en = 1;
    update(m);
    check(ons > 0 && offs > 0, $sformatf("turn-on %0d / turn-off %0d never happened", ons, offs));
    $display("turn-on=%0d turn-off=%0d", ons, offs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
