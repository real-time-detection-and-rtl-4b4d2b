// tb_leakage_monitor_top -- end-to-end test of the leakage monitor at its
// default size (16 sensors, 16-bit counts and metrics, 1024-clock window).
//
// The testbench plays the host processor (register bus), the chip's logic
// (the supply drop each ring oscillator sees) and the countermeasure cells
// (an ACC that is on flattens the local power draw back to its quiet level).
//   1. Characterise: all sensors on, every site at its own quiet supply
//      drop; each COUNT must match the oscillator's frequency worked out
//      here from the model's delay law (+-1 edge). The mean of four windows
//      becomes the site's REF.
//   2. Quiet run with detection and control on: no alarm, no ACC.
//   3. Leaking run: sites 5 and 10 draw data-dependent power (their supply
//      drop alternates window by window). Their metrics, read over the bus,
//      must equal a reference model fed with the COUNT values read over the
//      bus; their alarms rise, their ACCs switch on one cycle after the
//      alarm, the flattened power lets the metric fall below Th_low and the
//      ACC switches off again, and so on, as in the on/off pattern of the
//      two-threshold scheme. No other site may ever alarm or switch on.
//   4. Leak stops: ACCs end off; the sticky alarm log names exactly sites 5
//      and 10 and raises irq until software clears it.
//   5. Software turns detection off and shortens the sampling window to 100
//      clocks: windows close at the new cadence and the counts scale with it.
// Mechanisms counted (each must happen): windows sampled, alarms raised,
// ACC turn-on, ACC turn-off, ACC held on with the metric between the two
// thresholds (hysteresis), interrupt raised and cleared, window length
// changed. The window cadence is also checked at the default length.
`timescale 1ns/1ps
module tb_leakage_monitor_top;
  import lsd_pkg::*;

  localparam int unsigned N      = N_SENSORS_DEF;
  localparam int unsigned WIN    = WINDOW_DEF;
  localparam realtime     TCLK   = 20ns;
  // must agree with the top's default ring oscillator parameters
  localparam int unsigned STAGES = 31, STG_PS = 100, DROOP_PS = 2;
  localparam int unsigned TH_HI  = 200, TH_LO = 80;
  localparam int unsigned LEAK_DROOP = 40;

  logic         clk = 0, rst_n = 0;
  bus_req_t     bus_req;
  bus_rsp_t     bus_rsp;
  logic [7:0]   droop [N];
  logic [N-1:0] acc_en, alarm;
  logic         irq;

  leakage_monitor_top dut (.clk, .rst_n, .bus_req, .bus_rsp, .droop, .acc_en, .alarm, .irq);

  always #(TCLK/2) clk = ~clk;

  int checks = 0, failures = 0;
  int n_windows = 0, n_short = 0, n_alarm = 0, n_on = 0, n_off = 0, n_hold = 0, n_irq = 0, n_irq_clr = 0;
  logic [7:0] base [N];
  bit leaking [N];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic bus_write(input logic [ADDR_W-1:0] a, input logic [31:0] d);
    @(negedge clk);
    bus_req = '{valid: 1'b1, we: 1'b1, addr: a, wdata: d};
    @(negedge clk);
    bus_req = '0;
  endtask

  task automatic bus_read(input logic [ADDR_W-1:0] a, output logic [31:0] d);
    @(negedge clk);
    bus_req = '{valid: 1'b1, we: 1'b0, addr: a, wdata: '0};
    @(negedge clk);
    bus_req = '0;
    d = bus_rsp.rdata;
  endtask

  // waits for the next closed window by polling SAMPLES; a skipped window
  // would break the metric model and counts as a failure
  logic [31:0] samples_seen = 0;
  realtime     t_window = 0, t_window_prev = 0;   // when the last two windows were seen
  task automatic next_window();
    logic [31:0] s;
    do bus_read(REG_SAMPLES, s); while (s == samples_seen);
    t_window_prev = t_window;
    t_window = $realtime;
    check(s == samples_seen + 1, $sformatf("missed a window (%0d -> %0d)", samples_seen, s));
    samples_seen = s;
    n_windows++;
  endtask

  // expected count for a steady supply drop: window length / RO period
  function automatic int expect_count(input int d, input int win);
    real ro_period_ns, window_ns;
    ro_period_ns = 2.0 * STAGES * (STG_PS + DROOP_PS * d) / 1000.0;
    window_ns    = win * (TCLK / 1ns);
    return int'($floor(window_ns / ro_period_ns));
  endfunction

  // ACC turns on exactly one cycle after its alarm rises; count events
  logic [N-1:0] alarm_q = '0, acc_q = '0, alarm_prev = '0;
  logic irq_q = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      for (int i = 0; i < N; i++) begin
        if (alarm_q[i] && !acc_q[i]) begin
          checks++;
          if (!acc_en[i]) begin failures++; $display("FAIL: ACC %0d not on one cycle after alarm", i); end
        end
        if (alarm[i] && !alarm_prev[i]) n_alarm++;
        if (acc_en[i] && !acc_q[i]) n_on++;
        if (!acc_en[i] && acc_q[i]) n_off++;
        if ((acc_en[i] || alarm[i]) && !leaking[i]) begin
          failures++;
          $display("FAIL: site %0d alarms or protects without leaking", i);
        end
      end
      if (irq && !irq_q) n_irq++;
      if (!irq && irq_q) n_irq_clr++;
    end
    alarm_q <= alarm & ~acc_en;   // alarm seen while the cell was still off
    acc_q   <= acc_en;
    alarm_prev <= alarm;
    irq_q   <= irq;
  end

  initial begin : watchdog
    repeat (400 * WIN) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    int          sum [N];
    int          model_m [N];
    bit          phase_hi [N];
    bus_req = '0;
    for (int i = 0; i < N; i++) begin
      base[i]  = 8'(20 + 4 * i);        // every site has its own quiet drop
      droop[i] = base[i];
      sum[i] = 0; model_m[i] = 0; leaking[i] = 0; phase_hi[i] = 0;
    end
    repeat (4) @(negedge clk);
    rst_n = 1;
    bus_read(REG_WINDOW, d);
    check(d == WIN, "WINDOW reset value");

    // ---------------------------------------------------- 1. characterise
    bus_write(REG_CTRL, 32'h1);
    next_window();                       // first window starts mid-way
    for (int w = 0; w < 4; w++) begin
      next_window();
      for (int i = 0; i < N; i++) begin
        int e;
        bus_read(ARR_COUNT + ADDR_W'(4 * i), d);
        e = expect_count(int'(base[i]), WIN);
        check(int'(d) >= e - 1 && int'(d) <= e + 1,
              $sformatf("site %0d count %0d, expected %0d +-1", i, d, e));
        sum[i] += int'(d);
      end
    end
    for (int i = 0; i < N; i++) bus_write(ARR_REF + ADDR_W'(4 * i), 32'((sum[i] + 2) / 4));
    bus_write(REG_TH_HIGH, TH_HI);
    bus_write(REG_TH_LOW,  TH_LO);

    // ------------------------------------------------------- 2. quiet run
    bus_write(REG_CTRL, 32'h7);
    repeat (10) begin
      next_window();
      // window cadence seen through polling (two clocks per poll)
      check(t_window - t_window_prev >= (WIN - 2) * TCLK && t_window - t_window_prev <= (WIN + 2) * TCLK,
            $sformatf("window lasted %0t, expected %0d clocks", t_window - t_window_prev, WIN));
    end
    check(alarm == '0 && acc_en == '0 && !irq, "alarm or ACC during quiet run");
    bus_read(REG_ALARM_LOG, d);
    check(d == 0, "alarm log not empty after quiet run");

    // ---------------------------------------------------- 3. leaking run
    leaking[5] = 1; leaking[10] = 1;
    for (int i = 0; i < N; i++) begin
      bus_read(ARR_METRIC + ADDR_W'(4 * i), d);
      model_m[i] = int'(d);
    end
    for (int w = 0; w < 140; w++) begin
      // the chip's activity for the coming window: leaking sites alternate
      // their draw unless their ACC is on, which flattens it
      for (int i = 0; i < N; i++) begin
        if (leaking[i] && !acc_en[i]) begin
          phase_hi[i] = !phase_hi[i];
          droop[i] = phase_hi[i] ? 8'(base[i] + LEAK_DROOP) : base[i];
        end else begin
          droop[i] = base[i];
        end
      end
      next_window();
      for (int i = 0; i < N; i++) begin
        if (leaking[i]) begin
          logic [31:0] c, r, m;
          int dev;
          bus_read(ARR_COUNT  + ADDR_W'(4 * i), c);
          bus_read(ARR_REF    + ADDR_W'(4 * i), r);
          bus_read(ARR_METRIC + ADDR_W'(4 * i), m);
          dev = (int'(c) > int'(r)) ? int'(c) - int'(r) : int'(r) - int'(c);
          model_m[i] = model_m[i] + int'($floor(real'(dev - model_m[i]) / 8.0));
          check(int'(m) == model_m[i],
                $sformatf("window %0d site %0d metric %0d, model %0d", w, i, m, model_m[i]));
          if (acc_en[i] && int'(m) <= TH_HI && int'(m) >= TH_LO) n_hold++;
        end
      end
    end

    // ------------------------------------------------------ 4. leak stops
    for (int i = 0; i < N; i++) droop[i] = base[i];
    repeat (40) next_window();
    check(acc_en == '0, "ACC still on after the leak stopped");
    bus_read(REG_ALARM_LOG, d);
    check(d == ((32'd1 << 5) | (32'd1 << 10)), $sformatf("alarm log %h does not name sites 5 and 10", d));
    check(irq == 1'b1, "irq not raised");
    bus_write(REG_ALARM_LOG, 32'hFFFF);
    @(negedge clk);
    check(irq == 1'b0, "irq not cleared");

    // ------------------------------------------- 5. shorter sample window
    // the references belong to the old window length: detection off first
    bus_write(REG_CTRL, 32'h1);
    bus_write(REG_WINDOW, 32'd100);
    repeat (2) next_window();            // the window running at the write may be partial
    repeat (4) begin
      next_window();
      check(t_window - t_window_prev >= 98 * TCLK && t_window - t_window_prev <= 102 * TCLK,
            $sformatf("window lasted %0t, expected 100 clocks", t_window - t_window_prev));
      n_short++;
    end
    for (int i = 0; i < N; i++) begin
      int e;
      bus_read(ARR_COUNT + ADDR_W'(4 * i), d);
      e = expect_count(int'(base[i]), 100);
      check(int'(d) >= e - 1 && int'(d) <= e + 1,
            $sformatf("short window: site %0d count %0d, expected %0d +-1", i, d, e));
    end

    check(n_windows > 0, "no window sampled");
    check(n_alarm > 0,   "no alarm raised");
    check(n_on >= 4,     $sformatf("ACC turned on only %0d times", n_on));
    check(n_off >= 4,    $sformatf("ACC turned off only %0d times", n_off));
    check(n_hold > 0,    "hysteresis hold never seen");
    check(n_irq > 0 && n_irq_clr > 0, "interrupt not raised and cleared");
    check(n_short > 0,   "window length never changed");
    $display("short_windows=%0d", n_short);
    $display("windows=%0d alarms=%0d acc_on=%0d acc_off=%0d hold=%0d irq=%0d irq_clear=%0d",
             n_windows, n_alarm, n_on, n_off, n_hold, n_irq, n_irq_clr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
