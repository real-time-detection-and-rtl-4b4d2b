// tb_ro_sensor -- self-checking test of the ring-oscillator sensor model.
//
// Measures the oscillation period for several supply-drop codes and checks
// it against 2 * STAGES * (STAGE_PS + DROOP_PS_PER_LSB * droop) picoseconds,
// worked out here from the parameters; checks that a larger drop gives a
// lower frequency, and that the output rests at 0 while disabled.
`timescale 1ns/1ps
module tb_ro_sensor;

  localparam int unsigned STAGES = 31;
  localparam int unsigned STG    = 100;
  localparam int unsigned DPS    = 2;

  logic       en;
  logic [7:0] droop;
  logic       osc;
  int         checks = 0, failures = 0;

  ro_sensor #(.STAGES(STAGES), .STAGE_PS(STG), .DROOP_PS_PER_LSB(DPS)) dut (.en, .droop, .osc);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // period of one full cycle, measured between two rising edges
  task automatic measure(output realtime per);
    realtime t0;
    @(posedge osc); t0 = $realtime;
    @(posedge osc); per = $realtime - t0;
  endtask

  initial begin : watchdog
    #1ms;
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    realtime per, prev_per;
    int unsigned codes [5] = '{0, 1, 50, 128, 255};
    en = 0; droop = 0;
    #20ns;
    check(osc == 1'b0, "output not at rest while disabled");
    en = 1;
    prev_per = 0;
    foreach (codes[k]) begin
      realtime expect_per;
      droop = 8'(codes[k]);
      @(posedge osc);                       // let the new code take effect
      measure(per);
      expect_per = 2.0 * STAGES * (STG + DPS * codes[k]) * 1ps;
      check((per > expect_per ? per - expect_per : expect_per - per) < 0.5ps,
            $sformatf("droop=%0d period %0t, expected %0t", codes[k], per, expect_per));
      check(per > prev_per, $sformatf("droop=%0d: frequency did not fall", codes[k]));
      prev_per = per;
    end
    en = 0;
    #20ns;
    check(osc == 1'b0, "output not at rest after disable");
    begin
      bit toggled = 0;
      fork
        begin @(osc); toggled = 1; end
        #100ns;
      join_any
      disable fork;
      check(!toggled, "output toggles while disabled");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
