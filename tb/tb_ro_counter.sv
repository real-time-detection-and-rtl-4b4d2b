// tb_ro_counter -- self-checking test of the ring-oscillator read-out.
//
// An oscillator with a known period (not a multiple of the system clock)
// drives the counter; a strobe closes a window every W system clocks. Each
// reading must equal the number of oscillator edges in the window within
// one edge, `valid` must follow `sample` by exactly one cycle, and the sum
// of all readings must track the total number of edges (the synchroniser
// holds back at most the edges of three system clocks). CNT_W is cut to 8 bits so the oscillator
// counter wraps many times during the run; the period changes half-way.
`timescale 1ns/1ps
module tb_ro_counter;

  localparam int unsigned CNT_W = 8;
  localparam int unsigned W     = 80;          // system clocks per window
  localparam realtime     TCLK  = 20ns;

  logic             clk = 0, rst_n = 0, ro_clk = 0, sample = 0;
  logic [CNT_W-1:0] count;
  logic             valid;
  int               checks = 0, failures = 0;
  realtime          ro_half = 3.65ns;
  longint           edges = 0;                 // oscillator edges so far
  longint           total = 0;                 // sum of readings
  int               windows = 0;

  ro_counter #(.CNT_W(CNT_W)) dut (.clk, .rst_n, .ro_clk, .sample, .count, .valid);

  always #(TCLK/2) clk = ~clk;
  always begin
    #(ro_half) ro_clk = ~ro_clk;
    if (ro_clk && rst_n) edges++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // valid must follow sample by exactly one cycle
  logic sample_q = 0;
  always @(posedge clk) begin
    sample_q <= sample;
    if (rst_n) begin
      if (valid != sample_q) begin
        failures++;
        $display("FAIL: valid does not follow sample by one cycle");
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 120; n++) begin
      realtime per;
      int      expect_cnt;
      if (n == 60) ro_half = 5.55ns;
      per = 2 * ro_half;
      repeat (W - 2) @(posedge clk);
      sample <= 1'b1;
      @(posedge clk);                 // the counter sees the strobe here
      sample <= 1'b0;
      #1ns;                           // valid and count are visible now
      checks++;
      if (!valid) begin failures++; $display("FAIL: no valid after sample"); end
      total += count;
      windows++;
      // the first window after reset and after the period change are partial
      if (n != 0 && n != 60 && n != 61) begin
        expect_cnt = int'($floor((W * TCLK) / per));
        check(int'(count) >= expect_cnt - 1 && int'(count) <= expect_cnt + 1,
              $sformatf("window %0d: count %0d, expected %0d +-1", n, count, expect_cnt));
      end
      // edges still in the synchroniser or after the window edge
      check(edges - total >= 0 && edges - total <= longint'(3 * TCLK / per) + 2,
            $sformatf("window %0d: running sum %0d vs %0d edges", n, total, edges));
      // back to a whole-window cadence: one cycle already spent above
      @(posedge clk);
    end
    $display("windows=%0d edges=%0d", windows, edges);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
