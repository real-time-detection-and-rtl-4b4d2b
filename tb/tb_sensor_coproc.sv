// tb_sensor_coproc -- self-checking test of the co-processor register file.
//
// Checks reset values, write/read-back of every writable register and of
// the per-sensor reference array, that configuration outputs follow the
// writes, that read-only status (counts, metrics, alarm, ACC enables,
// window counter) reads back what the status inputs carry, the sticky
// alarm log with write-1-to-clear (a new alarm wins over a clear), that
// out-of-range and unmapped addresses read 0, and that every request gets
// its response exactly one cycle later.
`timescale 1ns/1ps
module tb_sensor_coproc;
  import lsd_pkg::*;

  localparam int unsigned N  = 6;
  localparam int unsigned CW = 16;
  localparam int unsigned MW = 16;
  localparam int unsigned WR = 500;

  logic             clk = 0, rst_n = 0;
  bus_req_t         req;
  bus_rsp_t         rsp;
  logic             sensors_on, det_en, ctrl_en;
  logic [WIN_W-1:0] window;
  logic [MW-1:0]    th_high, th_low;
  logic [CW-1:0]    ref_cnt [N];
  logic             sample_valid = 0;
  logic [CW-1:0]    count  [N];
  logic [MW-1:0]    metric [N];
  logic [N-1:0]     alarm = '0, acc_en = '0, alarm_log;

  int checks = 0, failures = 0;

  sensor_coproc #(.N_SENSORS(N), .CNT_W(CW), .METRIC_W(MW), .WINDOW_RST(WR)) dut (
    .clk, .rst_n, .req, .rsp, .sensors_on, .det_en, .ctrl_en, .window, .th_high, .th_low,
    .ref_cnt, .sample_valid, .count, .metric, .alarm, .acc_en, .alarm_log);

  always #5ns clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic bus_write(input logic [ADDR_W-1:0] a, input logic [31:0] d);
    @(negedge clk);
    req = '{valid: 1'b1, we: 1'b1, addr: a, wdata: d};
    @(negedge clk);
    req = '0;
    check(rsp.ready === 1'b1, $sformatf("no ready for write to %h", a));
  endtask

  task automatic bus_read(input logic [ADDR_W-1:0] a, output logic [31:0] d);
    @(negedge clk);
    req = '{valid: 1'b1, we: 1'b0, addr: a, wdata: '0};
    @(negedge clk);
    req = '0;
    check(rsp.ready === 1'b1, $sformatf("no ready for read of %h", a));
    d = rsp.rdata;
  endtask

  task automatic expect_read(input logic [ADDR_W-1:0] a, input logic [31:0] e, input string what);
    logic [31:0] d;
    bus_read(a, d);
    check(d == e, $sformatf("%s: read %h from %h, expected %h", what, d, a, e));
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [CW-1:0] refs [N];
    req = '0;
    for (int i = 0; i < N; i++) begin
      count[i]  = CW'(1000 + 17 * i);
      metric[i] = MW'(3 * i + 1);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // reset values
    expect_read(REG_CTRL,    32'd0,      "CTRL reset");
    expect_read(REG_WINDOW,  32'(WR),    "WINDOW reset");
    expect_read(REG_TH_HIGH, 32'hFFFF,   "TH_HIGH reset");
    expect_read(REG_TH_LOW,  32'd0,      "TH_LOW reset");
    expect_read(REG_SAMPLES, 32'd0,      "SAMPLES reset");
    check(!sensors_on && !det_en && !ctrl_en, "enables not off after reset");
    // configuration registers
    bus_write(REG_CTRL, 32'h5);
    check(sensors_on && !det_en && ctrl_en, "CTRL outputs after writing 5");
    expect_read(REG_CTRL, 32'h5, "CTRL");
    bus_write(REG_CTRL, 32'h7);
    check(sensors_on && det_en && ctrl_en, "CTRL outputs after writing 7");
    bus_write(REG_WINDOW, 32'd1234);
    check(window == 16'd1234, "window output");
    expect_read(REG_WINDOW, 32'd1234, "WINDOW");
    bus_write(REG_TH_HIGH, 32'd900);
    bus_write(REG_TH_LOW,  32'd450);
    check(th_high == 16'd900 && th_low == 16'd450, "threshold outputs");
    expect_read(REG_TH_HIGH, 32'd900, "TH_HIGH");
    expect_read(REG_TH_LOW,  32'd450, "TH_LOW");
    // reference array
    for (int i = 0; i < N; i++) begin
      refs[i] = CW'($urandom);
      bus_write(ARR_REF + ADDR_W'(4 * i), 32'(refs[i]));
    end
    for (int i = 0; i < N; i++) begin
      check(ref_cnt[i] == refs[i], $sformatf("ref_cnt[%0d] output", i));
      expect_read(ARR_REF + ADDR_W'(4 * i), 32'(refs[i]), "REF");
    end
    // read-only status
    for (int i = 0; i < N; i++) begin
      expect_read(ARR_COUNT  + ADDR_W'(4 * i), 32'(1000 + 17 * i), "COUNT");
      expect_read(ARR_METRIC + ADDR_W'(4 * i), 32'(3 * i + 1),     "METRIC");
    end
    expect_read(ARR_COUNT + ADDR_W'(4 * N), 32'd0, "COUNT beyond N");
    expect_read(ARR_REF   + ADDR_W'(4 * N), 32'd0, "REF beyond N");
    expect_read(10'h020, 32'd0, "unmapped word");
    acc_en = 6'b100101;
    expect_read(REG_ACC_EN, 32'b100101, "ACC_EN");
    bus_write(ARR_COUNT, 32'hDEAD);                 // read-only: ignored
    expect_read(ARR_COUNT, 32'd1000, "COUNT write ignored");
    // sample counter
    repeat (5) begin
      @(negedge clk); sample_valid = 1;
      @(negedge clk); sample_valid = 0;
    end
    expect_read(REG_SAMPLES, 32'd5, "SAMPLES");
    // alarm: live and sticky
    @(negedge clk); alarm = 6'b000110;
    @(negedge clk); alarm = 6'b000000;
    expect_read(REG_ALARM,     32'd0,       "ALARM live after drop");
    expect_read(REG_ALARM_LOG, 32'b000110,  "ALARM_LOG sticky");
    check(alarm_log == 6'b000110, "alarm_log output");
    bus_write(REG_ALARM_LOG, 32'b000010);           // clear bit 1
    expect_read(REG_ALARM_LOG, 32'b000100,  "ALARM_LOG after clear");
    // a clear in the same cycle as a new alarm on that bit keeps the bit
    @(negedge clk);
    alarm = 6'b000100;
    req = '{valid: 1'b1, we: 1'b1, addr: REG_ALARM_LOG, wdata: 32'b000100};
    @(negedge clk);
    req = '0; alarm = '0;
    expect_read(REG_ALARM_LOG, 32'b000100,  "new alarm wins over clear");
    alarm = 6'b100000;
    expect_read(REG_ALARM, 32'b100000, "ALARM live");
    alarm = '0;
    expect_read(REG_ALARM_LOG, 32'b100100, "ALARM_LOG collects");
    bus_write(REG_ALARM_LOG, 32'h3F);
    expect_read(REG_ALARM_LOG, 32'd0, "ALARM_LOG after clear all");
    // no response without a request
    repeat (3) begin
      @(negedge clk);
      check(rsp.ready == 1'b0, "ready without request");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
