// sensor_coproc -- processor-facing register interface of the leakage
// monitor.
//
// What it does: the power sensors sit in the SoC as a co-processor of the
// host processor. Through this block software switches sensors, detector
// and controller on, sets the sampling window and the two thresholds,
// stores the characterised reference count of every sensor, and reads back
// raw sensor counts, leakage metrics, the alarm vector (which sensor saw
// leakage), a sticky copy of it, the countermeasure enables and a count of
// sampled windows.
//
// How it works: a flat register file on a single-beat bus. A request is
// accepted whenever `req.valid` is high; in the next cycle `rsp.ready` is
// high and, for a read, `rsp.rdata` holds the register. Writes take effect
// in the cycle after the request. Unmapped reads return 0, unmapped writes
// are ignored. Register map (byte addresses, see lsd_pkg):
//   0x000 CTRL      [0] sensors on  [1] detector on  [2] controller on
//   0x004 WINDOW    system clocks per sampling window (reset WINDOW_RST)
//   0x008 TH_HIGH   reset all ones (no alarm until programmed)
//   0x00C TH_LOW    reset 0
//   0x010 ALARM     live alarm vector, read only
//   0x014 ALARM_LOG sticky alarm vector, write 1 to clear a bit
//   0x018 ACC_EN    countermeasure enables, read only
//   0x01C SAMPLES   windows sampled since reset, read only
//   0x100 + 4*i     COUNT[i]  read only
//   0x200 + 4*i     REF[i]    read/write, reset 0
//   0x300 + 4*i     METRIC[i] read only
//
// Interface and timing: `req`/`rsp` as above (structs of lsd_pkg). All
// outputs are registers. `sample_valid` is the sensors' one-cycle reading
// strobe and only advances SAMPLES. `alarm_log` is the sticky alarm vector,
// brought out for an interrupt line.
//
// That the sensors are reached as a co-processor of the processor follows
// the design; the bus, the register map and the reset values are this
// implementation's own choices. At most 32 sensors fit the vector registers
// and at most 64 the arrays.
`timescale 1ns/1ps
module sensor_coproc #(
  parameter int unsigned N_SENSORS  = lsd_pkg::N_SENSORS_DEF,
  parameter int unsigned CNT_W      = lsd_pkg::CNT_W_DEF,
  parameter int unsigned METRIC_W   = lsd_pkg::METRIC_W_DEF,
  parameter int unsigned WINDOW_RST = lsd_pkg::WINDOW_DEF
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  lsd_pkg::bus_req_t         req,
  output lsd_pkg::bus_rsp_t         rsp,
  // configuration out
  output logic                      sensors_on,
  output logic                      det_en,
  output logic                      ctrl_en,
  output logic [lsd_pkg::WIN_W-1:0] window,
  output logic [METRIC_W-1:0]       th_high,
  output logic [METRIC_W-1:0]       th_low,
  output logic [CNT_W-1:0]          ref_cnt [N_SENSORS],
  // status in
  input  logic                      sample_valid,
  input  logic [CNT_W-1:0]          count  [N_SENSORS],
  input  logic [METRIC_W-1:0]       metric [N_SENSORS],
  input  logic [N_SENSORS-1:0]      alarm,
  input  logic [N_SENSORS-1:0]      acc_en,
  output logic [N_SENSORS-1:0]      alarm_log
);

  import lsd_pkg::*;

  initial begin
    assert (N_SENSORS >= 1 && N_SENSORS <= 32)
      else $error("sensor_coproc: N_SENSORS must be 1..32");
  end

  logic [DATA_W-1:0]    samples;

  // decode of the request
  logic       wr, rd;
  logic [1:0] arr_sel;   // 1 COUNT, 2 REF, 3 METRIC, 0 word registers
  logic [5:0] arr_idx;
  logic       idx_ok;
  localparam int unsigned IDX_W = (N_SENSORS > 1) ? $clog2(N_SENSORS) : 1;
  logic [IDX_W-1:0] idx;

  assign wr      = req.valid &&  req.we;
  assign rd      = req.valid && !req.we;
  assign arr_sel = req.addr[9:8];
  assign arr_idx = req.addr[7:2];
  assign idx_ok  = 32'(arr_idx) < N_SENSORS;
  assign idx     = arr_idx[IDX_W-1:0];

  // ------------------------------------------------------------- registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sensors_on <= 1'b0;
      det_en     <= 1'b0;
      ctrl_en    <= 1'b0;
      window     <= WIN_W'(WINDOW_RST);
      th_high    <= '1;
      th_low     <= '0;
      alarm_log  <= '0;
      samples    <= '0;
      for (int i = 0; i < int'(N_SENSORS); i++) ref_cnt[i] <= '0;
    end else begin
      if (sample_valid) samples <= samples + 1'b1;
      // sticky alarm log: a new alarm wins over a clear in the same cycle
      alarm_log <= alarm_log | alarm;
      if (wr) begin
        if (arr_sel == 2'd0) begin
          unique case (req.addr)
            REG_CTRL: begin
              sensors_on <= req.wdata[0];
              det_en     <= req.wdata[1];
              ctrl_en    <= req.wdata[2];
            end
            REG_WINDOW:    window  <= req.wdata[WIN_W-1:0];
            REG_TH_HIGH:   th_high <= req.wdata[METRIC_W-1:0];
            REG_TH_LOW:    th_low  <= req.wdata[METRIC_W-1:0];
            REG_ALARM_LOG: alarm_log <= (alarm_log & ~req.wdata[N_SENSORS-1:0]) | alarm;
            default: ;
          endcase
        end else if (arr_sel == ARR_REF[9:8] && idx_ok) begin
          ref_cnt[idx] <= req.wdata[CNT_W-1:0];
        end
      end
    end
  end

  // ------------------------------------------------------------ read path
  logic [DATA_W-1:0] rdata_d;

  always_comb begin
    rdata_d = '0;
    unique case (arr_sel)
      2'd0: begin
        unique case (req.addr)
          REG_CTRL:      rdata_d = ({29'd0, ctrl_en, det_en, sensors_on});
          REG_WINDOW:    rdata_d = (DATA_W'(window));
          REG_TH_HIGH:   rdata_d = (DATA_W'(th_high));
          REG_TH_LOW:    rdata_d = (DATA_W'(th_low));
          REG_ALARM:     rdata_d = (DATA_W'(alarm));
          REG_ALARM_LOG: rdata_d = (DATA_W'(alarm_log));
          REG_ACC_EN:    rdata_d = (DATA_W'(acc_en));
          REG_SAMPLES:   rdata_d = samples;
          default:       rdata_d = '0;
        endcase
      end
      ARR_COUNT[9:8]: if (idx_ok) rdata_d = DATA_W'(count[idx]);
      ARR_REF[9:8]: if (idx_ok) rdata_d = DATA_W'(ref_cnt[idx]);
      ARR_METRIC[9:8]: if (idx_ok) rdata_d = DATA_W'(metric[idx]);
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rsp <= '0;
    end else begin
      rsp.ready <= req.valid;
      rsp.rdata <= rd ? rdata_d : '0;
    end
  end

  // --------------------------------------------------------- bus protocol
  // a response appears exactly one cycle after each request and never
  // otherwise
  a_rsp_follows_req: assert property (@(posedge clk) disable iff (!rst_n)
    req.valid |=> rsp.ready);
  a_no_spurious_rsp: assert property (@(posedge clk) disable iff (!rst_n)
    rsp.ready |-> $past(req.valid));
  a_aligned: assert property (@(posedge clk) disable iff (!rst_n)
    req.valid |-> req.addr[1:0] == 2'b00);

endmodule
