// lsd_pkg -- shared types and constants of the leakage monitor.
//
// The leakage monitor watches the local power draw of a chip through a grid
// of ring-oscillator sensors, turns every sensor reading into a leakage
// metric, and switches the adaptive countermeasure cell next to a sensor on
// and off with two thresholds (hysteresis). This package holds what the
// blocks share: default sizes, the processor bus request/response structs,
// the register map of the co-processor and the state type of the
// countermeasure controller.
//
// The sensor grid of 16 follows the 4 x 4 arrangement drawn in the overview
// figure of the design; every width, the bus and the register map are this
// implementation's own choices.
`timescale 1ns/1ps
package lsd_pkg;

  // ---------------------------------------------------------------- sizes
  parameter int unsigned N_SENSORS_DEF   = 16;    // 4 x 4 sensor/ACC grid
  parameter int unsigned CNT_W_DEF       = 16;    // RO edges per window
  parameter int unsigned METRIC_W_DEF    = 16;    // leakage metric width
  parameter int unsigned WIN_W           = 16;    // sampling window length field
  parameter int unsigned WINDOW_DEF      = 1024;  // system clocks per sample
  parameter int unsigned EMA_SHIFT_DEF   = 3;     // metric smoothing, alpha = 1/8

  // ---------------------------------------------------------- processor bus
  // Simple single-beat register bus: the processor raises `valid` with an
  // address; the co-processor answers one cycle later with `ready` and,
  // for a read, the data.
  parameter int unsigned ADDR_W = 10;
  parameter int unsigned DATA_W = 32;

  typedef struct packed {
    logic              valid;
    logic              we;
    logic [ADDR_W-1:0] addr;    // byte address, word aligned
    logic [DATA_W-1:0] wdata;
  } bus_req_t;

  typedef struct packed {
    logic              ready;
    logic [DATA_W-1:0] rdata;
  } bus_rsp_t;

  // ----------------------------------------------------------- register map
  // word registers
  localparam logic [ADDR_W-1:0] REG_CTRL      = 10'h000; // [0] sensors on, [1] detector on, [2] controller on
  localparam logic [ADDR_W-1:0] REG_WINDOW    = 10'h004; // sampling window, system clocks
  localparam logic [ADDR_W-1:0] REG_TH_HIGH   = 10'h008; // Th_high
  localparam logic [ADDR_W-1:0] REG_TH_LOW    = 10'h00C; // Th_low
  localparam logic [ADDR_W-1:0] REG_ALARM     = 10'h010; // live alarm vector (read only)
  localparam logic [ADDR_W-1:0] REG_ALARM_LOG = 10'h014; // sticky alarm vector, write 1 to clear
  localparam logic [ADDR_W-1:0] REG_ACC_EN    = 10'h018; // ACC enable vector (read only)
  localparam logic [ADDR_W-1:0] REG_SAMPLES   = 10'h01C; // number of windows sampled (read only)
  // per-sensor arrays, one word per sensor
  localparam logic [ADDR_W-1:0] ARR_COUNT     = 10'h100; // RO edges of last window (read only)
  localparam logic [ADDR_W-1:0] ARR_REF       = 10'h200; // characterised reference count (read/write)
  localparam logic [ADDR_W-1:0] ARR_METRIC    = 10'h300; // leakage metric (read only)

  // --------------------------------------------------- countermeasure state
  typedef enum logic {ACC_OFF = 1'b0, ACC_ON = 1'b1} acc_state_e;

endpackage
