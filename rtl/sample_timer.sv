// sample_timer -- sampling-window timer shared by all power sensors.
//
// Counts system clocks while `run` is high and pulses `sample` for one cycle
// every `window` cycles, so that all ring-oscillator read-outs close their
// windows in the same cycle. A `window` of 0 or 1 is treated as 1 (a strobe
// every cycle). Lowering `run` restarts the count. The window length is
// programmable by the processor; its reset default is this design's choice.
`timescale 1ns/1ps
module sample_timer #(
  parameter int unsigned WIN_W = lsd_pkg::WIN_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             run,
  input  logic [WIN_W-1:0] window,
  output logic             sample
);

  logic [WIN_W-1:0] cnt;
  logic             last;

  assign last = (cnt + 1'b1 >= window);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt    <= '0;
      sample <= 1'b0;
    end else if (!run) begin
      cnt    <= '0;
      sample <= 1'b0;
    end else begin
      sample <= last;
      cnt    <= last ? '0 : cnt + 1'b1;
    end
  end

endmodule
