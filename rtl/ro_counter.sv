// ro_counter -- frequency read-out of one ring-oscillator power sensor.
//
// What it does: counts the rising edges of the ring oscillator during one
// sampling window of the system clock and presents that number as the
// sensor's power reading. A busier neighbourhood lowers the local supply,
// slows the oscillator and so lowers the count.
//
// How it works: the oscillator clocks a free-running binary counter in its
// own clock domain, which is re-coded to Gray code and registered there.
// The Gray word crosses into the system clock domain through a two-flop
// synchroniser (only one bit changes per oscillator edge, so a sample is
// never more than one edge off) and is converted back to binary. On every
// `sample` strobe the difference to the value at the previous strobe, taken
// modulo 2^CNT_W, becomes `count`, and `valid` pulses for one cycle.
//
// Interface and timing:
//   clk, rst_n - system clock and active-low reset (reset is applied
//                asynchronously to the oscillator domain as well).
//   ro_clk     - the oscillator output.
//   sample     - one-cycle strobe that closes a window.
//   count      - edges in the window just closed; registered, valid from
//                the cycle after `sample` onward.
//   valid      - one-cycle pulse in the cycle after `sample`.
// Edges that arrive in the last two system clocks of a window are counted
// in the next window (synchroniser latency); nothing is lost.
// The window must hold fewer than 2^CNT_W oscillator edges.
//
// Reading the sensor through its frequency follows the design; the
// Gray-code crossing and the windowed count are this implementation's
// choices.
`timescale 1ns/1ps
module ro_counter #(
  parameter int unsigned CNT_W = lsd_pkg::CNT_W_DEF
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             ro_clk,
  input  logic             sample,
  output logic [CNT_W-1:0] count,
  output logic             valid
);

  // ------------------------------------------------ oscillator clock domain
  logic [CNT_W-1:0] ro_bin;
  logic [CNT_W-1:0] ro_gray;

  always_ff @(posedge ro_clk or negedge rst_n) begin
    if (!rst_n) begin
      ro_bin  <= '0;
      ro_gray <= '0;
    end else begin
      ro_bin  <= ro_bin + 1'b1;
      ro_gray <= (ro_bin + 1'b1) ^ ((ro_bin + 1'b1) >> 1);
    end
  end

  // ---------------------------------------------------- system clock domain
  logic [CNT_W-1:0] sync1, sync2;
  logic [CNT_W-1:0] sys_bin;
  logic [CNT_W-1:0] last_bin;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync1 <= '0;
      sync2 <= '0;
    end else begin
      sync1 <= ro_gray;
      sync2 <= sync1;
    end
  end

  // Gray to binary: each binary bit is the XOR of all Gray bits above it
  always_comb begin
    sys_bin[CNT_W-1] = sync2[CNT_W-1];
    for (int i = int'(CNT_W) - 2; i >= 0; i--) begin
      sys_bin[i] = sys_bin[i+1] ^ sync2[i];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last_bin <= '0;
      count    <= '0;
      valid    <= 1'b0;
    end else begin
      valid <= sample;
      if (sample) begin
        count    <= sys_bin - last_bin;
        last_bin <= sys_bin;
      end
    end
  end

endmodule
