// ro_sensor -- BEHAVIOURAL MODEL of a digital ring-oscillator power sensor.
// Not synthesizable: in silicon this is an odd chain of inverters closed
// through a NAND gate (the enable), laid out next to the logic it watches.
//
// How it works: the delay of every stage grows as the local supply sags, so
// the oscillation frequency falls when the nearby logic draws more current.
// The model has no supply pin; the input `droop` stands for the local supply
// drop (0 = nominal supply, 255 = deepest drop) and is the physical coupling
// between the watched logic and the sensor, not a wire of the real cell.
//
// Interface and timing:
//   en     - oscillator runs while high; while low `osc` rests at 0.
//   droop  - local supply drop code, sampled at every stage hand-over.
//   osc    - oscillator output; each half period lasts
//            STAGES * (STAGE_PS + DROOP_PS_PER_LSB * droop) picoseconds.
//
// Using a ring oscillator as the power sensor follows the design; the
// number of stages and the linear delay-versus-droop law are this model's
// own choices (a first-order model of gate delay against supply).
`timescale 1ns/1ps
module ro_sensor #(
  parameter int unsigned STAGES           = 31,  // inverter stages (odd)
  parameter int unsigned STAGE_PS         = 100, // stage delay at nominal supply
  parameter int unsigned DROOP_PS_PER_LSB = 2    // extra stage delay per droop LSB
) (
  input  logic       en,
  input  logic [7:0] droop,
  output logic       osc
);

  initial begin
    assert (STAGES % 2 == 1) else $error("ro_sensor: STAGES must be odd");
  end

  // half period in picoseconds for the present supply drop
  function automatic int unsigned half_period_ps(input logic [7:0] d);
    return STAGES * (STAGE_PS + DROOP_PS_PER_LSB * int'(d));
  endfunction

  initial osc = 1'b0;

  always begin
    if (!en) begin
      osc = 1'b0;
      @(posedge en);
    end
    #(half_period_ps(droop) * 1ps);
    if (en) osc = ~osc;
  end

endmodule
