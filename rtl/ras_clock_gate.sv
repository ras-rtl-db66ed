// ras_clock_gate: lane clock gate.
//
// A latch-based integrated clock gate: the enable is captured by a latch
// that is transparent while clk is low, and the gated clock is clk AND that
// latched enable, so gclk never glitches when en changes during the high
// phase. The paper gates idle lanes; this standard cell structure is this
// design's choice. The latch that tools report here is intended.
// Timing: en must be valid before the rising edge it is meant to pass.
module ras_clock_gate (
  input  logic clk,
  input  logic en,
  output logic gclk
);

  logic en_l;

  always_latch begin
    if (!clk) en_l = en;
  end

  assign gclk = clk & en_l;

endmodule
