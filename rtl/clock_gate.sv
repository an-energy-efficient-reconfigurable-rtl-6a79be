// clock_gate: integrated clock-gating cell (latch + AND).
//
// The enable is captured by a latch that is transparent while clk is low, so
// it can only change while clk is low and gclk = clk & latched enable has no
// glitches. A change of en made before a rising clk edge takes effect at
// that edge. This is the standard cell a synthesis tool would map it to; the
// latch is intended. Used for the processor sleep gate and the DTLS engine
// clock gate (paper Fig. 4).
module clock_gate (
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
