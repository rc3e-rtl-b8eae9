// clock_gate: glitch-free clock gate. The enable is captured by a latch
// that is open while clk is low, so a change of en can only take effect
// between pulses; gclk is clk ANDed with the latched enable. en must be
// synchronous to clk. On an FPGA this maps to a global buffer with clock
// enable; the latch is intended and is the reason for the latch warning.
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
