// pace_clock_gate: latch-based clock gate of a PE.
//
// The enable is sampled by a latch that is transparent while the clock is
// low, and the latch output (eno) is ANDed with the clock to give the gated
// clock. Because the latch is closed while the clock is high, a change of the
// enable during the high phase cannot cut a pulse short. The paper's
// clock-gating diagram labels the signal eno and the AND gate that produces
// the gated clock; the storage element in front of the AND is drawn without a
// name, and reading it as a low-transparent latch (the usual integrated clock
// gate) is this design's choice. The test enable input is this design's
// addition so that scan or bring-up can force the clock on.
//
// The latch is intended: it is the storage element of the gate, and a lint
// tool will report it as a latch.
module pace_clock_gate (
  input  logic clk,
  input  logic en,
  input  logic test_en,
  output logic gclk
);

  logic eno;

  always_latch begin
    if (!clk) eno = en | test_en;
  end

  assign gclk = clk & eno;

endmodule
