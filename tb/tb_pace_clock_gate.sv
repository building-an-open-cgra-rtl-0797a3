// tb_pace_clock_gate: self-checking test of the latch-based clock gate.
//
// Changes the enable at random points of both clock phases and checks that
// gclk follows the clock exactly when the enable was high at the end of the
// preceding low phase, that enable changes during the high phase never cut or
// start a pulse, and that test_en forces the clock on.
module tb_pace_clock_gate;
  logic clk = 0, en = 0, test_en = 0, gclk;
  int checks = 0, failures = 0;
  int pulses = 0, expected = 0;

  pace_clock_gate dut (.*);

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge gclk) pulses++;

  initial begin
    logic en_at_rise;
    for (int it = 0; it < 2000; it++) begin
      // low phase: 10 time units, enable may change anywhere in it
      #($urandom_range(1, 8)) en = 1'($urandom);
      test_en = (it % 97 == 5);
      #(9 - 0) ;
      en_at_rise = en | test_en;
      #1 clk = 1;
      #1;
      checks++;
      if (gclk !== en_at_rise) begin failures++; $display("FAIL rise it=%0d", it); end
      if (en_at_rise) expected++;
      // high phase: flip the enable, the pulse must hold
      #3 en = ~en;
      #1;
      checks++;
      if (gclk !== en_at_rise) begin failures++; $display("FAIL glitch it=%0d", it); end
      #5 clk = 0;
      #1;
      checks++;
      if (gclk !== 1'b0) begin failures++; $display("FAIL low"); end
    end
    checks++;
    if (pulses != expected) begin failures++; $display("FAIL count %0d %0d", pulses, expected); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
