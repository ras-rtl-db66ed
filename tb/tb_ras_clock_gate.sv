// tb_ras_clock_gate: counts rising edges of the gated clock while the
// enable is toggled, and checks that an enable raised or dropped during the
// high phase does not cut or create a pulse.
module tb_ras_clock_gate;
  logic clk = 0;
  always #5 clk = ~clk;
  logic en, gclk;
  int gedges = 0;
  int checks = 0, failures = 0;

  ras_clock_gate dut (.*);

  always @(posedge gclk) gedges++;

  initial begin
    en = 0;
    repeat (4) @(negedge clk);
    checks++; if (gedges != 0) failures++;
    en = 1;
    repeat (10) @(negedge clk);
    checks++; if (gedges != 10) begin failures++; $display("edges %0d", gedges); end
    en = 0;
    repeat (5) @(negedge clk);
    checks++; if (gedges != 10) failures++;
    // change enable in the high phase: must not glitch
    @(posedge clk); #1 en = 1;
    #2; checks++; if (gclk !== 1'b0) failures++;
    @(negedge clk);
    @(posedge clk); #1 en = 0;
    #2; checks++; if (gclk !== 1'b1) failures++;
    @(negedge clk);
    checks++; if (gedges != 11) begin failures++; $display("edges %0d", gedges); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
