// tb_clock_gate: random enable patterns, changed right after each rising
// edge as the control logic does; every rising edge of clk must appear on
// gclk exactly when en was high before it, and a glitch on en while clk is
// high must not reach gclk.
module tb_clock_gate;
  logic clk = 0, en, gclk;
  int checks = 0, failures = 0, gated = 0, passed = 0;
  logic en_before;

  clock_gate dut (.clk, .en, .gclk);

  initial begin
    en = 1;
    #20;
    for (int t = 0; t < 2000; t++) begin
      // low phase: en settles
      en = $urandom % 3 != 0;
      #4;
      en_before = en;
      #1 clk = 1;
      #1;
      checks++;
      if (gclk !== en_before) begin failures++; $display("FAIL edge %0d", t); end
      if (en_before) passed++; else gated++;
      // a glitch on en during the high phase
      en = ~en;
      #1;
      checks++;
      if (gclk !== en_before) begin failures++; $display("FAIL glitch %0d", t); end
      #2 clk = 0;
      #1;
      checks++;
      if (gclk !== 1'b0) begin failures++; $display("FAIL low phase %0d", t); end
    end
    checks++;
    if (gated == 0 || passed == 0) failures++;
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
