// tb_clk_gate -- self-checking test of the latch-based clock gate.
// Counts gated pulses for enable patterns changed while the clock is low,
// and checks that changing the enable while the clock is high neither cuts
// nor starts a pulse (no glitches).
module tb_clk_gate;
  logic clk_i = 0, en_i = 0, test_en_i = 0, clk_o;
  int checks = 0, failures = 0;
  int pulses = 0;

  clk_gate dut (.*);

  always #5 clk_i = ~clk_i;
  always @(posedge clk_o) pulses++;

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic count_for(input int cycles, input int expected);
    pulses = 0;
    repeat (cycles) @(negedge clk_i);
    checks++;
    if (pulses != expected) begin
      failures++;
      $display("expected %0d gated pulses, saw %0d", expected, pulses);
    end
  endtask

  initial begin
    @(negedge clk_i);
    en_i = 0; count_for(10, 0);
    en_i = 1; count_for(10, 10);
    en_i = 0; test_en_i = 1; count_for(7, 7);
    test_en_i = 0; count_for(5, 0);
    // random enables set while the clock is low
    for (int n = 0; n < 200; n++) begin
      bit e;
      e = $urandom_range(0, 1) == 1;
      en_i = e;
      pulses = 0;
      @(negedge clk_i);
      checks++;
      if (pulses != int'(e)) begin failures++; $display("random step %0d wrong", n); end
    end
    // enable dropped while the clock is high: the pulse must finish intact
    en_i = 1;
    @(posedge clk_i); #2;
    en_i = 0; #1;
    checks++;
    if (clk_o !== 1'b1) begin failures++; $display("gated clock cut short"); end
    @(negedge clk_i); #1;
    // enable raised while the clock is high: no pulse may start
    @(posedge clk_i); #2;
    en_i = 1; #1;
    checks++;
    if (clk_o !== 1'b0) begin failures++; $display("glitch on gated clock"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
