// tb_step_counter: with trigger high trig_out must pulse once every 400
// clocks, the first time on the 400th clock after reset; cycles with
// trigger low must not count.
module tb_step_counter;
  logic clk = 0, reset = 1, trigger = 0, trig_out;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  step_counter dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int counted, pulses;
    repeat (2) @(posedge clk);
    @(negedge clk) reset = 0;
    counted = 0; pulses = 0;
    for (int i = 0; i < 20000; i++) begin
      trigger = (i < 4000) ? 1'b1 : (($urandom % 3) != 0);
      #1;
      if (trigger) counted++;
      checks++;
      if (trig_out != (trigger && (counted % 400 == 0))) begin
        failures++;
        $display("FAIL cycle %0d counted %0d trig_out %0b", i, counted, trig_out);
      end
      if (trig_out) pulses++;
      @(negedge clk);
    end
    checks++;
    if (pulses != counted / 400) begin failures++; $display("FAIL pulses %0d", pulses); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
