// tb_power_monitor: a random instruction and stall stream with a step every
// 400 cycles; one clock after each boundary core_pow must equal the
// reference energy of the 400 cycles of that step, and must hold until the
// next boundary.
module tb_power_monitor;
  import tpmon_ref_pkg::*;
  logic clk = 0, reset = 1, trig_out = 0;
  logic [31:0] instruction = 32'h0100_0000;
  logic        pipeline_stall = 0;
  logic [16:0] core_pow;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  power_monitor dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int model, last;
    repeat (2) @(posedge clk);
    @(negedge clk) reset = 0;
    model = 0; last = 0;
    for (int i = 0; i < 400 * 20; i++) begin
      instruction    = $urandom;
      pipeline_stall = ($urandom % 5) == 0;
      trig_out       = (i % 400) == 399;
      model += pipeline_stall ? STALL_PJ : ref_energy(instruction);
      @(posedge clk); #1;
      if (trig_out) begin last = model; model = 0; end
      checks++;
      if (int'(core_pow) != last) begin
        failures++;
        $display("FAIL cycle %0d: core_pow %0d exp %0d", i, core_pow, last);
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
