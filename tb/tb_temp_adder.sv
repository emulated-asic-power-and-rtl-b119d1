// tb_temp_adder: random operands must add exactly; sums above the 16-bit
// range must saturate at 0xFFFF.
module tb_temp_adder;
  logic [15:0] single_core_temps [4];
  logic [15:0] neighbour_effect_temps [4];
  logic [15:0] temps [4];
  int checks = 0, failures = 0;

  temp_adder dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2000; i++) begin
      for (int c = 0; c < 4; c++) begin
        single_core_temps[c]      = 16'($urandom);
        neighbour_effect_temps[c] = (i % 2) ? 16'($urandom) : 16'($urandom % 4096);
      end
      #1;
      for (int c = 0; c < 4; c++) begin
        int s;
        s = int'(single_core_temps[c]) + int'(neighbour_effect_temps[c]);
        if (s > 65535) s = 65535;
        checks++;
        if (int'(temps[c]) != s) begin
          failures++;
          $display("FAIL %0d + %0d = %0d", single_core_temps[c], neighbour_effect_temps[c], temps[c]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
