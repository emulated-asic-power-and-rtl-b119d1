// tb_temperature_monitor: random core powers are applied and a load pulse
// given; one clock later temp_out must equal the reference model (own
// power through the table bin plus K_NB times the other cores' powers)
// within 3 LSB, and it must hold while no load pulse comes.
module tb_temperature_monitor;
  import tpmon_ref_pkg::*;
  logic clk = 0, reset = 1, trig_out = 0;
  logic [16:0] core_pow [4];
  logic [15:0] temp_out [4];
  int checks = 0, failures = 0;
  real expv [4];

  always #5 clk = ~clk;
  temperature_monitor dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < 4; c++) core_pow[c] = 0;
    repeat (2) @(posedge clk); #1;
    for (int c = 0; c < 4; c++) begin
      checks++;
      if (temp_out[c] != 0) begin failures++; $display("FAIL reset value"); end
    end
    @(negedge clk) reset = 0;
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      for (int c = 0; c < 4; c++) core_pow[c] = 17'($urandom % 102001);
      for (int c = 0; c < 4; c++) begin
        int nb;
        nb = 0;
        for (int j = 0; j < 4; j++) if (j != c) nb += int'(core_pow[j]);
        expv[c] = ref_temp(int'(core_pow[c]), nb);
      end
      trig_out = 1;
      @(negedge clk);
      trig_out = 0;
      for (int c = 0; c < 4; c++) core_pow[c] = 17'($urandom % 102001);  // must not be taken
      repeat (3) @(negedge clk);
      for (int c = 0; c < 4; c++) begin
        checks++;
        if (absr(q88_to_c(temp_out[c]) - expv[c]) > 3.0 / 256.0) begin
          failures++;
          $display("FAIL step %0d core %0d: got %f exp %f", i, c, q88_to_c(temp_out[c]), expv[c]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
