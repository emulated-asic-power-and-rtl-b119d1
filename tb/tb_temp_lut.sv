// tb_temp_lut: for powers spread over the whole range the table output must
// match the floating-point thermal model T_BASE + K_SELF * P within 2 LSB
// (1/128 degC), P taken at the centre of the table bin.
module tb_temp_lut;
  import tpmon_ref_pkg::*;
  logic [16:0] core_pow [4];
  logic [15:0] single_core_temps [4];
  int checks = 0, failures = 0;

  temp_lut dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 1000; i++) begin
      for (int c = 0; c < 4; c++) core_pow[c] = (i < 4) ? 17'(i * 40000) : 17'($urandom % 102001);
      #1;
      for (int c = 0; c < 4; c++) begin
        real exp_t, got_t;
        exp_t = ref_self_temp(int'(core_pow[c]));
        got_t = q88_to_c(single_core_temps[c]);
        checks++;
        if (absr(exp_t - got_t) > 2.0 / 256.0) begin
          failures++;
          $display("FAIL P=%0d core %0d: got %f exp %f", core_pow[c], c, got_t, exp_t);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
