// tb_neighbour_effect: in the default 2x2 tile every other core is a
// neighbour, so each core's rise must be K_NB times the sum of the other
// three powers. A 3x3 instance with zero corner weight checks the grid
// geometry: only the edge-adjacent cores count.
module tb_neighbour_effect;
  import tpmon_ref_pkg::*;
  logic [16:0] p4 [4];
  logic [15:0] t4 [4];
  logic [16:0] p9 [9];
  logic [15:0] t9 [9];
  int checks = 0, failures = 0;

  neighbour_effect dut (.neighbour_pow(p4), .neighbour_effect_temps(t4));
  neighbour_effect #(.CX(3), .CY(3), .KD(0)) dut9 (.neighbour_pow(p9), .neighbour_effect_temps(t9));

  task automatic cmp(real exp_t, logic [15:0] got, string what);
    checks++;
    if (absr(exp_t - q88_to_c(got)) > 2.0 / 256.0) begin
      failures++;
      $display("FAIL %s: got %f exp %f", what, q88_to_c(got), exp_t);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 500; i++) begin
      int sum;
      for (int c = 0; c < 4; c++) p4[c] = 17'($urandom % 102001);
      for (int c = 0; c < 9; c++) p9[c] = 17'($urandom % 102001);
      #1;
      for (int c = 0; c < 4; c++) begin
        sum = 0;
        for (int j = 0; j < 4; j++) if (j != c) sum += int'(p4[j]);
        cmp(K_NB_C_PER_UW * real'(sum), t4[c], "2x2");
      end
      for (int c = 0; c < 9; c++) begin
        int x, y;
        x = c % 3; y = c / 3;
        sum = 0;
        if (x > 0) sum += int'(p9[c-1]);
        if (x < 2) sum += int'(p9[c+1]);
        if (y > 0) sum += int'(p9[c-3]);
        if (y < 2) sum += int'(p9[c+3]);
        cmp(K_NB_C_PER_UW * real'(sum), t9[c], "3x3");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
