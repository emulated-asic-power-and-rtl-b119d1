// tb_power_accumulator: random energies with step boundaries at random
// intervals; on every boundary the sum must equal the energies of exactly
// the cycles since the previous boundary, boundary cycle included. A second
// instance with a 10-bit sum checks saturation.
module tb_power_accumulator;
  logic clk = 0, reset = 1, trig = 0;
  logic [7:0]  instruction_pow = 0;
  logic [16:0] acc_sum;
  logic [9:0]  acc_small;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  power_accumulator dut (.clk, .reset, .trig, .instruction_pow, .acc_sum);
  power_accumulator #(.ACC_W(10)) dut_small (.clk, .reset, .trig(1'b0),
                                             .instruction_pow(8'd255), .acc_sum(acc_small));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int model, gap, steps;
    model = 0; steps = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) reset = 0;
    for (int s = 0; s < 300; s++) begin
      gap = 1 + ($urandom % 500);
      for (int c = 0; c < gap; c++) begin
        instruction_pow = 8'($urandom);
        trig = (c == gap - 1);
        model += int'(instruction_pow);
        #1;
        if (trig) begin
          checks++;
          if (int'(acc_sum) != model) begin
            failures++;
            $display("FAIL step %0d: got %0d exp %0d", s, acc_sum, model);
          end
          model = 0; steps++;
        end
        @(negedge clk);
      end
    end
    // saturation: 255 per cycle into 10 bits saturates after 5 cycles
    checks++;
    if (acc_small != 10'h3FF) begin
      failures++;
      $display("FAIL saturation: %0d", acc_small);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
