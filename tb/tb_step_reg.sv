// tb_step_reg: the register must follow its input only on load cycles,
// hold otherwise, and clear on reset.
module tb_step_reg;
  logic clk = 0, reset = 1, load = 0;
  logic [15:0] d = 0, q;
  logic [15:0] model;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  step_reg #(.W(16)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(posedge clk); #1;
    checks++; if (q != 0) begin failures++; $display("FAIL reset"); end
    @(negedge clk) reset = 0;
    model = 0;
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk);
      d = 16'($urandom); load = ($urandom % 4) == 0;
      reset = (i == 500);
      @(posedge clk);
      if (reset) model = 0; else if (load) model = d;
      #1;
      checks++;
      if (q != model) begin failures++; $display("FAIL cycle %0d: q=%h exp %h", i, q, model); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
