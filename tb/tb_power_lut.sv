// tb_power_lut: checks the power LUT against the reference energy of every
// instruction group, a stall, and a run of random instruction words.
module tb_power_lut;
  import tpmon_ref_pkg::*;

  logic [31:0] instruction;
  logic        pipeline_stall;
  logic [7:0]  instruction_pow;
  int checks = 0, failures = 0;

  power_lut dut (.*);

  task automatic check(logic [31:0] ins, logic st, int exp, string what);
    instruction = ins; pipeline_stall = st;
    #1;
    checks++;
    if (int'(instruction_pow) != exp) begin
      failures++;
      $display("FAIL %s: ins=%h stall=%0b got %0d exp %0d", what, ins, st, instruction_pow, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(32'h0100_0000, 0, 60,  "nop");
    check(32'h1080_0004, 0, 80,  "ba");
    check(32'h4000_0010, 0, 80,  "call");
    check(f3(2'b10, 6'h00), 0, 100, "add");
    check(f3(2'b10, 6'h25), 0, 100, "sll");
    check(f3(2'b10, 6'h0A), 0, 180, "umul");
    check(f3(2'b10, 6'h24), 0, 180, "mulscc");
    check(f3(2'b10, 6'h0F), 0, 200, "sdiv");
    check(f3(2'b10, 6'h34), 0, 190, "fpop1");
    check(f3(2'b10, 6'h38), 0, 120, "jmpl");
    check(f3(2'b10, 6'h3C), 0, 120, "save");
    check(f3(2'b11, 6'h00), 0, 160, "ld");
    check(f3(2'b11, 6'h0D), 0, 160, "ldstub");
    check(f3(2'b11, 6'h04), 0, 170, "st");
    check(f3(2'b11, 6'h27), 0, 170, "stdf");
    check(f3(2'b11, 6'h0F), 1, STALL_PJ, "stall");
    check(32'h0100_0000, 1, STALL_PJ, "stall nop");
    for (int i = 0; i < 2000; i++) begin
      logic [31:0] r;
      logic s;
      r = $urandom;
      s = ($urandom % 8) == 0;
      check(r, s, s ? STALL_PJ : ref_energy(r), "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
