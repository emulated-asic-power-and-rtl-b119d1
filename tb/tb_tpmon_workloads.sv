// tb_tpmon_workloads: the two-tile task-mapping scenarios of the
// evaluation, each tile monitored by its own tpmon at default sizes.
//
// Four kinds of core load are used: idle (pipeline stalled), a low-power
// task (a branch loop), a medium task (load, add, store, multiply repeated)
// and a high-power task (a stream of divides). For each scenario both tiles
// are reset, run for two steps, and the temperatures reported at the second
// step end (those of the first full step) are rounded to whole degrees and
// compared with the reported values:
//   one medium core alone in a tile                    47 degC
//   same core with the three neighbours at high power  53 degC (+13 %)
//   two high and two low tasks per tile                max 51 degC per tile
//   four high on one tile, four low on the other       54 degC and 47 degC
module tb_tpmon_workloads;
  import tpmon_ref_pkg::*;

  typedef enum int {IDLE, LOW, MED, HIGH} task_e;

  logic clk = 0, reset = 1, trigger = 1;
  logic [31:0] ins0 [4], ins1 [4];
  logic        stl0 [4], stl1 [4];
  logic [16:0] pow0 [4], pow1 [4];
  logic [15:0] tmp0 [4], tmp1 [4];
  task_e map0 [4], map1 [4];
  int checks = 0, failures = 0;
  int cyc = 0;

  always #5 clk = ~clk;

  tpmon tile0 (.clk, .reset, .trigger, .instruction(ins0), .pipeline_stall(stl0), .pow_out(pow0), .temp_out(tmp0));
  tpmon tile1 (.clk, .reset, .trigger, .instruction(ins1), .pipeline_stall(stl1), .pow_out(pow1), .temp_out(tmp1));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] task_instr(task_e t, int k);
    case (t)
      LOW:  return 32'h10BF_FFFF;                 // ba .-4 (branch loop)
      MED:  case (k % 4)
              0: return f3(2'b11, 6'h00);         // ld
              1: return f3(2'b10, 6'h00);         // add
              2: return f3(2'b11, 6'h04);         // st
              default: return f3(2'b10, 6'h0A);   // umul
            endcase
      HIGH: return f3(2'b10, 6'h0F);              // sdiv
      default: return 32'h0100_0000;
    endcase
  endfunction

  // drive both tiles from the current mapping
  always_comb begin
    for (int c = 0; c < 4; c++) begin
      ins0[c] = task_instr(map0[c], cyc);  stl0[c] = (map0[c] == IDLE);
      ins1[c] = task_instr(map1[c], cyc);  stl1[c] = (map1[c] == IDLE);
    end
  end
  always_ff @(posedge clk) cyc <= reset ? 0 : cyc + 1;

  function automatic int deg(logic [15:0] q);
    return int'((q + 16'd128) >> 8);    // round Q8.8 to whole degC
  endfunction

  task automatic run_scenario();
    @(negedge clk) reset = 1;
    @(negedge clk) reset = 0;
    repeat (2 * 400 + 1) @(negedge clk);
  endtask

  task automatic expect_deg(logic [15:0] q, int exp, string what);
    checks++;
    if (deg(q) != exp) begin
      failures++;
      $display("FAIL %s: %0d degC (%f), expected %0d", what, deg(q), q88_to_c(q), exp);
    end else
      $display("ok   %s: %f degC -> %0d", what, q88_to_c(q), deg(q));
  endtask

  initial begin
    int t_alone, t_crowd, max_a0, max_a1, max_b;
    for (int c = 0; c < 4; c++) begin map0[c] = IDLE; map1[c] = IDLE; end

    // one medium-power core alone
    map0 = '{MED, IDLE, IDLE, IDLE};
    run_scenario();
    expect_deg(tmp0[0], 47, "medium core alone");
    t_alone = deg(tmp0[0]);

    // same core, neighbours at highest power
    map0 = '{MED, HIGH, HIGH, HIGH};
    run_scenario();
    expect_deg(tmp0[0], 53, "medium core, 3 high neighbours");
    t_crowd = deg(tmp0[0]);
    checks++;
    if ((100 * (t_crowd - t_alone) + t_alone / 2) / t_alone != 13) begin
      failures++; $display("FAIL neighbour increase not 13 %%");
    end

    // strategy A: lowest global maximum, 2 high + 2 low per tile
    map0 = '{HIGH, LOW, LOW, HIGH};
    map1 = '{LOW, HIGH, HIGH, LOW};
    run_scenario();
    max_a0 = 0; max_a1 = 0;
    for (int c = 0; c < 4; c++) begin
      if (deg(tmp0[c]) > max_a0) max_a0 = deg(tmp0[c]);
      if (deg(tmp1[c]) > max_a1) max_a1 = deg(tmp1[c]);
    end
    checks++; if (max_a0 != 51) begin failures++; $display("FAIL tile0 max %0d", max_a0); end
    checks++; if (max_a1 != 51) begin failures++; $display("FAIL tile1 max %0d", max_a1); end
    $display("strategy A: max %0d / %0d degC", max_a0, max_a1);

    // strategy B: equal temperatures inside each tile
    map0 = '{HIGH, HIGH, HIGH, HIGH};
    map1 = '{LOW, LOW, LOW, LOW};
    run_scenario();
    max_b = 0;
    for (int c = 0; c < 4; c++) begin
      expect_deg(tmp0[c], 54, $sformatf("all-high tile core %0d", c));
      expect_deg(tmp1[c], 47, $sformatf("all-low tile core %0d", c));
      if (deg(tmp0[c]) > max_b) max_b = deg(tmp0[c]);
    end
    // the two control targets trade global maximum against spread
    checks++;
    if (!(max_a0 < max_b)) begin failures++; $display("FAIL strategy A not cooler"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
