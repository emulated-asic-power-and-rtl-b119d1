// tb_tpmon: end-to-end test of one tile's monitor at its default sizes
// (2x2 cores, 400-cycle step).
//
// Each core gets a random instruction stream whose mix changes from step to
// step, with random pipeline stalls. The trigger input is dropped for a
// stretch to pause the step counter. A reference model counts the enabled
// cycles itself to find the step boundaries, sums each core's reference
// energies, and predicts pow_out (energy of the last step) and temp_out
// (thermal model applied to the powers of the step before). Both outputs are
// compared on every clock. The mechanisms exercised are counted: step ends,
// stalled cycles, paused cycles, steps where the neighbour term raised a
// core's temperature; each must occur at least once.
module tb_tpmon;
  import tpmon_ref_pkg::*;

  localparam int N = 4;
  localparam int STEP = 400;
  localparam int NSTEPS = 40;

  logic clk = 0, reset = 1, trigger = 0;
  logic [31:0] instruction    [N];
  logic        pipeline_stall [N];
  logic [16:0] pow_out  [N];
  logic [15:0] temp_out [N];

  int checks = 0, failures = 0;
  int n_steps = 0, n_stalls = 0, n_paused = 0, n_nb = 0;

  always #5 clk = ~clk;

  tpmon dut (.*);

  initial begin
    repeat (NSTEPS * STEP * 2) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Random instruction of a mix: weight w (0..3) biases towards heavy ops.
  function automatic logic [31:0] rand_instr(int w);
    int r;
    r = $urandom % 8;
    if (r < 3 - w) return 32'h0100_0000;            // nop
    if (r < 5 - w) return 32'h1080_0004;            // branch
    case ($urandom % 6)
      0: return f3(2'b10, 6'h00);                   // add
      1: return f3(2'b11, 6'h00);                   // ld
      2: return f3(2'b11, 6'h04);                   // st
      3: return f3(2'b10, 6'h0A);                   // umul
      4: return f3(2'b10, 6'h0F);                   // sdiv
      default: return $urandom;                     // anything
    endcase
  endfunction

  initial begin
    int acc [N];
    int pow_exp [N];
    real temp_exp [N];
    int mix [N];
    int cnt;
    bit temp_valid;

    for (int c = 0; c < N; c++) begin
      acc[c] = 0; pow_exp[c] = 0; temp_exp[c] = 0.0; mix[c] = 0;
      instruction[c] = 32'h0100_0000; pipeline_stall[c] = 0;
    end
    cnt = 0; temp_valid = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) reset = 0;

    while (n_steps < NSTEPS) begin
      bit trig;
      // inputs for this cycle
      // pause the counter for 250 cycles in the middle of step 5
      trigger = !(n_steps == 5 && cnt == 100 && n_paused < 250);
      for (int c = 0; c < N; c++) begin
        instruction[c]    = rand_instr(mix[c]);
        pipeline_stall[c] = ($urandom % 10) == 0;
        acc[c] += pipeline_stall[c] ? STALL_PJ : ref_energy(instruction[c]);
        if (pipeline_stall[c]) n_stalls++;
      end
      if (!trigger) n_paused++;
      trig = trigger && (cnt == STEP - 1);
      if (trigger) cnt = trig ? 0 : cnt + 1;
      if (trig) begin
        for (int c = 0; c < N; c++) begin
          int nb;
          nb = 0;
          for (int j = 0; j < N; j++) if (j != c) nb += pow_exp[j];
          temp_exp[c] = ref_temp(pow_exp[c], nb);
          if (nb > 0) n_nb++;
        end
        for (int c = 0; c < N; c++) begin
          pow_exp[c] = acc[c];
          acc[c] = 0;
          mix[c] = $urandom % 4;
        end
        temp_valid = 1;
        n_steps++;
      end
      @(posedge clk); #1;
      for (int c = 0; c < N; c++) begin
        checks++;
        if (int'(pow_out[c]) != pow_exp[c]) begin
          failures++;
          if (failures < 10) $display("FAIL step %0d core %0d: pow_out %0d exp %0d", n_steps, c, pow_out[c], pow_exp[c]);
        end
        checks++;
        if (temp_valid ? (absr(q88_to_c(temp_out[c]) - temp_exp[c]) > 3.0 / 256.0) : (temp_out[c] != 0)) begin
          failures++;
          if (failures < 10) $display("FAIL step %0d core %0d: temp_out %f exp %f", n_steps, c, q88_to_c(temp_out[c]), temp_exp[c]);
        end
      end
      @(negedge clk);
    end

    $display("mechanisms: steps=%0d stalled_cycles=%0d paused_cycles=%0d neighbour_rises=%0d",
             n_steps, n_stalls, n_paused, n_nb);
    checks++; if (n_steps  == 0) begin failures++; $display("FAIL no step end");  end
    checks++; if (n_stalls == 0) begin failures++; $display("FAIL no stall");     end
    checks++; if (n_paused == 0) begin failures++; $display("FAIL no pause");     end
    checks++; if (n_nb     == 0) begin failures++; $display("FAIL no neighbour"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
