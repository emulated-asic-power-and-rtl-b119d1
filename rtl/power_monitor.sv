// power_monitor: per-core power monitor, one instance per core.
//
// The power LUT turns the executed instruction (or a stall) into an energy
// value, the accumulator sums it over a time step and the step register
// captures the sum when the counter's trig_out ends the step. core_pow is
// thus the energy of the previous step in pJ, which for a 1 us step equals
// the core's mean power in uW. It changes one clock after trig_out and
// stays for the whole next step.
//
// The chain LUT -> accumulator -> register and its control by trig_out are
// the paper's (Fig. 1); widths and reset behaviour are this design's.
module power_monitor
  import tpmon_pkg::*;
#(
  parameter int unsigned E_W   = ENERGY_W,
  parameter int unsigned POW_OUT_W = POW_W
) (
  input  logic                 clk,
  input  logic                 reset,
  input  logic                 trig_out,
  input  logic [INSTR_W-1:0]   instruction,
  input  logic                 pipeline_stall,
  output logic [POW_OUT_W-1:0] core_pow
);

  logic [E_W-1:0]       instruction_pow;
  logic [POW_OUT_W-1:0] acc_sum;

  power_lut #(.E_W(E_W)) u_lut (
    .instruction    (instruction),
    .pipeline_stall (pipeline_stall),
    .instruction_pow(instruction_pow)
  );

  power_accumulator #(.E_W(E_W), .ACC_W(POW_OUT_W)) u_acc (
    .clk            (clk),
    .reset          (reset),
    .trig           (trig_out),
    .instruction_pow(instruction_pow),
    .acc_sum        (acc_sum)
  );

  step_reg #(.W(POW_OUT_W)) u_reg (
    .clk  (clk),
    .reset(reset),
    .load (trig_out),
    .d    (acc_sum),
    .q    (core_pow)
  );

endmodule
