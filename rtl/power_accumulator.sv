// power_accumulator: sums the per-cycle instruction energy of one core over
// one monitor time step.
//
// A register holds the energy of the cycles since the last step boundary.
// The output acc_sum is that register plus the current cycle's energy, so on
// the cycle trig is high acc_sum is the energy of the whole step, including
// the boundary cycle, and the step register behind it can capture it. On
// that same edge the register restarts at zero. A step therefore covers
// exactly STEP cycles, also the first one after reset. The sum saturates at
// its maximum rather than wrapping if the step boundary is held off.
//
// From the paper: an accumulator between the power LUT and the register,
// clocked, reset and restarted by the counter's trig_out. This design's own
// choices: synchronous active-high reset, the combinational output that
// includes the current cycle, and saturation.
module power_accumulator
  import tpmon_pkg::*;
#(
  parameter int unsigned E_W   = ENERGY_W,
  parameter int unsigned ACC_W = POW_W
) (
  input  logic             clk,
  input  logic             reset,
  input  logic             trig,            // step boundary (trig_out)
  input  logic [E_W-1:0]   instruction_pow,
  output logic [ACC_W-1:0] acc_sum
);

  logic [ACC_W-1:0] acc_q;
  logic [ACC_W:0]   sum_wide;

  assign sum_wide = {1'b0, acc_q} + (ACC_W+1)'(instruction_pow);
  assign acc_sum  = sum_wide[ACC_W] ? '1 : sum_wide[ACC_W-1:0];

  always_ff @(posedge clk) begin
    if (reset || trig) acc_q <= '0;
    else               acc_q <= acc_sum;
  end

endmodule
