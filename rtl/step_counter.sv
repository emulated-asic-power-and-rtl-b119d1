// step_counter: divides the core clock into monitor time steps.
//
// While trigger is high the counter advances once per clock; in the cycle in
// which it has reached STEP-1 it raises trig_out for one clock and wraps to
// zero. With trigger held high trig_out therefore pulses every STEP cycles
// (400 cycles = 1 us of a 400 MHz core). With trigger low the counter holds
// and no step ends. trig_out is combinational from the count and trigger.
//
// From the paper: a counter with trigger, clk and reset inputs whose output
// trig_out drives the accumulators and registers, and the 400-cycle step.
// This design's own choice: the meaning of trigger as a count enable, and a
// synchronous active-high reset.
module step_counter
  import tpmon_pkg::*;
#(
  parameter int unsigned STEP = STEP_CYCLES
) (
  input  logic clk,
  input  logic reset,
  input  logic trigger,
  output logic trig_out
);

  localparam int unsigned CW = (STEP > 1) ? $clog2(STEP) : 1;

  logic [CW-1:0] count_q;

  assign trig_out = trigger && (count_q == CW'(STEP - 1));

  always_ff @(posedge clk) begin
    if (reset)         count_q <= '0;
    else if (trig_out) count_q <= '0;
    else if (trigger)  count_q <= count_q + 1'b1;
  end

  // A step end lasts one clock and the count never passes STEP-1.
  a_pulse: assert property (@(posedge clk) disable iff (reset) trig_out |=> !trig_out || STEP == 1);
  a_range: assert property (@(posedge clk) disable iff (reset) count_q < CW'(STEP));

endmodule
