// step_reg: the output register ("Reg.") used at the end of the power
// monitor and of the temperature monitor.
//
// It loads its input on a clock edge where load (the counter's trig_out)
// is high and holds it for the rest of the time step, so readers see a
// value that is stable for a whole step. Synchronous active-high reset
// clears it. Output appears one clock after the load edge.
//
// From the paper: a clocked, resettable register driven by trig_out. The
// reset value (zero) and reset style are this design's choice.
module step_reg #(
  parameter int unsigned W = 16
) (
  input  logic         clk,
  input  logic         reset,
  input  logic         load,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);

  always_ff @(posedge clk) begin
    if (reset)     q <= '0;
    else if (load) q <= d;
  end

  // Between step boundaries the published value must not change.
  a_hold: assert property (@(posedge clk) disable iff (reset) !load |=> $stable(q));

endmodule
