// tpmon: emulated ASIC temperature and power monitor of one tile (top).
//
// One step counter, one power monitor per core and one temperature monitor.
// Each clock, every core's executed instruction (or stall) is turned into an
// energy and accumulated; every STEP clocks (with trigger held high) the
// counter ends a time step, the per-core step energies appear on pow_out
// (pJ per step = uW for a 1 us step) and the per-core temperatures computed
// from the previous step's powers appear on temp_out (Q8.8 degC). Both
// outputs change one clock after the step boundary and then hold for the
// whole step.
//
// Interface: clk, reset (synchronous, active high), trigger (count enable of
// the step counter), instruction[c] and pipeline_stall[c] per core c, with
// cores numbered row-major on the CX x CY tile grid.
//
// Following the paper: one TPMon per tile with one power monitor per core
// and a single temperature monitor, 2x2 cores, a 400-cycle step. This
// design's choices are listed in the modules it instantiates.
module tpmon
  import tpmon_pkg::*;
#(
  parameter int unsigned CX   = CORES_X,
  parameter int unsigned CY   = CORES_Y,
  parameter int unsigned STEP = STEP_CYCLES,
  parameter int unsigned PW   = POW_W,
  parameter int unsigned TW   = TEMP_W
) (
  input  logic               clk,
  input  logic               reset,
  input  logic               trigger,
  input  logic [INSTR_W-1:0] instruction    [CX*CY],
  input  logic               pipeline_stall [CX*CY],
  output logic [PW-1:0]      pow_out        [CX*CY],
  output logic [TW-1:0]      temp_out       [CX*CY]
);

  localparam int unsigned N = CX * CY;

  logic          trig_out;
  logic [PW-1:0] core_pow [N];

  step_counter #(.STEP(STEP)) u_counter (
    .clk     (clk),
    .reset   (reset),
    .trigger (trigger),
    .trig_out(trig_out)
  );

  for (genvar c = 0; c < N; c++) begin : g_core
    power_monitor #(.POW_OUT_W(PW)) u_pmon (
      .clk           (clk),
      .reset         (reset),
      .trig_out      (trig_out),
      .instruction   (instruction[c]),
      .pipeline_stall(pipeline_stall[c]),
      .core_pow      (core_pow[c])
    );
  end

  temperature_monitor #(.CX(CX), .CY(CY), .PW(PW), .TW(TW)) u_tmon (
    .clk     (clk),
    .reset   (reset),
    .trig_out(trig_out),
    .core_pow(core_pow),
    .temp_out(temp_out)
  );

  assign pow_out = core_pow;

endmodule
