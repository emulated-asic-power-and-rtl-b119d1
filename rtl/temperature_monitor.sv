// temperature_monitor: the single temperature monitor of a tile.
//
// From the step powers of all cores of the tile it computes each core's
// temperature: the temperature LUT gives the part due to the core's own
// power, the neighbour-effect block the rise due to the other cores, the
// adder sums them and a step register captures the result when trig_out
// ends a time step. Because the power registers load on the same trig_out
// edge, temp_out for step k is computed from the powers of step k-1 and
// appears one clock after the step boundary, one step behind pow_out.
//
// The structure (Temp. LUT, Neighbour effect, Adder, Reg. loaded by the
// counter) is the paper's (Fig. 1). Table contents, weights, widths and the
// one-step lag that results from both registers sharing trig_out are this
// design's reading of the figure.
module temperature_monitor
  import tpmon_pkg::*;
#(
  parameter int unsigned CX = CORES_X,
  parameter int unsigned CY = CORES_Y,
  parameter int unsigned PW = POW_W,
  parameter int unsigned TW = TEMP_W
) (
  input  logic          clk,
  input  logic          reset,
  input  logic          trig_out,
  input  logic [PW-1:0] core_pow [CX*CY],
  output logic [TW-1:0] temp_out [CX*CY]
);

  localparam int unsigned N = CX * CY;

  logic [TW-1:0] single_core_temps      [N];
  logic [TW-1:0] neighbour_effect_temps [N];
  logic [TW-1:0] temps                  [N];

  temp_lut #(.N(N), .PW(PW), .TW(TW)) u_temp_lut (
    .core_pow         (core_pow),
    .single_core_temps(single_core_temps)
  );

  neighbour_effect #(.CX(CX), .CY(CY), .PW(PW), .TW(TW)) u_neighbour (
    .neighbour_pow         (core_pow),
    .neighbour_effect_temps(neighbour_effect_temps)
  );

  temp_adder #(.N(N), .TW(TW)) u_adder (
    .single_core_temps     (single_core_temps),
    .neighbour_effect_temps(neighbour_effect_temps),
    .temps                 (temps)
  );

  for (genvar c = 0; c < N; c++) begin : g_reg
    step_reg #(.W(TW)) u_reg (
      .clk  (clk),
      .reset(reset),
      .load (trig_out),
      .d    (temps[c]),
      .q    (temp_out[c])
    );
  end

endmodule
