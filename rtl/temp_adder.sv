// temp_adder: the "Adder" of the temperature monitor.
//
// Adds, core by core, the single-core temperature and the neighbour rise to
// give each core's temperature, saturating at the largest Q8.8 value
// instead of wrapping. Purely combinational.
//
// The addition is the paper's (Fig. 1); saturation is this design's choice.
module temp_adder
  import tpmon_pkg::*;
#(
  parameter int unsigned N  = NUM_CORES,
  parameter int unsigned TW = TEMP_W
) (
  input  logic [TW-1:0] single_core_temps      [N],
  input  logic [TW-1:0] neighbour_effect_temps [N],
  output logic [TW-1:0] temps                  [N]
);

  always_comb begin
    logic [TW:0] s;
    for (int unsigned c = 0; c < N; c++) begin
      s = {1'b0, single_core_temps[c]} + {1'b0, neighbour_effect_temps[c]};
      temps[c] = s[TW] ? '1 : s[TW-1:0];
    end
  end

endmodule
