// neighbour_effect: temperature rise of each core caused by its neighbours.
//
// The cores of a tile sit on a CX x CY grid (core c at x = c % CX,
// y = c / CX). For each core the powers of the cores that touch it, along an
// edge (weight KE) or at a corner (weight KD), are weighted and summed, and
// the sum scaled by 2**-COEF_SHIFT gives the rise in Q8.8 degC
// (neighbour_effect_temps). Saturates at the largest output value. Purely
// combinational.
//
// From the paper: a block that turns neighbour_pow into
// neighbour_effect_temps, modelling the influence of neighbour core
// activity. The grid, the linear weighting and the weights are this design's
// choice; with the default 2x2 tile every core has two edge and one corner
// neighbour and both weights are equal.
module neighbour_effect
  import tpmon_pkg::*;
#(
  parameter int unsigned CX = CORES_X,
  parameter int unsigned CY = CORES_Y,
  parameter int unsigned PW = POW_W,
  parameter int unsigned TW = TEMP_W,
  parameter int unsigned KE = K_NB_EDGE,
  parameter int unsigned KD = K_NB_DIAG
) (
  input  logic [PW-1:0] neighbour_pow          [CX*CY],
  output logic [TW-1:0] neighbour_effect_temps [CX*CY]
);

  localparam int unsigned N  = CX * CY;
  localparam int unsigned KW = 16;                // coefficient width
  localparam int unsigned SW = PW + KW + 4;       // up to 8 neighbours

  // Weight of core j's power on core i's temperature.
  function automatic int unsigned weight(int unsigned i, int unsigned j);
    int dx, dy;
    dx = int'(i % CX) - int'(j % CX);
    dy = int'(i / CX) - int'(j / CX);
    if (i == j) return 0;
    if (dx < -1 || dx > 1 || dy < -1 || dy > 1) return 0;
    if (dx == 0 || dy == 0) return KE;
    return KD;
  endfunction

  always_comb begin
    logic [SW-1:0] acc;
    logic [SW-1:0] scaled;
    for (int unsigned i = 0; i < N; i++) begin
      acc = '0;
      for (int unsigned j = 0; j < N; j++)
        acc += SW'(neighbour_pow[j]) * SW'(weight(i, j));
      scaled = acc >> COEF_SHIFT;
      neighbour_effect_temps[i] = (scaled >= SW'(1 << TW)) ? '1 : TW'(scaled);
    end
  end

endmodule
