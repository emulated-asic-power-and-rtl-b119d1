// temp_lut: single-core temperature look-up ("Temp. LUT").
//
// For each core the upper TLUT_AW bits of its step power address a ROM that
// returns the temperature the core would reach from its own power alone
// (single_core_temps, Q8.8 degC). All cores share the same table contents;
// each has its own read port. Purely combinational.
//
// From the paper: a temperature LUT fed by core_pow, derived from a thermal
// RC model. The paper does not publish the model or the table; this design
// fills entry i with T_BASE + K_SELF * P_i, P_i being the middle of the
// power interval the entry covers (see tpmon_pkg). Replace power_to_temp to
// load a characterised table.
module temp_lut
  import tpmon_pkg::*;
#(
  parameter int unsigned N        = NUM_CORES,
  parameter int unsigned PW       = POW_W,
  parameter int unsigned AW       = TLUT_AW,
  parameter int unsigned TW       = TEMP_W,
  parameter int unsigned T_BASE   = TEMP_BASE_Q,
  parameter int unsigned K        = K_SELF
) (
  input  logic [PW-1:0] core_pow          [N],
  output logic [TW-1:0] single_core_temps [N]
);

  localparam int unsigned DEPTH = 1 << AW;
  localparam int unsigned SHIFT = (PW > AW) ? PW - AW : 0;

  typedef logic [TW-1:0] rom_t [DEPTH];

  function automatic rom_t power_to_temp();
    rom_t r;
    longint unsigned p, t;
    for (int unsigned i = 0; i < DEPTH; i++) begin
      p = (longint'(i) << SHIFT) + ((SHIFT > 0) ? (longint'(1) << (SHIFT - 1)) : 0);
      t = longint'(T_BASE) + ((p * K) >> COEF_SHIFT);
      r[i] = (t >= (longint'(1) << TW)) ? '1 : TW'(t);
    end
    return r;
  endfunction

  localparam rom_t ROM = power_to_temp();

  always_comb begin
    for (int unsigned c = 0; c < N; c++)
      single_core_temps[c] = ROM[core_pow[c][PW-1 -: AW]];
  end

endmodule
