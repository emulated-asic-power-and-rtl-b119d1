// tpmon_pkg: types, default sizes and model constants shared by the
// power/temperature monitor (TPMon) modules.
//
// Taken from the paper: four cores per tile arranged 2x2, one monitor time
// step of 400 core clock cycles (1 us at 400 MHz), LEON3 (SPARC V8) as the
// monitored core, a power look-up table indexed by the instruction and a
// temperature look-up table plus a neighbour term summed per core.
//
// Chosen for this design (the paper publishes no table contents, widths or
// coefficients):
//   * instruction energies in pJ per instruction, 8 bits, one value per
//     SPARC V8 instruction group (see instr_energy_pj);
//   * accumulated power is the energy of one step in pJ; over a 1 us step
//     this number equals the mean power in uW;
//   * temperatures are unsigned Q8.8 degrees Celsius;
//   * the thermal model is linear: T = T_BASE + K_SELF*P_self +
//     K_NB*sum(P_neighbour). Its three constants were fitted so that the
//     tile scenarios the paper reports (47, 51, 53, 54 degC) are reproduced
//     when rounded to whole degrees.
package tpmon_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned CORES_X     = 2;    // 2x2 cores per tile
  localparam int unsigned CORES_Y     = 2;
  localparam int unsigned NUM_CORES   = CORES_X * CORES_Y;
  localparam int unsigned STEP_CYCLES = 400;  // 1 us at 400 MHz
  localparam int unsigned INSTR_W     = 32;   // SPARC V8 instruction word
  localparam int unsigned ENERGY_W    = 8;    // pJ per instruction

  // Width of one step's energy sum: STEP_CYCLES * (2**ENERGY_W - 1) must fit.
  function automatic int unsigned pow_width(int unsigned steps, int unsigned ew);
    return $clog2(steps * ((1 << ew) - 1) + 1);
  endfunction
  localparam int unsigned POW_W = pow_width(STEP_CYCLES, ENERGY_W);  // 17

  localparam int unsigned TEMP_W    = 16;   // Q8.8 degC
  localparam int unsigned TEMP_FRAC = 8;
  localparam int unsigned TLUT_AW   = 8;    // temperature LUT: 256 entries

  // ----------------------------------------------------- thermal constants
  // T_BASE = 42.333 degC, K_SELF = 52.08 degC/W, K_NB = 31.25 degC/W.
  // Coefficients are in Q8.8 degC per uW scaled by 2**COEF_SHIFT.
  localparam int unsigned TEMP_BASE_Q = 10837;  // 42.332 degC
  localparam int unsigned COEF_SHIFT  = 16;
  localparam int unsigned K_SELF      = 874;    // 52.09e-6 degC/uW *256*65536
  localparam int unsigned K_NB_EDGE   = 524;    // 31.23e-6 degC/uW *256*65536
  localparam int unsigned K_NB_DIAG   = 524;

  // ------------------------------------------------- instruction energies
  typedef logic [INSTR_W-1:0]  instr_t;
  typedef logic [ENERGY_W-1:0] energy_t;

  typedef enum logic [3:0] {
    IC_SETHI_NOP, IC_BRANCH, IC_CALL, IC_ALU, IC_MUL, IC_DIV, IC_FPOP,
    IC_CONTROL, IC_LOAD, IC_STORE
  } instr_class_e;

  localparam int unsigned STALL_ENERGY_PJ = 40;   // one stalled cycle

  // Group of a SPARC V8 instruction from op (bits 31:30) and op3 (24:19);
  // for op=00 the top three bits of op3 are op2.
  function automatic instr_class_e instr_class(logic [1:0] op, logic [5:0] op3);
    instr_class_e c;
    unique case (op)
      2'b00:   c = (op3[5:3] == 3'b100) ? IC_SETHI_NOP : IC_BRANCH;
      2'b01:   c = IC_CALL;
      2'b10: begin
        if (op3 inside {6'h0A, 6'h0B, 6'h1A, 6'h1B, 6'h24}) c = IC_MUL;
        else if (op3 inside {6'h0E, 6'h0F, 6'h1E, 6'h1F})   c = IC_DIV;
        else if (op3 inside {6'h34, 6'h35})                 c = IC_FPOP;
        else if (op3[5:3] inside {3'b101, 3'b110, 3'b111})  c = IC_CONTROL;
        else                                                c = IC_ALU;
      end
      default: c = (op3[3:2] == 2'b01) ? IC_STORE : IC_LOAD;
    endcase
    return c;
  endfunction

  function automatic int unsigned class_energy_pj(instr_class_e c);
    unique case (c)
      IC_SETHI_NOP: return 60;
      IC_BRANCH:    return 80;
      IC_CALL:      return 80;
      IC_ALU:       return 100;
      IC_CONTROL:   return 120;
      IC_LOAD:      return 160;
      IC_STORE:     return 170;
      IC_MUL:       return 180;
      IC_FPOP:      return 190;
      IC_DIV:       return 200;
      default:      return 100;
    endcase
  endfunction

  // Contents of the power LUT, address {op, op3}.
  typedef energy_t power_rom_t [256];
  function automatic power_rom_t power_rom_init();
    power_rom_t r;
    for (int a = 0; a < 256; a++)
      r[a] = energy_t'(class_energy_pj(instr_class(a[7:6], a[5:0])));
    return r;
  endfunction

endpackage
