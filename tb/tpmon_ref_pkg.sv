// tpmon_ref_pkg: reference models used by the TPMon testbenches.
//
// The energy of an instruction is derived here from full SPARC V8 opcode
// lists, written independently of the ROM builder in the RTL package, and
// temperatures are computed in floating point from the thermal model's
// physical constants (degC, degC/W) rather than from the fixed-point
// coefficients the RTL uses.
package tpmon_ref_pkg;

  // Thermal model in physical units.
  localparam real T_BASE_C      = 42.3320;      // degC
  localparam real K_SELF_C_PER_UW = 52.093e-6;  // degC per uW of own power
  localparam real K_NB_C_PER_UW   = 31.233e-6;  // degC per uW of a neighbour

  localparam int STALL_PJ = 40;

  // Build a SPARC V8 format-3 instruction word.
  function automatic logic [31:0] f3(logic [1:0] op, logic [5:0] op3);
    return {op, 5'd3, op3, 5'd1, 1'b0, 8'd0, 5'd2};
  endfunction

  function automatic int ref_energy(logic [31:0] ins);
    logic [1:0] op;
    logic [2:0] op2;
    logic [5:0] op3;
    op  = ins[31:30];
    op2 = ins[24:22];
    op3 = ins[24:19];
    if (op == 2'b01) return 80;                        // CALL
    if (op == 2'b00) return (op2 == 3'b100) ? 60 : 80;  // SETHI/NOP vs Bicc etc.
    if (op == 2'b10) begin
      case (op3)
        6'h0A, 6'h0B, 6'h1A, 6'h1B, 6'h24: return 180;  // UMUL SMUL ..cc MULScc
        6'h0E, 6'h0F, 6'h1E, 6'h1F:        return 200;  // UDIV SDIV ..cc
        6'h34, 6'h35:                      return 190;  // FPop1 FPop2
        default: return (op3 >= 6'h28) ? 120 : 100;     // RD/WR/JMPL/SAVE.. vs ALU
      endcase
    end
    // op == 11: loads and stores
    case (op3)
      6'h04, 6'h05, 6'h06, 6'h07, 6'h14, 6'h15, 6'h16, 6'h17,
      6'h24, 6'h25, 6'h26, 6'h27, 6'h34, 6'h35, 6'h36, 6'h37: return 170;
      default: return 160;
    endcase
  endfunction

  // Expected temperature (degC) of a core from its own and neighbours' power,
  // evaluated at the centre of the temperature-table bin (step 512 uW).
  function automatic real ref_self_temp(int p_uw);
    real pc;
    pc = real'((p_uw / 512) * 512 + 256);
    return T_BASE_C + K_SELF_C_PER_UW * pc;
  endfunction

  function automatic real ref_temp(int p_self, int p_nb_sum);
    return ref_self_temp(p_self) + K_NB_C_PER_UW * real'(p_nb_sum);
  endfunction

  function automatic real q88_to_c(logic [15:0] q);
    return real'(q) / 256.0;
  endfunction

  function automatic real absr(real a);
    return (a < 0.0) ? -a : a;
  endfunction

endpackage
