// power_lut: instruction-level energy look-up for one LEON3 (SPARC V8) core.
//
// Every cycle the instruction the core executes addresses a 256-entry ROM
// with the bits {op[31:30], op3[24:19]} and the ROM returns the average
// energy of that instruction in pJ. When the pipeline is stalled the stall
// energy is returned instead. The output is combinational (no latency).
//
// From the paper: a power LUT holding the average energy of every LEON
// instruction, fed by the instruction and the pipeline-stall signal, with
// the energy per instruction (Instruction_pow) as its output. This design's
// own choices: the ROM address bits, grouping of instructions into classes
// and all energy values (see tpmon_pkg); they are placeholders to be
// replaced by characterised values of the target process. Only the opcode
// fields address the table, so lint reports the register and immediate
// bits of instruction as unused; that is intended.
module power_lut
  import tpmon_pkg::*;
#(
  parameter int unsigned E_W          = ENERGY_W,
  parameter int unsigned STALL_ENERGY = STALL_ENERGY_PJ
) (
  input  logic [INSTR_W-1:0] instruction,
  input  logic               pipeline_stall,
  output logic [E_W-1:0]     instruction_pow
);

  localparam power_rom_t ROM = power_rom_init();

  logic [7:0] addr;
  assign addr = {instruction[31:30], instruction[24:19]};

  always_comb begin
    if (pipeline_stall) instruction_pow = E_W'(STALL_ENERGY);
    else                instruction_pow = E_W'(ROM[addr]);
  end

endmodule
