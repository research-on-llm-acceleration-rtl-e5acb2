// vdot_decoder -- decode-stage recogniser for the VDOT custom instruction.
//
// Purely combinational. It compares the fixed fields of a 32-bit instruction
// word with the VDOT encoding (opcode 0001011 = custom-0, funct3 000,
// funct7 0000000) and, on a match, raises the is_vdot control signal that
// later selects the dot-product unit as the executing unit. The register
// numbers are always extracted from their R-type positions: rd = inst[11:7],
// rs1 = inst[19:15], rs2 = inst[24:20].
//
// Interface: inst (32 bits) in, a vdot_uop_t struct out. No clock, no state;
// the result is valid in the same cycle as inst.
//
// The field positions and constant values follow the published instruction
// format. Treating every other custom-0 word (other funct3/funct7 values) as
// "not VDOT" and leaving it to the host decoder is this design's choice.
module vdot_decoder
  import vdot_pkg::*;
(
  input  logic [31:0] inst,
  output vdot_uop_t   uop
);

  always_comb begin
    uop.is_vdot = (inst[6:0]   == VDOT_OPCODE) &&
                  (inst[14:12] == VDOT_FUNCT3) &&
                  (inst[31:25] == VDOT_FUNCT7);
    uop.rd      = inst[11:7];
    uop.rs1     = inst[19:15];
    uop.rs2     = inst[24:20];
  end

endmodule
