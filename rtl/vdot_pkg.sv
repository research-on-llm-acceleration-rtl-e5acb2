// vdot_pkg -- shared constants and types of the vector dot-product (VDOT)
// extension for a 64-bit RISC-V core.
//
// The VDOT instruction is an R-type instruction in the custom-0 major opcode
// space: funct7 = 0000000, rs2, rs1, funct3 = 000, rd, opcode = 0001011.
// It treats each 64-bit source register as eight packed int8 elements and
// writes the 64-bit dot product of the two sources to rd. The encoding and
// the 64-bit result width follow the published extension; the decoded
// micro-op struct below is this design's own packaging of the fields.
package vdot_pkg;

  // Width of the general purpose registers and of the VDOT result.
  localparam int unsigned XLEN = 64;
  // Default element width of the dot-product unit (int8).
  localparam int unsigned ELEM_W_DEFAULT = 8;
  // Number of architectural integer registers (RV64I).
  localparam int unsigned NREGS = 32;

  // Instruction fields of VDOT, bit positions as in the R-type format.
  localparam logic [6:0] VDOT_OPCODE = 7'b0001011;  // custom-0, inst[6:0]
  localparam logic [2:0] VDOT_FUNCT3 = 3'b000;      // inst[14:12]
  localparam logic [6:0] VDOT_FUNCT7 = 7'b0000000;  // inst[31:25]

  typedef logic [4:0]      reg_idx_t;
  typedef logic [XLEN-1:0] xdata_t;

  // Decoded form of one instruction, as produced by the decode stage.
  typedef struct packed {
    logic     is_vdot;  // control signal: route operands to the VDOT unit
    reg_idx_t rs1;      // inst[19:15]
    reg_idx_t rs2;      // inst[24:20]
    reg_idx_t rd;       // inst[11:7]
  } vdot_uop_t;

  // Assemble a VDOT instruction word (used by testbenches and software
  // models; synthesizable as a constant function).
  function automatic logic [31:0] vdot_encode(reg_idx_t rd, reg_idx_t rs1,
                                              reg_idx_t rs2);
    return {VDOT_FUNCT7, rs2, rs1, VDOT_FUNCT3, rd, VDOT_OPCODE};
  endfunction

endpackage
