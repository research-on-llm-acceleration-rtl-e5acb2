// tb_vdot_decoder -- self-checking testbench for the VDOT decoder.
//
// Applies the VDOT encoding for every rd/rs1/rs2 combination on a sweep,
// then random words in which exactly one fixed field (opcode, funct3 or
// funct7) differs from the VDOT encoding, and a set of ordinary RV64
// instructions. The expected is_vdot flag and register numbers are worked
// out here from the instruction format, not from the decoder.
`timescale 1ns/1ps
module tb_vdot_decoder;
  import vdot_pkg::*;

  logic [31:0] inst;
  vdot_uop_t   uop;

  vdot_decoder dut (.inst(inst), .uop(uop));

  int checks = 0, failures = 0;

  task automatic expect_uop(logic exp_vdot, logic [4:0] rd, logic [4:0] rs1, logic [4:0] rs2);
    #1;
    checks++;
    if (uop.is_vdot !== exp_vdot || uop.rd !== rd || uop.rs1 !== rs1 || uop.rs2 !== rs2) begin
      failures++;
      $display("FAIL inst=%h is_vdot=%b rd=%0d rs1=%0d rs2=%0d", inst, uop.is_vdot,
               uop.rd, uop.rs1, uop.rs2);
    end
  endtask

  initial begin
    logic [4:0] rd, rs1, rs2;
    // VDOT words built bit by bit from the format: 0000000 rs2 rs1 000 rd 0001011
    for (int k = 0; k < 400; k++) begin
      rd = 5'(k); rs1 = 5'(k * 7 + 3); rs2 = 5'(k * 13 + 1);
      inst = {7'b0000000, rs2, rs1, 3'b000, rd, 7'b0001011};
      expect_uop(1'b1, rd, rs1, rs2);
    end
    // one fixed field changed: not VDOT
    for (int k = 0; k < 300; k++) begin
      logic [31:0] w;
      rd = 5'($urandom); rs1 = 5'($urandom); rs2 = 5'($urandom);
      w = {7'b0000000, rs2, rs1, 3'b000, rd, 7'b0001011};
      case (k % 3)
        0: w[6:0]   = w[6:0]   ^ 7'(1 + $urandom_range(126));
        1: w[14:12] = w[14:12] ^ 3'(1 + $urandom_range(6));
        default: w[31:25] = w[31:25] ^ 7'(1 + $urandom_range(126));
      endcase
      inst = w;
      expect_uop(1'b0, rd, rs1, rs2);
    end
    // ordinary instructions
    inst = 32'h00b50533; expect_uop(1'b0, 5'd10, 5'd10, 5'd11);  // add  a0,a0,a1
    inst = 32'h00053503; expect_uop(1'b0, 5'd10, 5'd10, 5'd0);   // ld   a0,0(a0)
    inst = 32'h02b50533; expect_uop(1'b0, 5'd10, 5'd10, 5'd11);  // mul  a0,a0,a1
    inst = 32'h00000013; expect_uop(1'b0, 5'd0, 5'd0, 5'd0);     // nop
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
