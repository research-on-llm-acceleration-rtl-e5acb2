// nanhu_vdot_exu -- the VDOT extension's path through a RISC-V core pipeline:
// decode, operand dispatch, the dot-product unit and writeback.
//
// What it does. Instructions arrive one at a time from the fetch side. The
// decode stage (vdot_decoder) raises the is_vdot control signal for the VDOT
// custom instruction. A VDOT instruction is taken into the dispatch register;
// any other instruction is handed unchanged to the host core's own decode
// path on the base_* port. From the dispatch register the two source
// registers are read from the core's integer register file (rf_* port, which
// is outside this module), and operands and destination go to the VDOT unit
// (vdotu). Its 64-bit result leaves on the wb_* port towards the core's
// writeback unit, which writes it to rd.
//
// Pipeline and timing:
//   cycle 0  decode          dec_inst accepted, uop latched into dispatch
//   cycle 1  dispatch        rf read of rs1/rs2, operands into vdotu
//   cycle 2  writeback       wb_valid with the dot product (held until
//                            wb_ready)
// One VDOT instruction can be accepted per cycle. When the writeback port is
// not ready the unit holds its result, the dispatch register fills and
// dec_ready falls for VDOT instructions (stall). A VDOT that reads the rd of
// the VDOT held in the unit's output register takes that value by bypass, so
// back-to-back dependent VDOTs are correct without waiting for the register
// file. rd = x0 is never bypassed (x0 reads as zero).
//
// Interfaces: all ports are valid/ready pairs except the register file read,
// which is combinational (address out, data back in the same cycle). The
// register file is expected to write a wb_* result on the clock edge at which
// wb_valid && wb_ready.
//
// What follows the paper: the unit sits in the execute stage beside the other
// execution units, is chosen by a control signal made at decode, reuses the
// core's register file and writes back through its writeback unit. The
// three-stage in-order slice, the handshakes and the bypass stand in for the
// host core's rename/dispatch and are this design's own choices; ordering of
// VDOT against the base instructions handed out on base_* is left to the
// host core's register renaming, as in the core this extends.
module nanhu_vdot_exu
  import vdot_pkg::*;
#(
  parameter int unsigned ELEM_W = ELEM_W_DEFAULT
) (
  input  logic        clk,
  input  logic        rst_n,
  // instruction input from fetch / decode buffer
  input  logic        dec_valid,
  output logic        dec_ready,
  input  logic [31:0] dec_inst,
  // non-VDOT instructions, to the host core's decoder
  output logic        base_valid,
  input  logic        base_ready,
  output logic [31:0] base_inst,
  // integer register file read ports (host core)
  output reg_idx_t    rf_raddr1,
  output reg_idx_t    rf_raddr2,
  input  xdata_t      rf_rdata1,
  input  xdata_t      rf_rdata2,
  // result towards the host core's writeback unit
  output logic        wb_valid,
  input  logic        wb_ready,
  output reg_idx_t    wb_rd,
  output xdata_t      wb_data,
  // event pulses for performance counting
  output logic        ev_vdot_issue,   // a VDOT entered the unit
  output logic        ev_bypass,       // an operand came from the bypass
  output logic        ev_stall         // a VDOT waited at decode
);

  // ---------------- decode stage ----------------
  vdot_uop_t dec_uop;

  vdot_decoder u_dec (
    .inst (dec_inst),
    .uop  (dec_uop)
  );

  // ---------------- dispatch register ----------------
  // Holds whole uops; its is_vdot bit is always set and goes unread.
  logic      disp_valid;
  vdot_uop_t disp_uop;
  logic      disp_ready;   // dispatch register can take a new uop

  logic      vu_in_ready;
  logic      vu_out_valid;
  xdata_t    vu_out_data;
  reg_idx_t  vu_out_rd;

  assign disp_ready = !disp_valid || vu_in_ready;

  // Selection made by the decode control signal.
  assign base_valid = dec_valid && !dec_uop.is_vdot;
  assign base_inst  = dec_inst;
  assign dec_ready  = dec_uop.is_vdot ? disp_ready : base_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      disp_valid <= 1'b0;
      disp_uop   <= '0;
    end else if (disp_ready) begin
      disp_valid <= dec_valid && dec_uop.is_vdot;
      if (dec_valid && dec_uop.is_vdot) disp_uop <= dec_uop;
    end
  end

  // ---------------- operand read and bypass ----------------
  logic   byp1, byp2;
  xdata_t src1, src2;

  assign rf_raddr1 = disp_uop.rs1;
  assign rf_raddr2 = disp_uop.rs2;

  assign byp1 = vu_out_valid && (vu_out_rd != '0) && (vu_out_rd == disp_uop.rs1);
  assign byp2 = vu_out_valid && (vu_out_rd != '0) && (vu_out_rd == disp_uop.rs2);
  assign src1 = byp1 ? vu_out_data : rf_rdata1;
  assign src2 = byp2 ? vu_out_data : rf_rdata2;

  // ---------------- execute: the dot-product unit ----------------
  vdotu #(.ELEM_W(ELEM_W)) u_vdotu (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (disp_valid),
    .in_ready  (vu_in_ready),
    .in_src1   (src1),
    .in_src2   (src2),
    .in_rd     (disp_uop.rd),
    .out_valid (vu_out_valid),
    .out_ready (wb_ready),
    .out_data  (vu_out_data),
    .out_rd    (vu_out_rd)
  );

  // ---------------- writeback ----------------
  assign wb_valid = vu_out_valid;
  assign wb_rd    = vu_out_rd;
  assign wb_data  = vu_out_data;

  // ---------------- events ----------------
  assign ev_vdot_issue = disp_valid && vu_in_ready;
  assign ev_bypass     = disp_valid && vu_in_ready && (byp1 || byp2);
  assign ev_stall      = dec_valid && dec_uop.is_vdot && !disp_ready;

  // ---------------- handshake rules ----------------
  // Rule for the fetch side: an offered instruction stays offered, unchanged,
  // until taken.
  a_dec_hold: assert property (@(posedge clk) disable iff (!rst_n)
    dec_valid && !dec_ready |=> dec_valid && $stable(dec_inst));
  // A result offered to writeback stays offered, unchanged, until taken.
  a_wb_hold: assert property (@(posedge clk) disable iff (!rst_n)
    wb_valid && !wb_ready |=> wb_valid && $stable(wb_rd) && $stable(wb_data));

endmodule
