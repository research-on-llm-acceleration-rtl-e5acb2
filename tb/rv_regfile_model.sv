// rv_regfile_model -- behavioural model of the host core's integer register
// file, as seen by the VDOT path: 32 x 64-bit registers, x0 reads as zero,
// two combinational read ports and one write port that writes on the rising
// edge at which wb_valid && wb_ready. The testbench can also load a register
// directly (poke), standing in for the core's load instructions.
module rv_regfile_model
  import vdot_pkg::*;
(
  input  logic     clk,
  input  reg_idx_t raddr1,
  input  reg_idx_t raddr2,
  output xdata_t   rdata1,
  output xdata_t   rdata2,
  input  logic     wen,
  input  reg_idx_t waddr,
  input  xdata_t   wdata
);
  xdata_t regs [NREGS];

  initial for (int i = 0; i < NREGS; i++) regs[i] = '0;

  assign rdata1 = (raddr1 == '0) ? '0 : regs[raddr1];
  assign rdata2 = (raddr2 == '0) ? '0 : regs[raddr2];

  always @(posedge clk) if (wen && waddr != '0) regs[waddr] <= wdata;

  function automatic void poke(reg_idx_t a, xdata_t d);
    if (a != '0) regs[a] = d;
  endfunction

  function automatic xdata_t peek(reg_idx_t a);
    return (a == '0) ? '0 : regs[a];
  endfunction
endmodule
