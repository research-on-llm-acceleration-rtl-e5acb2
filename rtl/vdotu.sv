// vdotu -- the vector dot-product execution unit (VDOTU).
//
// The unit sits in the execute stage next to the ALU and the load/store
// unit. It treats each 64-bit source operand as LANES = XLEN/ELEM_W packed
// signed integers (element i in bits [ELEM_W*i +: ELEM_W], so a little-endian
// 64-bit load of an int8 array puts element 0 in the low byte), multiplies
// the element pairs in LANES parallel multipliers and sums the products in a
// balanced binary adder tree of LANES-1 adders. With the default ELEM_W = 8
// that is eight 8-bit multipliers and seven adders in three levels (4, 2, 1),
// as in the published unit. The sum is sign-extended to the 64-bit register
// width. ELEM_W = 16 gives four 16-bit lanes and three adders; the published
// unit names 8 bits as its default element width.
//
// Interface: a valid/ready operand port (in_*) and a valid/ready result port
// (out_*), each carrying the destination register number along with the data.
//
// Timing: the multipliers and the adder tree are combinational; one register
// stage at the output holds the result. Latency is one cycle, throughput one
// operation per cycle. When out_ready is low the held result stays and
// in_ready drops (the unit stalls); a new operation can enter in the same
// cycle as the held one leaves. The output register, the handshake and the
// signed interpretation of int8 are this design's choices; the paper gives
// the multiplier count, the adder count and tree, and the 64-bit result.
module vdotu
  import vdot_pkg::*;
#(
  parameter int unsigned ELEM_W = ELEM_W_DEFAULT
) (
  input  logic           clk,
  input  logic           rst_n,
  // operand port
  input  logic           in_valid,
  output logic           in_ready,
  input  xdata_t         in_src1,
  input  xdata_t         in_src2,
  input  reg_idx_t       in_rd,
  // result port
  output logic           out_valid,
  input  logic           out_ready,
  output xdata_t         out_data,
  output reg_idx_t       out_rd
);

  localparam int unsigned LANES  = XLEN / ELEM_W;
  localparam int unsigned PROD_W = 2 * ELEM_W;
  localparam int unsigned LEVELS = $clog2(LANES);
  localparam int unsigned SUM_W  = PROD_W + LEVELS;

  initial begin
    assert (XLEN % ELEM_W == 0 && LANES >= 2 && (1 << LEVELS) == LANES)
      else $error("vdotu: ELEM_W must divide XLEN into a power-of-two lane count");
    assert (SUM_W <= XLEN)
      else $error("vdotu: dot product wider than a register");
  end

  // ---- multipliers: LANES signed ELEM_W x ELEM_W products ----
  logic signed [PROD_W-1:0] prod [LANES];

  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      prod[i] = $signed(in_src1[ELEM_W*i +: ELEM_W]) *
                $signed(in_src2[ELEM_W*i +: ELEM_W]);
    end
  end

  // ---- adder tree: level l holds LANES >> l partial sums ----
  // node[0 .. LANES-1] are the products, node[LANES .. 2*LANES-2] the
  // LANES-1 adder outputs in level order; node[2*LANES-2] is the root.
  logic signed [SUM_W-1:0] node [2*LANES-1];

  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      node[i] = SUM_W'(prod[i]);
    end
    for (int a = 0; a < LANES - 1; a++) begin
      node[LANES + a] = node[2*a] + node[2*a + 1];
    end
  end

  logic signed [SUM_W-1:0] dot;
  assign dot = node[2*LANES-2];

  // ---- output register with valid/ready ----
  logic take;
  assign in_ready = !out_valid || out_ready;
  assign take     = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
      out_rd    <= '0;
    end else begin
      if (take) begin
        out_data <= XLEN'(dot);  // sign extension to the register width
        out_rd   <= in_rd;
      end
      if (in_ready) out_valid <= in_valid;
    end
  end

  // A held result must not change while it waits for out_ready.
  property p_hold;
    @(posedge clk) disable iff (!rst_n)
      out_valid && !out_ready |=> out_valid && $stable(out_data) && $stable(out_rd);
  endproperty
  a_hold: assert property (p_hold);

endmodule
