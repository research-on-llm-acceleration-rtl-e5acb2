// tb_nanhu_vdot_exu -- end-to-end testbench of the VDOT pipeline path.
//
// The testbench plays the rest of the core: it feeds instruction words,
// models the integer register file (rv_regfile_model) and accepts
// non-VDOT instructions and writeback results with randomly varying ready
// signals. A shadow register file, updated in program order, gives the
// expected value of every VDOT result independently of the design.
//
// Phases
//   1. latency: one VDOT with the writeback port always ready must write back
//      exactly two cycles after it was accepted; four independent VDOTs must
//      be accepted in four consecutive cycles.
//   2. the int8 dot product of the software flow: a 32-element block is
//      split into four register pairs, four VDOTs produce four partial dot
//      products, software adds them. Run for vector lengths 32, 768, 1024 and
//      1280 (one row of a fully connected layer for the embedding widths of
//      the three evaluated model sizes).
//   3. random programs mixing VDOTs (often reading the previous VDOT's rd),
//      ordinary instructions and writeback back-pressure.
// Every mechanism (VDOT selection, hand-over of other instructions, bypass,
// decode stall under back-pressure) is counted and must occur.
`timescale 1ns/1ps
module tb_nanhu_vdot_exu;
  import vdot_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        dec_valid, dec_ready;
  logic [31:0] dec_inst;
  logic        base_valid, base_ready;
  logic [31:0] base_inst;
  reg_idx_t    rf_raddr1, rf_raddr2;
  xdata_t      rf_rdata1, rf_rdata2;
  logic        wb_valid, wb_ready;
  reg_idx_t    wb_rd;
  xdata_t      wb_data;
  logic        ev_vdot_issue, ev_bypass, ev_stall;

  nanhu_vdot_exu dut (.*);

  rv_regfile_model rf (
    .clk    (clk),
    .raddr1 (rf_raddr1), .raddr2 (rf_raddr2),
    .rdata1 (rf_rdata1), .rdata2 (rf_rdata2),
    .wen    (wb_valid && wb_ready), .waddr (wb_rd), .wdata (wb_data)
  );

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // ---------------- reference ----------------
  xdata_t shadow [NREGS];

  function automatic xdata_t ref_dot(xdata_t a, xdata_t b);
    longint s = 0;
    for (int i = 0; i < 8; i++)
      s += longint'(int'($signed(a[8*i +: 8])) * int'($signed(b[8*i +: 8])));
    return xdata_t'(s);
  endfunction

  xdata_t      exp_data_q[$];
  reg_idx_t    exp_rd_q[$];
  int          exp_cycle_q[$];
  logic [31:0] base_q[$];
  logic        check_latency = 1'b0;

  // ---------------- monitors ----------------
  int n_vdot = 0, n_base = 0, n_bypass = 0, n_stall = 0, n_wb = 0;

  always @(posedge clk) if (rst_n) begin
    if (ev_vdot_issue) n_vdot++;
    if (ev_bypass)     n_bypass++;
    if (ev_stall)      n_stall++;
    if (wb_valid && wb_ready) begin
      n_wb++;
      if (exp_data_q.size() == 0) check("unexpected writeback", 1'b0);
      else begin
        xdata_t e; reg_idx_t r; int c;
        e = exp_data_q.pop_front(); r = exp_rd_q.pop_front(); c = exp_cycle_q.pop_front();
        check($sformatf("wb data got %h exp %h", wb_data, e), wb_data == e);
        check($sformatf("wb rd got %0d exp %0d", wb_rd, r), wb_rd == r);
        if (check_latency)
          check($sformatf("writeback 2 cycles after accept (took %0d)", cycle - c),
                cycle - c == 2);
      end
    end
    if (base_valid && base_ready) begin
      n_base++;
      if (base_q.size() == 0) check("unexpected base instruction", 1'b0);
      else check("base instruction passed unchanged", base_inst == base_q.pop_front());
    end
  end

  // ---------------- stimulus helpers ----------------
  logic rand_bp = 1'b0;   // random back-pressure on base_ready / wb_ready
  always begin
    @(posedge clk);
    #2;
    if (rand_bp) begin
      wb_ready   = ($urandom_range(2) != 0);
      base_ready = ($urandom_range(3) != 0);
    end else begin
      wb_ready   = 1'b1;
      base_ready = 1'b1;
    end
  end

  // Offer one instruction at the falling edge; it is taken at the first
  // rising edge with dec_ready high. The shadow register file is updated in
  // program order at that point.
  task automatic issue(logic [31:0] inst);
    logic is_v;
    is_v = (inst[6:0] == 7'b0001011) && (inst[14:12] == 3'b000) && (inst[31:25] == 7'b0);
    @(negedge clk);
    dec_valid = 1'b1; dec_inst = inst;
    #1;  // dec_ready depends on the word just offered
    while (!dec_ready) begin
      @(negedge clk);
      #1;
    end
    if (is_v) begin
      xdata_t r;
      r = ref_dot(shadow[inst[19:15]], shadow[inst[24:20]]);
      exp_data_q.push_back(r); exp_rd_q.push_back(inst[11:7]); exp_cycle_q.push_back(cycle);
      if (inst[11:7] != 0) shadow[inst[11:7]] = r;
    end else begin
      base_q.push_back(inst);
    end
    @(posedge clk);
    #1 dec_valid = 1'b0;
  endtask

  task automatic load_reg(reg_idx_t a, xdata_t d);   // stands in for a load
    rf.poke(a, d);
    if (a != 0) shadow[a] = d;
  endtask

  task automatic drain();
    while (exp_data_q.size() != 0 || base_q.size() != 0) @(posedge clk);
    @(posedge clk);
    #1;
  endtask

  function automatic logic [31:0] base_word();
    // an ordinary R-type or I-type ALU instruction with random registers
    logic [31:0] w;
    w = $urandom;
    w[6:0] = ($urandom_range(1) == 0) ? 7'b0110011 : 7'b0010011;
    return w;
  endfunction

  // Software dot product of two int8 vectors of length n (multiple of 32),
  // following the four-register-pair flow; returns the accumulated sum.
  byte xv [1280];
  byte yv [1280];

  logic [31:0] bw;

  task automatic sw_dot(int n, output longint acc);
    acc = 0;
    for (int blk = 0; blk < n / 32; blk++) begin
      for (int r = 0; r < 4; r++) begin
        xdata_t xw, yw;
        for (int e = 0; e < 8; e++) begin
          xw[8*e +: 8] = xv[blk*32 + r*8 + e];
          yw[8*e +: 8] = yv[blk*32 + r*8 + e];
        end
        load_reg(reg_idx_t'(1 + r), xw);       // x1..x4 hold X
        load_reg(reg_idx_t'(5 + r), yw);       // x5..x8 hold Y
      end
      for (int r = 0; r < 4; r++) begin
        issue(vdot_encode(reg_idx_t'(10 + r), reg_idx_t'(1 + r), reg_idx_t'(5 + r)));
        if ($urandom_range(3) == 0) begin bw = base_word(); issue(bw); end
      end
      drain();
      for (int r = 0; r < 4; r++) acc += longint'($signed(rf.peek(reg_idx_t'(10 + r))));
    end
  endtask

  // ---------------- test ----------------
  initial begin
    longint acc, ref_acc;
    int t0;
    dec_valid = 0; dec_inst = '0; wb_ready = 1; base_ready = 1;
    for (int i = 0; i < NREGS; i++) shadow[i] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    // 1. latency and issue rate
    load_reg(5'd1, 64'h0807060504030201);
    load_reg(5'd2, 64'h0101010101010101);
    check_latency = 1'b1;
    issue(vdot_encode(5'd3, 5'd1, 5'd2));
    drain();
    check("1+2+...+8 written to x3", rf.peek(5'd3) == 64'd36);
    t0 = cycle;
    for (int r = 0; r < 4; r++) issue(vdot_encode(reg_idx_t'(20 + r), 5'd1, 5'd2));
    check($sformatf("4 VDOTs accepted in 4 cycles (took %0d)", cycle - t0), cycle - t0 == 4);
    drain();
    check_latency = 1'b0;

    // 2. software dot products, with random back-pressure
    rand_bp = 1'b1;
    for (int s = 0; s < 4; s++) begin
      int n;
      n = (s == 0) ? 32 : (s == 1) ? 768 : (s == 2) ? 1024 : 1280;
      ref_acc = 0;
      for (int i = 0; i < n; i++) begin
        xv[i] = byte'($urandom);
        yv[i] = byte'($urandom);
        if (i < 8) begin xv[i] = -128; yv[i] = -128; end   // extreme products
        ref_acc += longint'(int'(xv[i]) * int'(yv[i]));
      end
      sw_dot(n, acc);
      check($sformatf("dot product length %0d: got %0d exp %0d", n, acc, ref_acc), acc == ref_acc);
    end

    // 3. random programs with dependent VDOTs
    for (int i = 1; i < NREGS; i++) load_reg(reg_idx_t'(i), {$urandom, $urandom});
    begin
      reg_idx_t last_rd;
      last_rd = 5'd1;
      for (int k = 0; k < 600; k++) begin
        reg_idx_t rd, rs1, rs2;
        rd  = reg_idx_t'($urandom);
        rs1 = ($urandom_range(1) == 0) ? last_rd : reg_idx_t'($urandom);
        rs2 = ($urandom_range(2) == 0) ? last_rd : reg_idx_t'($urandom);
        if ($urandom_range(4) == 0) begin bw = base_word(); issue(bw); end
        else begin
          issue(vdot_encode(rd, rs1, rs2));
          last_rd = rd;
        end
        rand_bp = (k % 200) < 120;
      end
    end
    rand_bp = 1'b0;
    drain();
    for (int i = 0; i < NREGS; i++)
      check($sformatf("final x%0d", i), rf.peek(reg_idx_t'(i)) == shadow[i]);

    // mechanisms
    $display("vdot issued %0d, other instructions %0d, bypasses %0d, stall cycles %0d, writebacks %0d",
             n_vdot, n_base, n_bypass, n_stall, n_wb);
    check("VDOT selected and executed", n_vdot > 0);
    check("other instructions handed on", n_base > 0);
    check("bypass used", n_bypass > 0);
    check("decode stalled by writeback back-pressure", n_stall > 0);
    check("every VDOT written back", n_wb == n_vdot);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
