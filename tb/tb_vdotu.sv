// tb_vdotu -- self-checking testbench for the dot-product unit.
//
// Drives operand pairs (corner values such as -128 * -128 in every lane, then
// random words) and compares each result with a dot product worked out here
// from the bytes with integer arithmetic. Checks the one-cycle latency, the
// one-per-cycle throughput with out_ready held high, and that a result is
// held unchanged while out_ready is low (random back-pressure phase).
// Inputs are driven at the falling clock edge; the DUT samples at the rising
// edge.
`timescale 1ns/1ps
module tb_vdotu;
  import vdot_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic     in_valid, in_ready, out_valid, out_ready;
  xdata_t   in_src1, in_src2, out_data;
  reg_idx_t in_rd, out_rd;

  vdotu dut (.*);

  // Second instance in the 16-bit element configuration (four lanes),
  // fed the same operands and kept always ready.
  logic     w_in_ready, w_out_valid;
  xdata_t   w_out_data;
  reg_idx_t w_out_rd;
  vdotu #(.ELEM_W(16)) dut16 (
    .clk, .rst_n, .in_valid, .in_ready(w_in_ready), .in_src1, .in_src2, .in_rd,
    .out_valid(w_out_valid), .out_ready(1'b1), .out_data(w_out_data), .out_rd(w_out_rd)
  );

  int checks = 0, failures = 0;

  function automatic xdata_t ref_dot(xdata_t a, xdata_t b);
    longint s = 0;
    for (int i = 0; i < 8; i++) begin
      int ea, eb;
      ea = int'($signed(a[8*i +: 8]));
      eb = int'($signed(b[8*i +: 8]));
      s += longint'(ea * eb);
    end
    return xdata_t'(s);
  endfunction

  function automatic xdata_t ref_dot16(xdata_t a, xdata_t b);
    longint s = 0;
    for (int i = 0; i < 4; i++)
      s += longint'(int'($signed(a[16*i +: 16])) * int'($signed(b[16*i +: 16])));
    return xdata_t'(s);
  endfunction

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // expected results in issue order
  xdata_t   exp_q[$];
  reg_idx_t exp_rd_q[$];

  // scoreboard on the result port
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    xdata_t e; reg_idx_t er;
    if (exp_q.size() == 0) check("unexpected result", 1'b0);
    else begin
      e = exp_q.pop_front(); er = exp_rd_q.pop_front();
      check($sformatf("data got %h exp %h", out_data, e), out_data == e);
      check("rd", out_rd == er);
    end
  end

  // a result offered while out_ready is low must stay unchanged
  xdata_t held_d; logic held_v = 1'b0;
  always @(posedge clk) begin
    if (rst_n && held_v) check("held data stable", out_valid && out_data == held_d);
    held_v <= rst_n && out_valid && !out_ready;
    held_d <= out_data;
  end

  // One operation: inputs change at the falling edge, the transfer happens
  // at the first rising edge with in_ready high.
  task automatic send(xdata_t a, xdata_t b, reg_idx_t rd);
    @(negedge clk);
    in_valid = 1'b1; in_src1 = a; in_src2 = b; in_rd = rd;
    exp_q.push_back(ref_dot(a, b)); exp_rd_q.push_back(rd);
    while (!in_ready) @(negedge clk);
    @(posedge clk);
    #1 in_valid = 1'b0;
  endtask

  int n_out;

  initial begin
    in_valid = 0; in_src1 = '0; in_src2 = '0; in_rd = '0; out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // latency: accepted at edge k, result visible right after edge k+1
    @(negedge clk);
    in_valid = 1; in_src1 = 64'h0102030405060708; in_src2 = 64'h0101010101010101; in_rd = 5'd3;
    exp_q.push_back(64'd36); exp_rd_q.push_back(5'd3);
    @(posedge clk); #1 in_valid = 0;
    check("result valid one cycle after issue", out_valid == 1'b1);
    check("known value 1+2+...+8 = 36", out_data == 64'd36);

    // corner values
    send({8{8'h80}}, {8{8'h80}}, 5'd1);      // 8 * 16384 = 131072
    send({8{8'h80}}, {8{8'h7f}}, 5'd2);      // 8 * -16256
    send({8{8'hff}}, {8{8'h01}}, 5'd4);      // -8
    send({8{8'h7f}}, {8{8'h7f}}, 5'd5);
    send('0, {8{8'h55}}, 5'd6);
    send(64'h80_7f_01_ff_00_80_7f_01, 64'h7f_80_ff_01_80_00_80_7f, 5'd7);
    repeat (3) @(posedge clk);

    // throughput: 32 back-to-back operations with out_ready high
    n_out = 0;
    fork
      begin
        for (int k = 0; k < 32; k++) begin
          xdata_t a, b;
          a = {$urandom, $urandom}; b = {$urandom, $urandom};
          @(negedge clk);
          check("in_ready while streaming", in_ready);
          in_valid = 1; in_src1 = a; in_src2 = b; in_rd = 5'(k);
          exp_q.push_back(ref_dot(a, b)); exp_rd_q.push_back(5'(k));
        end
        @(negedge clk) in_valid = 0;
      end
      begin
        repeat (2) @(negedge clk);
        for (int c = 0; c < 40; c++) begin
          if (out_valid) n_out++;
          @(negedge clk);
        end
      end
    join
    check($sformatf("32 results in 32 cycles (counted %0d)", n_out), n_out == 32);

    // 16-bit element configuration
    for (int k = 0; k < 50; k++) begin
      xdata_t a, b;
      a = {$urandom, $urandom}; b = {$urandom, $urandom};
      if (k == 0) begin a = {4{16'h8000}}; b = {4{16'h8000}}; end   // 4 * 2^30
      @(negedge clk);
      in_valid = 1; in_src1 = a; in_src2 = b; in_rd = 5'd9;
      exp_q.push_back(ref_dot(a, b)); exp_rd_q.push_back(5'd9);
      @(posedge clk); #1 in_valid = 0;
      check($sformatf("16-bit lanes got %h exp %h", w_out_data, ref_dot16(a, b)),
            w_out_valid && w_out_data == ref_dot16(a, b));
    end

    // random back-pressure
    fork
      begin
        for (int k = 0; k < 300; k++) begin
          xdata_t a, b;
          a = {$urandom, $urandom}; b = {$urandom, $urandom};
          send(a, b, 5'($urandom));
          if ($urandom_range(3) == 0) @(posedge clk);
        end
      end
      begin
        forever begin
          // changed away from the falling edge, where send() samples in_ready
          @(posedge clk);
          #2 out_ready = ($urandom_range(2) != 0);
        end
      end
    join_any
    disable fork;
    @(negedge clk) out_ready = 1;
    repeat (5) @(posedge clk);
    check("all results returned", exp_q.size() == 0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
