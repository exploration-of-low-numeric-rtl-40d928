// tb_pe: self-checking test of the PE for every weight kind.
//
// Four PE instances (ternary 2-bit x T, binary 8-bit x B, XNOR 1x1, integer
// 4x4) receive the same random beat stream: dot products of random length
// (1..5 beats), with first/last marking the boundaries and random idle cycles
// in between. A reference accumulates the products computed from the weight
// encodings independently and is compared with out_acc whenever out_valid
// pulses. The PE latency is checked: out_valid must come exactly one cycle
// after the last beat.
`timescale 1ns/1ps
module tb_pe;
  import lpn_pkg::*;

  localparam int WORDS = 8;
  localparam int ACC_W = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, first, last;
  logic [WORDS-1:0][1:0] act_t, wgt_t;
  logic [WORDS-1:0][7:0] act_b;
  logic [WORDS-1:0][0:0] wgt_b, act_x, wgt_x;
  logic [WORDS-1:0][3:0] act_i, wgt_i;
  logic [3:0]            ov;
  logic signed [ACC_W-1:0] oacc [4];

  pe #(.WKIND(WK_TERNARY), .ACT_W(2), .WGT_W(2), .WORDS(WORDS), .ACC_W(ACC_W)) u_t (
    .clk, .rst_n, .in_valid, .first, .last, .act(act_t), .wgt(wgt_t), .out_valid(ov[0]), .out_acc(oacc[0]));
  pe #(.WKIND(WK_BINARY), .ACT_W(8), .WGT_W(1), .WORDS(WORDS), .ACC_W(ACC_W)) u_b (
    .clk, .rst_n, .in_valid, .first, .last, .act(act_b), .wgt(wgt_b), .out_valid(ov[1]), .out_acc(oacc[1]));
  pe #(.WKIND(WK_XNOR), .ACT_W(1), .WGT_W(1), .WORDS(WORDS), .ACC_W(ACC_W)) u_x (
    .clk, .rst_n, .in_valid, .first, .last, .act(act_x), .wgt(wgt_x), .out_valid(ov[2]), .out_acc(oacc[2]));
  pe #(.WKIND(WK_INT), .ACT_W(4), .WGT_W(4), .WORDS(WORDS), .ACC_W(ACC_W)) u_i (
    .clk, .rst_n, .in_valid, .first, .last, .act(act_i), .wgt(wgt_i), .out_valid(ov[3]), .out_acc(oacc[3]));

  int checks = 0, failures = 0;
  int ref_acc [4];
  int exp_q0 [$], exp_q1 [$], exp_q2 [$], exp_q3 [$];
  int pending_lat = -1;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  // independent per-word products
  function automatic int tern(input logic [1:0] w);
    return (w == 2'b01) ? 1 : (w == 2'b11) ? -1 : 0;
  endfunction

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // monitor: compare every finished dot product
  always @(posedge clk) begin
    if (rst_n && ov[0]) begin
      int e [4];
      e[0] = exp_q0.pop_front();
      e[1] = exp_q1.pop_front();
      e[2] = exp_q2.pop_front();
      e[3] = exp_q3.pop_front();
      for (int k = 0; k < 4; k++)
        check(oacc[k] == ACC_W'(e[k]), $sformatf("pe kind %0d: got %0d exp %0d", k, oacc[k], e[k]));
      check(ov == 4'b1111, "all PEs finish together");
    end
  end

  initial begin
    in_valid = 0; first = 0; last = 0;
    act_t = '0; wgt_t = '0; act_b = '0; wgt_b = '0; act_x = '0; wgt_x = '0; act_i = '0; wgt_i = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int d = 0; d < 300; d++) begin
      int len;
      len = 1 + ($urandom % 5);
      for (int b = 0; b < len; b++) begin
        @(negedge clk);
        in_valid = 1;
        first = (b == 0);
        last  = (b == len - 1);
        for (int j = 0; j < WORDS; j++) begin
          act_t[j] = 2'($urandom); wgt_t[j] = 2'($urandom);
          act_b[j] = 8'($urandom); wgt_b[j] = 1'($urandom);
          act_x[j] = 1'($urandom); wgt_x[j] = 1'($urandom);
          act_i[j] = 4'($urandom); wgt_i[j] = 4'($urandom);
          // favour the extreme values now and then
          if (d % 7 == 0) begin act_b[j] = 8'hFF; wgt_b[j] = 1'b0; act_i[j] = 4'hF; wgt_i[j] = 4'h8; end
        end
        if (first) for (int k = 0; k < 4; k++) ref_acc[k] = 0;
        for (int j = 0; j < WORDS; j++) begin
          ref_acc[0] += int'(act_t[j]) * tern(wgt_t[j]);
          ref_acc[1] += wgt_b[j] ? int'(act_b[j]) : -int'(act_b[j]);
          ref_acc[2] += (act_x[j] == wgt_x[j]) ? 1 : -1;
          ref_acc[3] += int'(act_i[j]) * int'($signed(wgt_i[j]));
        end
        if (last) begin
          exp_q0.push_back(ref_acc[0]);
          exp_q1.push_back(ref_acc[1]);
          exp_q2.push_back(ref_acc[2]);
          exp_q3.push_back(ref_acc[3]);
        end
        // latency check: sample right after the next rising edge
        if (last) fork begin
          @(posedge clk); #1;
          check(ov[0] == 1'b1, "out_valid one cycle after last");
        end join_none
        if ($urandom % 4 == 0) begin
          @(negedge clk);
          in_valid = 0;
          act_t = '1;   // garbage while idle must not count
          act_b = '1;
        end
      end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (5) @(posedge clk);
    check(exp_q0.size() == 0, "all results seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
