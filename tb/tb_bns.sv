// tb_bns: self-checking test of the fused batch-norm/scale stage.
//
// Random gamma/beta pairs (binary32, moderate exponents) are written for all
// groups and lanes, then random signed 16-bit dot products are streamed with
// random group tags and gaps. The reference computes round(round(x*gamma)+beta)
// in binary32 through double precision (tb_fp_pkg) and must match bit for bit;
// x = 0, x = -32768 and x = 32767 are included. Latency is three cycles.
`timescale 1ns/1ps
module tb_bns;
  import tb_fp_pkg::*;

  localparam int LANES = 4, ACC_W = 16, TAG_W = 8, GROUPS = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              prm_wr_en;
  logic [1:0]        prm_group, prm_lane;
  logic [31:0]       prm_gamma, prm_beta;
  logic              in_valid, out_valid;
  logic [TAG_W-1:0]  in_tag, out_tag;
  logic signed [LANES-1:0][ACC_W-1:0] in_x;
  logic [LANES-1:0][31:0]             out_y;

  bns #(.LANES(LANES), .ACC_W(ACC_W), .TAG_W(TAG_W), .GROUPS(GROUPS)) dut (.*);

  int checks = 0, failures = 0;
  logic [31:0] g_ref [GROUPS][LANES], b_ref [GROUPS][LANES];
  logic [LANES-1:0][31:0] exp_q [$];
  logic [TAG_W-1:0]       tag_q [$];
  int cyc = 0, issue_cyc [$];
  always @(posedge clk) cyc++;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic real rnd_real(input int emax);
    real m;
    int  k;
    m = 1.0 + real'($urandom % 8388608) / 8388608.0;
    k = int'($urandom % (2 * emax + 1)) - emax;
    for (int i = 0; i < k; i++) m = m * 2.0;
    for (int i = 0; i > k; i--) m = m / 2.0;
    return ($urandom % 2) ? -m : m;
  endfunction

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      logic [LANES-1:0][31:0] e;
      e = exp_q.pop_front();
      check(cyc - issue_cyc.pop_front() == 3, "three-cycle latency");
      check(out_tag == tag_q.pop_front(), "tag follows data");
      for (int l = 0; l < LANES; l++)
        check(out_y[l] == e[l], $sformatf("lane %0d: got %h exp %h", l, out_y[l], e[l]));
    end
  end

  initial begin
    prm_wr_en = 0; prm_group = '0; prm_lane = '0; prm_gamma = '0; prm_beta = '0;
    in_valid = 0; in_tag = '0; in_x = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int g = 0; g < GROUPS; g++)
      for (int l = 0; l < LANES; l++) begin
        @(negedge clk);
        prm_wr_en = 1; prm_group = 2'(g); prm_lane = 2'(l);
        prm_gamma = real_to_fp32(rnd_real(8) / 64.0);
        prm_beta  = real_to_fp32(rnd_real(4));
        g_ref[g][l] = prm_gamma; b_ref[g][l] = prm_beta;
      end
    @(negedge clk) prm_wr_en = 0;
    for (int i = 0; i < 800; i++) begin
      logic [LANES-1:0][31:0] e;
      @(negedge clk);
      in_valid = 1;
      in_tag   = TAG_W'($urandom % GROUPS);
      for (int l = 0; l < LANES; l++) begin
        real p;
        case (i % 10)
          0: in_x[l] = 16'sd0;
          1: in_x[l] = -16'sd32768;
          2: in_x[l] = 16'sd32767;
          default: in_x[l] = ACC_W'($urandom);
        endcase
        p    = fp32_to_real(real_to_fp32(real'($signed(in_x[l])) * fp32_to_real(g_ref[in_tag][l])));
        e[l] = real_to_fp32(p + fp32_to_real(b_ref[in_tag][l]));
      end
      exp_q.push_back(e);
      tag_q.push_back(in_tag);
      issue_cyc.push_back(cyc + 1);
      if ($urandom % 3 == 0) begin
        @(negedge clk); in_valid = 0; in_x = '1;
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (6) @(posedge clk);
    check(exp_q.size() == 0, "all results seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
