// tb_relu_quant: self-checking test of ReLU + requantisation.
//
// Two instances, 2-bit (the paper's 0..3 quantiser) and 8-bit activations, get
// directed values (negative numbers, zero, exact step boundaries such as
// 1/6 and 1/2, values just below and above them, 1.0 and above) and random
// binary32 values over a wide exponent range. The reference evaluates
// floor(min(1,max(0,x))*L + 0.5) in double precision. Latency is one cycle.
`timescale 1ns/1ps
module tb_relu_quant;
  import tb_fp_pkg::*;

  localparam int LANES = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                   in_valid, v2, v8;
  logic [7:0]             in_tag, t2, t8;
  logic [LANES-1:0][31:0] in_x;
  logic [LANES-1:0][1:0]  q2;
  logic [LANES-1:0][7:0]  q8;

  relu_quant #(.LANES(LANES), .ACT_W(2), .TAG_W(8)) u2 (
    .clk, .rst_n, .in_valid, .in_tag, .in_x, .out_valid(v2), .out_tag(t2), .out_q(q2));
  relu_quant #(.LANES(LANES), .ACT_W(8), .TAG_W(8)) u8 (
    .clk, .rst_n, .in_valid, .in_tag, .in_x, .out_valid(v8), .out_tag(t8), .out_q(q8));

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real directed [] = '{-1.0, -0.01, 0.0, 1.0/6.0, 0.1666, 0.1667, 0.5, 0.49999, 0.5001,
                       5.0/6.0, 0.99, 1.0, 1.5, 1000.0, 1.0/510.0, 3.0/510.0, 0.002, 1e-9};

  task automatic run_vec(input real r [LANES]);
    @(negedge clk);
    in_valid = 1;
    in_tag   = 8'($urandom);
    for (int l = 0; l < LANES; l++) in_x[l] = real_to_fp32(r[l]);
    @(posedge clk); #1;
    check(v2 && v8 && t2 == in_tag && t8 == in_tag, "valid/tag one cycle later");
    for (int l = 0; l < LANES; l++) begin
      real xv;
      xv = fp32_to_real(in_x[l]);
      check(int'(q2[l]) == quant_ref(xv, 3),   $sformatf("2-bit q(%g) = %0d exp %0d", xv, q2[l], quant_ref(xv, 3)));
      check(int'(q8[l]) == quant_ref(xv, 255), $sformatf("8-bit q(%g) = %0d exp %0d", xv, q8[l], quant_ref(xv, 255)));
    end
  endtask

  initial begin
    real r [LANES];
    in_valid = 0; in_tag = '0; in_x = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < directed.size(); i += LANES) begin
      for (int l = 0; l < LANES; l++) r[l] = directed[(i + l) % directed.size()];
      run_vec(r);
    end
    for (int i = 0; i < 500; i++) begin
      for (int l = 0; l < LANES; l++)
        r[l] = ($urandom % 2 ? 1.0 : -0.3) * real'($urandom % 100000) / 60000.0 / real'(1 << ($urandom % 12));
      run_vec(r);
    end
    @(negedge clk) in_valid = 0;
    @(posedge clk); #1;
    check(!v2 && !v8, "valid drops");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
