// tb_dsp_pack_pe: self-checking test of the packed-DSP 2-bit x ternary engine.
//
// Random dot products (1..6 beats of WORDS activations in 0..3 and four lanes of
// weights in {-1,0,+1}) are fed with first/last flags and random idle cycles.
// The reference sums act*w per lane with plain integers; each lane result is
// compared when out_valid pulses, and out_valid must come one cycle after the
// last beat. All-maximum operands (act 3 with weights -1 in every lane) are
// included, the case that fills a packed field most.
`timescale 1ns/1ps
module tb_dsp_pack_pe;

  localparam int WORDS = 8;
  localparam int ACC_W = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, first, last, out_valid;
  logic [WORDS-1:0][1:0]      act;
  logic [3:0][WORDS-1:0][1:0] wgt;
  logic signed [3:0][ACC_W-1:0] out_acc;

  dsp_pack_pe #(.WORDS(WORDS), .ACC_W(ACC_W)) dut (.*);

  int checks = 0, failures = 0;
  int ref_acc [4];
  int q0 [$], q1 [$], q2 [$], q3 [$];

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic logic [1:0] tcode(input int w);
    return (w > 0) ? 2'b01 : (w < 0) ? 2'b11 : 2'b00;
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
      int e [4];
      e[0] = q0.pop_front(); e[1] = q1.pop_front(); e[2] = q2.pop_front(); e[3] = q3.pop_front();
      for (int l = 0; l < 4; l++)
        check(out_acc[l] == ACC_W'(e[l]), $sformatf("lane %0d got %0d exp %0d", l, out_acc[l], e[l]));
    end
  end

  initial begin
    in_valid = 0; first = 0; last = 0; act = '0; wgt = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int d = 0; d < 300; d++) begin
      int len;
      len = 1 + ($urandom % 6);
      for (int b = 0; b < len; b++) begin
        @(negedge clk);
        in_valid = 1; first = (b == 0); last = (b == len - 1);
        if (first) for (int l = 0; l < 4; l++) ref_acc[l] = 0;
        for (int j = 0; j < WORDS; j++) begin
          act[j] = (d % 5 == 0) ? 2'd3 : 2'($urandom);
          for (int l = 0; l < 4; l++) begin
            int w;
            w = (d % 5 == 0) ? -1 : int'($urandom % 3) - 1;
            wgt[l][j] = tcode(w);
            ref_acc[l] += int'(act[j]) * w;
          end
        end
        if (last) begin
          q0.push_back(ref_acc[0]); q1.push_back(ref_acc[1]);
          q2.push_back(ref_acc[2]); q3.push_back(ref_acc[3]);
          fork begin
            @(posedge clk); #1;
            check(out_valid == 1'b1, "out_valid one cycle after last");
          end join_none
        end
        if ($urandom % 4 == 0) begin
          @(negedge clk);
          in_valid = 0; act = '1;
        end
      end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (5) @(posedge clk);
    check(q0.size() == 0, "all results seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
