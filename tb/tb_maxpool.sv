// tb_maxpool: self-checking test of the running-maximum pooling stage.
//
// Random 2-bit vectors are pushed with random gaps for window counts 1 (pass
// through), 4 (2x2) and 9 (3x3); clear is pulsed between the runs and once in
// the middle of a window to check that it restarts the count. The reference
// keeps the per-lane maximum of each group of "count" vectors; every output
// must appear one cycle after the last vector of its window.
`timescale 1ns/1ps
module tb_maxpool;

  localparam int LANES = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear, in_valid, out_valid;
  logic [5:0] count;
  logic [LANES-1:0][1:0] in_q, out_q;

  maxpool #(.LANES(LANES), .ACT_W(2)) dut (.*);

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic do_clear();
    @(negedge clk);
    in_valid = 0; clear = 1;
    @(negedge clk);
    clear = 0;
  endtask

  initial begin
    int cnts [3] = '{1, 4, 9};
    clear = 0; in_valid = 0; in_q = '0; count = 6'd1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (cnts[ci]) begin
      count = 6'(cnts[ci]);
      do_clear();
      // a partial window that clear must discard
      if (cnts[ci] > 1) begin
        @(negedge clk); in_valid = 1; in_q = '1;
        do_clear();
      end
      for (int w = 0; w < 60; w++) begin
        logic [LANES-1:0][1:0] mx;
        mx = '0;
        for (int n = 0; n < cnts[ci]; n++) begin
          @(negedge clk);
          in_valid = 1;
          for (int l = 0; l < LANES; l++) begin
            in_q[l] = 2'($urandom % ((w % 3 == 0) ? 3 : 4));
            if (in_q[l] > mx[l]) mx[l] = in_q[l];
          end
          @(posedge clk); #1;
          if (n == cnts[ci] - 1) begin
            check(out_valid, "output after last vector of the window");
            check(out_q == mx, $sformatf("max: got %h exp %h", out_q, mx));
          end else begin
            check(!out_valid, "no output inside a window");
          end
          if ($urandom % 3 == 0) begin
            @(negedge clk); in_valid = 0; in_q = '1;
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
