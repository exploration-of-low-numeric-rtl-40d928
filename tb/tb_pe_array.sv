// tb_pe_array: self-checking test of the systolic PE array with its filter
// cache, logic PEs and one packed-DSP engine.
//
// Small configuration: 2-bit activations, ternary weights, 8 words per beat,
// 3 logic PEs and 1 DSP engine (7 features, 4 slots), 16 filter entries.
// Random legal ternary weights are loaded for every feature and entry. Then
// dot products of 1..4 beats, each beat with a random filter address, are
// streamed back to back (length-1 dot products stress the output deskew) and
// with random gaps. The reference computes each feature's dot product from the
// loaded weights; the result vector and tag must come out together exactly
// NUM_SLOT+2 cycles after the last beat.
`timescale 1ns/1ps
module tb_pe_array;
  import lpn_pkg::*;

  localparam int WORDS = 8, ACC_W = 16, NUM_PE = 3, NUM_DSP = 1, FDEPTH = 16, TAG_W = 8;
  localparam int NUM_FEAT = NUM_PE + 4 * NUM_DSP, NUM_SLOT = NUM_PE + NUM_DSP;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_first, in_last, fc_wr_en, out_valid;
  logic [TAG_W-1:0] in_tag, out_tag;
  logic [3:0] in_faddr, fc_wr_addr;
  logic [2:0] fc_wr_feat;
  logic [WORDS-1:0][1:0] in_act, fc_wr_data;
  logic signed [NUM_FEAT-1:0][ACC_W-1:0] out_acc;

  pe_array #(.WKIND(WK_TERNARY), .ACT_W(2), .WGT_W(2), .WORDS(WORDS), .ACC_W(ACC_W),
             .NUM_PE(NUM_PE), .NUM_DSP(NUM_DSP), .FDEPTH(FDEPTH), .TAG_W(TAG_W)) dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  int w_ref [NUM_FEAT][FDEPTH][WORDS];
  int acc_ref [NUM_FEAT];
  int exp_q [$];          // flattened NUM_FEAT values per result
  int exp_cyc [$];
  logic [TAG_W-1:0] exp_tag [$];

  always @(posedge clk) cyc++;

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

  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      check(exp_cyc.size() > 0 && cyc == exp_cyc.pop_front(), "latency NUM_SLOT+2 after last beat");
      check(out_tag == exp_tag.pop_front(), "tag");
      for (int f = 0; f < NUM_FEAT; f++) begin
        int e;
        e = exp_q.pop_front();
        check(out_acc[f] == ACC_W'(e), $sformatf("feature %0d: got %0d exp %0d", f, out_acc[f], e));
      end
    end
  end

  initial begin
    in_valid = 0; in_first = 0; in_last = 0; in_tag = '0; in_faddr = '0; in_act = '0;
    fc_wr_en = 0; fc_wr_feat = '0; fc_wr_addr = '0; fc_wr_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < NUM_FEAT; f++)
      for (int a = 0; a < FDEPTH; a++) begin
        @(negedge clk);
        fc_wr_en = 1; fc_wr_feat = 3'(f); fc_wr_addr = 4'(a);
        for (int j = 0; j < WORDS; j++) begin
          int w;
          w = int'($urandom % 3) - 1;
          w_ref[f][a][j] = w;
          fc_wr_data[j] = (w > 0) ? 2'b01 : (w < 0) ? 2'b11 : 2'b00;
        end
      end
    @(negedge clk) fc_wr_en = 0;
    for (int d = 0; d < 400; d++) begin
      int len;
      len = (d < 40) ? 1 : 1 + ($urandom % 4);
      for (int b = 0; b < len; b++) begin
        @(negedge clk);
        in_valid = 1; in_first = (b == 0); in_last = (b == len - 1);
        in_tag = 8'(d); in_faddr = 4'($urandom);
        for (int j = 0; j < WORDS; j++) in_act[j] = 2'($urandom);
        if (in_first) for (int f = 0; f < NUM_FEAT; f++) acc_ref[f] = 0;
        for (int f = 0; f < NUM_FEAT; f++)
          for (int j = 0; j < WORDS; j++) acc_ref[f] += int'(in_act[j]) * w_ref[f][in_faddr][j];
        if (in_last) begin
          for (int f = 0; f < NUM_FEAT; f++) exp_q.push_back(acc_ref[f]);
          exp_cyc.push_back(cyc + NUM_SLOT + 2);
          exp_tag.push_back(in_tag);
        end
        if (d >= 40 && $urandom % 4 == 0) begin
          @(negedge clk); in_valid = 0; in_act = '1; in_first = 1;
        end
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (NUM_SLOT + 5) @(posedge clk);
    check(exp_cyc.size() == 0, "all results seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
