// tb_feature_buffer: self-checking test of the two-bank activation buffer.
//
// Random writes to both banks are mirrored in a reference array; reads of
// random banks and addresses are issued in the same cycles (including reads of
// the address being written, which must return the old word) and each read
// data is compared one cycle later. A bank-swap check writes the same address
// in both banks with different data.
`timescale 1ns/1ps
module tb_feature_buffer;

  localparam int WORDS = 4, ACT_W = 2, DEPTH = 64, DW = WORDS * ACT_W;

  logic clk = 0;
  always #5 clk = ~clk;

  logic          rd_en, rd_bank, wr_en, wr_bank;
  logic [5:0]    rd_addr, wr_addr;
  logic [DW-1:0] rd_data, wr_data;

  feature_buffer #(.WORDS(WORDS), .ACT_W(ACT_W), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  logic [DW-1:0] model [2][DEPTH];

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

  initial begin
    rd_en = 0; rd_bank = 0; wr_en = 0; wr_bank = 0; rd_addr = '0; wr_addr = '0; wr_data = '0;
    // initialise everything
    for (int b = 0; b < 2; b++)
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk);
        wr_en = 1; wr_bank = 1'(b); wr_addr = 6'(a); wr_data = DW'($urandom);
        model[b][a] = wr_data;
      end
    for (int i = 0; i < 2000; i++) begin
      logic [DW-1:0] e;
      logic          do_rd;
      @(negedge clk);
      wr_en   = 1'($urandom);
      wr_bank = 1'($urandom);
      wr_addr = 6'($urandom % 8);   // small range so reads hit recent writes
      wr_data = DW'($urandom);
      do_rd   = 1'($urandom % 4 != 0);
      rd_en   = do_rd;
      rd_bank = (i % 5 == 0) ? wr_bank : 1'($urandom);
      rd_addr = (i % 5 == 0) ? wr_addr : 6'($urandom % 8);
      e = model[rd_bank][rd_addr];                 // old data on collision
      if (wr_en) model[wr_bank][wr_addr] = wr_data;
      @(posedge clk); #1;
      if (do_rd) check(rd_data == e, $sformatf("bank %0d addr %0d: got %h exp %h", rd_bank, rd_addr, rd_data, e));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
