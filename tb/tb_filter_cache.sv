// tb_filter_cache: self-checking test of the per-feature weight store.
//
// Every entry of every feature is written with a value derived from its
// feature and address (a hash the test recomputes), in random order of
// features; then every feature reads its own random addresses in parallel for
// many cycles, and each read data must equal the hash one cycle later.
`timescale 1ns/1ps
module tb_filter_cache;

  localparam int NUM_FEAT = 4, DEPTH = 32, DW = 16;

  logic clk = 0;
  always #5 clk = ~clk;

  logic                              wr_en;
  logic [1:0]                        wr_feat;
  logic [4:0]                        wr_addr;
  logic [DW-1:0]                     wr_data;
  logic [NUM_FEAT-1:0][4:0]          rd_addr;
  logic [NUM_FEAT-1:0][DW-1:0]       rd_data;

  filter_cache #(.NUM_FEAT(NUM_FEAT), .DEPTH(DEPTH), .DW(DW)) dut (.*);

  int checks = 0, failures = 0;

  function automatic logic [DW-1:0] hash(input int f, input int a);
    return DW'((f * 40503 + a * 2654435761 + 17) ^ (a << 7));
  endfunction

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; wr_feat = '0; wr_addr = '0; wr_data = '0; rd_addr = '0;
    for (int a = 0; a < DEPTH; a++)
      for (int k = 0; k < NUM_FEAT; k++) begin
        @(negedge clk);
        wr_en = 1; wr_feat = 2'((k + a) % NUM_FEAT); wr_addr = 5'(a);
        wr_data = hash((k + a) % NUM_FEAT, a);
      end
    @(negedge clk) wr_en = 0;
    for (int i = 0; i < 300; i++) begin
      logic [NUM_FEAT-1:0][4:0] ra;
      @(negedge clk);
      for (int f = 0; f < NUM_FEAT; f++) rd_addr[f] = 5'($urandom);
      ra = rd_addr;
      @(posedge clk); #1;
      for (int f = 0; f < NUM_FEAT; f++)
        check(rd_data[f] == hash(f, ra[f]), $sformatf("feat %0d addr %0d", f, ra[f]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
