// feature_buffer: on-chip activation store between layers.
//
// Two banks of DEPTH words; a word holds WORDS activations of ACT_W bits, the
// channel vector of one pixel for one group of WORDS channels. A layer reads
// its input map from one bank while its output map is written to the other,
// and the next layer swaps them (ping-pong), so the whole network runs out of
// on-chip memory once the image is loaded. One read port and one write port,
// each with a bank select; the read has one cycle of latency, as a block RAM
// with a registered output. Read and write of the same bank and address in the
// same cycle return the old word.
//
// From the paper: a feature buffer that feeds the PE array and receives the
// pooled output of the previous layer. This design's choices: two banks, the
// word layout, the depth and the port timing.
module feature_buffer #(
  parameter int  WORDS = 64,
  parameter int  ACT_W = 2,
  parameter int  DEPTH = 65536,
  localparam int AW    = $clog2(DEPTH),
  localparam int DW    = WORDS * ACT_W
) (
  input  logic          clk,
  input  logic          rd_en,
  input  logic          rd_bank,
  input  logic [AW-1:0] rd_addr,
  output logic [DW-1:0] rd_data,
  input  logic          wr_en,
  input  logic          wr_bank,
  input  logic [AW-1:0] wr_addr,
  input  logic [DW-1:0] wr_data
);

  logic [DW-1:0] bank0 [DEPTH];
  logic [DW-1:0] bank1 [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en && !wr_bank) bank0[wr_addr] <= wr_data;
    if (wr_en &&  wr_bank) bank1[wr_addr] <= wr_data;
    if (rd_en) rd_data <= rd_bank ? bank1[rd_addr] : bank0[rd_addr];
  end

endmodule
