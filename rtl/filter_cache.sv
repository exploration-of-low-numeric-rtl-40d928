// filter_cache: on-chip weight store of the PE array.
//
// One memory per output feature, DEPTH entries deep, each entry holding the
// WORDS weights one PE consumes in one beat. The host writes one entry at a
// time (wr_feat selects the feature). Every feature has its own read port with
// its own address because the array is systolic: PE k reads its weights one
// cycle after PE k-1. Reads have one cycle of latency, like an FPGA block RAM
// with a registered output.
//
// From the paper: that filters are cached in on-chip RAM and feed the PE array.
// This design's choices: the one-memory-per-feature organisation, the depth
// and the host write port.
module filter_cache #(
  parameter int NUM_FEAT = 64,
  parameter int DEPTH    = 1024,
  parameter int DW       = 128,
  localparam int AW      = $clog2(DEPTH),
  localparam int FW      = (NUM_FEAT > 1) ? $clog2(NUM_FEAT) : 1
) (
  input  logic                          clk,
  input  logic                          wr_en,
  input  logic [FW-1:0]                 wr_feat,
  input  logic [AW-1:0]                 wr_addr,
  input  logic [DW-1:0]                 wr_data,
  input  logic [NUM_FEAT-1:0][AW-1:0]   rd_addr,
  output logic [NUM_FEAT-1:0][DW-1:0]   rd_data
);

  for (genvar f = 0; f < NUM_FEAT; f++) begin : g_feat
    logic [DW-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (wr_en && wr_feat == FW'(f)) mem[wr_addr] <= wr_data;
      rd_data[f] <= mem[rd_addr[f]];
    end
  end

endmodule
