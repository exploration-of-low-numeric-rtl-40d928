// pe_array: one-dimensional systolic array of dot-product engines.
//
// The array computes NUM_FEAT output features of the same output pixel in
// parallel: NUM_PE logic PEs (module pe, one feature each) followed by NUM_DSP
// packed-DSP engines (module dsp_pack_pe, four features each), so
// NUM_FEAT = NUM_PE + 4*NUM_DSP. Feature f of slot order: PE k is feature k,
// DSP engine d holds features NUM_PE+4d .. NUM_PE+4d+3.
//
// Input beats (activation vector, filter-cache address, first/last flags and a
// tag) enter slot 0 and move one slot further every cycle, so slot k sees a
// beat k cycles after slot 0. Each slot reads its weights from the filter
// cache with the beat's address (one cycle), then its engine accumulates. The
// finished dot products leave the slots at staggered times; a delay line of
// NUM_SLOT-1-k registers behind slot k lines them up so that all NUM_FEAT
// results and the beat's tag come out together in one cycle.
//
// Timing: a beat presented in cycle t reaches slot k's engine in cycle t+k+2;
// the result vector of a dot product whose last beat entered in cycle t is
// valid (out_valid) in cycle t + NUM_SLOT + 2. One beat per cycle, no stalls.
//
// From the paper: a 1D systolic array of PEs computing feature maps in
// parallel, with DSP-based engines adding to the logic PEs. This design's
// choices: the array size, the forwarding of activations between neighbours,
// the per-feature filter cache reads and the output deskew.
module pe_array
  import lpn_pkg::*;
#(
  parameter wkind_e WKIND   = WK_TERNARY,
  parameter int     ACT_W   = 2,
  parameter int     WGT_W   = 2,
  parameter int     WORDS   = 64,
  parameter int     ACC_W   = 16,
  parameter int     NUM_PE  = 48,
  parameter int     NUM_DSP = 4,
  parameter int     FDEPTH  = 1024,
  parameter int     TAG_W   = 8,
  localparam int    NUM_FEAT = NUM_PE + 4 * NUM_DSP,
  localparam int    NUM_SLOT = NUM_PE + NUM_DSP,
  localparam int    FAW      = $clog2(FDEPTH),
  localparam int    FW       = (NUM_FEAT > 1) ? $clog2(NUM_FEAT) : 1
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  // beat stream
  input  logic                                 in_valid,
  input  logic                                 in_first,
  input  logic                                 in_last,
  input  logic [TAG_W-1:0]                     in_tag,
  input  logic [FAW-1:0]                       in_faddr,
  input  logic [WORDS-1:0][ACT_W-1:0]          in_act,
  // filter cache load
  input  logic                                 fc_wr_en,
  input  logic [FW-1:0]                        fc_wr_feat,
  input  logic [FAW-1:0]                       fc_wr_addr,
  input  logic [WORDS-1:0][WGT_W-1:0]          fc_wr_data,
  // results
  output logic                                 out_valid,
  output logic [TAG_W-1:0]                     out_tag,
  output logic signed [NUM_FEAT-1:0][ACC_W-1:0] out_acc
);

  typedef struct packed {
    logic                        valid;
    logic                        first;
    logic                        last;
    logic [TAG_W-1:0]            tag;
    logic [FAW-1:0]              faddr;
    logic [WORDS-1:0][ACT_W-1:0] act;
  } beat_t;

  beat_t stage_a [NUM_SLOT];   // beat at slot k, filter read issued
  beat_t stage_b [NUM_SLOT];   // beat at slot k, weights available

  logic [NUM_FEAT-1:0][FAW-1:0]               fc_rd_addr;
  logic [NUM_FEAT-1:0][WORDS*WGT_W-1:0]       fc_rd_data;
  logic [NUM_SLOT-1:0]                        slot_valid;
  logic [TAG_W-1:0]                           tag_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < NUM_SLOT; k++) begin
        stage_a[k] <= '0;
        stage_b[k] <= '0;
      end
      tag_q <= '0;
    end else begin
      stage_a[0] <= '{valid: in_valid, first: in_first, last: in_last,
                      tag: in_tag, faddr: in_faddr, act: in_act};
      for (int k = 1; k < NUM_SLOT; k++) stage_a[k] <= stage_a[k-1];
      for (int k = 0; k < NUM_SLOT; k++) stage_b[k] <= stage_a[k];
      if (stage_b[NUM_SLOT-1].valid && stage_b[NUM_SLOT-1].last)
        tag_q <= stage_b[NUM_SLOT-1].tag;
    end
  end

  filter_cache #(.NUM_FEAT(NUM_FEAT), .DEPTH(FDEPTH), .DW(WORDS*WGT_W)) u_fc (
    .clk     (clk),
    .wr_en   (fc_wr_en),
    .wr_feat (fc_wr_feat),
    .wr_addr (fc_wr_addr),
    .wr_data (fc_wr_data),
    .rd_addr (fc_rd_addr),
    .rd_data (fc_rd_data)
  );

  // Logic PEs
  for (genvar k = 0; k < NUM_PE; k++) begin : g_pe
    logic                    pv;
    logic signed [ACC_W-1:0] pacc;
    logic signed [ACC_W-1:0] dly [NUM_SLOT-k];

    assign fc_rd_addr[k] = stage_a[k].faddr;

    pe #(.WKIND(WKIND), .ACT_W(ACT_W), .WGT_W(WGT_W), .WORDS(WORDS), .ACC_W(ACC_W)) u_pe (
      .clk       (clk),
      .rst_n     (rst_n),
      .in_valid  (stage_b[k].valid),
      .first     (stage_b[k].first),
      .last      (stage_b[k].last),
      .act       (stage_b[k].act),
      .wgt       (fc_rd_data[k]),
      .out_valid (pv),
      .out_acc   (pacc)
    );

    // deskew: dly[0] is the engine output, dly[NUM_SLOT-1-k] the aligned one
    assign dly[0] = pacc;
    for (genvar s = 1; s < NUM_SLOT - k; s++) begin : g_dly
      always_ff @(posedge clk) dly[s] <= dly[s-1];
    end
    assign out_acc[k] = dly[NUM_SLOT-1-k];
    assign slot_valid[k] = pv;
  end

  // Packed-DSP engines
  for (genvar d = 0; d < NUM_DSP; d++) begin : g_dsp
    localparam int K = NUM_PE + d;
    localparam int F = NUM_PE + 4 * d;
    logic                          dv;
    logic signed [3:0][ACC_W-1:0]  dacc;
    logic [3:0][WORDS-1:0][1:0]    dw;
    logic signed [3:0][ACC_W-1:0]  dly [NUM_SLOT-K];

    for (genvar l = 0; l < 4; l++) begin : g_lane
      assign fc_rd_addr[F+l] = stage_a[K].faddr;
      assign dw[l]           = fc_rd_data[F+l];
    end

    dsp_pack_pe #(.WORDS(WORDS), .ACC_W(ACC_W)) u_dsp (
      .clk       (clk),
      .rst_n     (rst_n),
      .in_valid  (stage_b[K].valid),
      .first     (stage_b[K].first),
      .last      (stage_b[K].last),
      .act       (stage_b[K].act),
      .wgt       (dw),
      .out_valid (dv),
      .out_acc   (dacc)
    );

    assign dly[0] = dacc;
    for (genvar s = 1; s < NUM_SLOT - K; s++) begin : g_dly
      always_ff @(posedge clk) dly[s] <= dly[s-1];
    end
    for (genvar l = 0; l < 4; l++) begin : g_out
      assign out_acc[F+l] = dly[NUM_SLOT-1-K][l];
    end
    assign slot_valid[K] = dv;
  end

  assign out_valid = slot_valid[NUM_SLOT-1];
  assign out_tag   = tag_q;

  initial begin
    assert (NUM_DSP == 0 || (WKIND == WK_TERNARY && ACT_W == 2))
      else $error("packed-DSP engines exist only for 2-bit activations and ternary weights");
    assert (NUM_SLOT >= 1) else $error("empty array");
  end

endmodule
