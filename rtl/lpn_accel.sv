// lpn_accel: low-numeric-precision CNN inference accelerator, top level.
//
// The datapath is a loop (one convolution layer per trip):
//   feature buffer --act--> PE array --INT16--> fused batch-norm/scale (FP32)
//   --> ReLU + quantise (unsigned ACT_W bits) --> max pool --> feature buffer
// The PE array holds NUM_PE logic PEs and NUM_DSP packed-DSP engines that
// together compute NUM_FEAT = NUM_PE + 4*NUM_DSP output features of one output
// pixel in parallel. The output of a layer, NUM_FEAT quantised features per
// pixel, is one feature-buffer word, so NUM_FEAT must equal WORDS and a layer's
// output map is directly the next layer's input map (in the other bank).
//
// Default configuration: 2-bit unsigned activations and ternary weights (2xT),
// 64 words per dot product, INT16 accumulation, 48 logic PEs plus 4 packed-DSP
// engines (64 features per pass), two 65536-word feature-buffer banks, a
// 1024-entry filter cache per feature and batch-norm parameters for 16 output
// groups (1024 features).
//
// Host side (plain ports; the host, DDR and loading kernels are outside):
//   - h_fb_*  : write and read feature-buffer words (input image, results);
//   - fc_*    : write filter-cache entries (one feature, one entry per cycle);
//   - prm_*   : write (gamma, beta) binary32 pairs per (group, feature);
//   - start/cfg: run one layer described by cfg; busy until done pulses.
// The host may touch the feature buffer only while busy is low; while a layer
// runs the controller owns both buffer ports. Filter-cache and parameter
// writes must not overlap a running layer that uses them.
//
// Latency of a layer of B beats: about B + NUM_SLOT + 10 cycles from start to
// done, NUM_SLOT = NUM_PE + NUM_DSP. The array accepts one beat per cycle and
// never stalls, since every later stage also takes one vector per cycle.
//
// From the paper: the block order and data types of the datapath loop, the
// ternary/binary weights with alpha folded into the batch-norm scale, the
// 2xT configuration and its 64-word PE, the packed-DSP engines. This design's
// choices: array and memory sizes, the host ports, the layer descriptor and
// the loop order of the controller.
module lpn_accel
  import lpn_pkg::*;
#(
  parameter wkind_e WKIND    = WK_TERNARY,
  parameter int     ACT_W    = 2,
  parameter int     WGT_W    = 2,
  parameter int     WORDS    = 64,
  parameter int     ACC_W    = 16,
  parameter int     NUM_PE   = 48,
  parameter int     NUM_DSP  = 4,
  parameter int     FB_DEPTH = 65536,
  parameter int     FDEPTH   = 1024,
  parameter int     GROUPS   = 16,
  localparam int    NUM_FEAT = NUM_PE + 4 * NUM_DSP,
  localparam int    TAG_W    = 8,
  localparam int    FB_AW    = $clog2(FB_DEPTH),
  localparam int    FAW      = $clog2(FDEPTH),
  localparam int    FW       = (NUM_FEAT > 1) ? $clog2(NUM_FEAT) : 1,
  localparam int    GW       = (GROUPS > 1) ? $clog2(GROUPS) : 1
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // layer control
  input  logic                         start,
  input  layer_cfg_t                   cfg,
  output logic                         busy,
  output logic                         done,
  // host access to the feature buffer (only while busy is low)
  input  logic                         h_fb_wr_en,
  input  logic                         h_fb_wr_bank,
  input  logic [FB_AW-1:0]             h_fb_wr_addr,
  input  logic [WORDS-1:0][ACT_W-1:0]  h_fb_wr_data,
  input  logic                         h_fb_rd_en,
  input  logic                         h_fb_rd_bank,
  input  logic [FB_AW-1:0]             h_fb_rd_addr,
  output logic [WORDS-1:0][ACT_W-1:0]  h_fb_rd_data,
  // filter cache load
  input  logic                         fc_wr_en,
  input  logic [FW-1:0]                fc_wr_feat,
  input  logic [FAW-1:0]               fc_wr_addr,
  input  logic [WORDS-1:0][WGT_W-1:0]  fc_wr_data,
  // batch-norm/scale parameter load
  input  logic                         prm_wr_en,
  input  logic [GW-1:0]                prm_group,
  input  logic [FW-1:0]                prm_lane,
  input  logic [31:0]                  prm_gamma,
  input  logic [31:0]                  prm_beta
);

  // controller
  logic               c_rd_en, c_rd_bank, c_wr_en, c_wr_bank;
  logic [FB_AW-1:0]   c_rd_addr, c_wr_addr;
  logic               beat_valid, beat_first, beat_last, beat_zero;
  logic [TAG_W-1:0]   beat_tag;
  logic [FAW-1:0]     beat_faddr;
  logic               pool_clear;
  logic [5:0]         pool_count;

  // buffer ports
  logic                         fb_rd_en, fb_rd_bank, fb_wr_en, fb_wr_bank;
  logic [FB_AW-1:0]             fb_rd_addr, fb_wr_addr;
  logic [WORDS-1:0][ACT_W-1:0]  fb_rd_data, fb_wr_data;

  // datapath
  logic [WORDS-1:0][ACT_W-1:0]           arr_act;
  logic                                  arr_v, bns_v, rq_v, mp_v;
  logic [TAG_W-1:0]                      arr_tag, bns_tag;
  logic signed [NUM_FEAT-1:0][ACC_W-1:0] arr_acc;
  logic [NUM_FEAT-1:0][31:0]             bns_y;
  logic [NUM_FEAT-1:0][ACT_W-1:0]        rq_q, mp_q;

  layer_ctrl #(.FB_DEPTH(FB_DEPTH), .FDEPTH(FDEPTH), .TAG_W(TAG_W)) u_ctrl (
    .clk        (clk),
    .rst_n      (rst_n),
    .start      (start),
    .cfg        (cfg),
    .busy       (busy),
    .done       (done),
    .fb_rd_en   (c_rd_en),
    .fb_rd_bank (c_rd_bank),
    .fb_rd_addr (c_rd_addr),
    .beat_valid (beat_valid),
    .beat_first (beat_first),
    .beat_last  (beat_last),
    .beat_zero  (beat_zero),
    .beat_tag   (beat_tag),
    .beat_faddr (beat_faddr),
    .pool_clear (pool_clear),
    .pool_count (pool_count),
    .wb_valid   (mp_v),
    .fb_wr_en   (c_wr_en),
    .fb_wr_bank (c_wr_bank),
    .fb_wr_addr (c_wr_addr)
  );

  // Buffer port ownership: controller while busy, host otherwise.
  always_comb begin
    if (busy) begin
      fb_rd_en   = c_rd_en;
      fb_rd_bank = c_rd_bank;
      fb_rd_addr = c_rd_addr;
      fb_wr_en   = c_wr_en;
      fb_wr_bank = c_wr_bank;
      fb_wr_addr = c_wr_addr;
      fb_wr_data = mp_q;
    end else begin
      fb_rd_en   = h_fb_rd_en;
      fb_rd_bank = h_fb_rd_bank;
      fb_rd_addr = h_fb_rd_addr;
      fb_wr_en   = h_fb_wr_en;
      fb_wr_bank = h_fb_wr_bank;
      fb_wr_addr = h_fb_wr_addr;
      fb_wr_data = h_fb_wr_data;
    end
  end

  feature_buffer #(.WORDS(WORDS), .ACT_W(ACT_W), .DEPTH(FB_DEPTH)) u_fb (
    .clk     (clk),
    .rd_en   (fb_rd_en),
    .rd_bank (fb_rd_bank),
    .rd_addr (fb_rd_addr),
    .rd_data (fb_rd_data),
    .wr_en   (fb_wr_en),
    .wr_bank (fb_wr_bank),
    .wr_addr (fb_wr_addr),
    .wr_data (fb_wr_data)
  );

  assign h_fb_rd_data = fb_rd_data;
  assign arr_act      = beat_zero ? '0 : fb_rd_data;   // zero padding

  pe_array #(
    .WKIND(WKIND), .ACT_W(ACT_W), .WGT_W(WGT_W), .WORDS(WORDS), .ACC_W(ACC_W),
    .NUM_PE(NUM_PE), .NUM_DSP(NUM_DSP), .FDEPTH(FDEPTH), .TAG_W(TAG_W)
  ) u_array (
    .clk        (clk),
    .rst_n      (rst_n),
    .in_valid   (beat_valid),
    .in_first   (beat_first),
    .in_last    (beat_last),
    .in_tag     (beat_tag),
    .in_faddr   (beat_faddr),
    .in_act     (arr_act),
    .fc_wr_en   (fc_wr_en),
    .fc_wr_feat (fc_wr_feat),
    .fc_wr_addr (fc_wr_addr),
    .fc_wr_data (fc_wr_data),
    .out_valid  (arr_v),
    .out_tag    (arr_tag),
    .out_acc    (arr_acc)
  );

  bns #(.LANES(NUM_FEAT), .ACC_W(ACC_W), .TAG_W(TAG_W), .GROUPS(GROUPS)) u_bns (
    .clk       (clk),
    .rst_n     (rst_n),
    .prm_wr_en (prm_wr_en),
    .prm_group (prm_group),
    .prm_lane  (prm_lane),
    .prm_gamma (prm_gamma),
    .prm_beta  (prm_beta),
    .in_valid  (arr_v),
    .in_tag    (arr_tag),
    .in_x      (arr_acc),
    .out_valid (bns_v),
    .out_tag   (bns_tag),
    .out_y     (bns_y)
  );

  relu_quant #(.LANES(NUM_FEAT), .ACT_W(ACT_W), .TAG_W(TAG_W)) u_rq (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (bns_v),
    .in_tag    (bns_tag),
    .in_x      (bns_y),
    .out_valid (rq_v),
    .out_tag   (),
    .out_q     (rq_q)
  );

  maxpool #(.LANES(NUM_FEAT), .ACT_W(ACT_W)) u_pool (
    .clk       (clk),
    .rst_n     (rst_n),
    .clear     (pool_clear),
    .count     (pool_count),
    .in_valid  (rq_v),
    .in_q      (rq_q),
    .out_valid (mp_v),
    .out_q     (mp_q)
  );

  initial assert (NUM_FEAT == WORDS)
    else $error("one output pixel (NUM_FEAT features) must fill one buffer word (WORDS)");

  // The host must leave the buffer alone and not start a second layer while busy.
  assert property (@(posedge clk) disable iff (!rst_n) busy |-> !start);

endmodule
