// bns: fused batch-normalisation and scale.
//
// Batch norm, the trained scale layer and the ternary/binary alpha constant are
// merged offline into one multiplier gamma and one offset beta per output
// feature (gamma = y/x * alpha, beta = z - y/x * w in the paper's notation).
// This block applies them: for each of LANES features, y = gamma * x + beta,
// where x is the signed ACC_W-bit dot product from the PE array and gamma,
// beta and y are IEEE-754 single precision. The parameters are held in a
// small table indexed by the output-feature group (the tag travelling with the
// data) and the lane; the host writes one (gamma, beta) pair per cycle.
//
// Pipeline, three cycles: (1) look up gamma and beta for the tag and register
// x; (2) convert x to binary32 (exact) and multiply by gamma; (3) add beta.
// Each operation rounds to nearest even; subnormals flush to zero (lpn_pkg).
// Throughput one vector per cycle.
//
// From the paper: the fused single-set-per-feature parameters, INT16 in and
// FP32 out, single precision scale and shift. This design's choices: the
// parameter table, the separate multiply and add with their rounding, and the
// pipeline depth.
module bns
  import lpn_pkg::*;
#(
  parameter int  LANES  = 64,
  parameter int  ACC_W  = 16,
  parameter int  TAG_W  = 8,
  parameter int  GROUPS = 16,
  localparam int GW     = (GROUPS > 1) ? $clog2(GROUPS) : 1,
  localparam int LW     = (LANES > 1) ? $clog2(LANES) : 1
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // parameter load
  input  logic                              prm_wr_en,
  input  logic [GW-1:0]                     prm_group,
  input  logic [LW-1:0]                     prm_lane,
  input  logic [31:0]                       prm_gamma,
  input  logic [31:0]                       prm_beta,
  // data
  input  logic                              in_valid,
  input  logic [TAG_W-1:0]                  in_tag,
  input  logic signed [LANES-1:0][ACC_W-1:0] in_x,
  output logic                              out_valid,
  output logic [TAG_W-1:0]                  out_tag,
  output logic [LANES-1:0][31:0]            out_y
);

  logic [LANES-1:0][31:0] gamma_mem [GROUPS];
  logic [LANES-1:0][31:0] beta_mem  [GROUPS];

  logic                               v1, v2;
  logic [TAG_W-1:0]                   t1, t2;
  logic signed [LANES-1:0][ACC_W-1:0] x1;
  logic [LANES-1:0][31:0]             g1, b1, b2, p2;

  always_ff @(posedge clk) begin
    if (prm_wr_en) begin
      gamma_mem[prm_group][prm_lane] <= prm_gamma;
      beta_mem[prm_group][prm_lane]  <= prm_beta;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; out_valid <= 1'b0;
      t1 <= '0;   t2 <= '0;   out_tag   <= '0;
    end else begin
      v1 <= in_valid; v2 <= v1; out_valid <= v2;
      t1 <= in_tag;   t2 <= t1; out_tag   <= t2;
    end
  end

  always_ff @(posedge clk) begin
    // stage 1: parameter lookup
    x1 <= in_x;
    g1 <= gamma_mem[GW'(in_tag)];
    b1 <= beta_mem[GW'(in_tag)];
    // stage 2: scale
    for (int l = 0; l < LANES; l++)
      p2[l] <= fp32_mul(fp32_from_int(32'($signed(x1[l]))), g1[l]);
    b2 <= b1;
    // stage 3: shift
    for (int l = 0; l < LANES; l++)
      out_y[l] <= fp32_add(p2[l], b2[l]);
  end

endmodule
