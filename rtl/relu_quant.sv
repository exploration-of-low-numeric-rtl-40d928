// relu_quant: ReLU and requantisation of single precision activations.
//
// For each lane, the binary32 input x is mapped to an unsigned ACT_W-bit code
//   q = floor(min(1, max(0, x)) * L + 0.5),  L = 2^ACT_W - 1,
// i.e. negative values (and zero) give 0, values of 1 or more give L, and the
// range in between is stretched to 0..L and rounded half up. The code q stands
// for the value q/L in the next layer. For 2-bit activations L = 3, the
// paper's clip-and-round quantiser (codes 0,1,2,3 for 0, 1/3, 2/3, 1).
// The arithmetic is exact: x = m * 2^(e-150) with a 24-bit significand m, so
// q = (m*L + 2^(s-1)) >> s with s = 150 - e.
//
// Timing: one register stage, one vector per cycle; valid and tag follow.
//
// From the paper: the quantiser formula for 2 bits and that ReLU is where
// negative values are clipped and data returns to unsigned integers. This
// design's choices: the generalisation to ACT_W bits and the exact integer
// evaluation of the formula.
module relu_quant #(
  parameter int LANES = 64,
  parameter int ACT_W = 2,
  parameter int TAG_W = 8
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic [TAG_W-1:0]              in_tag,
  input  logic [LANES-1:0][31:0]        in_x,
  output logic                          out_valid,
  output logic [TAG_W-1:0]              out_tag,
  output logic [LANES-1:0][ACT_W-1:0]   out_q
);

  localparam logic [ACT_W-1:0] LMAX = {ACT_W{1'b1}};

  function automatic logic [ACT_W-1:0] quant(input logic [31:0] x);
    int          ex;
    int          s;
    logic [63:0] t;
    ex = int'(x[30:23]);
    if (x[31] || ex == 0) return '0;          // ReLU (and flushed subnormals)
    if (ex >= 127) return LMAX;               // x >= 1 clips
    s = 150 - ex;                             // >= 24
    if (s > 24 + ACT_W + 1) return '0;        // below half a step
    t = 64'({1'b1, x[22:0]}) * 64'(LMAX);
    t = (t + (64'd1 << (s - 1))) >> s;
    return ACT_W'(t);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_tag   <= '0;
      out_q     <= '0;
    end else begin
      out_valid <= in_valid;
      out_tag   <= in_tag;
      for (int l = 0; l < LANES; l++) out_q[l] <= quant(in_x[l]);
    end
  end

endmodule
