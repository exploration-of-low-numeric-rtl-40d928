// pe: low-numeric-precision dot-product engine (processing element).
//
// Each cycle with in_valid high the PE multiplies WORDS unsigned activations by
// WORDS weights, sums the products and adds the sum to its accumulator. The
// multiply depends on the weight kind (see lpn_pkg):
//   WK_BINARY  : the activation A or its negation -A is selected by the weight
//                bit used as "Sign" (0 = -1, 1 = +1), as in the paper's
//                sign-flip-and-mux cell;
//   WK_TERNARY : as binary, with a third choice of 0 for the zero weight;
//   WK_XNOR    : activation and weight bits are +-1, the product is their XNOR
//                and the sum is 2*popcount - WORDS;
//   WK_INT     : an ordinary signed multiply of the zero-extended activation
//                by a signed WGT_W-bit weight.
// The accumulator's second adder input is a mux between 0 and the accumulator
// itself, controlled by "first" (the paper's Reset input), so a new dot product
// starts without a separate clear cycle.
//
// Timing: one cycle. The products and the adder tree are combinational; the
// accumulator is the only register. When the beat marked "last" is accepted,
// out_valid is high in the next cycle and out_acc holds the finished dot
// product for that one cycle (the next beat may already start a new one).
// The accumulator is ACC_W bits signed and wraps; the host is expected to size
// layers so it cannot overflow (16 bits as in the paper's INT16 array output).
//
// From the paper: the sign-flip/mux/accumulate structure, the weight kinds, the
// words-per-dot granularity and the INT16 output. This design's own choices:
// the adder tree shape, the single-cycle timing and the weight encodings beyond
// the binary one the paper states.
module pe
  import lpn_pkg::*;
#(
  parameter wkind_e WKIND = WK_TERNARY,
  parameter int     ACT_W = 2,
  parameter int     WGT_W = 2,
  parameter int     WORDS = 64,
  parameter int     ACC_W = 16
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            in_valid,
  input  logic                            first,
  input  logic                            last,
  input  logic [WORDS-1:0][ACT_W-1:0]     act,
  input  logic [WORDS-1:0][WGT_W-1:0]     wgt,
  output logic                            out_valid,
  output logic signed [ACC_W-1:0]         out_acc
);

  logic signed [ACC_W-1:0] prod [WORDS];
  logic signed [ACC_W-1:0] dot_sum;
  logic signed [ACC_W-1:0] acc_q;
  logic signed [ACC_W-1:0] acc_in;

  // One product per word.
  always_comb begin
    for (int j = 0; j < WORDS; j++) begin
      logic signed [ACC_W-1:0] a_pos;
      a_pos = ACC_W'(act[j]);
      unique case (WKIND)
        WK_BINARY:  prod[j] = wgt[j][0] ? a_pos : -a_pos;
        WK_TERNARY: begin
          if (wgt[j] == WGT_W'(1))            prod[j] = a_pos;
          else if (wgt[j] == {WGT_W{1'b1}})   prod[j] = -a_pos;
          else                                prod[j] = '0;
        end
        WK_XNOR:    prod[j] = (act[j][0] ~^ wgt[j][0]) ? ACC_W'(1) : -ACC_W'(1);
        default:    prod[j] = ACC_W'($signed({1'b0, act[j]}) * $signed(wgt[j]));
      endcase
    end
  end

  always_comb begin
    dot_sum = '0;
    for (int j = 0; j < WORDS; j++) dot_sum = dot_sum + prod[j];
  end

  // Reset mux of the accumulator feedback path.
  assign acc_in = first ? '0 : acc_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q     <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid && last;
      if (in_valid) acc_q <= acc_in + dot_sum;
    end
  end

  assign out_acc = acc_q;

  initial begin
    assert (WKIND != WK_TERNARY || WGT_W == 2) else $error("ternary weights are 2 bits");
    assert (!(WKIND inside {WK_BINARY, WK_XNOR}) || WGT_W == 1) else $error("binary weights are 1 bit");
    assert (WKIND != WK_XNOR || ACT_W == 1) else $error("XNOR PE takes 1-bit activations");
  end

endmodule
