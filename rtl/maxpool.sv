// maxpool: max pooling of quantised activations.
//
// The layer controller issues the output pixels of one pooling window back to
// back (window by window), so pooling reduces to a running maximum per lane
// over "count" consecutive vectors: the first vector of a window loads the
// running maximum, the following ones compare against it, and after the
// count-th vector the maximum is emitted. count = pool*pool for a pool x pool
// window with stride pool; count = 1 passes every vector through (no pooling).
// clear restarts the window count (asserted by the controller at layer start).
//
// Timing: the pooled vector is valid one cycle after the last vector of its
// window; one input vector per cycle, no stalls.
//
// From the paper: a max-pool stage between ReLU and the feature buffer on
// unsigned 8-bit (here ACT_W-bit) data. This design's choices: non-overlapping
// windows and the window-ordered input that makes a line buffer unnecessary.
module maxpool #(
  parameter int LANES = 64,
  parameter int ACT_W = 2
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        clear,
  input  logic [5:0]                  count,
  input  logic                        in_valid,
  input  logic [LANES-1:0][ACT_W-1:0] in_q,
  output logic                        out_valid,
  output logic [LANES-1:0][ACT_W-1:0] out_q
);

  logic [5:0]                  n_q;
  logic [LANES-1:0][ACT_W-1:0] max_q;
  logic [LANES-1:0][ACT_W-1:0] max_d;

  always_comb begin
    for (int l = 0; l < LANES; l++)
      max_d[l] = (n_q == 6'd0 || in_q[l] > max_q[l]) ? in_q[l] : max_q[l];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_q       <= '0;
      max_q     <= '0;
      out_valid <= 1'b0;
      out_q     <= '0;
    end else begin
      out_valid <= 1'b0;
      if (clear) begin
        n_q <= '0;
      end else if (in_valid) begin
        max_q <= max_d;
        if (n_q + 6'd1 >= count) begin
          n_q       <= '0;
          out_valid <= 1'b1;
          out_q     <= max_d;
        end else begin
          n_q <= n_q + 6'd1;
        end
      end
    end
  end

endmodule
