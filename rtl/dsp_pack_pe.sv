// dsp_pack_pe: dot-product engine for 2-bit activations and ternary weights
// built on packed 18x18 DSP multipliers.
//
// An Arria 10 DSP block in 18x18 mode has two independent signed multipliers.
// Each multiplier here takes, on input "a", four ternary weights packed as in
// the paper's packing figure: 5-bit fields at bits 0, 5, 10 and 15, each field
// being the 2-bit datum (bits 1:0 of the field), one sign-extension bit (bit 2)
// and two zero pad bits (bits 4:3); the last field ends at bit 17 with its
// sign-extension bit. Input "b" is one unsigned 2-bit activation with sixteen
// zero MSBs. Because an activation is 0..3 and a 3-bit pattern is at most 7,
// every partial product is below 32 and stays inside its 5-bit field, and the
// low three bits of field l are the two's complement product a*w_l. One DSP
// therefore does eight 2-bit x ternary multiplies: four lanes (output
// features) times two activations.
//
// The unpacked 3-bit lane products of both multipliers of every DSP are summed
// per lane by an adder tree in logic (the paper's ALM adders), and each lane
// accumulates into its own ACC_W-bit accumulator with the same first/last
// protocol and one-cycle timing as module pe. WORDS activations per beat use
// WORDS/2 DSP blocks; lane l computes the dot product of the activations with
// weight vector wgt[l].
//
// From the paper: 18x18 mode, four 2-bit operands per multiplier, the field
// layout, the single padded 2-bit operand, the ALM adder tree and accumulator.
// This design's choices: that the packed operand holds the (signed) weights and
// the single one the (unsigned) activation, the lane-wise unpacking before the
// adder, and the plain "*" for the DSP multiplier, left for synthesis to map.
module dsp_pack_pe #(
  parameter int WORDS = 64,
  parameter int ACC_W = 16
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                in_valid,
  input  logic                                first,
  input  logic                                last,
  input  logic [WORDS-1:0][1:0]               act,
  input  logic [3:0][WORDS-1:0][1:0]          wgt,   // [lane][word]
  output logic                                out_valid,
  output logic signed [3:0][ACC_W-1:0]        out_acc
);

  localparam int NDSP = WORDS / 2;

  // Pack four 2-bit signed values into one 18-bit multiplier operand.
  function automatic logic [17:0] pack4(input logic [3:0][1:0] d);
    logic [17:0] r;
    r = '0;
    for (int l = 0; l < 4; l++) begin
      r[5*l +: 2] = d[l];
      r[5*l + 2]  = d[l][1];   // sign extension
    end
    return r;
  endfunction

  logic signed [35:0]        mult_p [NDSP][2];
  logic signed [3:0][ACC_W-1:0] lane_sum;
  logic signed [3:0][ACC_W-1:0] acc_q;

  always_comb begin
    for (int i = 0; i < NDSP; i++) begin
      for (int m = 0; m < 2; m++) begin
        logic [3:0][1:0] wv;
        logic [17:0]     op_a;
        logic [17:0]     op_b;
        for (int l = 0; l < 4; l++) wv[l] = wgt[l][2*i+m];
        op_a = pack4(wv);
        op_b = {16'd0, act[2*i+m]};
        mult_p[i][m] = $signed(op_a) * $signed(op_b);
      end
    end
  end

  // Unpack the lane fields and sum them per lane.
  always_comb begin
    for (int l = 0; l < 4; l++) begin
      lane_sum[l] = '0;
      for (int i = 0; i < NDSP; i++)
        for (int m = 0; m < 2; m++)
          lane_sum[l] = lane_sum[l] + ACC_W'($signed(mult_p[i][m][5*l +: 3]));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q     <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid && last;
      if (in_valid)
        for (int l = 0; l < 4; l++)
          acc_q[l] <= (first ? ACC_W'(0) : acc_q[l]) + lane_sum[l];
    end
  end

  assign out_acc = acc_q;

  initial assert (WORDS % 2 == 0) else $error("WORDS must be even: two multipliers per DSP");

endmodule
