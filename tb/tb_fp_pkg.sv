// tb_fp_pkg: reference single precision arithmetic for the testbenches.
//
// The reference works through the simulator's double precision "real": an
// int16 times a binary32 value is exact in double, and so is the sum of two
// binary32 values whose exponents differ by less than 29, which the tests keep
// to. real_to_fp32 then rounds the double to binary32 (nearest even), flushing
// results below the normal range to zero like the design does.
package tb_fp_pkg;

  function automatic real fp32_to_real(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] real_to_fp32(input real r);
    logic [63:0] d;
    logic [52:0] m;
    logic [28:0] rem;
    logic [24:0] k;
    int          e;
    d = $realtobits(r);
    if (d[62:52] == 11'd0) return {d[63], 31'd0};
    e   = int'(d[62:52]) - 1023 + 127;
    m   = {1'b1, d[51:0]};
    k   = 25'(m >> 29);
    rem = m[28:0];
    if (rem > 29'h1000_0000 || (rem == 29'h1000_0000 && k[0])) k = k + 25'd1;
    if (k[24]) begin
      k = k >> 1;
      e = e + 1;
    end
    if (e <= 0) return {d[63], 31'd0};
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    return {d[63], e[7:0], k[22:0]};
  endfunction

  // q = floor(min(1, max(0, x)) * L + 0.5)
  function automatic int quant_ref(input real x, input int L);
    real c;
    c = (x < 0.0) ? 0.0 : ((x > 1.0) ? 1.0 : x);
    return int'($floor(c * L + 0.5));
  endfunction

endpackage
