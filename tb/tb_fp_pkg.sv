// Reference floating-point helpers for the testbenches.
//
// Values are converted to and from the simulator's double-precision `real`.
// A BF16 x BF16 product is exact in double; the sum of two FP32 numbers
// computed in double and then rounded once to FP32 equals the correctly
// rounded FP32 sum (double has more than 2*24+2 significand bits), so these
// functions give an independent reference for the multiplier and adder.
// Subnormals are flushed to zero as in the hardware.
package tb_fp_pkg;

  function automatic real fp32_to_real(logic [31:0] x);
    logic [63:0] d;
    if (x[30:23] == 8'd0) return 0.0;
    d = {x[31], 11'(int'(x[30:23]) - 127 + 1023), x[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic real bf16_to_real(logic [15:0] x);
    return fp32_to_real({x, 16'd0});
  endfunction

  // Round a double to FP32, nearest even, flush-to-zero, overflow to Inf.
  function automatic logic [31:0] real_to_fp32(real r);
    logic [63:0] d;
    logic [52:0] m;
    logic [24:0] keep;
    int          e;
    d = $realtobits(r);
    if (d[62:52] == 11'd0) return {d[63], 31'd0};
    m    = {1'b1, d[51:0]};
    e    = int'(d[62:52]) - 1023 + 127;
    keep = {1'b0, m[52:29]};
    if (m[28] && ((m[27:0] != 0) || keep[0])) keep = keep + 25'd1;
    if (keep[24]) begin
      keep = keep >> 1;
      e    = e + 1;
    end
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    if (e <= 0)   return {d[63], 31'd0};
    return {d[63], 8'(e), keep[22:0]};
  endfunction

  // Random normal BF16 / FP32 with exponent in [elo, ehi].
  function automatic logic [15:0] rand_bf16(int elo, int ehi);
    return {1'($urandom), 8'(elo + ($urandom % (ehi - elo + 1))), 7'($urandom)};
  endfunction

  function automatic logic [31:0] rand_fp32(int elo, int ehi);
    return {1'($urandom), 8'(elo + ($urandom % (ehi - elo + 1))), 23'($urandom)};
  endfunction

  function automatic logic [31:0] ref_mul(logic [15:0] a, logic [15:0] b);
    if (a[14:7] == 0 || b[14:7] == 0) return {a[15] ^ b[15], 31'd0};
    return real_to_fp32(bf16_to_real(a) * bf16_to_real(b));
  endfunction

  function automatic logic [31:0] ref_add(logic [31:0] a, logic [31:0] b);
    if (a[30:23] == 0 && b[30:23] == 0) return {a[31] & b[31], 31'd0};
    if (a[30:23] == 0) return b;
    if (b[30:23] == 0) return a;
    return real_to_fp32(fp32_to_real(a) + fp32_to_real(b));
  endfunction

  // One MAC: product rounded to FP32 (exact), then added to the partial sum.
  function automatic logic [31:0] ref_mac(logic [15:0] i, logic [15:0] f, logic [31:0] p);
    return ref_add(ref_mul(i, f), p);
  endfunction

  // Convolution PE: ((i3*f3 + i2*f2) + (i1*f1 + pe_in)).
  function automatic logic [31:0] ref_conv(logic [15:0] i0, logic [15:0] f0,
                                           logic [15:0] i1, logic [15:0] f1,
                                           logic [15:0] i2, logic [15:0] f2,
                                           logic [31:0] pe_in);
    return ref_add(ref_add(ref_mul(i2, f2), ref_mul(i1, f1)), ref_add(ref_mul(i0, f0), pe_in));
  endfunction

  // BF16 rounding of an FP32 value (nearest even), done on the double form.
  function automatic logic [15:0] ref_bf16(logic [31:0] x);
    logic [63:0] d;
    logic [8:0]  keep;
    int          e;
    if (x[30:23] == 8'hFF) return (x[22:0] != 0) ? 16'h7FC0 : x[31:16];
    if (x[30:23] == 8'd0) return {x[31], 15'd0};
    d    = $realtobits(fp32_to_real(x));
    e    = int'(d[62:52]) - 1023 + 127;
    keep = {1'b0, 1'b1, d[51:45]};
    if (d[44] && ((d[43:0] != 0) || keep[0])) keep = keep + 9'd1;
    if (keep[8]) begin keep = keep >> 1; e = e + 1; end
    if (e >= 255) return {d[63], 8'hFF, 7'd0};
    return {d[63], 8'(e), keep[6:0]};
  endfunction

endpackage
