// FP32 adder of one MAC in the reconfigurable core.
//
// Adds two IEEE-754 single-precision numbers with round-to-nearest-even.
// The larger magnitude is aligned with the smaller one shifted right and kept
// with guard, round and sticky bits; an effective subtraction is normalised
// with a leading-zero shift. Subnormal inputs and results are flushed to zero
// (signed zero), overflow gives infinity, NaN or Inf-Inf gives 0x7FC00000.
//
// Timing: multi-cycle, like bf16_mul. `start` captures the operands, `done`
// pulses LAT cycles later with `y` valid. The FP32 adder is the paper's; the
// 6-cycle latency is this design's split of the core's 11/17-cycle figures.
module fp32_add #(
  parameter int unsigned LAT = 6
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  stt_ai_pkg::fp32_t     a,
  input  stt_ai_pkg::fp32_t     b,
  output logic                  done,
  output logic                  busy,
  output stt_ai_pkg::fp32_t     y
);
  import stt_ai_pkg::*;

  fp32_t a_q, b_q;
  logic [$clog2(LAT+1)-1:0] cnt;

  function automatic fp32_t add_f(fp32_t x, fp32_t z);
    logic        sx, sz, sr;
    logic [7:0]  ex, ez;
    logic [23:0] mx, mz;
    logic [7:0]  d;
    logic [26:0] xa, xb, sh;
    logic [27:0] s;
    logic signed [10:0] e;
    logic [24:0] mr;
    logic        rnd;
    int          lz;
    sx = x[31]; ex = x[30:23];
    sz = z[31]; ez = z[30:23];
    // specials
    if ((ex == 8'hFF && x[22:0] != 0) || (ez == 8'hFF && z[22:0] != 0)) return 32'h7FC0_0000;
    if (ex == 8'hFF && ez == 8'hFF) return (sx == sz) ? x : 32'h7FC0_0000;
    if (ex == 8'hFF) return x;
    if (ez == 8'hFF) return z;
    if (ex == 8'h00 && ez == 8'h00) return {sx & sz, 31'd0};
    if (ex == 8'h00) return z;
    if (ez == 8'h00) return x;
    mx = {1'b1, x[22:0]};
    mz = {1'b1, z[22:0]};
    // order operands so that |x| >= |z|
    if ({ez, mz} > {ex, mx}) begin
      {sx, ex, mx, sz, ez, mz} = {sz, ez, mz, sx, ex, mx};
    end
    d  = ex - ez;
    xa = {mx, 3'b000};
    sh = {mz, 3'b000};
    if (d >= 8'd27) begin
      xb = 27'd1;                                   // only sticky survives
    end else begin
      xb = sh >> d;
      if ((sh & ((27'd1 << d) - 27'd1)) != 0) xb[0] = 1'b1;
    end
    e  = $signed({3'b000, ex});
    sr = sx;
    if (sx == sz) begin
      s = {1'b0, xa} + {1'b0, xb};
      if (s[27]) begin
        s = {1'b0, s[27:2], s[1] | s[0]};
        e = e + 11'sd1;
      end
    end else begin
      s = {1'b0, xa} - {1'b0, xb};
      if (s == 0) return 32'd0;                     // exact cancellation: +0
      lz = 0;
      for (int i = 26; i >= 0; i--) begin
        if (s[i]) break;
        lz++;
      end
      s = s << lz;
      e = e - 11'(lz);
    end
    // s[26:3] = significand, s[2] guard, s[1] round, s[0] sticky
    rnd = s[2] & (s[1] | s[0] | s[3]);
    mr  = {1'b0, s[26:3]} + 25'(rnd);
    if (mr[24]) begin
      mr = mr >> 1;
      e  = e + 11'sd1;
    end
    if (e >= 11'sd255) return {sr, 8'hFF, 23'd0};
    if (e <= 11'sd0)   return {sr, 31'd0};
    return {sr, e[7:0], mr[22:0]};
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0;
      a_q <= '0;
      b_q <= '0;
    end else if (start) begin
      cnt <= ($clog2(LAT+1))'(LAT);
      a_q <= a;
      b_q <= b;
    end else if (cnt != 0) begin
      cnt <= cnt - 1'b1;
    end
  end

  assign done = (cnt == 1);
  assign busy = (cnt != 0);
  assign y    = add_f(a_q, b_q);

  start_when_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> (cnt <= 1))
    else $error("fp32_add: start while busy");

endmodule
