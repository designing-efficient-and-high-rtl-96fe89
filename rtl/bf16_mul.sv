// BFloat16 multiplier of one MAC in the reconfigurable core.
//
// Multiplies two BF16 numbers and returns the product in FP32. The two 8-bit
// significands give a 16-bit product, which fits the 24-bit FP32 significand,
// so the result is exact and no rounding is needed. Subnormal inputs and
// results are flushed to zero, overflow gives infinity, and any NaN or
// 0 x Inf gives the canonical quiet NaN 0x7FC00000.
//
// Timing: a multi-cycle unit. `start` captures the operands; `done` is high
// for one cycle exactly LAT cycles later, with `y` valid in that cycle and
// held until the next start. A start while busy is not allowed. The use of
// BF16 x BF16 -> FP32 is the paper's; the latency of 5 cycles is this
// design's split of the 11-cycle single-MAC figure (5 multiply + 6 add).
module bf16_mul #(
  parameter int unsigned LAT = 5
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  stt_ai_pkg::bf16_t     a,
  input  stt_ai_pkg::bf16_t     b,
  output logic                  done,
  output logic                  busy,
  output stt_ai_pkg::fp32_t     y
);
  import stt_ai_pkg::*;

  bf16_t a_q, b_q;
  logic [$clog2(LAT+1)-1:0] cnt;

  function automatic fp32_t mul_f(bf16_t x, bf16_t z);
    logic        s;
    logic [7:0]  ex, ez;
    logic [15:0] p;
    logic signed [10:0] e;
    logic [22:0] m;
    s  = x[15] ^ z[15];
    ex = x[14:7];
    ez = z[14:7];
    if ((ex == 8'hFF && x[6:0] != 0) || (ez == 8'hFF && z[6:0] != 0))
      return 32'h7FC0_0000;
    if (ex == 8'hFF || ez == 8'hFF) begin
      if (ex == 8'h00 || ez == 8'h00) return 32'h7FC0_0000;
      return {s, 8'hFF, 23'd0};
    end
    if (ex == 8'h00 || ez == 8'h00) return {s, 31'd0};
    p = {1'b1, x[6:0]} * {1'b1, z[6:0]};
    e = $signed({3'b000, ex}) + $signed({3'b000, ez}) - 11'sd127;
    if (p[15]) begin
      m = {p[14:0], 8'd0};
      e = e + 11'sd1;
    end else begin
      m = {p[13:0], 9'd0};
    end
    if (e >= 11'sd255) return {s, 8'hFF, 23'd0};
    if (e <= 11'sd0)   return {s, 31'd0};
    return {s, e[7:0], m};
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
  assign y    = mul_f(a_q, b_q);

  start_when_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> (cnt <= 1))
    else $error("bf16_mul: start while busy");

endmodule
