// Reconfigurable core: three MACs and four mode multiplexers.
//
// Each MAC k (k = 0..2, the paper's 1..3) has a BF16 multiplier mul_k and an
// FP32 adder add_k. The `mode` input drives all four multiplexers:
//
//   mode = MODE_SYS (0): the MACs are independent cells of a systolic array.
//     add_k = mul_k + p_sum[k], mac_out[k] = add_k. Result after 11 cycles.
//   mode = MODE_CONV (1): the three MACs form one convolution PE.
//     add3 = mul3 + mul2, add1 = mul1 + pe_in (previous partial sum), then
//     add2 = add3 + add1 = PE_OUT, a three-element dot product plus the
//     incoming partial sum. Result after 17 cycles (5 + 6 + 6).
//
// Multiplexer wiring (0/1 inputs) follows the core drawing: add1 takes
// P_sum/PE_IN, add3 takes P_sum/mul2, add2 takes (mul2 / add3) and
// (P_sum / MAC_1_out). mac_out[1] is the add2 output, so it doubles as
// PE_OUT.
//
// Interface and timing: all operands of one operation (i_act, f_wgt, p_sum,
// pe_in, mode) are presented together with in_valid and held internally.
// out_valid pulses when the result is ready (11 cycles later in systolic
// mode, 17 in conv mode, the cycle counts of the paper's core). One operation
// is in flight at a time; in_valid while busy is not allowed. The cycle split
// between multiplier and adder and the single-operation issue are this
// design's choices.
module reconfig_pe #(
  parameter int unsigned MUL_LAT = 5,
  parameter int unsigned ADD_LAT = 6
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  stt_ai_pkg::mode_e       mode,
  input  stt_ai_pkg::bf16_t [2:0] i_act,
  input  stt_ai_pkg::bf16_t [2:0] f_wgt,
  input  stt_ai_pkg::fp32_t [2:0] p_sum,
  input  stt_ai_pkg::fp32_t       pe_in,
  output logic                    out_valid,
  output stt_ai_pkg::fp32_t [2:0] mac_out,
  output stt_ai_pkg::fp32_t       pe_out,
  output logic                    busy
);
  import stt_ai_pkg::*;

  mode_e       mode_q;
  fp32_t [2:0] p_sum_q;
  fp32_t       pe_in_q;
  logic        inflight;

  logic  [2:0] mul_done, mul_busy, add_done, add_busy;
  fp32_t [2:0] mul_y, add_y;
  logic  [2:0] add_start;
  fp32_t [2:0] add_a, add_b;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode_q   <= MODE_SYS;
      p_sum_q  <= '0;
      pe_in_q  <= '0;
      inflight <= 1'b0;
    end else begin
      if (in_valid) begin
        mode_q   <= mode;
        p_sum_q  <= p_sum;
        pe_in_q  <= pe_in;
        inflight <= 1'b1;
      end else if (out_valid) begin
        inflight <= 1'b0;
      end
    end
  end

  for (genvar k = 0; k < 3; k++) begin : g_mac
    bf16_mul #(.LAT(MUL_LAT)) u_mul (
      .clk, .rst_n, .start(in_valid), .a(i_act[k]), .b(f_wgt[k]),
      .done(mul_done[k]), .busy(mul_busy[k]), .y(mul_y[k]));
    fp32_add #(.LAT(ADD_LAT)) u_add (
      .clk, .rst_n, .start(add_start[k]), .a(add_a[k]), .b(add_b[k]),
      .done(add_done[k]), .busy(add_busy[k]), .y(add_y[k]));
  end

  // The four mode multiplexers.
  always_comb begin
    // MAC1 (index 0): mux 0 = P_sum, 1 = PE_IN
    add_a[0]     = mul_y[0];
    add_b[0]     = (mode_q == MODE_CONV) ? pe_in_q : p_sum_q[0];
    add_start[0] = mul_done[0];
    // MAC3 (index 2): mux 0 = P_sum, 1 = mul2 output
    add_a[2]     = mul_y[2];
    add_b[2]     = (mode_q == MODE_CONV) ? mul_y[1] : p_sum_q[2];
    add_start[2] = mul_done[2];
    // MAC2 (index 1): vertical mux 0 = mul2, 1 = add3; upper mux 0 = P_sum, 1 = MAC_1_out
    add_a[1]     = (mode_q == MODE_CONV) ? add_y[2] : mul_y[1];
    add_b[1]     = (mode_q == MODE_CONV) ? add_y[0] : p_sum_q[1];
    add_start[1] = (mode_q == MODE_CONV) ? (add_done[0] & add_done[2]) : mul_done[1];
  end

  assign out_valid = inflight && ((mode_q == MODE_CONV) ? add_done[1] : (&add_done));
  assign mac_out   = add_y;
  assign pe_out    = add_y[1];
  assign busy      = inflight;

  issue_when_idle: assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> (!inflight || out_valid))
    else $error("reconfig_pe: operation issued while busy");

endmodule
