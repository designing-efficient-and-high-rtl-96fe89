// Output stage: ReLU, 2x2 max pooling and FP32-to-BF16 conversion.
//
// Takes one result vector of the PE array (VEC FP32 values) per `in_valid`.
// With relu_en every negative value (and -0) becomes +0. With pool_en the
// stage pools 2x2 windows with stride 2: adjacent element pairs (2i, 2i+1)
// of a vector are adjacent ofmap rows of one ofmap column, and two
// consecutive vectors are adjacent ofmap columns. The first vector of a
// pair is held, the second produces VEC/2 pooled values in out_vec[0 ..
// VEC/2-1]. Without pooling every vector is passed on. Values are rounded to
// BF16 (round to nearest even) for storage in the global buffer.
//
// Timing: out_valid and out_vec are registered, one cycle after the input
// that completes an output. `clear` restarts the pooling pair. The paper
// names ReLU and max pooling between layers; the pooling order, rounding
// and this interface are this design's choices.
module relu_maxpool #(
  parameter int unsigned VEC = 42
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        clear,
  input  logic                        in_valid,
  input  stt_ai_pkg::fp32_t [VEC-1:0] in_vec,
  input  logic                        relu_en,
  input  logic                        pool_en,
  output logic                        out_valid,
  output stt_ai_pkg::bf16_t [VEC-1:0] out_vec
);
  import stt_ai_pkg::*;

  localparam int unsigned HV = VEC / 2;

  fp32_t [HV-1:0] held;
  logic           phase;    // 1: first vector of a pooling pair is held

  // Map an FP32 value to an unsigned key with the same order.
  function automatic logic [31:0] key(fp32_t x);
    return x[31] ? ~x : (x | 32'h8000_0000);
  endfunction

  function automatic fp32_t fmax(fp32_t x, fp32_t z);
    return (key(z) > key(x)) ? z : x;
  endfunction

  function automatic bf16_t to_bf16(fp32_t x);
    logic rnd;
    if (x[30:23] == 8'hFF) return (x[22:0] != 0) ? 16'h7FC0 : x[31:16];
    rnd = x[15] & ((|x[14:0]) | x[16]);
    return x[31:16] + 16'(rnd);   // carries into the exponent; 0x7F7F+1 = Inf
  endfunction

  fp32_t [VEC-1:0] v;
  fp32_t [HV-1:0]  pm;
  always_comb begin
    for (int i = 0; i < VEC; i++) v[i] = (relu_en && in_vec[i][31]) ? 32'd0 : in_vec[i];
    for (int i = 0; i < HV; i++)  pm[i] = fmax(v[2*i], v[2*i+1]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      held      <= '0;
      phase     <= 1'b0;
      out_valid <= 1'b0;
      out_vec   <= '0;
    end else begin
      out_valid <= 1'b0;
      if (clear) begin
        phase <= 1'b0;
      end else if (in_valid) begin
        if (!pool_en) begin
          out_valid <= 1'b1;
          for (int i = 0; i < VEC; i++) out_vec[i] <= to_bf16(v[i]);
        end else if (!phase) begin
          held  <= pm;
          phase <= 1'b1;
        end else begin
          phase     <= 1'b0;
          out_valid <= 1'b1;
          for (int i = 0; i < VEC; i++)
            out_vec[i] <= (i < HV) ? to_bf16(fmax(held[i % HV], pm[i % HV])) : 16'd0;
        end
      end
    end
  end

endmodule
