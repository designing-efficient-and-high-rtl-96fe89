// Self-checking testbench of relu_maxpool (VEC = 42): random signed vectors
// with and without ReLU and with 2x2 pooling; reference uses real-valued
// comparisons and an independent BF16 rounding.
//
// Every check increments `checks`, every mismatch `failures`; the run ends
// with one TB_RESULT line. A watchdog ends it as failed after 100,000 clock
// cycles.
// ReLU and max pooling come from the original design; the 2x2 pairing order
// and the BF16 rounding are this design's choices.
module tb_relu_maxpool;
  import stt_ai_pkg::*;
  import tb_fp_pkg::*;
  localparam int V = 42;
  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0, relu_en = 0, pool_en = 0, out_valid;
  fp32_t [V-1:0] in_vec;
  bf16_t [V-1:0] out_vec;
  int checks = 0, failures = 0, n_clip = 0, n_pool = 0;

  relu_maxpool #(.VEC(V)) dut (.clk, .rst_n, .clear, .in_valid, .in_vec, .relu_en, .pool_en,
                               .out_valid, .out_vec);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  function automatic fp32_t relu_ref(fp32_t x, logic en);
    return (en && fp32_to_real(x) <= 0.0) ? 32'd0 : x;
  endfunction

  function automatic fp32_t max_ref(fp32_t a, fp32_t b);
    return (fp32_to_real(b) > fp32_to_real(a)) ? b : a;
  endfunction

  task automatic send(fp32_t [V-1:0] v, logic relu, logic pool);
    @(negedge clk);
    in_vec = v; relu_en = relu; pool_en = pool; in_valid = 1;
    @(posedge clk); @(negedge clk); in_valid = 0;
  endtask

  initial begin
    fp32_t [V-1:0] a, b;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      automatic logic relu = t % 2;
      for (int i = 0; i < V; i++) begin
        a[i] = rand_fp32(110, 140);
        b[i] = rand_fp32(110, 140);
        if (relu && a[i][31]) n_clip++;
      end
      if (t % 3 != 2) begin
        send(a, relu, 0);
        check(out_valid, "output valid without pooling");
        for (int i = 0; i < V; i++)
          check(out_vec[i] == ref_bf16(relu_ref(a[i], relu)), $sformatf("elem %0d %h", i, out_vec[i]));
      end else begin
        send(a, relu, 1);
        check(!out_valid, "no output after the first vector of a pair");
        send(b, relu, 1);
        check(out_valid, "output after the second vector");
        n_pool++;
        for (int i = 0; i < V/2; i++) begin
          automatic fp32_t m = max_ref(max_ref(relu_ref(a[2*i], relu), relu_ref(a[2*i+1], relu)),
                             max_ref(relu_ref(b[2*i], relu), relu_ref(b[2*i+1], relu)));
          check(out_vec[i] == ref_bf16(m), $sformatf("pooled %0d %h exp %h", i, out_vec[i], ref_bf16(m)));
        end
      end
    end
    check(n_clip > 0 && n_pool > 0, "ReLU clipping and pooling exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
