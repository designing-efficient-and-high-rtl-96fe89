// Self-checking testbench of pe_array on a reduced 5 x 3 array (15 PEs,
// 15 x 9 MACs). Loads random weights and activations through the load port,
// runs convolution and systolic steps with random top partial sums and checks
// every result against a reference model of the vertical accumulation, the
// stride shift and the step latency (H_A*17 + 1 conv, H_A*11 + 1 systolic).
//
// Every check increments `checks`, every mismatch `failures`; the run ends
// with one TB_RESULT line. A watchdog ends it as failed after 100,000 clock
// cycles.
// The 17 and 11 cycles per core are the original design's numbers; the row-
// by-row wavefront that multiplies them by H_A is this design's choice.
module tb_pe_array;
  import stt_ai_pkg::*;
  import tb_fp_pkg::*;
  localparam int H = 5, W = 3, PS = 3, V = PS * W;
  logic clk = 0, rst_n = 0, ld_valid = 0, start = 0, busy, done;
  ld_kind_e ld_kind;
  logic [15:0] ld_index;
  bf16_t ld_data;
  mode_e mode;
  fp32_t [V-1:0] psum_top, result;
  int checks = 0, failures = 0;

  bf16_t wgt [H][W][PS];
  bf16_t act [H][W][PS];
  bf16_t racc[H];

  pe_array #(.H_A(H), .W_A(W)) dut (.clk, .rst_n, .ld_valid, .ld_kind, .ld_index, .ld_data,
                                    .start, .mode, .psum_top, .busy, .done, .result);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  task automatic load(ld_kind_e k, int idx, bf16_t d);
    @(negedge clk);
    ld_valid = 1; ld_kind = k; ld_index = 16'(idx); ld_data = d;
    @(posedge clk);
    @(negedge clk);
    ld_valid = 0;
  endtask

  task automatic load_all();
    for (int r = 0; r < H; r++) begin
      racc[r] = rand_bf16(115, 135);
      load(LD_ROW_ACT, r, racc[r]);
      for (int c = 0; c < W; c++)
        for (int k = 0; k < PS; k++) begin
          wgt[r][c][k] = rand_bf16(115, 135);
          act[r][c][k] = rand_bf16(115, 135);
          load(LD_WGT, (r*W + c)*PS + k, wgt[r][c][k]);
          load(LD_ACT, (r*W + c)*PS + k, act[r][c][k]);
        end
    end
  endtask

  task automatic step(mode_e m);
    int n;
    fp32_t [V-1:0] exp_r;
    for (int j = 0; j < V; j++) psum_top[j] = rand_fp32(110, 135);
    exp_r = '0;
    if (m == MODE_CONV) begin
      for (int c = 0; c < W; c++) begin
        fp32_t p = psum_top[c];
        for (int r = 0; r < H; r++)
          p = ref_conv(act[r][c][0], wgt[r][c][0], act[r][c][1], wgt[r][c][1],
                       act[r][c][2], wgt[r][c][2], p);
        exp_r[c] = p;
      end
    end else begin
      for (int c = 0; c < W; c++)
        for (int k = 0; k < PS; k++) begin
          fp32_t p = psum_top[c*PS + k];
          for (int r = 0; r < H; r++) p = ref_mac(racc[r], wgt[r][c][k], p);
          exp_r[c*PS + k] = p;
        end
    end
    @(negedge clk); mode = m; start = 1;
    @(posedge clk);
    @(negedge clk); start = 0;
    n = 1;
    while (!done && n < 1000) begin @(posedge clk); @(negedge clk); n++; end
    check(n == H * ((m == MODE_CONV) ? 17 : 11) + 1, $sformatf("step latency %0d mode %0d", n, m));
    for (int j = 0; j < V; j++)
      check(result[j] == exp_r[j], $sformatf("mode %0d result[%0d] %h exp %h", m, j, result[j], exp_r[j]));
  endtask

  initial begin
    mode = MODE_SYS; psum_top = '0; ld_kind = LD_WGT; ld_index = 0; ld_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 4; t++) begin
      load_all();
      step(MODE_CONV);
      step(MODE_SYS);
      // stride step: every PE shifts in one new ifmap element
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++) begin
          bf16_t nv = rand_bf16(115, 135);
          load(LD_SHIFT, r*W + c, nv);
          act[r][c][0] = act[r][c][1];
          act[r][c][1] = act[r][c][2];
          act[r][c][2] = nv;
        end
      step(MODE_CONV);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
