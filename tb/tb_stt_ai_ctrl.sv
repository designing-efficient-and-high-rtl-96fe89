// Self-checking testbench of stt_ai_ctrl with simple models of its
// neighbours: a global buffer and a weight store that grant at random and
// answer reads two cycles later, a PE array model that records loads and
// returns a known function of the top partial sums, a scratchpad model and
// a pass-through output stage. Checks every loaded element and its kind,
// that partial results go to the scratchpad and never to the global buffer,
// that scratchpad lines come back as top partial sums, the write-back of
// final results, and the event counters.
//
// Every check increments `checks`, every mismatch `failures`; the run ends
// with one TB_RESULT line. A watchdog ends it as failed after 100,000 clock
// cycles.
// The dataflow it checks (partial ofmaps only to the scratchpad, final
// ofmaps to the buffer) follows the original design; the command set is this
// design's own.
module tb_stt_ai_ctrl;
  import stt_ai_pkg::*;
  localparam int V = 6, SLW = 9, GAW = 10, WAW = 10;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, busy;
  cmd_t cmd;
  logic g_req, g_we, g_gnt, g_rvalid;
  logic [GAW-1:0] g_addr;
  bf16_t g_wdata, g_rdata;
  logic w_req, w_ready, w_rvalid;
  logic [WAW-1:0] w_addr;
  bf16_t w_rdata;
  logic ld_valid, a_start, a_done;
  ld_kind_e ld_kind;
  logic [15:0] ld_index;
  bf16_t ld_data;
  mode_e a_mode;
  fp32_t [V-1:0] a_psum_top, a_result, sp_wr_data, sp_rd_data, rp_vec;
  logic sp_wr_en, sp_rd_en, rp_valid, rp_relu_en, rp_pool_en, rp_out_valid;
  logic [SLW-1:0] sp_wr_line, sp_rd_line;
  bf16_t [V-1:0] rp_out_vec;
  logic [31:0] n_sp_writes, n_glb_writes, n_conv_steps, n_sys_steps, n_mode_switches;
  int checks = 0, failures = 0;

  stt_ai_ctrl #(.VEC(V), .SP_LW(SLW), .GLB_AW(GAW), .WS_AW(WAW)) dut (.*);

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

  // ---- models ----
  bf16_t glb_m [1 << GAW];
  bf16_t ws_m  [1 << WAW];
  bf16_t arr   [4][64];
  fp32_t [V-1:0] sp_m [8];
  fp32_t [V-1:0] seen_psum;
  mode_e seen_mode;
  int glb_writes = 0;
  logic g_stall, w_stall;
  logic [2:0] g_pipe, w_pipe;
  logic [GAW-1:0] g_a1, g_a2;
  logic [WAW-1:0] w_a1, w_a2;
  int run_cnt = -1;
  logic pool_phase = 0;

  assign g_gnt   = g_req && !g_stall;
  assign w_ready = !w_stall;

  always_ff @(posedge clk) begin
    g_stall <= ($urandom % 3) == 0;
    w_stall <= ($urandom % 3) == 0;
    g_pipe  <= {g_pipe[1:0], g_gnt && !g_we};
    w_pipe  <= {w_pipe[1:0], w_req && w_ready};
    g_a1 <= g_addr; g_a2 <= g_a1;
    w_a1 <= w_addr; w_a2 <= w_a1;
    if (g_gnt && g_we) begin glb_m[g_addr] <= g_wdata; glb_writes++; end
    if (ld_valid) arr[ld_kind][ld_index % 64] <= ld_data;
    if (sp_wr_en) sp_m[sp_wr_line % 8] <= sp_wr_data;
    sp_rd_data <= sp_m[sp_rd_line % 8];
    a_done <= 1'b0;
    if (a_start) begin seen_psum <= a_psum_top; seen_mode <= a_mode; run_cnt <= 7; end
    else if (run_cnt > 0) run_cnt <= run_cnt - 1;
    else if (run_cnt == 0) begin
      run_cnt <= -1;
      a_done  <= 1'b1;
      for (int j = 0; j < V; j++) a_result[j] <= seen_psum[j] + 32'h0101_0000 * (j + 1);
    end
    rp_out_valid <= 1'b0;
    if (rp_valid) begin
      if (!rp_pool_en || pool_phase) begin
        rp_out_valid <= 1'b1;
        for (int j = 0; j < V; j++) rp_out_vec[j] <= rp_vec[j][31:16];
      end
      if (rp_pool_en) pool_phase <= !pool_phase;
    end
  end
  assign g_rvalid = g_pipe[1];
  assign g_rdata  = glb_m[g_a2];
  assign w_rvalid = w_pipe[1];
  assign w_rdata  = ws_m[w_a2];

  task automatic issue(cmd_t c);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd = c; cmd_valid = 1;
    @(posedge clk); @(negedge clk); cmd_valid = 0;
    while (busy) @(negedge clk);
  endtask

  function automatic cmd_t mk(op_e op);
    cmd_t c = '0;
    c.op = op;
    return c;
  endfunction

  initial begin
    cmd_t c;
    fp32_t [V-1:0] r0;
    for (int i = 0; i < (1 << GAW); i++) glb_m[i] = bf16_t'($urandom);
    for (int i = 0; i < (1 << WAW); i++) ws_m[i]  = bf16_t'($urandom);
    for (int i = 0; i < 8; i++) sp_m[i] = '0;
    cmd = '0; a_result = '0; rp_out_vec = '0; g_stall = 0; w_stall = 0; g_pipe = 0; w_pipe = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // weights from the global buffer
    c = mk(OP_LOAD_W); c.src_addr = 100; c.dst_index = 5; c.count = 10; issue(c);
    for (int i = 0; i < 10; i++) check(arr[LD_WGT][5 + i] == glb_m[100 + i], $sformatf("wgt %0d", i));
    // weights from the weight store
    c = mk(OP_LOAD_W); c.from_wstore = 1; c.src_addr = 300; c.dst_index = 20; c.count = 12; issue(c);
    for (int i = 0; i < 12; i++) check(arr[LD_WGT][20 + i] == ws_m[300 + i], $sformatf("ws wgt %0d", i));
    // conv activations, row activations, stride shift
    c = mk(OP_LOAD_A); c.src_addr = 200; c.dst_index = 0; c.count = 9; issue(c);
    for (int i = 0; i < 9; i++) check(arr[LD_ACT][i] == glb_m[200 + i], $sformatf("act %0d", i));
    c = mk(OP_LOAD_A); c.row_act = 1; c.src_addr = 400; c.dst_index = 2; c.count = 3; issue(c);
    for (int i = 0; i < 3; i++) check(arr[LD_ROW_ACT][2 + i] == glb_m[400 + i], $sformatf("row act %0d", i));
    c = mk(OP_LOAD_A); c.shift = 1; c.src_addr = 500; c.dst_index = 1; c.count = 4; issue(c);
    for (int i = 0; i < 4; i++) check(arr[LD_SHIFT][1 + i] == glb_m[500 + i], $sformatf("shift %0d", i));
    // partial result to the scratchpad
    c = mk(OP_RUN); c.mode = MODE_CONV; c.to_sp = 1; c.sp_wr_line = 3; issue(c);
    check(seen_psum == '0, "zero top partial sums");
    for (int j = 0; j < V; j++) r0[j] = 32'h0101_0000 * (j + 1);
    check(sp_m[3] == r0, "partial result in scratchpad line 3");
    check(glb_writes == 0, "partial result kept out of the global buffer");
    // final result: partial sums back from the scratchpad, written to the GLB
    c = mk(OP_RUN); c.mode = MODE_CONV; c.psum_from_sp = 1; c.sp_rd_line = 3;
    c.dst_addr = 700; c.out_count = 4; c.relu_en = 1; issue(c);
    check(seen_psum == r0, "top partial sums from the scratchpad");
    for (int j = 0; j < 4; j++)
      check(glb_m[700 + j] == 16'((r0[j] + 32'h0101_0000 * (j + 1)) >> 16), $sformatf("result word %0d", j));
    check(glb_writes == 4, "four result words written");
    // systolic step: mode switch, pooled pair
    c = mk(OP_RUN); c.mode = MODE_SYS; c.pool_en = 1; c.dst_addr = 800; c.out_count = 2; issue(c);
    check(glb_writes == 4, "no write for the first vector of a pooled pair");
    issue(c);
    check(glb_writes == 6, "pooled write");
    check(seen_mode == MODE_SYS, "systolic mode reached the array");
    check(n_sp_writes == 1, "scratchpad write counter");
    check(n_glb_writes == 6, "global buffer write counter");
    check(n_conv_steps == 2 && n_sys_steps == 2, "step counters");
    check(n_mode_switches == 1, "mode switch counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
