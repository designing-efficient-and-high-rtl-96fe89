// Full-size end-to-end testbench of stt_ai_top: the top is instantiated with
// all of its default parameters (42 x 42 MAC array, 12 MB global buffer,
// 52 KB scratchpad, 280 MiB weight store). It runs the same scenario as the
// reduced-size end-to-end test: a two-pass 3x3 convolution layer whose 28
// input channels are stacked 14 per pass down the array, partial ofmaps
// kept in the scratchpad between passes, stride shifts for three ofmap
// columns, an 84-input x 42-output FC layer in systolic mode with weights
// from the weight store, and a pooled convolution after gating one
// scratchpad bank. Every result read back through the external port is
// compared with the double-precision reference, and each mechanism is
// counted (one that never happens is a failure).
module tb_stt_ai_full;
  import stt_ai_pkg::*;
  import tb_fp_pkg::*;

  localparam int H = 42, W = 14;               // default array
  localparam int GLBW = 6291456, WSW = 146800640; // default memories
  localparam int WDOG = 5_000_000;             // watchdog, cycles

  localparam int V    = 3 * W;
  localparam int HW3  = H * W * 3;
  localparam int CPS  = H / 3;                 // input channels per pass
  localparam int NCH  = 2 * CPS;
  localparam int NX   = 3;                     // ofmap columns
  localparam int IR   = W + 2, IC = NX + 2;    // ifmap rows and columns
  localparam int NI   = 2 * H;                 // FC inputs
  localparam int GAW  = $clog2(GLBW), WAW = $clog2(WSW);
  localparam int A_W    = 0;
  localparam int A_A    = 2 * HW3;
  localparam int A_S    = 4 * HW3;
  localparam int A_FCX  = A_S + 4 * H * W;
  localparam int A_OC   = A_FCX + NI;
  localparam int A_OP   = A_OC + NX * W;
  localparam int A_OF   = A_OP + W;

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, busy;
  cmd_t cmd;
  logic ext_req = 0, ext_we = 0, ext_gnt, ext_rvalid;
  logic [GAW-1:0] ext_addr;
  bf16_t ext_wdata, ext_rdata;
  logic ws_req = 0, ws_gnt;
  logic [WAW-1:0] ws_addr;
  bf16_t ws_wdata;
  logic [1:0] sp_bank_on = 2'b11;
  logic signed [3:0] pt_proc_sigma = 0;
  logic [8:0] pt_temp_k = 300;
  logic [9:0] pt_drv_loss_pm = 0;
  logic [3:0] wdrv_leg_en;
  logic wdrv_saturated;
  logic [31:0] n_sp_writes, n_glb_writes, n_conv_steps, n_sys_steps, n_mode_switches;

  stt_ai_top u_dut (.*);

  int checks = 0, failures = 0;
  int ev_sp_read = 0, ev_clip = 0, ev_pool = 0, ev_shift = 0, ev_ws_load = 0, ev_gate = 0, ev_boost = 0;
  longint cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (WDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // ---- layer data ----
  bf16_t ifm [NCH][IR][IC];
  bf16_t ker [NCH][3][3];
  bf16_t xin [NI];
  bf16_t wfc [NI][V];

  task automatic ext_write(int a, bf16_t d);
    @(negedge clk);
    ext_req = 1; ext_we = 1; ext_addr = GAW'(a); ext_wdata = d;
    @(posedge clk);
    while (!ext_gnt) @(posedge clk);
    @(negedge clk); ext_req = 0;
  endtask

  task automatic ext_read(int a, output bf16_t d);
    @(negedge clk);
    ext_req = 1; ext_we = 0; ext_addr = GAW'(a);
    @(posedge clk);
    while (!ext_gnt) @(posedge clk);
    @(negedge clk); ext_req = 0;
    while (!ext_rvalid) @(negedge clk);
    d = ext_rdata;
  endtask

  task automatic ws_write(int a, bf16_t d);
    @(negedge clk);
    ws_req = 1; ws_addr = WAW'(a); ws_wdata = d;
    @(posedge clk);
    while (!ws_gnt) @(posedge clk);
    @(negedge clk); ws_req = 0;
  endtask

  task automatic issue(cmd_t c);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd = c; cmd_valid = 1;
    @(posedge clk); @(negedge clk); cmd_valid = 0;
    @(negedge clk);
    while (busy) @(negedge clk);
  endtask

  function automatic cmd_t mk(op_e op);
    cmd_t c = '0;
    c.op = op;
    return c;
  endfunction

  // channel and kernel row of PE row r in pass p
  function automatic int chan(int p, int r); return p * CPS + r / 3; endfunction

  task automatic fill_memories();
    for (int v = 0; v < NCH; v++) begin
      for (int i = 0; i < IR; i++) for (int j = 0; j < IC; j++) ifm[v][i][j] = rand_bf16(120, 128);
      for (int i = 0; i < 3; i++)  for (int j = 0; j < 3; j++)  ker[v][i][j] = rand_bf16(120, 128);
    end
    for (int i = 0; i < NI; i++) begin
      xin[i] = rand_bf16(120, 128);
      for (int j = 0; j < V; j++) wfc[i][j] = rand_bf16(120, 128);
    end
    for (int p = 0; p < 2; p++)
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++)
          for (int k = 0; k < 3; k++) begin
            ext_write(A_W + p*HW3 + (r*W + c)*3 + k, ker[chan(p, r)][r % 3][k]);
            ext_write(A_A + p*HW3 + (r*W + c)*3 + k, ifm[chan(p, r)][c + r % 3][k]);
          end
    for (int p = 0; p < 2; p++)
      for (int x = 1; x < NX; x++)
        for (int r = 0; r < H; r++)
          for (int c = 0; c < W; c++)
            ext_write(A_S + (p*2 + x - 1)*H*W + r*W + c, ifm[chan(p, r)][c + r % 3][x + 2]);
    for (int i = 0; i < NI; i++) ext_write(A_FCX + i, xin[i]);
    for (int t = 0; t < 2; t++)
      for (int r = 0; r < H; r++)
        for (int j = 0; j < V; j++) ws_write(t*H*V + r*V + j, wfc[t*H + r][j]);
  endtask

  // reference ofmap partial sum of ofmap column x, ofmap row c (FP32, before ReLU)
  function automatic fp32_t conv_ref(int x, int c);
    fp32_t p = 32'd0;
    for (int ps = 0; ps < 2; ps++)
      for (int r = 0; r < H; r++) begin
        int v = chan(ps, r), kr = r % 3;
        p = ref_conv(ifm[v][c+kr][x], ker[v][kr][0], ifm[v][c+kr][x+1], ker[v][kr][1],
                     ifm[v][c+kr][x+2], ker[v][kr][2], p);
      end
    return p;
  endfunction

  function automatic fp32_t relu(fp32_t x);
    return (fp32_to_real(x) <= 0.0) ? 32'd0 : x;
  endfunction

  function automatic fp32_t fmax(fp32_t a, fp32_t b);
    return (fp32_to_real(b) > fp32_to_real(a)) ? b : a;
  endfunction

  task automatic run_conv(logic pool);
    cmd_t c;
    int nx = pool ? 2 : NX;
    for (int p = 0; p < 2; p++) begin
      c = mk(OP_LOAD_W); c.src_addr = 28'(A_W + p*HW3); c.count = 16'(HW3); issue(c);
      c = mk(OP_LOAD_A); c.src_addr = 28'(A_A + p*HW3); c.count = 16'(HW3); issue(c);
      for (int x = 0; x < nx; x++) begin
        if (x > 0) begin
          c = mk(OP_LOAD_A); c.shift = 1; c.src_addr = 28'(A_S + (p*2 + x - 1)*H*W);
          c.count = 16'(H*W); issue(c);
          ev_shift++;
        end
        c = mk(OP_RUN); c.mode = MODE_CONV;
        if (p == 0) begin
          c.to_sp = 1; c.sp_wr_line = 9'(x);
        end else begin
          c.psum_from_sp = 1; c.sp_rd_line = 9'(x); c.relu_en = 1;
          ev_sp_read++;
          if (pool) begin c.pool_en = 1; c.dst_addr = 23'(A_OP); c.out_count = 6'(W/2); end
          else      begin c.dst_addr = 23'(A_OC + x*W); c.out_count = 6'(W); end
        end
        issue(c);
      end
    end
  endtask

  task automatic run_fc();
    cmd_t c;
    for (int t = 0; t < 2; t++) begin
      c = mk(OP_LOAD_W); c.from_wstore = 1; c.src_addr = 28'(t*H*V); c.count = 16'(H*V); issue(c);
      ev_ws_load++;
      c = mk(OP_LOAD_A); c.row_act = 1; c.src_addr = 28'(A_FCX + t*H); c.count = 16'(H); issue(c);
      c = mk(OP_RUN); c.mode = MODE_SYS;
      if (t == 0) begin c.to_sp = 1; c.sp_wr_line = 9'd10; end
      else begin
        c.psum_from_sp = 1; c.sp_rd_line = 9'd10; c.dst_addr = 23'(A_OF); c.out_count = 6'(V);
        ev_sp_read++;
      end
      issue(c);
    end
  endtask

  initial begin
    bf16_t d;
    longint t0;
    cmd = '0; ext_addr = 0; ext_wdata = 0; ws_addr = 0; ws_wdata = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    fill_memories();
    t0 = cyc;

    // 1. conv layer, two passes through the scratchpad
    run_conv(0);
    for (int x = 0; x < NX; x++)
      for (int c = 0; c < W; c++) begin
        automatic fp32_t p = conv_ref(x, c);
        if (p[31]) ev_clip++;
        ext_read(A_OC + x*W + c, d);
        check(d == ref_bf16(relu(p)), $sformatf("conv ofmap[%0d][%0d] %h exp %h", c, x, d, ref_bf16(relu(p))));
      end

    // 2. FC layer, systolic mode, weights from the weight store
    run_fc();
    for (int j = 0; j < V; j++) begin
      automatic fp32_t p = 32'd0;
      for (int i = 0; i < NI; i++) p = ref_mac(xin[i], wfc[i][j], p);
      ext_read(A_OF + j, d);
      check(d == ref_bf16(p), $sformatf("fc out[%0d] %h exp %h", j, d, ref_bf16(p)));
    end

    // 3. pooled conv with the second scratchpad bank switched off
    @(negedge clk); sp_bank_on = 2'b01; ev_gate++;
    run_conv(1);
    ev_pool++;
    for (int i = 0; i < W/2; i++) begin
      automatic fp32_t m = fmax(fmax(relu(conv_ref(0, 2*i)), relu(conv_ref(0, 2*i+1))),
                      fmax(relu(conv_ref(1, 2*i)), relu(conv_ref(1, 2*i+1))));
      ext_read(A_OP + i, d);
      check(d == ref_bf16(m), $sformatf("pooled[%0d] %h exp %h", i, d, ref_bf16(m)));
    end
    $display("compute phase: %0d cycles", cyc - t0);

    // MRAM writes: only final results reached the global buffer
    check(n_glb_writes == NX*W + V + W/2, $sformatf("global buffer result writes %0d", n_glb_writes));
    check(n_sp_writes == NX + 1 + 2, $sformatf("scratchpad partial writes %0d", n_sp_writes));
    check(n_conv_steps == 2*NX + 4 && n_sys_steps == 2, "step counts");
    check(n_mode_switches == 2, $sformatf("mode switches %0d", n_mode_switches));

    // write driver: +4 sigma die at -20 C needs two extra legs
    @(negedge clk); pt_proc_sigma = 4; pt_temp_k = 253;
    @(posedge clk); @(negedge clk);
    check(wdrv_leg_en == 4'b0011 && !wdrv_saturated, $sformatf("write-driver legs %b", wdrv_leg_en));
    if (wdrv_leg_en != 0) ev_boost++;

    $display("events: sp_writes=%0d sp_reads=%0d conv=%0d sys=%0d switches=%0d clip=%0d pool=%0d shift=%0d ws_load=%0d gate=%0d boost=%0d",
             n_sp_writes, ev_sp_read, n_conv_steps, n_sys_steps, n_mode_switches, ev_clip, ev_pool,
             ev_shift, ev_ws_load, ev_gate, ev_boost);
    check(n_sp_writes > 0, "scratchpad bypass happened");
    check(ev_sp_read > 0, "scratchpad read-back happened");
    check(n_conv_steps > 0 && n_sys_steps > 0, "both modes ran");
    check(n_mode_switches > 0, "mode switch happened");
    check(ev_clip > 0, "ReLU clipped a value");
    check(ev_pool > 0 && ev_shift > 0 && ev_ws_load > 0 && ev_gate > 0 && ev_boost > 0,
          "pooling, stride shift, weight-store load, bank gating and write boost happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
