// Workload testbench: convolution layer shapes of the evaluated networks on
// a reduced accelerator (H_A = 12, W_A = 4, i.e. 12 x 12 MACs).
//
// Runs three layer slices through the command port, with random BF16 data:
//   - VGG16-style 3x3 kernel, stride 1, 8 input channels;
//   - AlexNet conv1-style 11x11 kernel, stride 4, 3 input channels;
//   - ResNet-50-style 1x1 kernel, stride 1, 24 input channels.
// A layer is mapped the general way: every (input channel, kernel row,
// 3-wide kernel-row segment) triple takes one PE row of a column, segments
// past the kernel width have zero weights, and the triples are cut into
// passes of H_A rows whose partial ofmaps are carried through the
// scratchpad. Ofmap columns advance by `stride` shift loads. The result of
// every ofmap element (W_A rows x NX columns) is read back from the global
// buffer and compared twice: bit-exactly with a reference that follows the
// array's addition order, and within a relative bound with a direct
// double-precision convolution, which shows that the mapping computes the
// layer. The layer shapes come from the networks' published definitions;
// the channel counts and ofmap sizes are cut down to simulate quickly.
//
// Every check increments `checks`, every mismatch `failures`; the run ends
// with one TB_RESULT line. A watchdog ends it as failed after 3,000,000
// clock cycles.
module tb_layer_workloads;
  import stt_ai_pkg::*;
  import tb_fp_pkg::*;

  localparam int H = 12, W = 4;
  localparam int GLBW = 65536, WSW = 4096;
  localparam int WDOG = 3_000_000;
  localparam int GAW = $clog2(GLBW), WAW = $clog2(WSW);
  localparam int NX = 2;                          // ofmap columns per layer
  localparam int MAXC = 24, MAXK = 11, MAXR = 32, MAXCOL = 16;

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

  stt_ai_top #(.H_A(H), .W_A(W), .GLB_WORDS(GLBW), .WS_WORDS(WSW)) u_dut (.*);

  int checks = 0, failures = 0;
  always #5 clk = ~clk;

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

  task automatic issue(cmd_t c);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd = c; cmd_valid = 1;
    @(posedge clk); @(negedge clk); cmd_valid = 0;
    @(negedge clk);
    while (busy) @(negedge clk);
  endtask

  // current layer
  int nch, kh, kw, st, nseg, ntrip, npass;
  bf16_t ifm [MAXC][MAXR][MAXCOL];
  bf16_t ker [MAXC][MAXK][MAXK];

  // weight and activation of MAC k of PE(r, c) in pass p, window of ofmap column x
  function automatic bf16_t wgt(int p, int r, int k);
    int t = p * H + r;
    int v, kr, sg;
    if (t >= ntrip) return 16'h0000;
    v = t / (kh * nseg); kr = (t / nseg) % kh; sg = t % nseg;
    return (sg * 3 + k < kw) ? ker[v][kr][sg * 3 + k] : 16'h0000;
  endfunction

  function automatic bf16_t act(int p, int r, int c, int col);
    int t = p * H + r;
    int v, kr, sg;
    if (t >= ntrip) return 16'h0000;
    v = t / (kh * nseg); kr = (t / nseg) % kh; sg = t % nseg;
    return ifm[v][c * st + kr][sg * 3 + col];
  endfunction

  task automatic run_layer(string name, int c_in, int k_sz, int stride);
    cmd_t cm;
    int a, wb, ab, sb, ob, ncol, nrow;
    bf16_t d;
    nch = c_in; kh = k_sz; kw = k_sz; st = stride;
    nseg = (kw + 2) / 3; ntrip = nch * kh * nseg; npass = (ntrip + H - 1) / H;
    nrow = (W - 1) * st + kh; ncol = (NX - 1) * st + nseg * 3;
    for (int v = 0; v < nch; v++) begin
      for (int i = 0; i < nrow; i++) for (int j = 0; j < ncol; j++) ifm[v][i][j] = rand_bf16(120, 128);
      for (int i = 0; i < kh; i++)  for (int j = 0; j < kw; j++)  ker[v][i][j] = rand_bf16(120, 128);
    end
    // global buffer image: per pass weights, first window, stride shifts
    a = 0;
    for (int p = 0; p < npass; p++) begin
      for (int r = 0; r < H; r++) for (int c = 0; c < W; c++) for (int k = 0; k < 3; k++) begin
        ext_write(a, wgt(p, r, k)); a++;
      end
      for (int r = 0; r < H; r++) for (int c = 0; c < W; c++) for (int k = 0; k < 3; k++) begin
        ext_write(a, act(p, r, c, k)); a++;
      end
      for (int x = 1; x < NX; x++)
        for (int j = 0; j < st; j++)
          for (int r = 0; r < H; r++) for (int c = 0; c < W; c++) begin
            ext_write(a, act(p, r, c, (x - 1) * st + 3 + j)); a++;
          end
    end
    ob = a;
    // command program
    a = 0;
    for (int p = 0; p < npass; p++) begin
      cm = '0; cm.op = OP_LOAD_W; cm.src_addr = 28'(a); cm.count = 16'(H*W*3); issue(cm); a += H*W*3;
      cm = '0; cm.op = OP_LOAD_A; cm.src_addr = 28'(a); cm.count = 16'(H*W*3); issue(cm); a += H*W*3;
      for (int x = 0; x < NX; x++) begin
        if (x > 0)
          for (int j = 0; j < st; j++) begin
            cm = '0; cm.op = OP_LOAD_A; cm.shift = 1; cm.src_addr = 28'(a); cm.count = 16'(H*W);
            issue(cm); a += H*W;
          end
        cm = '0; cm.op = OP_RUN; cm.mode = MODE_CONV;
        cm.psum_from_sp = (p > 0); cm.sp_rd_line = 9'(x);
        if (p < npass - 1) begin cm.to_sp = 1; cm.sp_wr_line = 9'(x); end
        else begin cm.dst_addr = 23'(ob + x*W); cm.out_count = 6'(W); end
        issue(cm);
      end
    end
    // results
    for (int x = 0; x < NX; x++)
      for (int c = 0; c < W; c++) begin
        fp32_t ps = 32'd0;
        real direct = 0.0, mag = 0.0, got;
        for (int p = 0; p < npass; p++)
          for (int r = 0; r < H; r++)
            ps = ref_conv(act(p, r, c, x*st), wgt(p, r, 0), act(p, r, c, x*st + 1), wgt(p, r, 1),
                          act(p, r, c, x*st + 2), wgt(p, r, 2), ps);
        for (int v = 0; v < nch; v++)
          for (int i = 0; i < kh; i++)
            for (int j = 0; j < kw; j++) begin
              real t = bf16_to_real(ifm[v][c*st + i][x*st + j]) * bf16_to_real(ker[v][i][j]);
              direct += t; mag += (t < 0.0) ? -t : t;
            end
        ext_read(ob + x*W + c, d);
        got = bf16_to_real(d);
        check(d == ref_bf16(ps), $sformatf("%s ofmap[%0d][%0d] %h exp %h", name, c, x, d, ref_bf16(ps)));
        check((got - direct) <= 0.01 * mag + 1e-30 && (direct - got) <= 0.01 * mag + 1e-30,
              $sformatf("%s ofmap[%0d][%0d] %f vs direct %f", name, c, x, got, direct));
      end
    $display("%s: %0d input channels, %0dx%0d kernel, stride %0d -> %0d PE-row triples, %0d passes",
             name, nch, kh, kw, st, ntrip, npass);
  endtask

  initial begin
    cmd = '0; ext_addr = 0; ext_wdata = 0; ws_addr = 0; ws_wdata = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_layer("vgg16 3x3/1", 8, 3, 1);
    run_layer("alexnet conv1 11x11/4", 3, 11, 4);
    run_layer("resnet50 1x1/1", 24, 1, 1);
    check(n_sys_steps == 0 && n_conv_steps > 0, "conv steps only");
    $display("conv steps %0d, scratchpad writes %0d, result writes %0d", n_conv_steps, n_sp_writes, n_glb_writes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
