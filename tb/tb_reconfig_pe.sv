// Self-checking testbench of reconfig_pe. Random operands in both modes,
// alternating between them: systolic results (three independent MACs) must
// appear 11 cycles after issue, the convolution PE_OUT 17 cycles after issue;
// values are compared with the double-precision reference.
//
// Every check increments `checks`, every mismatch `failures`; the run ends
// with one TB_RESULT line. A watchdog ends it as failed after 100,000 clock
// cycles.
// The 11 and 17 cycle counts and the multiplexer wiring are the original
// design's; the single-operation issue is this design's choice.
module tb_reconfig_pe;
  import stt_ai_pkg::*;
  import tb_fp_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid, busy;
  mode_e mode;
  bf16_t [2:0] i_act, f_wgt;
  fp32_t [2:0] p_sum, mac_out;
  fp32_t pe_in, pe_out;
  int checks = 0, failures = 0;
  int n_sys = 0, n_conv = 0;

  reconfig_pe dut (.clk, .rst_n, .in_valid, .mode, .i_act, .f_wgt, .p_sum, .pe_in,
                   .out_valid, .mac_out, .pe_out, .busy);

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

  task automatic op(mode_e m);
    int n;
    fp32_t e0, e1, e2, ec;
    @(negedge clk);
    mode = m; in_valid = 1;
    for (int k = 0; k < 3; k++) begin
      i_act[k] = rand_bf16(110, 140);
      f_wgt[k] = rand_bf16(110, 140);
      p_sum[k] = rand_fp32(100, 140);
    end
    pe_in = rand_fp32(100, 140);
    e0 = ref_mac(i_act[0], f_wgt[0], p_sum[0]);
    e1 = ref_mac(i_act[1], f_wgt[1], p_sum[1]);
    e2 = ref_mac(i_act[2], f_wgt[2], p_sum[2]);
    ec = ref_conv(i_act[0], f_wgt[0], i_act[1], f_wgt[1], i_act[2], f_wgt[2], pe_in);
    @(posedge clk);
    @(negedge clk); in_valid = 0;
    i_act = '0; f_wgt = '0; p_sum = '0; pe_in = '0;   // inputs must be captured at issue
    n = 1;
    while (!out_valid && n < 40) begin @(posedge clk); @(negedge clk); n++; end
    if (m == MODE_SYS) begin
      n_sys++;
      check(n == 11, $sformatf("systolic latency %0d", n));
      check(mac_out[0] == e0, $sformatf("MAC1 %h exp %h", mac_out[0], e0));
      check(mac_out[1] == e1, $sformatf("MAC2 %h exp %h", mac_out[1], e1));
      check(mac_out[2] == e2, $sformatf("MAC3 %h exp %h", mac_out[2], e2));
    end else begin
      n_conv++;
      check(n == 17, $sformatf("conv latency %0d", n));
      check(pe_out == ec, $sformatf("PE_OUT %h exp %h", pe_out, ec));
    end
  endtask

  initial begin
    mode = MODE_SYS; i_act = '0; f_wgt = '0; p_sum = '0; pe_in = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 400; k++) op(($urandom % 2) ? MODE_CONV : MODE_SYS);
    check(n_sys > 0 && n_conv > 0, "both modes exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
