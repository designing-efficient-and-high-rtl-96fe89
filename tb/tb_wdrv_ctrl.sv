// Self-checking testbench of wdrv_ctrl: directed corners (nominal, cold and
// slow, hot, saturation) and random readings; the expected leg count is the
// smallest n with (1 - loss)(1 + n/4) >= (1 + 0.021 s) * 300 / T, in reals.
//
// Every check increments `checks`, every mismatch `failures`; the run ends
// with one TB_RESULT line. A watchdog ends it as failed after 100,000 clock
// cycles.
// The four W/4 legs and sigma = 2.1 % follow the original design; T_nom =
// 300 K and the linear current model are this design's choices.
module tb_wdrv_ctrl;
  logic clk = 0, rst_n = 0;
  logic signed [3:0] proc_sigma;
  logic [8:0] temp_k;
  logic [9:0] drv_loss_pm;
  logic [3:0] leg_en;
  logic saturated;
  int checks = 0, failures = 0;

  wdrv_ctrl dut (.clk, .rst_n, .proc_sigma, .temp_k, .drv_loss_pm, .leg_en, .saturated);

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

  task automatic apply(int s, int t, int loss, int exp_n, logic exp_sat);
    @(negedge clk);
    proc_sigma = 4'(s); temp_k = 9'(t); drv_loss_pm = 10'(loss);
    @(posedge clk); @(negedge clk);
    check(leg_en == 4'((1 << exp_n) - 1) && saturated == exp_sat,
          $sformatf("s=%0d T=%0d loss=%0d: legs %b sat %0d, expected %0d legs sat %0d",
                    s, t, loss, leg_en, saturated, exp_n, exp_sat));
  endtask

  function automatic int ref_n(int s, int t, int loss, output logic sat);
    real need = (1.0 + 0.021 * s) * 300.0 / t;
    for (int n = 0; n <= 4; n++)
      if ((1.0 - loss / 1000.0) * (1.0 + n / 4.0) >= need - 1e-12) begin sat = 0; return n; end
    sat = 1;
    return 4;
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    apply(0, 300, 0, 0, 0);      // nominal: extra legs off
    apply(4, 253, 0, 2, 0);      // +4 sigma at -20 C: ratio 1.285
    apply(-4, 393, 0, 0, 0);     // hot, low Delta
    apply(4, 253, 200, 3, 0);    // cold and slow driver corner
    apply(4, 253, 500, 4, 1);    // beyond the driver's range
    for (int k = 0; k < 500; k++) begin
      automatic int s = int'($urandom % 9) - 4, t = 240 + int'($urandom % 160), loss = int'($urandom % 300);
      logic sat;
      automatic int n = ref_n(s, t, loss, sat);
      apply(s, t, loss, n, sat);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
