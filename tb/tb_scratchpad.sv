// Self-checking testbench of scratchpad (reduced line width VEC = 3, default
// 26 KB banks, i.e. 2 x 2218 lines): writes and reads random partial-sum
// vectors in both banks, checks one-cycle read latency, that gating a bank
// loses its contents (reads miss and return zeros) while the other bank
// keeps its data, and that writes to a gated bank are dropped.
//
// Every check increments `checks`, every mismatch `failures`; the run ends
// with one TB_RESULT line. A watchdog ends it as failed after 200,000 clock
// cycles.
// The 52 KB size in two gated 26 KB banks is the original design's; the FP32
// lines and invalidation on gating are this design's choices.
module tb_scratchpad;
  import stt_ai_pkg::*;
  localparam int V = 3, BL = 26624 / (V * 4), LW = $clog2(2 * BL);
  logic clk = 0, rst_n = 0, wr_en = 0, rd_en = 0, rd_hit;
  logic [1:0] bank_on = 2'b11;
  logic [LW-1:0] wr_line, rd_line;
  fp32_t [V-1:0] wr_data, rd_data;
  fp32_t [V-1:0] shadow [2*BL];
  logic          ok     [2*BL];
  int checks = 0, failures = 0, n_gate = 0;

  scratchpad #(.VEC(V)) dut (.clk, .rst_n, .bank_on, .wr_en, .wr_line, .wr_data,
                             .rd_en, .rd_line, .rd_data, .rd_hit);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  task automatic wr(int l);
    @(negedge clk);
    wr_en = 1; wr_line = LW'(l);
    for (int j = 0; j < V; j++) wr_data[j] = $urandom;
    if (bank_on[l / BL]) begin shadow[l] = wr_data; ok[l] = 1; end
    @(posedge clk); @(negedge clk); wr_en = 0;
  endtask

  task automatic rd(int l);
    @(negedge clk);
    rd_en = 1; rd_line = LW'(l);
    @(posedge clk); @(negedge clk); rd_en = 0;
    check(rd_hit == ok[l], $sformatf("hit %0d exp %0d line %0d", rd_hit, ok[l], l));
    check(rd_data == (ok[l] ? shadow[l] : '0), $sformatf("data line %0d", l));
  endtask

  task automatic gate(int b);
    @(negedge clk);
    bank_on[b] = 0;
    n_gate++;
    for (int l = b*BL; l < (b+1)*BL; l++) ok[l] = 0;
    @(posedge clk); @(negedge clk);
  endtask

  initial begin
    for (int l = 0; l < 2*BL; l++) ok[l] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 400; k++) wr($urandom % (2*BL));
    for (int k = 0; k < 400; k++) rd($urandom % (2*BL));
    wr(7); wr(BL + 7);
    gate(0);
    rd(7); rd(BL + 7);
    wr(9);                      // dropped: bank 0 is off
    bank_on[0] = 1;
    rd(9);
    gate(1);
    rd(BL + 7);
    bank_on[1] = 1;
    for (int k = 0; k < 200; k++) begin wr($urandom % (2*BL)); rd($urandom % (2*BL)); end
    check(n_gate == 2, "both banks gated once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
