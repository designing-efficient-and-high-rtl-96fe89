// Self-checking testbench of the weight-storage memory: stt_mram_bank with
// 16-bit BF16 words and the longer 8-cycle write pulse of the guard-banded
// non-volatile bank (small depth). Random writes and reads against a shadow
// array, write-pulse length and read latency.
//
// Every check increments `checks`, every mismatch `failures`; the run ends
// with one TB_RESULT line. A watchdog ends it as failed after 50,000 clock
// cycles.
// The 280 MiB size follows the original design (the test uses a small
// depth); the 8-cycle write pulse is this design's choice.
module tb_weight_store;
  localparam int W = 16, D = 256, RL = 2, WL = 8;
  logic clk = 0, rst_n = 0, req = 0, we = 0, ready, rvalid;
  logic [7:0] addr;
  logic [W-1:0] wdata, rdata;
  logic [W-1:0] shadow [D];
  logic         written [D];
  int checks = 0, failures = 0;

  stt_mram_bank #(.WIDTH(W), .DEPTH(D), .RD_LAT(RL), .WR_LAT(WL)) dut (
    .clk, .rst_n, .req, .we, .addr, .wdata, .ready, .rvalid, .rdata);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  task automatic access(logic w, logic [7:0] a, logic [W-1:0] d);
    int n;
    @(negedge clk);
    while (!ready) begin @(negedge clk); end
    req = 1; we = w; addr = a; wdata = d;
    @(posedge clk);
    @(negedge clk); req = 0;
    n = 1;
    if (w) begin
      while (!ready && n < 50) begin @(posedge clk); @(negedge clk); n++; end
      check(n == WL, $sformatf("write busy %0d cycles", n));
      shadow[a] = d; written[a] = 1;
    end else begin
      while (!rvalid && n < 50) begin @(posedge clk); @(negedge clk); n++; end
      check(n == RL, $sformatf("read latency %0d", n));
      check(rdata == shadow[a], $sformatf("read %h at %0d exp %h", rdata, a, shadow[a]));
    end
  endtask

  initial begin
    for (int i = 0; i < D; i++) written[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 64; i++) access(1, 8'(i), W'($urandom));
    for (int k = 0; k < 600; k++) begin
      automatic logic [7:0] a = 8'($urandom % 64);
      if ($urandom % 3 == 0) access(1, a, W'($urandom));
      else access(0, a, '0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
