// Self-checking testbench of bf16_mul: random and special operands, result
// compared with a double-precision reference, and the 5-cycle latency.
//
// Every check increments `checks`, every mismatch `failures`; the run ends
// with one TB_RESULT line. A watchdog ends it as failed after 200,000 clock
// cycles.
// The 5-cycle latency is this design's split of the 11-cycle systolic MAC;
// flushing subnormals and the NaN encoding are this design's choices.
module tb_bf16_mul;
  import tb_fp_pkg::*;
  localparam int LAT = 5;
  logic clk = 0, rst_n = 0, start = 0, done, busy;
  logic [15:0] a, b;
  logic [31:0] y;
  int checks = 0, failures = 0, cyc = 0;

  bf16_mul #(.LAT(LAT)) dut (.clk, .rst_n, .start, .a, .b, .done, .busy, .y);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(logic [15:0] x, logic [15:0] z, logic [31:0] exp_y);
    int t0, n;
    @(negedge clk); a = x; b = z; start = 1;
    @(posedge clk); t0 = cyc;
    @(negedge clk); start = 0;
    n = 0;
    while (!done) begin @(posedge clk); @(negedge clk); n++; if (n > 50) break; end
    checks++;
    if (y !== exp_y) begin
      failures++;
      $display("FAIL mul %h * %h = %h expected %h", x, z, y, exp_y);
    end
    checks++;
    if (n + 1 != LAT) begin
      failures++;
      $display("FAIL latency %0d expected %0d", n + 1, LAT);
    end
  endtask

  initial begin
    a = 0; b = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(16'h3F80, 16'h4000, 32'h4000_0000);            // 1 * 2
    run(16'hC040, 16'h4040, 32'hC110_0000);            // -3 * 3 = -9
    run(16'h0000, 16'h4040, 32'h0000_0000);            // zero
    run(16'h8000, 16'h4040, 32'h8000_0000);            // -0 * 3
    run(16'h7F80, 16'h4040, 32'h7F80_0000);            // inf * 3
    run(16'h7F80, 16'h0000, 32'h7FC0_0000);            // inf * 0
    run(16'h7FC1, 16'h3F80, 32'h7FC0_0000);            // NaN
    run(16'h7F00, 16'h7F00, 32'h7F80_0000);            // overflow
    for (int k = 0; k < 2000; k++) begin
      logic [15:0] x, z;
      x = rand_bf16(70, 185);
      z = rand_bf16(70, 185);
      run(x, z, ref_mul(x, z));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
