// Self-checking testbench of fp32_add: random sums, near cancellations,
// specials; compared with a double-precision reference rounded once to FP32.
// Also checks the 6-cycle latency.
//
// Every check increments `checks`, every mismatch `failures`; the run ends
// with one TB_RESULT line. A watchdog ends it as failed after 300,000 clock
// cycles.
// The 6-cycle latency is this design's split of the 11-cycle MAC; round to
// nearest even and flush to zero are this design's choices.
module tb_fp32_add;
  import tb_fp_pkg::*;
  localparam int LAT = 6;
  logic clk = 0, rst_n = 0, start = 0, done, busy;
  logic [31:0] a, b, y;
  int checks = 0, failures = 0;

  fp32_add #(.LAT(LAT)) dut (.clk, .rst_n, .start, .a, .b, .done, .busy, .y);

  always #5 clk = ~clk;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(logic [31:0] x, logic [31:0] z, logic [31:0] exp_y);
    int n;
    @(negedge clk); a = x; b = z; start = 1;
    @(posedge clk);
    @(negedge clk); start = 0;
    n = 0;
    while (!done) begin @(posedge clk); @(negedge clk); n++; if (n > 50) break; end
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 20) $display("FAIL add %h + %h = %h expected %h", x, z, y, exp_y);
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
    run(32'h3F80_0000, 32'h4000_0000, 32'h4040_0000);   // 1 + 2 = 3
    run(32'h3F80_0000, 32'hBF80_0000, 32'h0000_0000);   // 1 - 1 = +0
    run(32'h4B80_0000, 32'h3F80_0000, 32'h4B80_0000);   // 2^24 + 1: tie to even
    run(32'h4B80_0000, 32'h4000_0000, 32'h4B80_0001);   // 2^24 + 2
    run(32'h7F80_0000, 32'hFF80_0000, 32'h7FC0_0000);   // inf - inf
    run(32'h7F7F_FFFF, 32'h7F7F_FFFF, 32'h7F80_0000);   // overflow
    run(32'h0000_0000, 32'hC2C8_0000, 32'hC2C8_0000);   // 0 + (-100)
    for (int k = 0; k < 3000; k++) begin
      logic [31:0] x, z;
      x = rand_fp32(100, 150);
      unique case (k % 4)
        0: z = rand_fp32(100, 150);
        1: z = {~x[31], x[30:23], 23'($urandom)};              // same exponent, opposite sign
        2: z = {~x[31], x[30:0] + 31'($urandom % 8) - 31'd4};  // near cancellation
        default: z = {1'($urandom), x[30:23] - 8'($urandom % 30), 23'($urandom)};
      endcase
      run(x, z, ref_add(x, z));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
