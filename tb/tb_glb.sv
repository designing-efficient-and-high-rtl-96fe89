// Self-checking testbench of glb (small size): both ports write and read
// random words; checks data, the MSB/LSB bank split (each bank holds its half
// of the word), core-port priority when both ports request together, and
// that read data returns on the port that asked.
//
// Every check increments `checks`, every mismatch `failures`; the run ends
// with one TB_RESULT line. A watchdog ends it as failed after 100,000 clock
// cycles.
// The MSB/LSB split of every word follows the original design; the two
// ports, their priority and the latencies are this design's choices.
module tb_glb;
  import stt_ai_pkg::*;
  localparam int WORDS = 512;
  logic clk = 0, rst_n = 0;
  logic c_req = 0, c_we = 0, c_gnt, c_rvalid, x_req = 0, x_we = 0, x_gnt, x_rvalid;
  logic [8:0] c_addr, x_addr;
  bf16_t c_wdata, c_rdata, x_wdata, x_rdata;
  bf16_t shadow [WORDS];
  int checks = 0, failures = 0, n_conflict = 0;

  glb #(.WORDS(WORDS)) dut (.clk, .rst_n,
    .c_req, .c_we, .c_addr, .c_wdata, .c_gnt, .c_rvalid, .c_rdata,
    .x_req, .x_we, .x_addr, .x_wdata, .x_gnt, .x_rvalid, .x_rdata);

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

  // one access on one port (port x when px = 1); waits for grant and data
  task automatic access(logic px, logic w, logic [8:0] a, bf16_t d);
    int n = 0;
    @(negedge clk);
    if (px) begin x_req = 1; x_we = w; x_addr = a; x_wdata = d; end
    else    begin c_req = 1; c_we = w; c_addr = a; c_wdata = d; end
    while (!(px ? x_gnt : c_gnt) && n < 50) begin @(posedge clk); @(negedge clk); n++; end
    @(posedge clk);
    @(negedge clk);
    if (px) x_req = 0; else c_req = 0;
    if (w) shadow[a] = d;
    else begin
      n = 0;
      while (!(px ? x_rvalid : c_rvalid) && n < 50) begin @(posedge clk); @(negedge clk); n++; end
      check((px ? x_rdata : c_rdata) == shadow[a], $sformatf("port %0d read %h exp %h", px,
            px ? x_rdata : c_rdata, shadow[a]));
      check(!(px ? c_rvalid : x_rvalid), "read data on the other port");
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 64; i++) access(i % 2, 1, 9'(i), bf16_t'($urandom));
    // bank split: the MSB bank holds the upper byte
    check(dut.u_msb.mem[5] == shadow[5][15:8], "MSB group in MSB bank");
    check(dut.u_lsb.mem[5] == shadow[5][7:0],  "LSB group in LSB bank");
    for (int k = 0; k < 300; k++) begin
      automatic logic [8:0] a = 9'($urandom % 64);
      access($urandom % 2, ($urandom % 3) == 0, a, bf16_t'($urandom));
    end
    // simultaneous requests: the core port wins
    for (int k = 0; k < 20; k++) begin
      @(negedge clk);
      while (!dut.ready) @(negedge clk);
      c_req = 1; c_we = 0; c_addr = 9'(k);
      x_req = 1; x_we = 0; x_addr = 9'(k + 1);
      #1;
      check(c_gnt && !x_gnt, "core port has priority");
      n_conflict++;
      @(posedge clk); @(negedge clk); c_req = 0;
      while (!c_rvalid) @(negedge clk);
      check(c_rdata == shadow[k], "core read in conflict");
      while (!x_gnt) @(negedge clk);
      @(posedge clk); @(negedge clk); x_req = 0;
      while (!x_rvalid) @(negedge clk);
      check(x_rdata == shadow[k + 1], "external read after conflict");
    end
    check(n_conflict == 20, "conflicts exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
