// One bank of customized STT-MRAM, seen from its digital interface.
//
// The bank is an array of DEPTH words of WIDTH bits with the access timing
// of a scaled-retention MRAM: a write occupies the bank for a write pulse of
// WR_LAT cycles, a read returns its data RD_LAT cycles after it is accepted.
// The same logic serves the two bit-group banks of the global buffer and
// the weight-storage memory; only the size and the write-pulse length
// differ. The magnetic bit cells, sense amplifiers and current drivers are
// analog and are represented only by the array and this timing; retention
// failures, read disturbs and write errors are not modelled.
//
// Interface: `req` with `we`, `addr`, `wdata` is accepted in a cycle where
// `ready` is high. One access is in flight at a time. A read pulses
// `rvalid` with `rdata` RD_LAT cycles after acceptance; a write keeps
// `ready` low for WR_LAT cycles. The word array is uninitialised (a real
// MRAM keeps its old contents). Latency values are this design's choice
// within the paper's "less than 10 ns" at a 1 GHz clock.
module stt_mram_bank #(
  parameter int unsigned WIDTH  = 8,
  parameter int unsigned DEPTH  = 6291456,
  parameter int unsigned RD_LAT = 2,
  parameter int unsigned WR_LAT = 5,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             req,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic             ready,
  output logic             rvalid,
  output logic [WIDTH-1:0] rdata
);
  localparam int unsigned CW = $clog2((RD_LAT > WR_LAT ? RD_LAT : WR_LAT) + 1);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [CW-1:0]    cnt;
  logic             rd_pend;
  logic [AW-1:0]    addr_q;

  wire accept = req && ready;

  always_ff @(posedge clk) begin
    if (accept && we) mem[addr] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt     <= '0;
      rd_pend <= 1'b0;
      addr_q  <= '0;
      rvalid  <= 1'b0;
      rdata   <= '0;
    end else begin
      rvalid <= 1'b0;
      if (accept) begin
        cnt     <= we ? CW'(WR_LAT - 1) : CW'(RD_LAT - 1);
        rd_pend <= !we;
        addr_q  <= addr;
        if (!we && RD_LAT == 1) begin
          rvalid  <= 1'b1;
          rdata   <= mem[addr];
          rd_pend <= 1'b0;
        end
      end else if (cnt != 0) begin
        cnt <= cnt - 1'b1;
        if (cnt == 1 && rd_pend) begin
          rvalid  <= 1'b1;
          rdata   <= mem[addr_q];
          rd_pend <= 1'b0;
        end
      end
    end
  end

  assign ready = (cnt == 0);

  addr_in_range: assert property (@(posedge clk) disable iff (!rst_n) req |-> (32'(addr) < DEPTH))
    else $error("stt_mram_bank: address out of range");

endmodule
