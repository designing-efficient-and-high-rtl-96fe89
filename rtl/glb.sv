// Global buffer: customized STT-MRAM holding BF16 weights and feature maps.
//
// Each 16-bit word is split over two banks: the upper 8 bits (the
// significant "MSB group") go to one bank and the lower 8 bits (the "LSB
// group") to the other. In the STT-AI Ultra variant the LSB bank is built
// with a lower thermal stability factor and a relaxed bit error rate; the
// logic is identical, so one description serves both variants. Both banks
// are accessed together.
//
// Two requesters share the buffer: the accelerator controller (port c) and
// the off-chip DRAM / host side (port x). A request is held until granted;
// the core port has priority. `*_gnt` pulses in the cycle the request is
// accepted; a read answers with `*_rvalid` RD_LAT cycles later on the port
// that issued it. Arbitration and port shape are this design's choices.
module glb #(
  parameter int unsigned WORDS  = 6291456,
  parameter int unsigned RD_LAT = 2,
  parameter int unsigned WR_LAT = 5,
  localparam int unsigned AW    = $clog2(WORDS)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                c_req,
  input  logic                c_we,
  input  logic [AW-1:0]       c_addr,
  input  stt_ai_pkg::bf16_t   c_wdata,
  output logic                c_gnt,
  output logic                c_rvalid,
  output stt_ai_pkg::bf16_t   c_rdata,
  input  logic                x_req,
  input  logic                x_we,
  input  logic [AW-1:0]       x_addr,
  input  stt_ai_pkg::bf16_t   x_wdata,
  output logic                x_gnt,
  output logic                x_rvalid,
  output stt_ai_pkg::bf16_t   x_rdata
);
  import stt_ai_pkg::*;

  logic          rdy_msb, rdy_lsb, rv_msb, rv_lsb;
  logic [7:0]    rd_msb, rd_lsb;
  logic          b_req, b_we;
  logic [AW-1:0] b_addr;
  bf16_t         b_wdata;
  logic          owner_x;      // port of the read in flight

  wire ready = rdy_msb && rdy_lsb;

  always_comb begin
    c_gnt   = ready && c_req;
    x_gnt   = ready && x_req && !c_req;
    b_req   = c_gnt || x_gnt;
    b_we    = c_gnt ? c_we    : x_we;
    b_addr  = c_gnt ? c_addr  : x_addr;
    b_wdata = c_gnt ? c_wdata : x_wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     owner_x <= 1'b0;
    else if (b_req) owner_x <= x_gnt;
  end

  stt_mram_bank #(.WIDTH(8), .DEPTH(WORDS), .RD_LAT(RD_LAT), .WR_LAT(WR_LAT)) u_msb (
    .clk, .rst_n, .req(b_req), .we(b_we), .addr(b_addr), .wdata(b_wdata[15:8]),
    .ready(rdy_msb), .rvalid(rv_msb), .rdata(rd_msb));
  stt_mram_bank #(.WIDTH(8), .DEPTH(WORDS), .RD_LAT(RD_LAT), .WR_LAT(WR_LAT)) u_lsb (
    .clk, .rst_n, .req(b_req), .we(b_we), .addr(b_addr), .wdata(b_wdata[7:0]),
    .ready(rdy_lsb), .rvalid(rv_lsb), .rdata(rd_lsb));

  assign c_rvalid = rv_msb && !owner_x;
  assign x_rvalid = rv_msb &&  owner_x;
  assign c_rdata  = {rd_msb, rd_lsb};
  assign x_rdata  = {rd_msb, rd_lsb};

  banks_in_step: assert property (@(posedge clk) disable iff (!rst_n) rv_msb == rv_lsb)
    else $error("glb: MSB and LSB banks out of step");

endmodule
