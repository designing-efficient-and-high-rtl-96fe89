// SRAM scratchpad for partial output feature maps.
//
// Partial ofmaps (the running sums over input channels, or over weight tiles
// of an FC layer) are kept here instead of in the MRAM global buffer, so
// the MRAM is written only with final results. A line holds one result
// vector of the PE array: VEC FP32 partial sums. The memory is split into
// two banks of BANK_BYTES each; each bank can be clock/power gated on its
// own through `bank_on`. Switching a bank off loses its contents: every
// line of the bank is marked invalid and reads of invalid lines return
// zeros with `rd_hit` low. Lines 0..BANK_LINES-1 are bank 0, the next
// BANK_LINES lines bank 1.
//
// Timing: writes take effect at the clock edge; a read returns `rd_data`
// and `rd_hit` one cycle after `rd_en`. Accesses to a gated bank are
// ignored (reads miss). The 52 KB size in two 26 KB gated banks is the
// paper's; the FP32 line format and the invalidation model are this
// design's choices.
module scratchpad #(
  parameter int unsigned VEC        = 42,
  parameter int unsigned BANK_BYTES = 26624,
  localparam int unsigned BANK_LINES = BANK_BYTES / (VEC * 4),
  localparam int unsigned LW         = $clog2(2 * BANK_LINES)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [1:0]                    bank_on,
  input  logic                          wr_en,
  input  logic [LW-1:0]                 wr_line,
  input  stt_ai_pkg::fp32_t [VEC-1:0]   wr_data,
  input  logic                          rd_en,
  input  logic [LW-1:0]                 rd_line,
  output stt_ai_pkg::fp32_t [VEC-1:0]   rd_data,
  output logic                          rd_hit
);
  import stt_ai_pkg::*;

  fp32_t [VEC-1:0] mem   [2*BANK_LINES];
  logic            valid [2*BANK_LINES];

  function automatic logic bank_of(logic [LW-1:0] line);
    return (line >= LW'(BANK_LINES));
  endfunction

  wire wr_ok = wr_en && (wr_line < LW'(2*BANK_LINES)) && bank_on[bank_of(wr_line)];
  wire rd_ok = rd_en && (rd_line < LW'(2*BANK_LINES)) && bank_on[bank_of(rd_line)];

  always_ff @(posedge clk) begin
    if (wr_ok) mem[wr_line] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 2*BANK_LINES; i++) valid[i] <= 1'b0;
      rd_data <= '0;
      rd_hit  <= 1'b0;
    end else begin
      for (int i = 0; i < 2*BANK_LINES; i++)
        if (!bank_on[i / BANK_LINES]) valid[i] <= 1'b0;
      if (wr_ok) valid[wr_line] <= 1'b1;
      if (rd_en) begin
        rd_hit  <= rd_ok && valid[rd_line];
        rd_data <= (rd_ok && valid[rd_line]) ? mem[rd_line] : '0;
      end
    end
  end

endmodule
