// STT-MRAM based AI accelerator with a reconfigurable PE array.
//
// Blocks and data paths:
//   - pe_array: H_A x W_A reconfigurable cores (42 x 42 MACs), convolution
//     mode for conv layers, systolic mode for fully connected layers.
//   - glb: 12 MB global buffer of customized STT-MRAM, 16-bit words split
//     into an MSB-group bank and an LSB-group bank. Shared by the controller
//     and the external (off-chip DRAM / host) port.
//   - weight store: 280 MB customized STT-MRAM (stt_mram_bank, 16-bit words)
//     holding pre-trained weights; written from the external port, read by
//     the controller to load weights straight into the array.
//   - scratchpad: 52 KB SRAM in two gateable banks for partial ofmaps, so
//     that partial sums never go to the MRAM.
//   - relu_maxpool: output stage between the array and the global buffer.
//   - stt_ai_ctrl: command sequencer driven by the host.
//   - wdrv_ctrl: digital controller of the PT-compensated MRAM write
//     drivers; its leg enables leave the top for the analog drivers.
//
// The off-chip DRAM, host CPU, process/temperature monitor and the analog
// write-driver legs are outside this RTL and connect through ports.
// The external weight-store port gets access only while the controller is
// not using the weight store; ws_gnt pulses when a write is accepted.
module stt_ai_top #(
  parameter int unsigned H_A        = 42,
  parameter int unsigned W_A        = 14,
  parameter int unsigned MUL_LAT    = 5,
  parameter int unsigned ADD_LAT    = 6,
  parameter int unsigned GLB_WORDS  = 6291456,
  parameter int unsigned WS_WORDS   = 146800640,
  parameter int unsigned SP_BANK_B  = 26624,
  parameter int unsigned MRAM_RD    = 2,
  parameter int unsigned MRAM_WR    = 5,
  parameter int unsigned WS_WR      = 8,
  localparam int unsigned VEC       = 3 * W_A,
  localparam int unsigned GLB_AW    = $clog2(GLB_WORDS),
  localparam int unsigned WS_AW     = $clog2(WS_WORDS),
  localparam int unsigned SP_LW     = $clog2(2 * (SP_BANK_B / (VEC * 4)))
) (
  input  logic                clk,
  input  logic                rst_n,
  // host command port
  input  logic                cmd_valid,
  output logic                cmd_ready,
  input  stt_ai_pkg::cmd_t    cmd,
  output logic                busy,
  // external (DRAM / host) port to the global buffer
  input  logic                ext_req,
  input  logic                ext_we,
  input  logic [GLB_AW-1:0]   ext_addr,
  input  stt_ai_pkg::bf16_t   ext_wdata,
  output logic                ext_gnt,
  output logic                ext_rvalid,
  output stt_ai_pkg::bf16_t   ext_rdata,
  // external write port to the weight store
  input  logic                ws_req,
  input  logic [WS_AW-1:0]    ws_addr,
  input  stt_ai_pkg::bf16_t   ws_wdata,
  output logic                ws_gnt,
  // scratchpad bank clock/power gating
  input  logic [1:0]          sp_bank_on,
  // process / temperature monitor readings and write-driver leg enables
  input  logic signed [3:0]   pt_proc_sigma,
  input  logic [8:0]          pt_temp_k,
  input  logic [9:0]          pt_drv_loss_pm,
  output logic [3:0]          wdrv_leg_en,
  output logic                wdrv_saturated,
  // event counters
  output logic [31:0]         n_sp_writes,
  output logic [31:0]         n_glb_writes,
  output logic [31:0]         n_conv_steps,
  output logic [31:0]         n_sys_steps,
  output logic [31:0]         n_mode_switches
);
  import stt_ai_pkg::*;

  // global buffer core port
  logic              g_req, g_we, g_gnt, g_rvalid;
  logic [GLB_AW-1:0] g_addr;
  bf16_t             g_wdata, g_rdata;
  // weight store
  logic              w_req, w_ready, w_rvalid;
  logic [WS_AW-1:0]  w_addr;
  bf16_t             w_rdata;
  logic              wb_req, wb_we;
  logic [WS_AW-1:0]  wb_addr;
  // array
  logic              ld_valid, a_start, a_done, a_busy;
  ld_kind_e          ld_kind;
  logic [15:0]       ld_index;
  bf16_t             ld_data;
  mode_e             a_mode;
  fp32_t [VEC-1:0]   a_psum_top, a_result;
  // scratchpad
  logic              sp_wr_en, sp_rd_en, sp_rd_hit;
  logic [SP_LW-1:0]  sp_wr_line, sp_rd_line;
  fp32_t [VEC-1:0]   sp_wr_data, sp_rd_data;
  // output stage
  logic              rp_valid, rp_relu_en, rp_pool_en, rp_out_valid;
  fp32_t [VEC-1:0]   rp_vec;
  bf16_t [VEC-1:0]   rp_out_vec;

  stt_ai_ctrl #(.VEC(VEC), .SP_LW(SP_LW), .GLB_AW(GLB_AW), .WS_AW(WS_AW)) u_ctrl (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd, .busy,
    .g_req, .g_we, .g_addr, .g_wdata, .g_gnt, .g_rvalid, .g_rdata,
    .w_req, .w_addr, .w_ready, .w_rvalid, .w_rdata,
    .ld_valid, .ld_kind, .ld_index, .ld_data,
    .a_start, .a_mode, .a_psum_top, .a_done, .a_result,
    .sp_wr_en, .sp_wr_line, .sp_wr_data, .sp_rd_en, .sp_rd_line, .sp_rd_data,
    .rp_valid, .rp_vec, .rp_relu_en, .rp_pool_en, .rp_out_valid, .rp_out_vec,
    .n_sp_writes, .n_glb_writes, .n_conv_steps, .n_sys_steps, .n_mode_switches);

  pe_array #(.H_A(H_A), .W_A(W_A), .MUL_LAT(MUL_LAT), .ADD_LAT(ADD_LAT)) u_array (
    .clk, .rst_n, .ld_valid, .ld_kind, .ld_index, .ld_data,
    .start(a_start), .mode(a_mode), .psum_top(a_psum_top),
    .busy(a_busy), .done(a_done), .result(a_result));

  glb #(.WORDS(GLB_WORDS), .RD_LAT(MRAM_RD), .WR_LAT(MRAM_WR)) u_glb (
    .clk, .rst_n,
    .c_req(g_req), .c_we(g_we), .c_addr(g_addr), .c_wdata(g_wdata),
    .c_gnt(g_gnt), .c_rvalid(g_rvalid), .c_rdata(g_rdata),
    .x_req(ext_req), .x_we(ext_we), .x_addr(ext_addr), .x_wdata(ext_wdata),
    .x_gnt(ext_gnt), .x_rvalid(ext_rvalid), .x_rdata(ext_rdata));

  // Weight store: controller reads have priority over external writes.
  always_comb begin
    wb_req  = (w_req || ws_req) && w_ready;
    wb_we   = !w_req;
    wb_addr = w_req ? w_addr : ws_addr;
    ws_gnt  = ws_req && !w_req && w_ready;
  end

  stt_mram_bank #(.WIDTH(16), .DEPTH(WS_WORDS), .RD_LAT(MRAM_RD), .WR_LAT(WS_WR)) u_wstore (
    .clk, .rst_n, .req(wb_req), .we(wb_we), .addr(wb_addr), .wdata(ws_wdata),
    .ready(w_ready), .rvalid(w_rvalid), .rdata(w_rdata));

  scratchpad #(.VEC(VEC), .BANK_BYTES(SP_BANK_B)) u_sp (
    .clk, .rst_n, .bank_on(sp_bank_on),
    .wr_en(sp_wr_en), .wr_line(sp_wr_line), .wr_data(sp_wr_data),
    .rd_en(sp_rd_en), .rd_line(sp_rd_line), .rd_data(sp_rd_data), .rd_hit(sp_rd_hit));

  relu_maxpool #(.VEC(VEC)) u_rp (
    .clk, .rst_n, .clear(1'b0), .in_valid(rp_valid), .in_vec(rp_vec),
    .relu_en(rp_relu_en), .pool_en(rp_pool_en),
    .out_valid(rp_out_valid), .out_vec(rp_out_vec));

  wdrv_ctrl #(.N_LEGS(4)) u_wdrv (
    .clk, .rst_n, .proc_sigma(pt_proc_sigma), .temp_k(pt_temp_k),
    .drv_loss_pm(pt_drv_loss_pm), .leg_en(wdrv_leg_en), .saturated(wdrv_saturated));

  sp_hit_on_read: assert property (@(posedge clk) disable iff (!rst_n)
      $past(sp_rd_en) |-> sp_rd_hit)
    else $error("stt_ai_top: partial sums read from an empty or gated scratchpad line");

endmodule
