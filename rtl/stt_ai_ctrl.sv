// Accelerator controller: executes host commands on the PE array and memories.
//
// Commands (stt_ai_pkg::cmd_t), one at a time through cmd_valid/cmd_ready:
//
//   OP_LOAD_W  copy `count` BF16 words starting at `src_addr` of the global
//              buffer (or of the weight store, from_wstore = 1, as for FC
//              weights) into the weight registers from element `dst_index`.
//   OP_LOAD_A  copy `count` words from the global buffer into the conv
//              activation registers (row_act = 0), the systolic row
//              activations (row_act = 1), or, with shift = 1, shift each of
//              `count` PEs starting at PE `dst_index` by one ifmap element
//              (the stride step of the row-stationary dataflow).
//   OP_RUN     run one array step in `mode`. The top-row partial sums are
//              zero or scratchpad line `sp_rd_line` (psum_from_sp). A partial
//              result (to_sp = 1) is written to scratchpad line `sp_wr_line`
//              and never reaches the MRAM; a final result goes through the
//              output stage (ReLU / 2x2 max pool, BF16) and its first
//              `out_count` words are written to the global buffer at
//              `dst_addr` (nothing is written for the first step of a pooled
//              pair).
//
// Memory reads are issued one word at a time (request, grant, rvalid). The
// controller counts the events that matter for the scratchpad-assisted
// buffer: scratchpad writes (partial ofmaps kept out of the MRAM), global
// buffer result writes, conv and systolic steps and mode switches. The
// paper describes the dataflow this follows but not a controller; the
// command set and its encoding are this design's own.
module stt_ai_ctrl #(
  parameter int unsigned VEC    = 42,
  parameter int unsigned SP_LW  = 9,
  parameter int unsigned GLB_AW = 23,
  parameter int unsigned WS_AW  = 28
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // host commands
  input  logic                        cmd_valid,
  output logic                        cmd_ready,
  input  stt_ai_pkg::cmd_t            cmd,
  output logic                        busy,
  // global buffer, core port
  output logic                        g_req,
  output logic                        g_we,
  output logic [GLB_AW-1:0]           g_addr,
  output stt_ai_pkg::bf16_t           g_wdata,
  input  logic                        g_gnt,
  input  logic                        g_rvalid,
  input  stt_ai_pkg::bf16_t           g_rdata,
  // weight store, read port
  output logic                        w_req,
  output logic [WS_AW-1:0]            w_addr,
  input  logic                        w_ready,
  input  logic                        w_rvalid,
  input  stt_ai_pkg::bf16_t           w_rdata,
  // PE array
  output logic                        ld_valid,
  output stt_ai_pkg::ld_kind_e        ld_kind,
  output logic [15:0]                 ld_index,
  output stt_ai_pkg::bf16_t           ld_data,
  output logic                        a_start,
  output stt_ai_pkg::mode_e           a_mode,
  output stt_ai_pkg::fp32_t [VEC-1:0] a_psum_top,
  input  logic                        a_done,
  input  stt_ai_pkg::fp32_t [VEC-1:0] a_result,
  // scratchpad
  output logic                        sp_wr_en,
  output logic [SP_LW-1:0]            sp_wr_line,
  output stt_ai_pkg::fp32_t [VEC-1:0] sp_wr_data,
  output logic                        sp_rd_en,
  output logic [SP_LW-1:0]            sp_rd_line,
  input  stt_ai_pkg::fp32_t [VEC-1:0] sp_rd_data,
  // output stage
  output logic                        rp_valid,
  output stt_ai_pkg::fp32_t [VEC-1:0] rp_vec,
  output logic                        rp_relu_en,
  output logic                        rp_pool_en,
  input  logic                        rp_out_valid,
  input  stt_ai_pkg::bf16_t [VEC-1:0] rp_out_vec,
  // event counters
  output logic [31:0]                 n_sp_writes,
  output logic [31:0]                 n_glb_writes,
  output logic [31:0]                 n_conv_steps,
  output logic [31:0]                 n_sys_steps,
  output logic [31:0]                 n_mode_switches
);
  import stt_ai_pkg::*;

  typedef enum logic [3:0] {
    S_IDLE, S_LD_REQ, S_LD_WAIT, S_SHIFT_REQ, S_SP_RD, S_SP_CAP, S_START, S_RUN,
    S_SP_WR, S_RP, S_RP_WAIT, S_WB
  } state_e;

  state_e            st;
  cmd_t              c;
  logic [15:0]       i;
  fp32_t [VEC-1:0]   res_q;
  fp32_t [VEC-1:0]   psum_q;
  bf16_t [VEC-1:0]   wb_q;
  mode_e             last_mode;
  logic              ran_once;

  assign cmd_ready = (st == S_IDLE);
  assign busy      = (st != S_IDLE) || ld_valid;   // last load still being written

  // memory request outputs
  always_comb begin
    g_req   = 1'b0;
    g_we    = 1'b0;
    g_addr  = '0;
    g_wdata = '0;
    w_req   = 1'b0;
    w_addr  = '0;
    if (st == S_LD_REQ || st == S_SHIFT_REQ) begin
      if (c.op == OP_LOAD_W && c.from_wstore) begin
        w_req  = 1'b1;
        w_addr = WS_AW'(c.src_addr) + WS_AW'(i);
      end else begin
        g_req  = 1'b1;
        g_addr = GLB_AW'(c.src_addr) + GLB_AW'(i);
      end
    end else if (st == S_WB) begin
      g_req   = 1'b1;
      g_we    = 1'b1;
      g_addr  = GLB_AW'(c.dst_addr) + GLB_AW'(i);
      g_wdata = wb_q[32'(i) % VEC];
    end
  end

  wire req_taken = (c.op == OP_LOAD_W && c.from_wstore) ? (w_req && w_ready) : g_gnt;
  wire rd_back   = (c.op == OP_LOAD_W && c.from_wstore) ? w_rvalid : g_rvalid;
  wire bf16_t rd_word = (c.op == OP_LOAD_W && c.from_wstore) ? w_rdata : g_rdata;

  assign a_psum_top = psum_q;
  assign a_mode     = c.mode;
  assign a_start    = (st == S_START);
  assign sp_rd_en   = (st == S_SP_RD);
  assign sp_rd_line = SP_LW'(c.sp_rd_line);
  assign sp_wr_en   = (st == S_SP_WR);
  assign sp_wr_line = SP_LW'(c.sp_wr_line);
  assign sp_wr_data = res_q;
  assign rp_valid   = (st == S_RP);
  assign rp_vec     = res_q;
  assign rp_relu_en = c.relu_en;
  assign rp_pool_en = c.pool_en;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st              <= S_IDLE;
      c               <= '0;
      i               <= '0;
      res_q           <= '0;
      psum_q          <= '0;
      wb_q            <= '0;
      last_mode       <= MODE_SYS;
      ran_once        <= 1'b0;
      ld_valid        <= 1'b0;
      ld_kind         <= LD_WGT;
      ld_index        <= '0;
      ld_data         <= '0;
      n_sp_writes     <= '0;
      n_glb_writes    <= '0;
      n_conv_steps    <= '0;
      n_sys_steps     <= '0;
      n_mode_switches <= '0;
    end else begin
      ld_valid <= 1'b0;
      unique case (st)
        S_IDLE: if (cmd_valid) begin
          c <= cmd;
          i <= '0;
          unique case (cmd.op)
            OP_LOAD_W, OP_LOAD_A: st <= (cmd.count == 0) ? S_IDLE
                                      : (cmd.op == OP_LOAD_A && cmd.shift) ? S_SHIFT_REQ : S_LD_REQ;
            default:              st <= cmd.psum_from_sp ? S_SP_RD : S_START;
          endcase
          if (cmd.op == OP_RUN && !cmd.psum_from_sp) psum_q <= '0;
        end
        S_LD_REQ, S_SHIFT_REQ: if (req_taken) st <= S_LD_WAIT;
        S_LD_WAIT: if (rd_back) begin
          ld_valid <= 1'b1;
          ld_data  <= rd_word;
          ld_index <= c.dst_index + i;
          ld_kind  <= (c.op == OP_LOAD_W) ? LD_WGT
                    : c.shift            ? LD_SHIFT
                    : c.row_act          ? LD_ROW_ACT : LD_ACT;
          i  <= i + 1'b1;
          st <= (i + 1'b1 == c.count) ? S_IDLE : (c.shift ? S_SHIFT_REQ : S_LD_REQ);
        end
        S_SP_RD:  st <= S_SP_CAP;
        S_SP_CAP: begin
          psum_q <= sp_rd_data;
          st     <= S_START;
        end
        S_START: begin
          st       <= S_RUN;
          ran_once <= 1'b1;
          last_mode <= c.mode;
          if (ran_once && c.mode != last_mode) n_mode_switches <= n_mode_switches + 1'b1;
          if (c.mode == MODE_CONV) n_conv_steps <= n_conv_steps + 1'b1;
          else                     n_sys_steps  <= n_sys_steps + 1'b1;
        end
        S_RUN: if (a_done) begin
          res_q <= a_result;
          st    <= c.to_sp ? S_SP_WR : S_RP;
        end
        S_SP_WR: begin
          n_sp_writes <= n_sp_writes + 1'b1;
          st          <= S_IDLE;
        end
        S_RP:      st <= S_RP_WAIT;
        S_RP_WAIT: begin
          if (rp_out_valid && c.out_count != 0) begin
            wb_q <= rp_out_vec;
            i    <= '0;
            st   <= S_WB;
          end else begin
            st <= S_IDLE;
          end
        end
        S_WB: if (g_gnt) begin
          n_glb_writes <= n_glb_writes + 1'b1;
          i  <= i + 1'b1;
          if (i + 1'b1 == 16'(c.out_count)) st <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  run_has_count: assert property (@(posedge clk) disable iff (!rst_n)
      (st == S_IDLE && cmd_valid && cmd.op == OP_RUN && !cmd.to_sp) |-> (cmd.out_count <= 6'(VEC)))
    else $error("stt_ai_ctrl: out_count larger than the result vector");

endmodule
