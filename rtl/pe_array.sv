// Two-dimensional array of reconfigurable cores (H_A rows x W_A columns).
//
// Every PE holds P_S stationary weights and P_S activations in registers;
// every row also holds one row activation for systolic mode. A step is
// started with `start`; the top row fires at once and each lower row fires
// when the partial sums from the row above arrive, so a step takes H_A
// times the core latency (H_A*11 cycles systolic, H_A*17 conv).
//
//   Conv mode (row stationary): PE(r,c) computes the dot product of its
//   kernel-row segment and ifmap-row segment and adds PE_OUT of PE(r-1,c).
//   Column c therefore sums all kernel rows (and all input channels of the
//   same output channel) stacked in it; result[c], c < W_A, is one ofmap
//   element. psum_top[c] enters as PE_IN of row 0 (zero, or the partial
//   ofmap of earlier input channels).
//   Systolic mode: the array is an H_A x W_SA MAC grid. MAC (r, j) with
//   j = c*P_S + k multiplies the row activation of row r with its weight
//   and adds the partial sum of MAC (r-1, j); result[j] is the column sum,
//   psum_top[j] the starting value (accumulation across steps).
//
// Load port (one element per cycle, not during a step):
//   LD_WGT     index (r*W_A + c)*P_S + k : weight of MAC k of PE(r,c)
//   LD_ACT     same index                 : conv activation
//   LD_ROW_ACT index r                    : systolic activation of row r
//   LD_SHIFT   index r*W_A + c            : stride shift of PE(r,c)'s
//              activations by one, ld_data enters as the last element
// `done` pulses one cycle after the bottom row finishes, with `result`
// registered. The mode must not change during a step.
//
// From the paper: the core, its two modes, the row-stationary conv mapping,
// downward partial-sum flow and the 42 x 42 MAC size. This design's own
// choices: register-based loading, the row-by-row wavefront in place of a
// skewed activation stream, and broadcast of the row activation.
module pe_array #(
  parameter int unsigned H_A     = 42,
  parameter int unsigned W_A     = 14,
  parameter int unsigned MUL_LAT = 5,
  parameter int unsigned ADD_LAT = 6,
  localparam int unsigned P_S    = 3,
  localparam int unsigned W_SA   = P_S * W_A
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          ld_valid,
  input  stt_ai_pkg::ld_kind_e          ld_kind,
  input  logic [15:0]                   ld_index,
  input  stt_ai_pkg::bf16_t             ld_data,
  input  logic                          start,
  input  stt_ai_pkg::mode_e             mode,
  input  stt_ai_pkg::fp32_t [W_SA-1:0]  psum_top,
  output logic                          busy,
  output logic                          done,
  output stt_ai_pkg::fp32_t [W_SA-1:0]  result
);
  import stt_ai_pkg::*;

  mode_e           mode_q;
  logic            running;

  logic            pe_vld_in  [H_A][W_A];
  logic            pe_vld_out [H_A][W_A];
  fp32_t [P_S-1:0] pe_psum    [H_A][W_A];
  fp32_t           pe_pin     [H_A][W_A];
  fp32_t [P_S-1:0] pe_mac     [H_A][W_A];
  fp32_t           pe_pout    [H_A][W_A];
  bf16_t [P_S-1:0] pe_i       [H_A][W_A];
  mode_e           pe_mode    [H_A];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode_q  <= MODE_SYS;
      running <= 1'b0;
      done    <= 1'b0;
      result  <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        mode_q  <= mode;
        running <= 1'b1;
      end else if (running && pe_vld_out[H_A-1][0]) begin
        running <= 1'b0;
        done    <= 1'b1;
        if (mode_q == MODE_CONV) begin
          // conv results are packed into the first W_A entries
          for (int j = 0; j < W_SA; j++) result[j] <= (j < W_A) ? pe_pout[H_A-1][j % W_A] : '0;
        end else begin
          for (int c = 0; c < W_A; c++) result[c*P_S +: P_S] <= pe_mac[H_A-1][c];
        end
      end
    end
  end

  assign busy = running;

  for (genvar r = 0; r < H_A; r++) begin : g_row
    bf16_t row_act;   // systolic activation of this row

    // Load port, row activation: index r.
    always_ff @(posedge clk) begin
      if (ld_valid && ld_kind == LD_ROW_ACT && ld_index == 16'(r)) row_act <= ld_data;
    end

    assign pe_mode[r] = (r == 0) ? mode : mode_q;
    for (genvar c = 0; c < W_A; c++) begin : g_col
      bf16_t [P_S-1:0] wgt;   // stationary weights of PE(r,c)
      bf16_t [P_S-1:0] act;   // conv activations of PE(r,c)

      // Load port, decoded per PE against constant indices: weights and
      // activations at (r*W_A + c)*P_S + k, stride shift at r*W_A + c.
      always_ff @(posedge clk) begin
        if (ld_valid) begin
          for (int k = 0; k < P_S; k++) begin
            if (ld_kind == LD_WGT && ld_index == 16'((r*W_A + c)*P_S + k)) wgt[k] <= ld_data;
            if (ld_kind == LD_ACT && ld_index == 16'((r*W_A + c)*P_S + k)) act[k] <= ld_data;
          end
          if (ld_kind == LD_SHIFT && ld_index == 16'(r*W_A + c)) act <= {ld_data, act[P_S-1:1]};
        end
      end

      if (r == 0) begin : g_top
        assign pe_vld_in[r][c] = start;
        assign pe_psum[r][c]   = psum_top[c*P_S +: P_S];
        assign pe_pin[r][c]    = psum_top[c];
      end else begin : g_inner
        assign pe_vld_in[r][c] = pe_vld_out[r-1][c];
        assign pe_psum[r][c]   = pe_mac[r-1][c];
        assign pe_pin[r][c]    = pe_pout[r-1][c];
      end
      assign pe_i[r][c] = (pe_mode[r] == MODE_CONV) ? act : {P_S{row_act}};

      reconfig_pe #(.MUL_LAT(MUL_LAT), .ADD_LAT(ADD_LAT)) u_pe (
        .clk, .rst_n,
        .in_valid (pe_vld_in[r][c]),
        .mode     (pe_mode[r]),
        .i_act    (pe_i[r][c]),
        .f_wgt    (wgt),
        .p_sum    (pe_psum[r][c]),
        .pe_in    (pe_pin[r][c]),
        .out_valid(pe_vld_out[r][c]),
        .mac_out  (pe_mac[r][c]),
        .pe_out   (pe_pout[r][c]),
        .busy     ());
    end
  end

  no_load_while_running: assert property (@(posedge clk) disable iff (!rst_n) running |-> !ld_valid)
    else $error("pe_array: load during a step");
  no_start_while_running: assert property (@(posedge clk) disable iff (!rst_n) running |-> !start)
    else $error("pe_array: start during a step");

endmodule
