// Digital controller of the process/temperature-adjustable MRAM write driver.
//
// The write driver has a regular PMOS current source of width W and N_LEGS
// extra legs of width W/4 that can be switched on one by one. A die whose
// MTJs come out with a higher thermal stability factor (process offset of
// proc_sigma standard deviations, one sigma = SIGMA_PPM of the mean), or
// that runs cold, needs more write current, since the critical current
// grows linearly with the stability factor and the stability factor scales
// with T_nom / T. A slow driver corner delivers drv_loss_pm per mille less
// current than nominal. The controller switches on the fewest legs n with
//
//   (1 - loss) * (1 + n/4)  >=  (1 + proc_sigma * sigma) * T_NOM_K / temp_k
//
// evaluated in integers without division. If even all legs fall short, all
// are on and `saturated` is set.
//
// Timing: inputs are sampled every cycle (the monitor runs continuously);
// leg_en and saturated are registered. leg_en is a thermometer code, bit i
// = leg i conducting. The four W/4 legs, the 2.1 % sigma and the guard-band
// equations are the paper's; T_NOM_K = 300 K and the linear current model
// are this design's choices.
module wdrv_ctrl #(
  parameter int unsigned N_LEGS    = 4,
  parameter int unsigned SIGMA_PPM = 21000,
  parameter int unsigned T_NOM_K   = 300
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic signed [3:0] proc_sigma,
  input  logic [8:0]        temp_k,
  input  logic [9:0]        drv_loss_pm,
  output logic [N_LEGS-1:0] leg_en,
  output logic              saturated
);
  logic [63:0] need;                // (1e6 + sigma*SIGMA_PPM) * T_NOM_K
  logic [63:0] have [N_LEGS+1];     // supply with n legs, in the same scale times temp_k
  int unsigned n_sel;
  logic        sat;

  always_comb begin
    need = 64'(unsigned'(1_000_000 + int'(proc_sigma) * int'(SIGMA_PPM))) * 64'(T_NOM_K);
    for (int n = 0; n <= N_LEGS; n++)
      have[n] = ((drv_loss_pm > 10'd1000) ? 64'd0 : 64'd1000 - 64'(drv_loss_pm))
                * 64'(4 + n) * 64'd250 * 64'(temp_k);
    n_sel = N_LEGS;
    sat   = 1'b1;
    for (int n = N_LEGS; n >= 0; n--) begin
      if (have[n] >= need) begin
        n_sel = n;
        sat   = 1'b0;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      leg_en    <= '0;
      saturated <= 1'b0;
    end else begin
      for (int i = 0; i < N_LEGS; i++) leg_en[i] <= (i < n_sel);
      saturated <= sat;
    end
  end

endmodule
