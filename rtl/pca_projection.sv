// pca_projection: maps a header-feature sample onto its principal components.
//
// Computes, for k = 0..N_PC-1,
//     y_k = sum_j C[k][j] * (x_j - mu_j)
// where x_j is feature j (unsigned integer), mu_j the feature mean (signed,
// MEAN_FRAC fractional bits) and C[k][j] the projection coefficient (signed,
// COEF_FRAC fractional bits; a per-feature scaling such as 1/sigma can be
// folded into it). y_k leaves in the activation format (ACT_BITS wide,
// ACT_FRAC fractional bits, truncated toward minus infinity, saturated).
//
// Datapath: N_PC multiply-accumulate units work in parallel, one feature
// per cycle, so a sample takes N_FEAT accumulate cycles plus one cycle to
// round and register the result. Input and output are valid/ready streams;
// a new sample is accepted only when the engine is idle and its output
// register is free or being emptied. out_valid rises N_FEAT + 1 clock edges
// after the input handshake; a new sample is accepted every N_FEAT + 2
// cycles when the consumer takes results at once.
//
// Coefficients and means live in register arrays written through the
// configuration bus (cfg_i): target CFG_PCA_COEF with index
// {component, feature[4:0]}, target CFG_PCA_MEAN with index feature. The
// means reset to zero; the coefficient memory has no reset and must be
// loaded before use.
//
// The published work reduces 22 features to 4, 6 or 8 principal components;
// 8 (97 % variance) is the default here. Doing the projection in hardware,
// the number formats and the MAC schedule are this design's own choices.
module pca_projection
  import ims_pkg::*;
#(
  parameter int unsigned NF = N_FEAT,  // features in
  parameter int unsigned NK = N_PC     // components out
) (
  input  logic            clk,
  input  logic            rst_n,
  input  cfg_wr_t         cfg_i,
  input  logic            in_valid,
  output logic            in_ready,
  input  logic [NF-1:0][FEAT_W-1:0] in_feat,
  output logic            out_valid,
  input  logic            out_ready,
  output act_t [NK-1:0]   out_pc
);

  localparam int unsigned CNT_W = (NF > 1) ? $clog2(NF) : 1;
  localparam int unsigned SHIFT = COEF_FRAC + MEAN_FRAC - ACT_FRAC;
  localparam int unsigned ACC_W = 48;

  // one row per feature: the NK coefficients feature j is multiplied with
  logic [NK*COEF_BITS-1:0]     coef [NF];
  logic [NK*COEF_BITS-1:0]     crow;
  logic signed [MEAN_BITS-1:0] mean [NF];

  logic [NF-1:0][FEAT_W-1:0] feat_q;
  logic signed [ACC_W-1:0]   acc [NK];
  logic [CNT_W-1:0]          cnt;
  logic                      busy, fin;

  // parameter writes: coefficients in a plain memory (no reset), means in
  // registers
  logic [4:0] wr_j;
  logic [4:0] wr_k;
  assign wr_j = cfg_i.idx[4:0];
  assign wr_k = cfg_i.idx[9:5];

  always_ff @(posedge clk)
    if (cfg_i.we && cfg_i.target == CFG_PCA_COEF && 32'(wr_k) < NK && 32'(wr_j) < NF)
      coef[wr_j][wr_k*COEF_BITS +: COEF_BITS] <= cfg_i.data[COEF_BITS-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < NF; j++) mean[j] <= '0;
    end else if (cfg_i.we && cfg_i.target == CFG_PCA_MEAN) begin
      for (int j = 0; j < NF; j++)
        if (32'(cfg_i.idx) == j) mean[j] <= cfg_i.data[MEAN_BITS-1:0];
    end
  end

  assign in_ready = !busy && !fin && (!out_valid || out_ready);

  // centred feature for the current step, MEAN_FRAC fractional bits
  logic signed [MEAN_BITS+1:0] xc;
  assign xc = $signed({{(MEAN_BITS+2-FEAT_W-MEAN_FRAC){1'b0}}, feat_q[cnt], {MEAN_FRAC{1'b0}}})
              - (MEAN_BITS+2)'(mean[cnt]);

  logic signed [COEF_BITS+MEAN_BITS+1:0] prod [NK];
  assign crow = coef[cnt];
  always_comb
    for (int k = 0; k < NK; k++) prod[k] = $signed(crow[k*COEF_BITS +: COEF_BITS]) * xc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      fin       <= 1'b0;
      cnt       <= '0;
      feat_q    <= '0;
      out_valid <= 1'b0;
      out_pc    <= '0;
      for (int k = 0; k < NK; k++) acc[k] <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        feat_q <= in_feat;
        busy   <= 1'b1;
        cnt    <= '0;
        for (int k = 0; k < NK; k++) acc[k] <= '0;
      end else if (busy) begin
        for (int k = 0; k < NK; k++)
          acc[k] <= acc[k] + ACC_W'(prod[k]);
        if (32'(cnt) == NF - 1) begin
          busy <= 1'b0;
          fin  <= 1'b1;
        end else begin
          cnt <= cnt + 1'b1;
        end
      end else if (fin) begin
        fin       <= 1'b0;
        out_valid <= 1'b1;
        for (int k = 0; k < NK; k++)
          out_pc[k] <= sat_act(48'(acc[k] >>> SHIFT));
      end
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_pc));

endmodule
