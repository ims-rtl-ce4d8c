// mlp_classifier: the quantized multilayer perceptron that labels a sample.
//
// Network: N_PC principal components -> dense 32 + ReLU -> dense 32 + ReLU
// -> dense 1 -> sigmoid. The three layers are dense_layer instances chained
// by valid/ready streams, so up to three samples are in flight, one per
// layer. The output neuron feeds sigmoid_act; the score is compared with
// the threshold and the result is registered:
//   res_valid  one-cycle pulse per classified sample
//   res_score  sigmoid score, unsigned 0.8 fixed point
//   res_logit  pre-sigmoid value of the output neuron (activation format)
//   res_alarm  1 when res_score >= threshold_i (sample judged malicious)
// The result register never stalls, so the last layer is always ready.
//
// Timing with the default sizes: res_valid rises (N_PC+2) + (32+2) + (32+1)
// + 1 = 78 clock edges after the input handshake; a new sample is accepted
// every 34 cycles (the slowest layer). At 250 MHz that is about 7.35 million
// classifications per second.
//
// Following the published work: two hidden layers of 32 neurons with ReLU,
// a sigmoid output for the binary normal/malicious decision, and the <8,5>
// weight format. This design's own choices: the layer pipeline, the
// threshold register and the result format. Weights are loaded at run time
// through cfg_i, since the trained values are not part of the hardware.
module mlp_classifier
  import ims_pkg::*;
#(
  parameter int unsigned N_INPUT = N_PC,
  parameter int unsigned HIDDEN  = N_HIDDEN
) (
  input  logic              clk,
  input  logic              rst_n,
  input  cfg_wr_t           cfg_i,
  input  prob_t             threshold_i,
  input  logic              in_valid,
  output logic              in_ready,
  input  act_t [N_INPUT-1:0] in_pc,
  output logic              res_valid,
  output prob_t             res_score,
  output act_t              res_logit,
  output logic              res_alarm
);

  logic                  h1_valid, h1_ready, h2_valid, h2_ready, o_valid;
  act_t [HIDDEN-1:0]     h1, h2;
  act_t [0:0]            logit;
  prob_t                 score;

  dense_layer #(
    .N_IN(N_INPUT), .N_OUT(HIDDEN), .RELU(1'b1),
    .WT_TARGET(CFG_L1_W), .B_TARGET(CFG_L1_B)
  ) u_l1 (
    .clk, .rst_n, .cfg_i,
    .in_valid(in_valid), .in_ready(in_ready), .in_act(in_pc),
    .out_valid(h1_valid), .out_ready(h1_ready), .out_act(h1)
  );

  dense_layer #(
    .N_IN(HIDDEN), .N_OUT(HIDDEN), .RELU(1'b1),
    .WT_TARGET(CFG_L2_W), .B_TARGET(CFG_L2_B)
  ) u_l2 (
    .clk, .rst_n, .cfg_i,
    .in_valid(h1_valid), .in_ready(h1_ready), .in_act(h1),
    .out_valid(h2_valid), .out_ready(h2_ready), .out_act(h2)
  );

  dense_layer #(
    .N_IN(HIDDEN), .N_OUT(1), .RELU(1'b0),
    .WT_TARGET(CFG_L3_W), .B_TARGET(CFG_L3_B)
  ) u_l3 (
    .clk, .rst_n, .cfg_i,
    .in_valid(h2_valid), .in_ready(h2_ready), .in_act(h2),
    .out_valid(o_valid), .out_ready(1'b1), .out_act(logit)
  );

  sigmoid_act u_sig (.x(logit[0]), .y(score));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      res_valid <= 1'b0;
      res_score <= '0;
      res_logit <= '0;
      res_alarm <= 1'b0;
    end else begin
      res_valid <= o_valid;
      if (o_valid) begin
        res_score <= score;
        res_logit <= logit[0];
        res_alarm <= (score >= threshold_i);
      end
    end
  end

endmodule
