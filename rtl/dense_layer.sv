// dense_layer: one fully connected layer of the quantized MLP.
//
// Computes out[o] = act( b[o] + sum_i W[o][i] * in[i] ) for o = 0..N_OUT-1,
// where act is ReLU when RELU = 1 and the identity otherwise. Activations
// are signed ACT_BITS-bit fixed point with ACT_FRAC fractional bits;
// weights and biases are signed W_BITS-bit fixed point with W_FRAC
// fractional bits (the <8,5> quantization: 8 bits, 5 integer bits plus the
// sign, 2 fractional). Products are accumulated at full precision, the sum
// is shifted back to ACT_FRAC fractional bits (truncation toward minus
// infinity) and saturated to ACT_BITS.
//
// Datapath: N_OUT multiply-accumulate units run in parallel; one input
// activation is broadcast to all of them per cycle. A vector therefore
// takes N_IN accumulate cycles and one cycle to finish and register the
// result. Input and output are valid/ready streams; the layer accepts a
// vector only when idle and when its output register is free or being
// emptied, so consecutive layers form a pipeline. out_valid rises N_IN + 1
// clock edges after the input handshake; the next layer takes the vector on
// the following edge, so a layer accepts one vector every N_IN + 2 cycles.
//
// Weights (a memory) and biases (registers) are written through the configuration
// bus: target WT_TARGET with index {o, i} (i in the low $clog2(N_IN) bits),
// target B_TARGET with index o. Biases reset to zero; the weight memory has
// no reset and must be loaded before use. Zero weights (the
// pruned ones) are stored like any other value: the array does not exploit
// sparsity.
//
// Following the published work: layer sizes, ReLU, the <8,5> weight format.
// This design's own choices: activation format, the MAC schedule,
// run-time loadable parameters and the saturation rule.
module dense_layer
  import ims_pkg::*;
#(
  parameter int unsigned N_IN      = N_HIDDEN,
  parameter int unsigned N_OUT     = N_HIDDEN,
  parameter bit          RELU      = 1'b1,
  parameter cfg_target_e WT_TARGET = CFG_L2_W,
  parameter cfg_target_e B_TARGET  = CFG_L2_B
) (
  input  logic                clk,
  input  logic                rst_n,
  input  cfg_wr_t             cfg_i,
  input  logic                in_valid,
  output logic                in_ready,
  input  act_t [N_IN-1:0]     in_act,
  output logic                out_valid,
  input  logic                out_ready,
  output act_t [N_OUT-1:0]    out_act
);

  localparam int unsigned IW    = (N_IN > 1) ? $clog2(N_IN) : 1;
  localparam int unsigned ACC_W = 40;
  localparam int unsigned PW    = ACT_BITS + W_BITS;

  // one row per input: the N_OUT weights that input i is multiplied with
  logic [N_OUT*W_BITS-1:0] wmem [N_IN];
  logic [N_OUT*W_BITS-1:0] wrow;
  wgt_t bmem [N_OUT];

  act_t [N_IN-1:0]         in_q;
  logic signed [ACC_W-1:0] acc [N_OUT];
  logic [IW-1:0]           cnt;
  logic                    busy, fin;

  // -------------------------------------------------- parameter writes
  logic [IW-1:0] wr_i;
  logic [9:0]    wr_o;
  assign wr_i = cfg_i.idx[IW-1:0];
  assign wr_o = cfg_i.idx >> IW;

  // The weight rows form a plain memory (no reset), written one weight at a
  // time; the biases are registers.
  always_ff @(posedge clk)
    if (cfg_i.we && cfg_i.target == WT_TARGET && 32'(wr_o) < N_OUT && 32'(wr_i) < N_IN)
      wmem[wr_i][wr_o*W_BITS +: W_BITS] <= cfg_i.data[W_BITS-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < N_OUT; o++) bmem[o] <= '0;
    end else if (cfg_i.we && cfg_i.target == B_TARGET) begin
      for (int o = 0; o < N_OUT; o++)
        if (32'(cfg_i.idx) == o) bmem[o] <= cfg_i.data[W_BITS-1:0];
    end
  end

  // -------------------------------------------------------- datapath
  assign in_ready = !busy && !fin && (!out_valid || out_ready);

  logic signed [PW-1:0] prod [N_OUT];
  assign wrow = wmem[cnt];
  always_comb
    for (int o = 0; o < N_OUT; o++) prod[o] = in_q[cnt] * $signed(wrow[o*W_BITS +: W_BITS]);

  // bias aligned to the product's ACT_FRAC + W_FRAC fractional bits
  function automatic logic signed [ACC_W-1:0] bias_init(input wgt_t b);
    return ACC_W'(b) <<< ACT_FRAC;
  endfunction

  function automatic act_t finish(input logic signed [ACC_W-1:0] a);
    logic signed [ACC_W-1:0] s;
    act_t r;
    s = a >>> W_FRAC;
    r = sat_act(48'(s));
    if (RELU && r < 0) r = '0;
    return r;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      fin       <= 1'b0;
      cnt       <= '0;
      in_q      <= '0;
      out_valid <= 1'b0;
      out_act   <= '0;
      for (int o = 0; o < N_OUT; o++) acc[o] <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        in_q <= in_act;
        busy <= 1'b1;
        cnt  <= '0;
        for (int o = 0; o < N_OUT; o++) acc[o] <= bias_init(bmem[o]);
      end else if (busy) begin
        for (int o = 0; o < N_OUT; o++) acc[o] <= acc[o] + ACC_W'(prod[o]);
        if (32'(cnt) == N_IN - 1) begin
          busy <= 1'b0;
          fin  <= 1'b1;
        end else begin
          cnt <= cnt + 1'b1;
        end
      end else if (fin) begin
        fin       <= 1'b0;
        out_valid <= 1'b1;
        for (int o = 0; o < N_OUT; o++) out_act[o] <= finish(acc[o]);
      end
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_act));

endmodule
