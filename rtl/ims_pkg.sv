// ims_pkg: types and constants shared by the AXI monitoring engine.
//
// The network shape follows the published model: 22 header features
// after correlation filtering, 8 principal components (the 97 % variance
// point), two hidden layers of 32 ReLU neurons and one sigmoid output.
// Weights and biases use 8-bit fixed point with 5 integer bits in the
// QKeras convention (sign bit not counted), i.e. 2 fractional bits.
// Activation width (16 bits, 10 fractional), the PCA coefficient format
// and the register map are this design's own choices.
package ims_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned N_FEAT    = 22;  // features after correlation analysis
  localparam int unsigned N_PC      = 8;   // principal components (97 % variance)
  localparam int unsigned N_HIDDEN  = 32;  // neurons per hidden layer
  localparam int unsigned FEAT_W    = 8;   // one decoded header field

  // ------------------------------------------------------ number formats
  localparam int unsigned W_BITS    = 8;   // weight / bias width
  localparam int unsigned W_INT     = 5;   // integer bits, sign excluded
  localparam int unsigned W_FRAC    = W_BITS - 1 - W_INT;  // = 2
  localparam int unsigned ACT_BITS  = 16;  // activation width
  localparam int unsigned ACT_FRAC  = 10;  // activation fractional bits
  localparam int unsigned COEF_BITS = 16;  // PCA coefficient width
  localparam int unsigned COEF_FRAC = 12;  // PCA coefficient fractional bits
  localparam int unsigned MEAN_BITS = 16;  // PCA mean, signed
  localparam int unsigned MEAN_FRAC = 4;   // PCA mean fractional bits
  localparam int unsigned PROB_BITS = 8;   // sigmoid output, unsigned 0.8

  typedef logic        [FEAT_W-1:0]   feat_t;
  typedef logic signed [ACT_BITS-1:0] act_t;
  typedef logic signed [W_BITS-1:0]   wgt_t;
  typedef logic        [PROB_BITS-1:0] prob_t;

  typedef feat_t [N_FEAT-1:0] feat_vec_t;  // element i is feature i
  typedef act_t  [N_PC-1:0]   pc_vec_t;    // element k is component k

  // Order of the 22 features in a sample vector.
  // Header fields of the two address channels, then the VALID/READY pair
  // of all five AXI channels.
  typedef enum logic [4:0] {
    F_AWID, F_AWLEN, F_AWSIZE, F_AWBURST, F_AWPROT, F_AWQOS,
    F_ARID, F_ARLEN, F_ARSIZE, F_ARBURST, F_ARPROT, F_ARQOS,
    F_AWVALID, F_AWREADY, F_WVALID, F_WREADY, F_BVALID, F_BREADY,
    F_ARVALID, F_ARREADY, F_RVALID, F_RREADY
  } feat_idx_e;

  // ------------------------------------------------ configuration bus
  // The register file turns AXI4-Lite writes into these parameter writes.
  // Address bits [15:12] pick the target, bits [11:2] the entry index.
  typedef enum logic [3:0] {
    CFG_NONE     = 4'h0,  // control/status registers, not a parameter store
    CFG_PCA_COEF = 4'h1,  // index {component[2:0], feature[4:0]}
    CFG_PCA_MEAN = 4'h2,  // index feature
    CFG_L1_W     = 4'h3,  // index {neuron[4:0], input[2:0]}
    CFG_L1_B     = 4'h4,  // index neuron
    CFG_L2_W     = 4'h5,  // index {neuron[4:0], input[4:0]}
    CFG_L2_B     = 4'h6,
    CFG_L3_W     = 4'h7,  // index input
    CFG_L3_B     = 4'h8
  } cfg_target_e;

  typedef struct packed {
    logic        we;
    cfg_target_e target;
    logic [9:0]  idx;
    logic [15:0] data;
  } cfg_wr_t;

  // ---------------------------------------------------- register offsets
  localparam logic [15:0] REG_CTRL      = 16'h0000;  // [0] enable [1] irq_en [2] clear (W1)
  localparam logic [15:0] REG_STATUS    = 16'h0004;  // [0] alarm sticky (W1C) [1] last verdict
  localparam logic [15:0] REG_THRESHOLD = 16'h0008;  // [7:0] alarm threshold on the score
  localparam logic [15:0] REG_SAMPLES   = 16'h000C;  // samples classified
  localparam logic [15:0] REG_DROPS     = 16'h0010;  // samples lost while the engine was busy
  localparam logic [15:0] REG_ALARMS    = 16'h0014;  // samples classified malicious
  localparam logic [15:0] REG_SCORE     = 16'h0018;  // [7:0] last score, [31:16] last logit
  localparam logic [15:0] REG_ID        = 16'h001C;  // constant identification word
  localparam logic [15:0] REG_CAPTURED  = 16'h0020;  // samples taken by the monitor

  localparam logic [31:0] IMS_ID_WORD   = 32'h494D_5301;  // "IMS" v1

  // Saturates a wide signed value to the activation width.
  function automatic act_t sat_act(input logic signed [47:0] v);
    localparam logic signed [47:0] MAXV = 48'sd32767;
    localparam logic signed [47:0] MINV = -48'sd32768;
    if (v > MAXV)      return act_t'(16'sh7FFF);
    else if (v < MINV) return act_t'(16'sh8000);
    else               return act_t'(v[ACT_BITS-1:0]);
  endfunction

endpackage
