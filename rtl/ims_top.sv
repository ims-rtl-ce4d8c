// ims_top: intelligent hardware monitoring system (IMS) for an AXI4 bus.
//
// A passive monitor that judges every address transaction on an AXI4 bus
// as normal or malicious with a small quantized neural network, and raises
// an interrupt when it sees an attack such as an illegal burst length,
// QoS flooding or other malformed header fields.
//
// Pipeline (all stages valid/ready, each holding at most one sample):
//   axi_header_monitor  snapshot of 22 header features at each AW/AR
//                       handshake; drops a sample when the pipeline is full
//   pca_projection      22 features -> 8 principal components (24 cycles)
//   mlp_classifier      8 -> 32 ReLU -> 32 ReLU -> 1 sigmoid, threshold
//                       (layers pipelined, 10/34/33+1 cycles, 78 in all)
//   ims_axil_regs       AXI4-Lite registers: control, counters, last score,
//                       interrupt, and the write path for all parameters
//
// Interface: the mon_* inputs are wired in parallel to the monitored AXI4
// channels (AW and AR header fields, VALID/READY of all five channels) (the monitor drives nothing on that bus); s_axil_* is the
// AXI4-Lite slave port through which software loads the PCA and network
// parameters and reads results; irq_o goes to the interrupt controller.
// Timing: from an address handshake to the result counters 1 + 24 + 78 + 1
// = 104 cycles; one sample every 34 cycles is sustained, about 7.35 million
// samples per second at 250 MHz.
//
// Following the published work: a passive AXI monitor, feature reduction by
// PCA, the MLP shape and weight quantization, memory-mapped integration.
// This design's own choices: which signals form the features, the stream
// protocol between stages, the number formats, the register map and the
// interrupt.
module ims_top
  import ims_pkg::*;
#(
  parameter int unsigned ID_W = 8
) (
  input  logic            clk,
  input  logic            rst_n,
  // monitored AXI4 bus: write address channel
  input  logic [ID_W-1:0] mon_awid,
  input  logic [7:0]      mon_awlen,
  input  logic [2:0]      mon_awsize,
  input  logic [1:0]      mon_awburst,
  input  logic [2:0]      mon_awprot,
  input  logic [3:0]      mon_awqos,
  input  logic            mon_awvalid,
  input  logic            mon_awready,
  // monitored AXI4 bus: write data and write response handshakes
  input  logic            mon_wvalid,
  input  logic            mon_wready,
  input  logic            mon_bvalid,
  input  logic            mon_bready,
  // monitored AXI4 bus: read address channel
  input  logic [ID_W-1:0] mon_arid,
  input  logic [7:0]      mon_arlen,
  input  logic [2:0]      mon_arsize,
  input  logic [1:0]      mon_arburst,
  input  logic [2:0]      mon_arprot,
  input  logic [3:0]      mon_arqos,
  input  logic            mon_arvalid,
  input  logic            mon_arready,
  // monitored AXI4 bus: read data handshake
  input  logic            mon_rvalid,
  input  logic            mon_rready,
  // AXI4-Lite configuration and status port
  input  logic [15:0]     s_axil_awaddr,
  input  logic            s_axil_awvalid,
  output logic            s_axil_awready,
  input  logic [31:0]     s_axil_wdata,
  input  logic [3:0]      s_axil_wstrb,
  input  logic            s_axil_wvalid,
  output logic            s_axil_wready,
  output logic [1:0]      s_axil_bresp,
  output logic            s_axil_bvalid,
  input  logic            s_axil_bready,
  input  logic [15:0]     s_axil_araddr,
  input  logic            s_axil_arvalid,
  output logic            s_axil_arready,
  output logic [31:0]     s_axil_rdata,
  output logic [1:0]      s_axil_rresp,
  output logic            s_axil_rvalid,
  input  logic            s_axil_rready,
  // interrupt request
  output logic            irq_o
);

  cfg_wr_t   cfg;
  logic      enable;
  prob_t     threshold;

  logic      f_valid, f_ready;
  feat_vec_t f_feat;
  logic      p_valid, p_ready;
  pc_vec_t   p_pc;
  logic      sample_ev, drop_ev;

  logic      res_valid, res_alarm;
  prob_t     res_score;
  act_t      res_logit;

  axi_header_monitor #(.ID_W(ID_W)) u_mon (
    .clk, .rst_n, .enable_i(enable),
    .awid(mon_awid), .awlen(mon_awlen), .awsize(mon_awsize), .awburst(mon_awburst),
    .awprot(mon_awprot), .awqos(mon_awqos),
    .awvalid(mon_awvalid), .awready(mon_awready),
    .wvalid(mon_wvalid), .wready(mon_wready), .bvalid(mon_bvalid), .bready(mon_bready),
    .arid(mon_arid), .arlen(mon_arlen), .arsize(mon_arsize), .arburst(mon_arburst),
    .arprot(mon_arprot), .arqos(mon_arqos),
    .arvalid(mon_arvalid), .arready(mon_arready), .rvalid(mon_rvalid), .rready(mon_rready),
    .s_valid(f_valid), .s_ready(f_ready), .s_feat(f_feat),
    .sample_o(sample_ev), .drop_o(drop_ev)
  );

  pca_projection u_pca (
    .clk, .rst_n, .cfg_i(cfg),
    .in_valid(f_valid), .in_ready(f_ready), .in_feat(f_feat),
    .out_valid(p_valid), .out_ready(p_ready), .out_pc(p_pc)
  );

  mlp_classifier u_mlp (
    .clk, .rst_n, .cfg_i(cfg), .threshold_i(threshold),
    .in_valid(p_valid), .in_ready(p_ready), .in_pc(p_pc),
    .res_valid, .res_score, .res_logit, .res_alarm
  );

  ims_axil_regs u_regs (
    .clk, .rst_n,
    .s_awaddr(s_axil_awaddr), .s_awvalid(s_axil_awvalid), .s_awready(s_axil_awready),
    .s_wdata(s_axil_wdata), .s_wstrb(s_axil_wstrb), .s_wvalid(s_axil_wvalid),
    .s_wready(s_axil_wready), .s_bresp(s_axil_bresp), .s_bvalid(s_axil_bvalid),
    .s_bready(s_axil_bready),
    .s_araddr(s_axil_araddr), .s_arvalid(s_axil_arvalid), .s_arready(s_axil_arready),
    .s_rdata(s_axil_rdata), .s_rresp(s_axil_rresp), .s_rvalid(s_axil_rvalid),
    .s_rready(s_axil_rready),
    .ev_result_i(res_valid), .ev_alarm_i(res_alarm), .ev_drop_i(drop_ev), .ev_capture_i(sample_ev),
    .score_i(res_score), .logit_i(res_logit),
    .enable_o(enable), .threshold_o(threshold), .cfg_o(cfg), .irq_o(irq_o)
  );

endmodule
