// axi_header_monitor: passive AXI4 header tap that produces feature samples.
//
// The monitor only observes the bus: every input is a copy of an AXI4
// signal and nothing is driven back, so the monitored traffic is never
// slowed. A sample is taken in each cycle in which an address handshake
// completes on the write-address (AW) or read-address (AR) channel. The
// sample is a snapshot of the 22 decoded header features listed in
// ims_pkg::feat_idx_e: the AW and AR header fields (ID, LEN, SIZE, BURST,
// PROT, QOS), each an unsigned integer saturated to FEAT_W bits, and the
// VALID/READY bits of all five channels (AW, W, B, AR, R). The one-bit
// features leave the upper bits of their entries constant at zero.
// AxLOCK and AxCACHE are not observed.
//
// Samples leave on a valid/ready stream (s_valid/s_ready/s_feat) held in
// a one-entry output register. When a handshake occurs while that register
// still holds an unaccepted sample, the new sample is dropped and drop_o
// pulses for one cycle. sample_o pulses for every accepted sample. When
// enable_i is low no samples are taken.
//
// Timing: the sample appears on s_feat one cycle after the handshake.
//
// Following the published work: sampling header fields of AXI transactions,
// the 22-feature width, the monitored fields (AWLEN, AWQOS, AWSIZE, ARID,
// ARPROT are the ones its attacks target), coverage of all five channels.
// This design's own choices: which
// 22 signals form the vector, sampling on address handshakes only, the
// one-entry buffer and the drop policy.
module axi_header_monitor
  import ims_pkg::*;
#(
  parameter int unsigned ID_W = 8
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          enable_i,
  // AXI4 write-address channel (observed)
  input  logic [ID_W-1:0] awid,
  input  logic [7:0]    awlen,
  input  logic [2:0]    awsize,
  input  logic [1:0]    awburst,
  input  logic [2:0]    awprot,
  input  logic [3:0]    awqos,
  input  logic          awvalid,
  input  logic          awready,
  // AXI4 write-data and write-response channel handshakes (observed)
  input  logic          wvalid,
  input  logic          wready,
  input  logic          bvalid,
  input  logic          bready,
  // AXI4 read-address channel (observed)
  input  logic [ID_W-1:0] arid,
  input  logic [7:0]    arlen,
  input  logic [2:0]    arsize,
  input  logic [1:0]    arburst,
  input  logic [2:0]    arprot,
  input  logic [3:0]    arqos,
  input  logic          arvalid,
  input  logic          arready,
  // AXI4 read-data channel handshake (observed)
  input  logic          rvalid,
  input  logic          rready,
  // feature stream
  output logic          s_valid,
  input  logic          s_ready,
  output feat_vec_t     s_feat,
  // event pulses
  output logic          sample_o,
  output logic          drop_o
);

  function automatic feat_t fx(input logic [31:0] v);
    return (v > 32'(2**FEAT_W - 1)) ? feat_t'(2**FEAT_W - 1) : feat_t'(v);
  endfunction

  logic      trigger;
  feat_vec_t snap;

  assign trigger = enable_i && ((awvalid && awready) || (arvalid && arready));

  always_comb begin
    snap[F_AWID]    = fx(32'(awid));
    snap[F_AWLEN]   = fx(32'(awlen));
    snap[F_AWSIZE]  = fx(32'(awsize));
    snap[F_AWBURST] = fx(32'(awburst));
    snap[F_AWPROT]  = fx(32'(awprot));
    snap[F_AWQOS]   = fx(32'(awqos));
    snap[F_ARID]    = fx(32'(arid));
    snap[F_ARLEN]   = fx(32'(arlen));
    snap[F_ARSIZE]  = fx(32'(arsize));
    snap[F_ARBURST] = fx(32'(arburst));
    snap[F_ARPROT]  = fx(32'(arprot));
    snap[F_ARQOS]   = fx(32'(arqos));
    snap[F_AWVALID] = feat_t'(awvalid);
    snap[F_AWREADY] = feat_t'(awready);
    snap[F_WVALID]  = feat_t'(wvalid);
    snap[F_WREADY]  = feat_t'(wready);
    snap[F_BVALID]  = feat_t'(bvalid);
    snap[F_BREADY]  = feat_t'(bready);
    snap[F_ARVALID] = feat_t'(arvalid);
    snap[F_ARREADY] = feat_t'(arready);
    snap[F_RVALID]  = feat_t'(rvalid);
    snap[F_RREADY]  = feat_t'(rready);
  end

  // The buffer can take a new sample when empty or when its sample leaves now.
  logic room;
  assign room = !s_valid || s_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_valid  <= 1'b0;
      sample_o <= 1'b0;
      drop_o   <= 1'b0;
      s_feat   <= '0;
    end else begin
      sample_o <= trigger && room;
      drop_o   <= trigger && !room;
      if (trigger && room) begin
        s_valid <= 1'b1;
        s_feat  <= snap;
      end else if (s_ready) begin
        s_valid <= 1'b0;
      end
    end
  end

  // A sample on the stream must stay put until it is taken.
  property p_stream_stable;
    @(posedge clk) disable iff (!rst_n)
      s_valid && !s_ready |=> s_valid && (s_feat == $past(s_feat));
  endproperty
  a_stream_stable: assert property (p_stream_stable);

endmodule
