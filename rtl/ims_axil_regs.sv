// ims_axil_regs: AXI4-Lite register file of the monitoring IP core.
//
// Makes the monitor a memory-mapped peripheral. The address space (byte
// addresses, 32-bit registers, 16 address bits) is split by bits [15:12]:
//   0x0xxx  control and status registers (offsets in ims_pkg):
//     CTRL      [0] enable sampling  [1] interrupt enable  [2] clear (write 1:
//               zero the counters and the alarm flag; reads as 0)
//     STATUS    [0] alarm flag, sticky, write 1 to clear  [1] last verdict
//     THRESHOLD [7:0] score at or above which a sample is malicious (reset 128)
//     SAMPLES, DROPS, ALARMS, CAPTURED  32-bit event counters (read only,
//               wrap around): classified, lost, malicious, taken by the monitor
//     SCORE     [7:0] last score, [31:16] last logit (read only)
//     ID        constant identification word
//   0x1xxx..0x8xxx  write-only parameter stores (PCA coefficients and means,
//               weights and biases of the three layers), see cfg_target_e.
//               A write there is forwarded for one cycle on cfg_o with
//               idx = address[11:2] and data = WDATA[15:0]; reads return 0.
// irq_o is high while the alarm flag and the interrupt enable are both set.
//
// Bus timing: a write is taken when AWVALID and WVALID are both high and no
// response is pending (AWREADY and WREADY rise together for one cycle); BRESP
// follows one cycle later. A read is taken when no read data is pending; RDATA
// follows one cycle later. Responses are always OKAY. WSTRB is ignored.
//
// The published work connects the monitor to the SoC as a memory-mapped IP
// core; the register map, counters and interrupt are this design's own.
module ims_axil_regs
  import ims_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite slave
  input  logic [15:0] s_awaddr,
  input  logic        s_awvalid,
  output logic        s_awready,
  input  logic [31:0] s_wdata,
  input  logic [3:0]  s_wstrb,
  input  logic        s_wvalid,
  output logic        s_wready,
  output logic [1:0]  s_bresp,
  output logic        s_bvalid,
  input  logic        s_bready,
  input  logic [15:0] s_araddr,
  input  logic        s_arvalid,
  output logic        s_arready,
  output logic [31:0] s_rdata,
  output logic [1:0]  s_rresp,
  output logic        s_rvalid,
  input  logic        s_rready,
  // engine events
  input  logic        ev_result_i,   // a sample was classified
  input  logic        ev_alarm_i,    // ... and judged malicious
  input  logic        ev_drop_i,     // a sample was lost
  input  logic        ev_capture_i,  // the monitor took a sample
  input  prob_t       score_i,
  input  act_t        logit_i,
  // controls
  output logic        enable_o,
  output prob_t       threshold_o,
  output cfg_wr_t     cfg_o,
  output logic        irq_o
);

  logic        irq_en, alarm_flag, last_verdict;
  logic [31:0] cnt_samples, cnt_drops, cnt_alarms, cnt_captured;
  prob_t       last_score;
  act_t        last_logit;

  // ------------------------------------------------------------- writes
  logic wr_go;
  assign wr_go     = s_awvalid && s_wvalid && !s_bvalid;
  assign s_awready = wr_go;
  assign s_wready  = wr_go;
  assign s_bresp   = 2'b00;

  logic wr_ctrl, wr_clear, wr_w1c_alarm;
  assign wr_ctrl      = wr_go && s_awaddr == REG_CTRL;
  assign wr_clear     = wr_ctrl && s_wdata[2];
  assign wr_w1c_alarm = wr_go && s_awaddr == REG_STATUS && s_wdata[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_bvalid    <= 1'b0;
      enable_o    <= 1'b0;
      irq_en      <= 1'b0;
      threshold_o <= prob_t'(1 << (PROB_BITS - 1));
      cfg_o       <= '0;
    end else begin
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      cfg_o.we <= 1'b0;
      if (wr_go) begin
        s_bvalid <= 1'b1;
        if (s_awaddr[15:12] == 4'h0) begin
          if (s_awaddr == REG_CTRL) begin
            enable_o <= s_wdata[0];
            irq_en   <= s_wdata[1];
          end
          if (s_awaddr == REG_THRESHOLD) threshold_o <= s_wdata[PROB_BITS-1:0];
        end else begin
          cfg_o.we     <= 1'b1;
          cfg_o.target <= cfg_target_e'(s_awaddr[15:12]);
          cfg_o.idx    <= s_awaddr[11:2];
          cfg_o.data   <= s_wdata[15:0];
        end
      end
    end
  end

  // ------------------------------------------------ counters and status
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_samples  <= '0;
      cnt_drops    <= '0;
      cnt_alarms   <= '0;
      cnt_captured <= '0;
      alarm_flag   <= 1'b0;
      last_verdict <= 1'b0;
      last_score   <= '0;
      last_logit   <= '0;
    end else if (wr_clear) begin
      cnt_samples <= '0;
      cnt_drops   <= '0;
      cnt_alarms  <= '0;
      cnt_captured <= '0;
      alarm_flag  <= 1'b0;
    end else begin
      if (ev_result_i) begin
        cnt_samples  <= cnt_samples + 1;
        last_verdict <= ev_alarm_i;
        last_score   <= score_i;
        last_logit   <= logit_i;
      end
      if (ev_result_i && ev_alarm_i) cnt_alarms <= cnt_alarms + 1;
      if (ev_drop_i) cnt_drops <= cnt_drops + 1;
      if (ev_capture_i) cnt_captured <= cnt_captured + 1;
      if (ev_result_i && ev_alarm_i) alarm_flag <= 1'b1;
      else if (wr_w1c_alarm)         alarm_flag <= 1'b0;
    end
  end

  assign irq_o = irq_en && alarm_flag;

  // -------------------------------------------------------------- reads
  assign s_arready = !s_rvalid;
  assign s_rresp   = 2'b00;

  logic [31:0] rd_mux;
  always_comb begin
    unique case (s_araddr)
      REG_CTRL:      rd_mux = {30'd0, irq_en, enable_o};
      REG_STATUS:    rd_mux = {30'd0, last_verdict, alarm_flag};
      REG_THRESHOLD: rd_mux = 32'(threshold_o);
      REG_SAMPLES:   rd_mux = cnt_samples;
      REG_DROPS:     rd_mux = cnt_drops;
      REG_ALARMS:    rd_mux = cnt_alarms;
      REG_SCORE:     rd_mux = {last_logit, 8'd0, last_score};
      REG_ID:        rd_mux = IMS_ID_WORD;
      REG_CAPTURED:  rd_mux = cnt_captured;
      default:       rd_mux = 32'd0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_rvalid <= 1'b0;
      s_rdata  <= '0;
    end else begin
      if (s_rvalid && s_rready) s_rvalid <= 1'b0;
      if (s_arvalid && s_arready) begin
        s_rvalid <= 1'b1;
        s_rdata  <= rd_mux;
      end
    end
  end

  // AXI rule: a response, once valid, holds until it is taken.
  a_b_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_bvalid && !s_bready |=> s_bvalid);
  a_r_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata));

endmodule
