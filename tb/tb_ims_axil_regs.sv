// tb_ims_axil_regs: exercises the AXI4-Lite register file as a bus master
// would. Checks the reset values, control and threshold read-back, the
// forwarding of parameter writes onto the configuration bus (target, index,
// data, one cycle only), the event counters and last-score capture, the
// clear bit, the write-1-to-clear alarm flag, the interrupt gating, and that
// a write response is held while BREADY is low. A final phase sends random
// event pulses and compares all four counters with a model at regular
// points.
module tb_ims_axil_regs;
  import ims_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [15:0] awaddr, araddr;
  logic awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [3:0]  wstrb;
  logic [1:0]  bresp, rresp;
  logic ev_res, ev_alarm, ev_drop, ev_cap;
  prob_t score;
  act_t  logit;
  logic enable, irq;
  prob_t thr;
  cfg_wr_t cfg;

  ims_axil_regs dut (.clk, .rst_n,
    .s_awaddr(awaddr), .s_awvalid(awvalid), .s_awready(awready),
    .s_wdata(wdata), .s_wstrb(wstrb), .s_wvalid(wvalid), .s_wready(wready),
    .s_bresp(bresp), .s_bvalid(bvalid), .s_bready(bready),
    .s_araddr(araddr), .s_arvalid(arvalid), .s_arready(arready),
    .s_rdata(rdata), .s_rresp(rresp), .s_rvalid(rvalid), .s_rready(rready),
    .ev_result_i(ev_res), .ev_alarm_i(ev_alarm), .ev_drop_i(ev_drop), .ev_capture_i(ev_cap),
    .score_i(score), .logit_i(logit),
    .enable_o(enable), .threshold_o(thr), .cfg_o(cfg), .irq_o(irq));

  int checks = 0, failures = 0;
  int cfg_writes = 0;
  cfg_wr_t last_cfg;

  always @(posedge clk) if (cfg.we) begin cfg_writes++; last_cfg = cfg; end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic axil_write(input logic [15:0] a, input logic [31:0] d, input int bdelay = 0);
    awaddr = a; wdata = d; awvalid = 1; wvalid = 1; wstrb = 4'hF; bready = 0;
    forever begin
      bit taken;
      #0 taken = awready && wready;
      @(posedge clk);
      if (taken) break;
    end
    #1 awvalid = 0; wvalid = 0;
    repeat (bdelay) begin
      check(bvalid, "bvalid held");
      @(posedge clk); #1;
    end
    bready = 1;
    while (!bvalid) begin @(posedge clk); #1; end
    check(bresp == 2'b00, "bresp okay");
    @(posedge clk); #1;
    bready = 0;
  endtask

  task automatic axil_read(input logic [15:0] a, output logic [31:0] d);
    araddr = a; arvalid = 1; rready = 1;
    forever begin
      bit taken;
      #0 taken = arready;
      @(posedge clk);
      if (taken) break;
    end
    #1 arvalid = 0;
    while (!rvalid) begin @(posedge clk); #1; end
    d = rdata;
    @(posedge clk); #1;
    rready = 0;
  endtask

  task automatic pulse(input bit r, input bit al, input bit dr, input bit cp,
                       input int sc, input int lg);
    ev_res = r; ev_alarm = al; ev_drop = dr; ev_cap = cp; score = prob_t'(sc); logit = act_t'(lg);
    @(posedge clk); #1;
    ev_res = 0; ev_alarm = 0; ev_drop = 0; ev_cap = 0;
  endtask

  initial begin
    logic [31:0] d;
    awvalid = 0; wvalid = 0; arvalid = 0; bready = 0; rready = 0;
    awaddr = 0; araddr = 0; wdata = 0; wstrb = 0;
    ev_res = 0; ev_alarm = 0; ev_drop = 0; ev_cap = 0; score = 0; logit = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    axil_read(REG_ID, d);        check(d == IMS_ID_WORD, "id word");
    axil_read(REG_THRESHOLD, d); check(d == 32'd128, "threshold reset 128");
    axil_read(REG_CTRL, d);      check(d == 32'd0, "ctrl reset");
    check(!enable && !irq, "outputs at reset");

    axil_write(REG_THRESHOLD, 32'd77, 3);
    check(thr == 8'd77, "threshold out");
    axil_read(REG_THRESHOLD, d); check(d == 32'd77, "threshold read back");
    axil_write(REG_CTRL, 32'h1);
    check(enable, "enable set");
    axil_read(REG_CTRL, d);      check(d == 32'h1, "ctrl read back");

    // parameter writes are forwarded
    for (int t = 1; t <= 8; t++) begin
      int n_before, idx;
      n_before = cfg_writes;
      idx = int'($urandom_range(1023));
      axil_write(16'((t << 12) | (idx << 2)), 32'hABCD_0000 | 32'(t * 257));
      check(cfg_writes == n_before + 1, "one cfg write per bus write");
      check(last_cfg.target == cfg_target_e'(t) && int'(last_cfg.idx) == idx &&
            last_cfg.data == 16'(t * 257), "cfg target/index/data");
    end
    begin
      int n_before;
      n_before = cfg_writes;
      axil_write(REG_THRESHOLD, 32'd90);
      check(cfg_writes == n_before, "register write not forwarded");
    end

    // events
    pulse(1, 0, 0, 1, 10, -5);
    pulse(1, 1, 1, 1, 200, 3000);
    pulse(0, 0, 1, 1, 0, 0);
    pulse(1, 1, 0, 0, 180, 2000);
    axil_read(REG_SAMPLES, d);  check(d == 3, "samples counter");
    axil_read(REG_ALARMS, d);   check(d == 2, "alarms counter");
    axil_read(REG_DROPS, d);    check(d == 2, "drops counter");
    axil_read(REG_CAPTURED, d); check(d == 3, "captured counter");
    axil_read(REG_SCORE, d);    check(d == {16'd2000, 8'd0, 8'd180}, "last score and logit");
    axil_read(REG_STATUS, d);   check(d == 32'h3, "alarm flag and last verdict");
    check(!irq, "no irq while disabled");
    axil_write(REG_CTRL, 32'h3);
    check(irq, "irq when enabled");
    axil_write(REG_STATUS, 32'h1);
    check(!irq, "irq gone after W1C");
    axil_read(REG_STATUS, d);   check(d[0] == 1'b0, "flag cleared");
    pulse(1, 1, 0, 0, 250, 9000);
    check(irq, "irq on new alarm");
    pulse(1, 0, 0, 0, 5, -900);
    axil_read(REG_STATUS, d);   check(d == 32'h1, "sticky flag, last verdict clear");
    axil_write(REG_CTRL, 32'h7);
    axil_read(REG_SAMPLES, d);  check(d == 0, "clear samples");
    axil_read(REG_ALARMS, d);   check(d == 0, "clear alarms");
    axil_read(REG_DROPS, d);    check(d == 0, "clear drops");
    check(!irq, "clear removes the alarm flag");
    axil_read(REG_CTRL, d);     check(d == 32'h3, "clear bit reads 0");

    // random events against a model of the counters
    begin
      int m_smp, m_alm, m_drp, m_cap;
      m_smp = 0; m_alm = 0; m_drp = 0; m_cap = 0;
      for (int n = 1; n <= 400; n++) begin
        bit r, al, dr, cp;
        r = 1'($urandom); al = 1'($urandom); dr = 1'($urandom); cp = 1'($urandom);
        pulse(r, al, dr, cp, int'($urandom_range(255)), int'($urandom_range(65535)));
        m_smp += int'(r); m_alm += int'(r && al); m_drp += int'(dr); m_cap += int'(cp);
        if (n % 20 == 0) begin
          axil_read(REG_SAMPLES, d);  check(d == 32'(m_smp), "samples counter (random)");
          axil_read(REG_ALARMS, d);   check(d == 32'(m_alm), "alarms counter (random)");
          axil_read(REG_DROPS, d);    check(d == 32'(m_drp), "drops counter (random)");
          axil_read(REG_CAPTURED, d); check(d == 32'(m_cap), "captured counter (random)");
        end
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
