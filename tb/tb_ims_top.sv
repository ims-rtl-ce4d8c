// tb_ims_top: end-to-end test of the monitoring core at its default sizes.
//
// A bus-master model loads a complete parameter set through the AXI4-Lite
// port. The trained weights of the published detector are not available, so
// the set is written by hand: principal components 0..2 pick out AWLEN,
// AWQOS and AWSIZE, three first-layer neurons fire on AWLEN > 15,
// AWQOS = 0xF and AWSIZE > 3 (a 64-bit bus), the second layer ORs them and
// the output neuron turns that into a high score. The remaining components
// mix all 22 features with small random coefficients and the remaining
// neurons carry small random weights, so the whole datapath is exercised.
//
// Traffic: normal AW and AR transactions and the three header attacks
// (illegal burst length, QoS flooding, invalid size), plus duplicate ARIDs,
// sent one at a time. For each one the expected logit is computed with the
// reference arithmetic from the header the TB drove, and the verdict and
// counters are checked. Then a burst of back-to-back handshakes overflows
// the pipeline (samples dropped), the threshold is moved, the interrupt is
// raised and cleared, and sampling is switched off. Each of these mechanisms
// is counted and must happen at least once.
module tb_ims_top;
  import ims_pkg::*;
  import ims_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;   // 250 MHz

  // monitored bus
  logic [7:0] awid, arid, awlen, arlen;
  logic [2:0] awsize, arsize, awprot, arprot;
  logic [1:0] awburst, arburst;
  logic [3:0] awqos, arqos;
  logic awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  // AXI4-Lite
  logic [15:0] awaddr_l, araddr_l;
  logic awvalid_l, awready_l, wvalid_l, wready_l, bvalid_l, bready_l;
  logic arvalid_l, arready_l, rvalid_l, rready_l;
  logic [31:0] wdata_l, rdata_l;
  logic [1:0] bresp_l, rresp_l;
  logic irq;

  ims_top dut (
    .clk, .rst_n,
    .mon_awid(awid), .mon_awlen(awlen), .mon_awsize(awsize), .mon_awburst(awburst),
    .mon_awprot(awprot), .mon_awqos(awqos),
    .mon_awvalid(awvalid), .mon_awready(awready), .mon_wvalid(wvalid), .mon_wready(wready),
    .mon_bvalid(bvalid), .mon_bready(bready),
    .mon_arid(arid), .mon_arlen(arlen), .mon_arsize(arsize), .mon_arburst(arburst),
    .mon_arprot(arprot), .mon_arqos(arqos),
    .mon_arvalid(arvalid), .mon_arready(arready), .mon_rvalid(rvalid), .mon_rready(rready),
    .s_axil_awaddr(awaddr_l), .s_axil_awvalid(awvalid_l), .s_axil_awready(awready_l),
    .s_axil_wdata(wdata_l), .s_axil_wstrb(4'hF), .s_axil_wvalid(wvalid_l),
    .s_axil_wready(wready_l), .s_axil_bresp(bresp_l), .s_axil_bvalid(bvalid_l),
    .s_axil_bready(bready_l),
    .s_axil_araddr(araddr_l), .s_axil_arvalid(arvalid_l), .s_axil_arready(arready_l),
    .s_axil_rdata(rdata_l), .s_axil_rresp(rresp_l), .s_axil_rvalid(rvalid_l),
    .s_axil_rready(rready_l), .irq_o(irq));

  int checks = 0, failures = 0;

  // parameter set (TB copy)
  int c[NK][NF], mu[NF], w1[NH][NK], b1[NH], w2[NH][NH], b2[NH], w3[NH], b3;

  // mechanism counters
  int m_capture = 0, m_drop = 0, m_alarm = 0, m_clean = 0, m_irq = 0, m_irq_clear = 0;
  int m_thr = 0, m_disabled = 0, m_awlen = 0, m_awqos = 0, m_awsize = 0, m_ardup = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ----------------------------------------------------------- AXI4-Lite
  task automatic axil_write(input logic [15:0] a, input int d);
    awaddr_l = a; wdata_l = 32'(d); awvalid_l = 1; wvalid_l = 1; bready_l = 1;
    forever begin
      bit taken;
      #0 taken = awready_l && wready_l;
      @(posedge clk);
      if (taken) break;
    end
    #1 awvalid_l = 0; wvalid_l = 0;
    while (!bvalid_l) begin @(posedge clk); #1; end
    @(posedge clk); #1;
  endtask

  task automatic axil_read(input logic [15:0] a, output logic [31:0] d);
    araddr_l = a; arvalid_l = 1; rready_l = 1;
    forever begin
      bit taken;
      #0 taken = arready_l;
      @(posedge clk);
      if (taken) break;
    end
    #1 arvalid_l = 0;
    while (!rvalid_l) begin @(posedge clk); #1; end
    d = rdata_l;
    @(posedge clk); #1;
  endtask

  function automatic int small_w();
    if ($urandom_range(99) < 80) return 0;
    return int'($urandom_range(4)) - 2;
  endfunction

  task automatic load_model();
    for (int k = 0; k < NK; k++)
      for (int j = 0; j < NF; j++) begin
        if (k < 3) c[k][j] = 0;
        else c[k][j] = int'($urandom_range(400)) - 200;
      end
    c[0][F_AWLEN] = 4096; c[1][F_AWQOS] = 4096; c[2][F_AWSIZE] = 4096;
    for (int j = 0; j < NF; j++) mu[j] = (j == F_AWLEN || j == F_AWQOS || j == F_AWSIZE) ? 0
                                         : int'($urandom_range(64));
    for (int o = 0; o < NH; o++) begin
      for (int i = 0; i < NK; i++) w1[o][i] = (o < 3) ? 0 : small_w();
      b1[o] = (o < 3) ? 0 : small_w();
      for (int i = 0; i < NH; i++) w2[o][i] = (o == 0) ? 0 : small_w();
      b2[o] = (o == 0) ? 0 : small_w();
      w3[o] = 0;
    end
    w1[0][0] = 4; b1[0] = -62;   // AWLEN - 15.5
    w1[1][1] = 4; b1[1] = -58;   // AWQOS - 14.5
    w1[2][2] = 4; b1[2] = -14;   // AWSIZE - 3.5
    w2[0][0] = 4; w2[0][1] = 4; w2[0][2] = 4;
    w3[0] = 127; b3 = -4;        // 31.75 * h - 1
    for (int k = 0; k < NK; k++)
      for (int j = 0; j < NF; j++) axil_write(16'h1000 | 16'(((k << 5) | j) << 2), c[k][j]);
    for (int j = 0; j < NF; j++) axil_write(16'h2000 | 16'(j << 2), mu[j]);
    for (int o = 0; o < NH; o++) begin
      for (int i = 0; i < NK; i++) axil_write(16'h3000 | 16'(((o << 3) | i) << 2), w1[o][i]);
      axil_write(16'h4000 | 16'(o << 2), b1[o]);
      for (int i = 0; i < NH; i++) axil_write(16'h5000 | 16'(((o << 5) | i) << 2), w2[o][i]);
      axil_write(16'h6000 | 16'(o << 2), b2[o]);
      axil_write(16'h7000 | 16'(o << 2), w3[o]);
    end
    axil_write(16'h8000, b3);
  endtask

  // ------------------------------------------------------- reference chain
  function automatic int ref_logit(input int x[NF]);
    int p[], h1[], h2[], w[];
    p = new[NK]; h1 = new[NH]; h2 = new[NH];
    for (int k = 0; k < NK; k++) p[k] = pca_ref(x, c, mu, k);
    for (int o = 0; o < NH; o++) begin
      w = new[NK];
      for (int i = 0; i < NK; i++) w[i] = w1[o][i];
      h1[o] = dense_ref(p, w, b1[o], 1'b1);
    end
    for (int o = 0; o < NH; o++) begin
      w = new[NH];
      for (int i = 0; i < NH; i++) w[i] = w2[o][i];
      h2[o] = dense_ref(h1, w, b2[o], 1'b1);
    end
    w = new[NH];
    for (int i = 0; i < NH; i++) w[i] = w3[i];
    return dense_ref(h2, w, b3, 1'b0);
  endfunction

  // ------------------------------------------------------------ bus driver
  task automatic bus_idle();
    awid = 0; awlen = 0; awsize = 0; awburst = 0; awprot = 0; awqos = 0;
    arid = 0; arlen = 0; arsize = 0; arburst = 0; arprot = 0; arqos = 0;
    awvalid = 0; awready = 0; arvalid = 0; arready = 0; wvalid = 0; wready = 0;
    bvalid = 0; bready = 0; rvalid = 0; rready = 0;
  endtask

  // the 22 features the monitor should see for the current bus values
  function automatic void bus_features(output int x[NF]);
    x[F_AWID] = awid; x[F_AWLEN] = awlen; x[F_AWSIZE] = awsize; x[F_AWBURST] = awburst;
    x[F_AWPROT] = awprot; x[F_AWQOS] = awqos;
    x[F_ARID] = arid; x[F_ARLEN] = arlen; x[F_ARSIZE] = arsize; x[F_ARBURST] = arburst;
    x[F_ARPROT] = arprot; x[F_ARQOS] = arqos;
    x[F_AWVALID] = awvalid; x[F_AWREADY] = awready; x[F_WVALID] = wvalid; x[F_WREADY] = wready;
    x[F_BVALID] = bvalid; x[F_BREADY] = bready;
    x[F_ARVALID] = arvalid; x[F_ARREADY] = arready; x[F_RVALID] = rvalid; x[F_RREADY] = rready;
  endfunction

  typedef enum {T_NORMAL_W, T_NORMAL_R, T_AWLEN, T_AWQOS, T_AWSIZE, T_ARDUP} txn_e;

  // one address handshake of the given kind, held for one cycle
  task automatic drive_txn(input txn_e t, output int x[NF]);
    bus_idle();
    if (t == T_NORMAL_R || t == T_ARDUP) begin
      arid = (t == T_ARDUP) ? 8'd5 : 8'($urandom_range(15));
      arlen = 8'($urandom_range(15)); arsize = 3'($urandom_range(3)); arburst = 2'd1;
      arprot = 3'($urandom_range(7)); arqos = 4'($urandom_range(14));
      arvalid = 1; arready = 1;
    end else begin
      awid = 8'($urandom_range(15));
      awlen = 8'($urandom_range(15)); awsize = 3'($urandom_range(3)); awburst = 2'd1;
      awprot = 3'($urandom_range(7)); awqos = 4'($urandom_range(14));
      if (t == T_AWLEN)  awlen  = 8'(16 + $urandom_range(239));
      if (t == T_AWQOS)  awqos  = 4'hF;
      if (t == T_AWSIZE) awsize = 3'(4 + $urandom_range(3));
      awvalid = 1; awready = 1; wvalid = 1'($urandom);
    end
    bus_features(x);
    @(posedge clk); #1;
    bus_idle();
  endtask

  // one transaction, waited out, then the verdict checked
  task automatic isolated(input txn_e t, input prob_t thr);
    int x[NF], e, p8;
    logic [31:0] s0, s1, st, sc;
    bit attack, exp_alarm;
    axil_read(REG_SAMPLES, s0);
    drive_txn(t, x);
    repeat (130) @(posedge clk);
    #1;
    axil_read(REG_SAMPLES, s1);
    check(s1 == s0 + 1, "one sample classified");
    axil_read(REG_SCORE, sc);
    axil_read(REG_STATUS, st);
    e = ref_logit(x);
    check(int'($signed(sc[31:16])) == e, $sformatf("logit %0d want %0d", $signed(sc[31:16]), e));
    p8 = int'($floor(sigmoid_real(e) * 256.0));
    if (p8 > 255) p8 = 255;
    check(int'(sc[7:0]) >= p8 - 1 && int'(sc[7:0]) <= p8 + 1, "score");
    exp_alarm = sc[7:0] >= thr;
    check(st[1] == exp_alarm, "verdict follows threshold");
    attack = (t == T_AWLEN || t == T_AWQOS || t == T_AWSIZE);
    if (thr == 8'd128) check(st[1] == attack, $sformatf("attack %0d detected as %0d", t, st[1]));
    if (st[1]) m_alarm++; else m_clean++;
    if (st[1] && t == T_AWLEN)  m_awlen++;
    if (st[1] && t == T_AWQOS)  m_awqos++;
    if (st[1] && t == T_AWSIZE) m_awsize++;
    if (t == T_ARDUP) m_ardup++;
  endtask

  initial begin
    logic [31:0] d, cap, drp, smp;
    int n_hs;
    bus_idle();
    awvalid_l = 0; wvalid_l = 0; arvalid_l = 0; bready_l = 0; rready_l = 0;
    awaddr_l = 0; araddr_l = 0; wdata_l = 0;
    repeat (4) @(posedge clk);
    #1 rst_n = 1;

    axil_read(REG_ID, d);
    check(d == IMS_ID_WORD, "id");
    load_model();
    axil_write(REG_CTRL, 32'h3);          // enable, interrupt enable

    // 1. transactions one at a time
    for (int n = 0; n < 60; n++) begin
      txn_e t;
      t = txn_e'(n % 6);
      isolated(t, 8'd128);
      if (t == T_AWLEN) begin
        check(irq, "interrupt on attack");
        if (irq) m_irq++;
        axil_write(REG_STATUS, 32'h1);
        check(!irq, "interrupt cleared");
        if (!irq) m_irq_clear++;
      end
    end

    // 2. lower threshold: normal traffic (score 64) now counts as malicious
    axil_write(REG_THRESHOLD, 32'd50);
    m_thr++;
    for (int n = 0; n < 4; n++) isolated(T_NORMAL_W, 8'd50);
    axil_write(REG_THRESHOLD, 32'd128);

    // 3. burst: a handshake every cycle overflows the pipeline
    axil_write(REG_CTRL, 32'h7);           // clear counters
    n_hs = 0;
    for (int n = 0; n < 300; n++) begin
      int x[NF];
      drive_txn(txn_e'($urandom_range(5)), x);
      n_hs++;
    end
    repeat (400) @(posedge clk);
    #1;
    axil_read(REG_CAPTURED, cap);
    axil_read(REG_DROPS, drp);
    axil_read(REG_SAMPLES, smp);
    check(cap + drp == 32'(n_hs), "every handshake captured or dropped");
    check(smp == cap, "every captured sample classified");
    check(drp > 0, "burst overflows");
    m_capture += int'(cap);
    m_drop += int'(drp);

    // 4. sampling off
    axil_write(REG_CTRL, 32'h6);
    for (int n = 0; n < 10; n++) begin
      int x[NF];
      drive_txn(T_AWLEN, x);
      repeat (3) @(posedge clk);
    end
    repeat (200) @(posedge clk);
    #1;
    axil_read(REG_CAPTURED, cap);
    check(cap == 0, "nothing captured while disabled");
    if (cap == 0) m_disabled++;

    $display("mechanisms: captured %0d dropped %0d alarms %0d clean %0d irq %0d irq_clear %0d",
             m_capture, m_drop, m_alarm, m_clean, m_irq, m_irq_clear);
    $display("            awlen %0d awqos %0d awsize %0d ardup %0d threshold %0d disabled %0d",
             m_awlen, m_awqos, m_awsize, m_ardup, m_thr, m_disabled);
    check(m_capture > 0, "capture happened");
    check(m_drop > 0, "drop happened");
    check(m_alarm > 0 && m_clean > 0, "both verdicts happened");
    check(m_irq > 0 && m_irq_clear > 0, "interrupt raised and cleared");
    check(m_awlen > 0 && m_awqos > 0 && m_awsize > 0, "each attack detected");
    check(m_ardup > 0 && m_thr > 0 && m_disabled > 0, "other mechanisms");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
