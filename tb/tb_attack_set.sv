// tb_attack_set: the published attack-detection workload run through the
// whole monitoring core at its default sizes.
//
// The evaluation set of the publication holds 16,383 normal transactions and
// 3,242 attack samples in six classes: illegal burst length (AWLEN > 15,
// 642), duplicate read IDs (558), QoS flooding (AWQOS = 0xF, 423), invalid
// transfer size (389), read-protection violation (345) and mixed patterns
// (885). This bench sends the same number of transactions of each class, in
// random order, one address handshake every 36 clocks (just above the
// 34-clock sample interval, so nothing is dropped).
//
// The trained weights are not published, so a hand-written parameter set is
// loaded as in tb_ims_top, with four detector neurons: AWLEN > 15,
// AWQOS = 0xF, AWSIZE > 3 (wider than a 64-bit bus) and ARPROT > 3. The
// bench's own reading of the two classes the publication does not define
// in signal terms: a protection violation is a data read that carries the
// instruction-access bit ARPROT[2]; a mixed pattern is an AW and an AR
// handshake in the same clock whose headers hold two or more of the four
// anomalies. A duplicate read ID is a read that reuses the ID of the read
// before it, with otherwise normal fields.
//
// Every result leaving the classifier is compared with the reference
// arithmetic (exact logit, score within one step of the ideal sigmoid
// segment) and with the verdict the four rules predict. The four field
// attacks and the mixed class must all be detected and normal traffic must
// raise no alarm. A duplicate ID looks like a normal read in a single
// sample, so that class is reported, not required. At the end the
// counters must agree with the number of transactions sent.
module tb_attack_set;
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

  typedef enum {C_NORMAL, C_AWLEN, C_ARID_DUP, C_AWQOS, C_AWSIZE, C_ARPROT, C_MIXED} cls_e;
  localparam int N_CLS = 7;
  localparam int COUNT [N_CLS] = '{16383, 642, 558, 423, 389, 345, 885};
  localparam int SPACING = 36;

  int n_sent [N_CLS], n_flag [N_CLS];

  function automatic string cls_name(input int k);
    cls_e v;
    v = cls_e'(k);
    return v.name();
  endfunction

  typedef struct {
    cls_e cls;
    int   logit;
    bit   alarm;
  } exp_t;
  exp_t pending[$];

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
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

  // components 0..3 pass AWLEN, AWQOS, AWSIZE and ARPROT through at 1.0;
  // first-layer neurons 0..3 fire above 15.5, 14.5, 3.5 and 3.5; second-layer
  // neuron 0 adds them up and the output neuron maps that to a high score.
  task automatic load_model();
    int sel [4];
    sel = '{F_AWLEN, F_AWQOS, F_AWSIZE, F_ARPROT};
    for (int k = 0; k < NK; k++)
      for (int j = 0; j < NF; j++) c[k][j] = (k < 4) ? 0 : int'($urandom_range(400)) - 200;
    for (int j = 0; j < NF; j++) mu[j] = int'($urandom_range(64));
    for (int k = 0; k < 4; k++) begin
      c[k][sel[k]] = 4096;
      mu[sel[k]] = 0;
    end
    for (int o = 0; o < NH; o++) begin
      for (int i = 0; i < NK; i++) w1[o][i] = (o < 4) ? 0 : small_w();
      b1[o] = (o < 4) ? 0 : small_w();
      for (int i = 0; i < NH; i++) w2[o][i] = (o == 0) ? 0 : small_w();
      b2[o] = (o == 0) ? 0 : small_w();
      w3[o] = 0;
    end
    w1[0][0] = 4; b1[0] = -62;   // AWLEN - 15.5
    w1[1][1] = 4; b1[1] = -58;   // AWQOS - 14.5
    w1[2][2] = 4; b1[2] = -14;   // AWSIZE - 3.5
    w1[3][3] = 4; b1[3] = -14;   // ARPROT - 3.5
    for (int i = 0; i < 4; i++) w2[0][i] = 4;
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

  function automatic void bus_features(output int x[NF]);
    x[F_AWID] = awid; x[F_AWLEN] = awlen; x[F_AWSIZE] = awsize; x[F_AWBURST] = awburst;
    x[F_AWPROT] = awprot; x[F_AWQOS] = awqos;
    x[F_ARID] = arid; x[F_ARLEN] = arlen; x[F_ARSIZE] = arsize; x[F_ARBURST] = arburst;
    x[F_ARPROT] = arprot; x[F_ARQOS] = arqos;
    x[F_AWVALID] = awvalid; x[F_AWREADY] = awready; x[F_WVALID] = wvalid; x[F_WREADY] = wready;
    x[F_BVALID] = bvalid; x[F_BREADY] = bready;
    x[F_ARVALID] = arvalid; x[F_ARREADY] = arready; x[F_RVALID] = rvalid; x[F_RREADY] = rready;
  endfunction

  logic [7:0] last_arid = 0;

  task automatic normal_aw();
    awid = 8'($urandom_range(15)); awlen = 8'($urandom_range(15));
    awsize = 3'($urandom_range(3)); awburst = 2'($urandom_range(2));
    awprot = 3'($urandom_range(7)); awqos = 4'($urandom_range(14));
    awvalid = 1; awready = 1; wvalid = 1'($urandom); wready = 1'($urandom);
    bvalid = 1'($urandom); bready = 1;
  endtask

  task automatic normal_ar();
    arid = 8'($urandom_range(15));
    if (arid == last_arid) arid = arid ^ 8'h1;
    arlen = 8'($urandom_range(15)); arsize = 3'($urandom_range(3));
    arburst = 2'($urandom_range(2)); arprot = 3'($urandom_range(3));
    arqos = 4'($urandom_range(14));
    arvalid = 1; arready = 1; rvalid = 1'($urandom); rready = 1;
  endtask

  // one address handshake of class t, held for one clock; returns whether
  // the four detector rules should flag it
  task automatic drive(input cls_e t, output int x[NF], output bit flag);
    bit [3:0] m;   // anomalies: AWLEN, AWQOS, AWSIZE, ARPROT
    bus_idle();
    m = '0;
    case (t)
      C_AWLEN:  m = 4'b0001;
      C_AWQOS:  m = 4'b0010;
      C_AWSIZE: m = 4'b0100;
      C_ARPROT: m = 4'b1000;
      C_MIXED:  while ($countones(m) < 2) m = 4'($urandom_range(15));
      default:  m = '0;
    endcase
    if (t == C_NORMAL) begin
      if ($urandom_range(1)) normal_aw(); else normal_ar();
    end else if (t == C_ARID_DUP) begin
      normal_ar();
      arid = last_arid;
    end else begin
      if (m[2:0] != 0 || t == C_MIXED) normal_aw();
      if (m[3] || t == C_MIXED) normal_ar();
    end
    if (m[0]) awlen  = 8'(16 + $urandom_range(239));
    if (m[1]) awqos  = 4'hF;
    if (m[2]) awsize = 3'(4 + $urandom_range(3));
    if (m[3]) arprot = 3'(4 + $urandom_range(3));
    if (arvalid) last_arid = arid;
    bus_features(x);
    flag = m != 0;
    @(posedge clk); #1;
    bus_idle();
  endtask

  // ------------------------------------------------------ result checker
  always @(posedge clk) begin
    if (rst_n && dut.res_valid) begin
      exp_t e;
      int p8, got;
      if (pending.size() == 0) begin
        check(1'b0, "result without a transaction");
      end else begin
        e = pending.pop_front();
        got = int'(dut.res_logit);
        check(got == e.logit, $sformatf("class %s: logit %0d want %0d", e.cls.name(), got, e.logit));
        p8 = int'($floor(sigmoid_real(e.logit) * 256.0));
        if (p8 > 255) p8 = 255;
        check(int'(dut.res_score) >= p8 - 1 && int'(dut.res_score) <= p8 + 1,
              $sformatf("score %0d want %0d", dut.res_score, p8));
        if (e.cls != C_ARID_DUP)
          check(dut.res_alarm == e.alarm,
                $sformatf("class %s: verdict %0b want %0b", e.cls.name(), dut.res_alarm, e.alarm));
        if (dut.res_alarm) n_flag[e.cls]++;
      end
    end
  end

  initial begin
    cls_e order[$];
    logic [31:0] smp, drp, cap, alm;
    int total, n_alarm_exp;
    bus_idle();
    awvalid_l = 0; wvalid_l = 0; arvalid_l = 0; bready_l = 0; rready_l = 0;
    awaddr_l = 0; araddr_l = 0; wdata_l = 0;
    for (int k = 0; k < N_CLS; k++) begin n_sent[k] = 0; n_flag[k] = 0; end
    repeat (4) @(posedge clk);
    #1 rst_n = 1;

    load_model();
    axil_write(REG_CTRL, 32'h1);

    for (int k = 0; k < N_CLS; k++)
      for (int n = 0; n < COUNT[k]; n++) order.push_back(cls_e'(k));
    order.shuffle();
    total = order.size();
    n_alarm_exp = 0;

    foreach (order[i]) begin
      int x[NF];
      bit flag;
      drive(order[i], x, flag);
      pending.push_back('{cls: order[i], logit: ref_logit(x), alarm: flag});
      n_sent[order[i]]++;
      if (flag) n_alarm_exp++;
      repeat (SPACING - 1) @(posedge clk);
      #1;
    end
    repeat (200) @(posedge clk);
    #1;

    check(pending.size() == 0, "every transaction classified");
    axil_read(REG_SAMPLES, smp);
    axil_read(REG_DROPS, drp);
    axil_read(REG_CAPTURED, cap);
    axil_read(REG_ALARMS, alm);
    check(smp == 32'(total), $sformatf("SAMPLES %0d want %0d", smp, total));
    check(cap == 32'(total), "CAPTURED");
    check(drp == 0, "no sample dropped at this spacing");
    check(alm == 32'(n_alarm_exp + n_flag[C_ARID_DUP]), "ALARMS");

    $display("class          samples  flagged");
    for (int k = 0; k < N_CLS; k++)
      $display("%-13s  %7d  %7d", cls_name(k), n_sent[k], n_flag[k]);
    check(n_flag[C_NORMAL] == 0, "no false alarm on normal traffic");
    for (int k = 1; k < N_CLS; k++)
      if (k != C_ARID_DUP)
        check(n_flag[k] == n_sent[k] && n_sent[k] == COUNT[k],
              $sformatf("%s fully detected", cls_name(k)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
