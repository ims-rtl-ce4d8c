// tb_axi_header_monitor: drives random AXI4 address-channel traffic past the
// monitor while the sample consumer stalls at random. An independent model
// of the one-entry buffer predicts, for every AW/AR handshake, whether the
// sample is kept or dropped; every sample that leaves the stream is
// compared field by field with the bus values at its handshake, and the
// sample_o / drop_o pulses are checked clock by clock against the model (one
// clock after the handshake). Also checks that nothing is sampled while the
// monitor is disabled.
module tb_axi_header_monitor;
  import ims_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic en;
  logic [7:0] awid, arid, awlen, arlen;
  logic [2:0] awsize, arsize, awprot, arprot;
  logic [1:0] awburst, arburst;
  logic [3:0] awqos, arqos;
  logic awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic sv, sr, samp, drop;
  feat_vec_t sf;

  axi_header_monitor dut (.clk, .rst_n, .enable_i(en),
    .awid, .awlen, .awsize, .awburst, .awprot, .awqos, .awvalid, .awready,
    .wvalid, .wready, .bvalid, .bready,
    .arid, .arlen, .arsize, .arburst, .arprot, .arqos, .arvalid, .arready, .rvalid, .rready,
    .s_valid(sv), .s_ready(sr), .s_feat(sf), .sample_o(samp), .drop_o(drop));

  int checks = 0, failures = 0;
  int n_hs = 0, n_drop_exp = 0, n_drop_seen = 0, n_samp_seen = 0, n_out = 0;
  feat_vec_t pending;
  bit        full;   // model of the buffer

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic feat_vec_t expect_vec();
    feat_vec_t v;
    v[F_AWID] = awid;        v[F_AWLEN] = awlen;     v[F_AWSIZE] = 8'(awsize);
    v[F_AWBURST] = 8'(awburst); v[F_AWPROT] = 8'(awprot); v[F_AWQOS] = 8'(awqos);
    v[F_ARID] = arid;        v[F_ARLEN] = arlen;     v[F_ARSIZE] = 8'(arsize);
    v[F_ARBURST] = 8'(arburst); v[F_ARPROT] = 8'(arprot); v[F_ARQOS] = 8'(arqos);
    v[F_AWVALID] = 8'(awvalid); v[F_AWREADY] = 8'(awready); v[F_WVALID] = 8'(wvalid);
    v[F_WREADY] = 8'(wready);   v[F_BVALID] = 8'(bvalid);   v[F_BREADY] = 8'(bready);
    v[F_ARVALID] = 8'(arvalid); v[F_ARREADY] = 8'(arready); v[F_RVALID] = 8'(rvalid);
    v[F_RREADY] = 8'(rready);
    return v;
  endfunction

  task automatic randomize_bus(input int hs_pct);
    awid = 8'($urandom); arid = 8'($urandom); awlen = 8'($urandom); arlen = 8'($urandom);
    awsize = 3'($urandom); arsize = 3'($urandom); awprot = 3'($urandom); arprot = 3'($urandom);
    awburst = 2'($urandom); arburst = 2'($urandom);
    awqos = 4'($urandom); arqos = 4'($urandom);
    awvalid = ($urandom_range(99) < hs_pct); awready = ($urandom_range(99) < 70);
    arvalid = ($urandom_range(99) < hs_pct); arready = ($urandom_range(99) < 70);
    wvalid = 1'($urandom); wready = 1'($urandom); bvalid = 1'($urandom); bready = 1'($urandom);
    rvalid = 1'($urandom); rready = 1'($urandom);
    sr = ($urandom_range(99) < 40);
  endtask

  bit drop_exp_q = 0, samp_exp_q = 0;   // pulses due at this edge

  // predict and compare, sampling the inputs just before each edge
  always @(posedge clk) if (rst_n) begin
    bit trig, room;
    feat_vec_t snap;
    trig = en && ((awvalid && awready) || (arvalid && arready));
    snap = expect_vec();
    room = !full || sr;
    checks++;
    if (drop != drop_exp_q || samp != samp_exp_q) begin
      failures++;
      $display("FAIL pulses drop %0b sample %0b, model %0b %0b", drop, samp, drop_exp_q, samp_exp_q);
    end
    drop_exp_q = trig && !room;
    samp_exp_q = trig && room;
    // output side
    if (sv && sr) begin
      checks++;
      n_out++;
      if (sf != pending) begin failures++; $display("FAIL sample mismatch"); end
    end
    checks++;
    if (sv != full) begin failures++; $display("FAIL valid %0d, model %0d", sv, full); end
    if (trig) n_hs++;
    if (trig && room) begin full = 1; pending = snap; end
    else if (sr) full = 0;
    if (trig && !room) n_drop_exp++;
  end

  always @(posedge clk) if (rst_n) begin
    if (drop) n_drop_seen++;
    if (samp) n_samp_seen++;
  end

  initial begin
    full = 0;
    en = 0; sr = 0;
    randomize_bus(0);
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // disabled: nothing may be sampled
    repeat (50) begin randomize_bus(80); @(posedge clk); #1; end
    checks++;
    if (sv || n_hs != 0) begin failures++; $display("FAIL sampled while disabled"); end
    en = 1;
    for (int c = 0; c < 3000; c++) begin
      randomize_bus(c < 1500 ? 30 : 90);
      @(posedge clk); #1;
    end
    awvalid = 0; arvalid = 0; sr = 1;
    repeat (3) @(posedge clk);
    #1;
    checks++;
    if (n_drop_seen != n_drop_exp) begin failures++; $display("FAIL drops %0d want %0d", n_drop_seen, n_drop_exp); end
    checks++;
    if (n_samp_seen != n_hs - n_drop_exp) begin failures++; $display("FAIL samples %0d", n_samp_seen); end
    checks++;
    if (n_drop_exp == 0 || n_out < 100) begin failures++; $display("FAIL too little traffic"); end
    $display("handshakes %0d kept %0d dropped %0d", n_hs, n_samp_seen, n_drop_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
