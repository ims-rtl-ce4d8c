// tb_mlp_classifier: checks the full 8-32-32-1 network against a chain of
// reference layers. Random pruned weights (about 80 % zeros) are loaded
// through the configuration bus; random component vectors are classified.
// Checks: exact logit, score within one step of the real-valued PLAN
// sigmoid, alarm = (score >= threshold) for two thresholds, the latency of
// 78 cycles, and the initiation interval of 34 cycles when samples are
// offered back to back (the rate the design promises).
module tb_mlp_classifier;
  import ims_pkg::*;
  import ims_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cfg_wr_t cfg;
  prob_t   thr;
  logic    iv, ir, rv, ra;
  pc_vec_t pcv;
  prob_t   rs;
  act_t    rl;

  mlp_classifier dut (.clk, .rst_n, .cfg_i(cfg), .threshold_i(thr),
                      .in_valid(iv), .in_ready(ir), .in_pc(pcv),
                      .res_valid(rv), .res_score(rs), .res_logit(rl), .res_alarm(ra));

  int checks = 0, failures = 0;
  int w1[NH][NK], b1[NH], w2[NH][NH], b2[NH], w3[NH], b3;

  // expected results, in order
  int exp_logit[$];
  int n_alarm = 0, n_clear = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cfg_write(input cfg_target_e t, input int idx, input int data);
    cfg.we = 1'b1; cfg.target = t; cfg.idx = 10'(idx); cfg.data = 16'(data);
    @(posedge clk); #1;
    cfg.we = 1'b0;
  endtask

  function automatic int rnd_w(input int m);
    if ($urandom_range(99) < 80) return 0;
    return int'($urandom_range(2 * m)) - m;
  endfunction

  task automatic load();
    for (int o = 0; o < NH; o++) begin
      for (int i = 0; i < NK; i++) begin w1[o][i] = rnd_w(12); cfg_write(CFG_L1_W, (o << 3) | i, w1[o][i]); end
      b1[o] = rnd_w(8); cfg_write(CFG_L1_B, o, b1[o]);
      for (int i = 0; i < NH; i++) begin w2[o][i] = rnd_w(12); cfg_write(CFG_L2_W, (o << 5) | i, w2[o][i]); end
      b2[o] = rnd_w(8); cfg_write(CFG_L2_B, o, b2[o]);
      w3[o] = rnd_w(12); cfg_write(CFG_L3_W, o, w3[o]);
    end
    b3 = int'($urandom_range(8)) - 4;
    cfg_write(CFG_L3_B, 0, b3);
  endtask

  function automatic int ref_logit(input int x[]);
    int h1[], h2[], w[];
    h1 = new[NH]; h2 = new[NH];
    for (int o = 0; o < NH; o++) begin
      w = new[NK];
      for (int i = 0; i < NK; i++) w[i] = w1[o][i];
      h1[o] = dense_ref(x, w, b1[o], 1'b1);
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

  task automatic offer(input int scale);
    int x[];
    x = new[NK];
    for (int k = 0; k < NK; k++) begin
      x[k] = int'($urandom_range(2 * scale)) - scale;
      pcv[k] = act_t'(x[k]);
    end
    exp_logit.push_back(ref_logit(x));
    iv = 1;
    forever begin
      bit taken;
      #0 taken = ir;   // in_ready is stable between edges
      @(posedge clk);
      if (taken) break;
    end
    #1 iv = 0;
  endtask

  // result checker
  always @(posedge clk) if (rst_n && rv) begin
    int e, p8;
    #1;
    if (exp_logit.size() == 0) begin
      failures++; $display("FAIL unexpected result");
    end else begin
      e = exp_logit.pop_front();
      checks++;
      if (int'(rl) != e) begin failures++; $display("FAIL logit %0d want %0d", rl, e); end
      p8 = int'($floor(sigmoid_real(e) * 256.0));
      if (p8 > 255) p8 = 255;
      checks++;
      if (int'(rs) > p8 + 1 || int'(rs) < p8 - 1) begin
        failures++; $display("FAIL score %0d want %0d", rs, p8);
      end
      checks++;
      if (ra != (rs >= thr)) begin failures++; $display("FAIL alarm %0d score %0d thr %0d", ra, rs, thr); end
      if (ra) n_alarm++; else n_clear++;
    end
  end

  initial begin
    int t0, lat, last_t, gaps[$];
    cfg = '0; iv = 0; pcv = '0; thr = 8'd128;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    load();
    // latency of one isolated sample
    t0 = 0;
    fork
      offer(4096);
      begin
        @(posedge clk); #1;  // the handshake edge
        lat = 0;
        while (!rv) begin @(posedge clk); #1; lat++; end
      end
    join
    checks++;
    if (lat != 78) begin failures++; $display("FAIL latency %0d, want 78", lat); end
    repeat (5) @(posedge clk);
    // back to back: measure the distance between results
    fork
      for (int v = 0; v < 30; v++) offer(4096);
      begin
        last_t = -1;
        for (int n = 0; n < 30; n++) begin
          int t;
          t = 0;
          @(posedge clk iff rv);
          t = $time / 10;
          if (last_t >= 0) gaps.push_back(t - last_t);
          last_t = t;
        end
      end
    join
    foreach (gaps[g]) begin
      checks++;
      if (gaps[g] != 34) begin failures++; $display("FAIL interval %0d, want 34", gaps[g]); end
    end
    // other thresholds and new weights
    thr = 8'd200;
    load();
    for (int v = 0; v < 30; v++) offer(8192);
    repeat (300) @(posedge clk);
    thr = 8'd60;
    for (int v = 0; v < 30; v++) offer(8192);
    repeat (300) @(posedge clk);
    checks++;
    if (exp_logit.size() != 0) begin failures++; $display("FAIL %0d results missing", exp_logit.size()); end
    checks++;
    if (n_alarm == 0 || n_clear == 0) begin
      failures++; $display("FAIL verdicts not varied: %0d alarms %0d clear", n_alarm, n_clear);
    end
    $display("alarms %0d clear %0d", n_alarm, n_clear);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
