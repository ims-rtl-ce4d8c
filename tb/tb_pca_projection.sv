// tb_pca_projection: loads random coefficients and means through the
// configuration bus and checks the 8 components of random 22-feature
// samples against the integer reference, including saturating cases.
// Also checks the latency (N_FEAT + 1 cycles from the input handshake to
// out_valid) and that the output holds while out_ready is low.
module tb_pca_projection;
  import ims_pkg::*;
  import ims_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cfg_wr_t cfg;
  logic iv, ir, ov, ordy;
  feat_vec_t feat;
  pc_vec_t pc;

  pca_projection dut (.clk, .rst_n, .cfg_i(cfg), .in_valid(iv), .in_ready(ir), .in_feat(feat),
                      .out_valid(ov), .out_ready(ordy), .out_pc(pc));

  int checks = 0, failures = 0;
  int c[NK][NF], mu[NF];

  initial begin
    repeat (200000) @(posedge clk);
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

  task automatic load(input int cmax);
    for (int k = 0; k < NK; k++)
      for (int j = 0; j < NF; j++) begin
        c[k][j] = int'($urandom_range(2 * cmax)) - cmax;
        cfg_write(CFG_PCA_COEF, (k << 5) | j, c[k][j]);
      end
    for (int j = 0; j < NF; j++) begin
      mu[j] = int'($urandom_range(4095));   // means 0 .. 255.9
      cfg_write(CFG_PCA_MEAN, j, mu[j]);
    end
  endtask

  task automatic run(input bit stall);
    int x[NF], lat;
    for (int j = 0; j < NF; j++) begin
      x[j] = int'($urandom_range(255));
      feat[j] = feat_t'(x[j]);
    end
    ordy = !stall;
    iv = 1;
    checks++;
    if (!ir) begin failures++; $display("FAIL not ready"); end
    @(posedge clk); #1;
    iv = 0;
    lat = 0;
    while (!ov) begin @(posedge clk); #1; lat++; end
    checks++;
    if (lat != NF + 1) begin failures++; $display("FAIL latency %0d", lat); end
    if (stall) begin
      repeat (4) begin
        @(posedge clk); #1;
        checks++;
        if (!ov || ir) begin failures++; $display("FAIL output not held"); end
      end
      ordy = 1;
    end
    for (int k = 0; k < NK; k++) begin
      int e;
      e = pca_ref(x, c, mu, k);
      checks++;
      if (int'(pc[k]) != e) begin failures++; $display("FAIL pc[%0d]=%0d want %0d", k, pc[k], e); end
    end
    @(posedge clk); #1;
    ordy = 0;
  endtask

  initial begin
    cfg = '0; iv = 0; ordy = 0; feat = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    load(2048);                         // |C| <= 0.5
    for (int v = 0; v < 40; v++) run(v % 5 == 4);
    load(32767);                        // large: saturation happens
    for (int v = 0; v < 20; v++) run(1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
