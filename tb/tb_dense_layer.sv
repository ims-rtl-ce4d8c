// tb_dense_layer: checks a 32x32 ReLU layer and a 32x1 linear layer against
// the integer reference. Weights are loaded through the configuration bus
// with about 80 % zeros (as after pruning); inputs are random, with some
// vectors large enough to saturate. Also checks the latency (N_IN + 1
// cycles from the input handshake to out_valid), that the output holds
// while out_ready is low, and that no input is taken meanwhile.
module tb_dense_layer;
  import ims_pkg::*;
  import ims_ref_pkg::*;

  localparam int NI = 32, NO = 32;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cfg_wr_t cfg;
  logic a_iv, a_ir, a_ov, a_or;
  act_t [NI-1:0] a_in;
  act_t [NO-1:0] a_out;
  logic b_iv, b_ir, b_ov, b_or;
  act_t [0:0] b_out;

  dense_layer #(.N_IN(NI), .N_OUT(NO), .RELU(1'b1), .WT_TARGET(CFG_L2_W), .B_TARGET(CFG_L2_B))
    dut_a (.clk, .rst_n, .cfg_i(cfg), .in_valid(a_iv), .in_ready(a_ir), .in_act(a_in),
           .out_valid(a_ov), .out_ready(a_or), .out_act(a_out));
  dense_layer #(.N_IN(NI), .N_OUT(1), .RELU(1'b0), .WT_TARGET(CFG_L3_W), .B_TARGET(CFG_L3_B))
    dut_b (.clk, .rst_n, .cfg_i(cfg), .in_valid(b_iv), .in_ready(b_ir), .in_act(a_in),
           .out_valid(b_ov), .out_ready(b_or), .out_act(b_out));

  int checks = 0, failures = 0;
  int wa[NO][NI], ba[NO], wb[NI], bb;

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

  function automatic int rnd_w();
    if ($urandom_range(99) < 80) return 0;
    return int'($urandom_range(255)) - 128;
  endfunction

  task automatic load_weights();
    for (int o = 0; o < NO; o++) begin
      for (int i = 0; i < NI; i++) begin
        wa[o][i] = rnd_w();
        cfg_write(CFG_L2_W, (o << 5) | i, wa[o][i]);
      end
      ba[o] = int'($urandom_range(255)) - 128;
      cfg_write(CFG_L2_B, o, ba[o]);
    end
    for (int i = 0; i < NI; i++) begin
      wb[i] = rnd_w();
      cfg_write(CFG_L3_W, i, wb[i]);
    end
    bb = int'($urandom_range(255)) - 128;
    cfg_write(CFG_L3_B, 0, bb);
  endtask

  task automatic run_vector(input int scale, input bit stall);
    int x[], exp_a[NO], exp_b, lat;
    x = new[NI];
    for (int i = 0; i < NI; i++) begin
      x[i] = int'($urandom_range(2 * scale)) - scale;
      a_in[i] = act_t'(x[i]);
    end
    for (int o = 0; o < NO; o++) begin
      int w[];
      w = new[NI];
      for (int i = 0; i < NI; i++) w[i] = wa[o][i];
      exp_a[o] = dense_ref(x, w, ba[o], 1'b1);
    end
    begin
      int w[];
      w = new[NI];
      for (int i = 0; i < NI; i++) w[i] = wb[i];
      exp_b = dense_ref(x, w, bb, 1'b0);
    end
    a_or = !stall; b_or = !stall;
    a_iv = 1; b_iv = 1;
    checks++;
    if (!(a_ir && b_ir)) begin failures++; $display("FAIL not ready for input"); end
    @(posedge clk); #1;
    a_iv = 0; b_iv = 0;
    lat = 0;
    while (!a_ov) begin @(posedge clk); #1; lat++; end
    checks++;
    if (lat != NI + 1) begin failures++; $display("FAIL latency %0d, want %0d", lat, NI + 1); end
    if (stall) begin
      repeat (5) begin
        @(posedge clk); #1;
        checks++;
        if (!a_ov || a_ir) begin failures++; $display("FAIL output not held / input taken"); end
      end
      a_or = 1; b_or = 1;
    end
    for (int o = 0; o < NO; o++) begin
      checks++;
      if (int'(a_out[o]) != exp_a[o]) begin
        failures++;
        $display("FAIL a[%0d]=%0d want %0d", o, a_out[o], exp_a[o]);
      end
    end
    checks++;
    if (int'(b_out[0]) != exp_b) begin failures++; $display("FAIL b=%0d want %0d", b_out[0], exp_b); end
    @(posedge clk); #1;
    a_or = 0; b_or = 0;
  endtask

  initial begin
    cfg = '0; a_iv = 0; b_iv = 0; a_or = 0; b_or = 0; a_in = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int round = 0; round < 3; round++) begin
      load_weights();
      for (int v = 0; v < 20; v++) run_vector(4096, v % 4 == 3);
      for (int v = 0; v < 5; v++) run_vector(32767, 1'b0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
