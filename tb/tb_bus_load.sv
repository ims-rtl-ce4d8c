// tb_bus_load: inference rate and latency of the whole core against the
// load on the monitored bus.
//
// The publication reports latency and throughput at bus loads of 10, 25,
// 50, 75 and 100 %. Here the load is read as the share of clocks that carry
// an address handshake: for each load the bench runs 34,000 clocks (250 MHz)
// in which every clock has an AW or AR handshake with that probability. The
// monitor keeps what its one-entry buffer can take and drops the rest.
//
// Measured per load: handshakes offered, samples captured and dropped (from
// the counters, which must add up), classifications per second, and the
// latency from each captured handshake to its result (paired in order, since
// every captured sample is classified in order). Checked: the counters
// agree, the rate reaches the published throughput at that load, and no
// result takes longer than the published latency, nor longer than the
// bound of this design under saturation. A captured sample passes five
// one-sample stages (monitor buffer, PCA, three layers). Each stage hands
// on one sample per 34-clock interval at most, so a sample leaves within
// 5 x 34 = 170 clocks. An isolated sample takes 104.
//
// Timing does not depend on the parameter values, so no model is loaded.
module tb_bus_load;
  import ims_pkg::*;

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

  localparam int  N_LOAD = 5;
  localparam int  LOAD_PCT [N_LOAD] = '{10, 25, 50, 75, 100};
  // published throughput (inferences/s) and latency (ns) at those loads
  localparam int  PUB_RATE [N_LOAD] = '{2567891, 2542103, 2509578, 2478920, 2445682};
  localparam int  PUB_LAT_NS [N_LOAD] = '{1523000, 1544000, 1566000, 1589000, 1612000};
  localparam int  WINDOW   = 34000;
  localparam real F_CLK    = 250.0e6;
  // five stages, each passing one sample per 34-clock interval
  localparam int  LAT_BOUND = 5 * 34;

  int checks = 0, failures = 0;

  initial begin
    repeat (300000) @(posedge clk);
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

  // ------------------------------------------------- latency measurement
  longint cyc = 0;
  longint cap_time[$];
  longint lat_max = 0, lat_sum = 0, lat_n = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && dut.sample_ev) cap_time.push_back(cyc);
    if (rst_n && dut.res_valid) begin
      if (cap_time.size() == 0) begin
        check(1'b0, "result without a captured sample");
      end else begin
        longint l;
        l = cyc - cap_time.pop_front();
        lat_sum += l;
        lat_n++;
        if (l > lat_max) lat_max = l;
      end
    end
  end

  task automatic bus_idle();
    awid = 0; awlen = 0; awsize = 0; awburst = 0; awprot = 0; awqos = 0;
    arid = 0; arlen = 0; arsize = 0; arburst = 0; arprot = 0; arqos = 0;
    awvalid = 0; awready = 0; arvalid = 0; arready = 0; wvalid = 0; wready = 0;
    bvalid = 0; bready = 0; rvalid = 0; rready = 0;
  endtask

  // one clock of traffic: an address handshake with probability pct %
  task automatic bus_cycle(input int pct, inout int n_hs);
    bus_idle();
    wvalid = 1'($urandom); wready = 1'($urandom);
    rvalid = 1'($urandom); rready = 1'($urandom);
    if (int'($urandom_range(99)) < pct) begin
      n_hs++;
      if ($urandom_range(1)) begin
        awid = 8'($urandom); awlen = 8'($urandom_range(15)); awsize = 3'($urandom_range(3));
        awburst = 2'd1; awqos = 4'($urandom); awvalid = 1; awready = 1;
      end else begin
        arid = 8'($urandom); arlen = 8'($urandom_range(15)); arsize = 3'($urandom_range(3));
        arburst = 2'd1; arprot = 3'($urandom); arvalid = 1; arready = 1;
      end
    end
    @(posedge clk); #1;
  endtask

  initial begin
    logic [31:0] smp, cap, drp;
    bus_idle();
    awvalid_l = 0; wvalid_l = 0; arvalid_l = 0; bready_l = 0; rready_l = 0;
    awaddr_l = 0; araddr_l = 0; wdata_l = 0;
    repeat (4) @(posedge clk);
    #1 rst_n = 1;

    $display("load %%  handshakes  captured  dropped  inferences/s  latency avg/max (clocks)");
    for (int l = 0; l < N_LOAD; l++) begin
      int  n_hs;
      real rate, lat_avg;
      axil_write(REG_CTRL, 32'h5);          // enable, clear counters
      lat_max = 0; lat_sum = 0; lat_n = 0;
      n_hs = 0;
      for (int t = 0; t < WINDOW; t++) bus_cycle(LOAD_PCT[l], n_hs);
      bus_idle();
      // samples still in the pipeline finish within the bound
      repeat (LAT_BOUND + 10) @(posedge clk);
      #1;
      axil_read(REG_SAMPLES, smp);
      axil_read(REG_CAPTURED, cap);
      axil_read(REG_DROPS, drp);
      rate = real'(smp) * F_CLK / real'(WINDOW);
      lat_avg = (lat_n > 0) ? real'(lat_sum) / real'(lat_n) : 0.0;
      $display("%6d  %10d  %8d  %7d  %12.0f  %6.1f / %0d",
               LOAD_PCT[l], n_hs, cap, drp, rate, lat_avg, lat_max);
      check(cap + drp == 32'(n_hs), $sformatf("load %0d: captured + dropped = handshakes",
                                               LOAD_PCT[l]));
      check(smp == cap, $sformatf("load %0d: every captured sample classified", LOAD_PCT[l]));
      check(cap_time.size() == 0, "no sample left in the pipeline");
      check(rate >= real'(PUB_RATE[l]),
            $sformatf("load %0d: %0.0f inferences/s below the published %0d",
                      LOAD_PCT[l], rate, PUB_RATE[l]));
      check(lat_max <= LAT_BOUND, $sformatf("load %0d: latency %0d clocks", LOAD_PCT[l], lat_max));
      check(real'(lat_max) * 4.0 <= real'(PUB_LAT_NS[l]), "latency within the published figure");
      check(lat_n == longint'(smp), "one latency per result");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
