// tb_realm_interference: the interference workloads of the evaluation, run on
// two iRealm units in front of a round-robin interconnect and one memory.
//
// Manager 0 is a time-critical core issuing single-beat reads, one at a time,
// to region A. Manager 1 is a DMA engine streaming 256-beat read bursts to
// region B with up to two bursts outstanding. Both units use default sizes.
//
// 1. Unregulated (units bypassed): each core read waits behind whole DMA
//    bursts, so its worst latency exceeds the 256-beat burst length.
// 2. iRealm active with a fragment size of one beat: DMA bursts are cut into
//    single beats, the interconnect alternates between the managers, and the
//    core's worst latency drops to a few tens of cycles at most.
// 3. Period sweep: the DMA unit regulates region B with a budget of half the
//    bytes the memory could deliver in a period (8 bytes per cycle), for
//    periods of 50, 200 and 1600 cycles. Over four periods the DMA must get
//    about half the bandwidth (between 40 and 60 percent of the beats), and
//    never more than the budget plus one fragment per period. The core keeps
//    reading meanwhile and must stay fast. Afterwards every DMA burst must
//    have completed with all of its 256 beats.
// 4. Slow writer: the DMA writes 16-beat bursts with three idle cycles after
//    each beat while the core issues single-beat writes. Bypassed, a core write
//    waits while the interconnect's W channel belongs to the DMA burst; with
//    4-beat fragments and the write buffer, a DMA fragment only enters the
//    interconnect with all its data, and the core's worst write latency must
//    drop to at most 16 cycles and below a third of the bypassed one.
// The latencies measured are printed for comparison. Stimulus changes just
// after a clock edge and ready signals are sampled once the logic settled.
module tb_realm_interference;
  import realm_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  irealm_cfg_t  cfg [2];
  region_cfg_t  rcfg [2][2];
  irealm_stat_t stat [2];
  region_stat_t rstat [2][2];
  axi_req_t     mreq [2], xreq [2], sreq;
  axi_resp_t    mresp [2], xresp [2], sresp;

  for (genvar m = 0; m < 2; m++) begin : g_unit
    irealm_unit i_unit (
      .clk_i(clk), .rst_ni(rst_n), .cfg_i(cfg[m]), .region_cfg_i(rcfg[m]),
      .stat_o(stat[m]), .region_stat_o(rstat[m]),
      .mgr_req_i(mreq[m]), .mgr_resp_o(mresp[m]), .sub_req_o(xreq[m]), .sub_resp_i(xresp[m])
    );
  end

  tb_axi_rr_mux i_mux (
    .clk_i(clk), .rst_ni(rst_n), .mgr_req_i(xreq), .mgr_resp_o(xresp),
    .sub_req_o(sreq), .sub_resp_i(sresp)
  );

  tb_axi_mem #(.RandStall(1'b0)) i_mem (
    .clk_i(clk), .rst_ni(rst_n), .req_i(sreq), .resp_o(sresp),
    .hang_aw_i(1'b0), .hang_w_i(1'b0), .hang_b_i(1'b0), .hang_r_i(1'b0)
  );

  localparam addr_t RegionA = 48'h0000_0000;
  localparam addr_t RegionB = 48'h0010_0000;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (60000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ DMA manager
  logic dma_on = 1'b0;
  int   dma_out = 0;
  int   dma_beats = 0;
  addr_t dma_addr = RegionB;
  logic  dma_ar_hs = 1'b0;
  always @(posedge clk) begin
    dma_ar_hs = rst_n && mreq[1].ar_valid && mresp[1].ar_ready;
    if (rst_n) begin
      if (dma_ar_hs) begin
        dma_out++;
        dma_addr = RegionB + ((dma_addr + 48'h800 - RegionB) & 48'hF_FFFF);
      end
      if (mresp[1].r_valid && mreq[1].r_ready) begin
        dma_beats++;
        if (mresp[1].r.last) dma_out--;
      end
    end
  end
  // drives the next request just after each edge; a request waits until taken
  initial begin : dma_rd
    forever begin
      @(posedge clk);
      #1;
      if (!mreq[1].ar_valid || dma_ar_hs) begin
        mreq[1].ar_valid = dma_on && dma_out < 2;
        mreq[1].ar.addr  = dma_addr;
      end
    end
  end

  // ----------------------------------------------------------- core manager
  int lat_max = 0, lat_n = 0;
  logic core_on = 1'b0;

  // called just after a clock edge; ready is sampled once the combinational
  // logic has settled, before the next edge
  task automatic core_read(input addr_t a);
    int t;
    t = 0;
    mreq[0].ar_valid = 1'b1;
    mreq[0].ar.addr  = a;
    #1;
    while (!mresp[0].ar_ready) begin
      @(posedge clk);
      #1;
      t++;
    end
    @(posedge clk);
    #1;
    t++;
    mreq[0].ar_valid = 1'b0;
    while (!(mresp[0].r_valid && mresp[0].r.last)) begin
      @(posedge clk);
      #1;
      t++;
    end
    @(posedge clk);
    #1;
    t++;
    if (t > lat_max) lat_max = t;
    lat_n++;
  endtask

  int wlat_max = 0, wlat_n = 0;
  logic core_wr_on = 1'b0;

  task automatic core_write(input addr_t a);
    int t;
    logic aw_done, w_done;
    t = 0;
    aw_done = 1'b0;
    w_done  = 1'b0;
    mreq[0].aw_valid = 1'b1;
    mreq[0].aw.addr  = a;
    mreq[0].w_valid  = 1'b1;
    mreq[0].w.data   = data_t'(a);
    mreq[0].w.strb   = '1;
    mreq[0].w.last   = 1'b1;
    #1;
    while (!(aw_done && w_done)) begin
      if (mresp[0].aw_ready) aw_done = 1'b1;
      if (mresp[0].w_ready)  w_done  = 1'b1;
      @(posedge clk);
      #1;
      t++;
      if (aw_done) mreq[0].aw_valid = 1'b0;
      if (w_done)  mreq[0].w_valid  = 1'b0;
    end
    while (!mresp[0].b_valid) begin
      @(posedge clk);
      #1;
      t++;
    end
    @(posedge clk);
    #1;
    t++;
    if (t > wlat_max) wlat_max = t;
    wlat_n++;
  endtask

  initial begin : core_wr
    int k;
    k = 0;
    forever begin
      wait (core_wr_on);
      @(posedge clk);
      #1;
      core_write(RegionA + 48'h8000 + addr_t'(k * 8));
      k = (k + 1) % 64;
      repeat (7) @(posedge clk);
      #1;
    end
  end

  // slow DMA writer: 16-beat bursts with three idle cycles after every beat
  logic dma_wr_on = 1'b0;
  initial begin : dma_wr
    addr_t a;
    a = RegionB + 48'h8_0000;
    forever begin
      wait (dma_wr_on);
      @(posedge clk);
      #1;
      mreq[1].aw_valid = 1'b1;
      mreq[1].aw.addr  = a;
      #1;
      while (!mresp[1].aw_ready) begin
        @(posedge clk);
        #1;
      end
      @(posedge clk);
      #1;
      mreq[1].aw_valid = 1'b0;
      for (int i = 0; i < 16; i++) begin
        mreq[1].w_valid = 1'b1;
        mreq[1].w.data  = data_t'(i);
        mreq[1].w.strb  = '1;
        mreq[1].w.last  = (i == 15);
        #1;
        while (!mresp[1].w_ready) begin
          @(posedge clk);
          #1;
        end
        @(posedge clk);
        #1;
        mreq[1].w_valid = 1'b0;
        if (i < 15) repeat (3) @(posedge clk);
        #1;
      end
      a = a + 48'h80;
    end
  end

  initial begin : core
    int k;
    k = 0;
    forever begin
      wait (core_on);
      @(posedge clk);
      #1;
      core_read(RegionA + addr_t'(k * 8));
      k = (k + 1) % 64;
      repeat (7) @(posedge clk);
      #1;
    end
  end

  // ------------------------------------------------------------------ flow
  // changes the configuration away from the clock edge
  task automatic set_units(input logic en, input logic reg_dma);
    #1;
    for (int m = 0; m < 2; m++) begin
      cfg[m].enable   = en;
      cfg[m].wbuf_en  = 1'b1;
      cfg[m].frag_len = 8'd0;
      cfg[m].isolate  = 1'b0;
      cfg[m].regulate = (m == 1) && reg_dma;
    end
  endtask

  task automatic measure(input int cycles, input string what, output int worst);
    lat_max = 0;
    lat_n   = 0;
    core_on = 1'b1;
    repeat (cycles) @(posedge clk);
    core_on = 1'b0;
    wait (mreq[0].ar_valid == 1'b0 && lat_n > 0);
    repeat (300) @(posedge clk);
    worst = lat_max;
    $display("%s: worst core read latency %0d cycles over %0d reads", what, lat_max, lat_n);
  endtask

  initial begin
    int unreg, regd, b0, b1, periods, beats, budget;
    int plist [3] = '{50, 200, 1600};
    for (int m = 0; m < 2; m++) begin
      mreq[m] = '0;
      mreq[m].ar.len   = (m == 1) ? 8'd255 : 8'd0;
      mreq[m].ar.size  = 3'd3;
      mreq[m].ar.burst = BURST_INCR;
      mreq[m].ar.cache = 4'b0010;
      mreq[m].ar.id    = 8'(m + 1);
      mreq[m].aw       = mreq[m].ar;
      mreq[m].aw.len   = (m == 1) ? 8'd15 : 8'd0;
      mreq[m].r_ready  = 1'b1;
      mreq[m].b_ready  = 1'b1;
      for (int r = 0; r < 2; r++) rcfg[m][r] = '0;
    end
    // region 0 of each unit: the region the manager works in; large budgets
    rcfg[0][0] = '{start_addr: RegionA, end_addr: RegionA + 48'h10_0000,
                   budget_w: 32'hFFFF_FFFF, budget_r: 32'hFFFF_FFFF,
                   period_w: 32'hFFFF_FFFF, period_r: 32'hFFFF_FFFF};
    rcfg[1][0] = '{start_addr: RegionB, end_addr: RegionB + 48'h10_0000,
                   budget_w: 32'hFFFF_FFFF, budget_r: 32'hFFFF_FFFF,
                   period_w: 32'hFFFF_FFFF, period_r: 32'hFFFF_FFFF};
    set_units(1'b0, 1'b0);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (3) @(posedge clk);

    // 1) unregulated
    dma_on = 1'b1;
    repeat (600) @(posedge clk);
    measure(4000, "bypassed", unreg);
    check(unreg > 256, $sformatf("unregulated: core waits behind whole bursts (%0d cycles)", unreg));

    // 2) fragment size one
    set_units(1'b1, 1'b0);
    wait (stat[0].active && stat[1].active);
    repeat (300) @(posedge clk);
    measure(4000, "iRealm, fragments of one beat", regd);
    check(regd <= 40, $sformatf("regulated: worst latency %0d cycles", regd));
    check(regd * 8 < unreg, "worst latency reduced by more than 8x");
    check(dma_beats > 0, "DMA keeps running");

    // 3) period sweep, budget = half of what a period could move
    foreach (plist[i]) begin
      budget = plist[i] * 8 / 2;
      set_units(1'b1, 1'b0);
      rcfg[1][0].budget_r = 32'(budget);
      rcfg[1][0].period_r = 32'(plist[i]);
      @(posedge clk);
      set_units(1'b1, 1'b1);
      repeat (2 * plist[i]) @(posedge clk);
      periods = 4;
      b0 = dma_beats;
      lat_max = 0;
      lat_n   = 0;
      core_on = 1'b1;
      repeat (periods * plist[i]) @(posedge clk);
      core_on = 1'b0;
      b1 = dma_beats;
      beats = b1 - b0;
      $display("period %0d, budget %0d B: DMA got %0d of %0d beats, core worst latency %0d",
               plist[i], budget, beats, periods * plist[i], lat_max);
      check(beats * 8 <= periods * budget + periods * 8 + 16 * 8,
            $sformatf("period %0d: DMA within its budget (%0d B)", plist[i], beats * 8));
      check(beats * 10 >= periods * plist[i] * 4 && beats * 10 <= periods * plist[i] * 6,
            $sformatf("period %0d: DMA gets about half the bandwidth", plist[i]));
      wait (mreq[0].ar_valid == 1'b0);
      repeat (50) @(posedge clk);
    end
    dma_on = 1'b0;
    set_units(1'b1, 1'b0);
    repeat (1200) @(posedge clk);
    check(dma_out == 0 && dma_beats % 256 == 0, $sformatf("every DMA burst completed whole (%0d beats)", dma_beats));

    // 4) slow writer: the W channel is held for a whole burst when unregulated
    set_units(1'b1, 1'b0);
    repeat (1000) @(posedge clk);
    wait (dma_out == 0);
    set_units(1'b0, 1'b0);
    wait (!stat[0].active && !stat[1].active);
    dma_wr_on = 1'b1;
    repeat (200) @(posedge clk);
    wlat_max = 0; wlat_n = 0;
    core_wr_on = 1'b1;
    repeat (3000) @(posedge clk);
    core_wr_on = 1'b0;
    repeat (200) @(posedge clk);
    unreg = wlat_max;
    $display("slow writer, bypassed: worst core write latency %0d cycles over %0d writes", wlat_max, wlat_n);
    check(unreg >= 40, $sformatf("unregulated: core write waits for the slow burst (%0d cycles)", unreg));
    set_units(1'b1, 1'b0);
    for (int m = 0; m < 2; m++) cfg[m].frag_len = 8'd3;
    wait (stat[0].active && stat[1].active);
    repeat (200) @(posedge clk);
    wlat_max = 0; wlat_n = 0;
    core_wr_on = 1'b1;
    repeat (3000) @(posedge clk);
    core_wr_on = 1'b0;
    repeat (200) @(posedge clk);
    regd = wlat_max;
    $display("slow writer, iRealm with 4-beat fragments and write buffer: worst core write latency %0d cycles over %0d writes",
             wlat_max, wlat_n);
    check(regd <= 16 && regd * 3 < unreg, $sformatf("write buffer: core write latency %0d cycles", regd));
    dma_wr_on = 1'b0;

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
