// End-to-end testbench of axi_realm_top at its default parameters.
//
// Set-up: four testbench managers drive the four iRealm units. The external
// interconnect is modelled by wiring: the outputs of iRealm units 0..2 each go
// to a memory model of their own, and the output of iRealm unit 3 goes straight
// into the eRealm unit, which guards a memory model whose B channel can be
// made to hang and whose reset is the eRealm's subordinate reset. All
// configuration goes over the configuration bus through the bus guard.
//
// Sequence and the mechanism each part counts:
//   guard      access before any claim rejected; claim by ID 5; access by
//              ID 6 rejected; handover to ID 6; old owner rejected
//   bypass     unit 0 after reset forwards AW in the same cycle
//   fragment   unit 0 with 2-beat fragments turns an 8-beat write and read
//              into 4 bursts each, data intact, one R.last
//   wbuf       the AW of a slowly written burst leaves one cycle after its last
//              W beat
//   deplete    unit 1 with a 64 B write budget per 200 cycles: the third
//              32 B write is held until the period renews the budget
//   renew      the budget comes back and the held write proceeds
//   probe      transferred bytes and completed transactions are read back
//   isolate    unit 2 isolated by software accepts no AW until released
//   timeout    a hanging B behind the eRealm unit is detected and logged
//   irq        the interrupt rises and is cleared by software
//   flush      the manager gets an SLVERR instead of hanging
//   subreset   the subordinate's reset is pulled
//   recover    a later write and read through the eRealm unit succeed
// Each counter must be non-zero at the end, otherwise it is a failure.
// Drive convention: inputs change 1 ns after a rising edge, outputs are
// sampled at the falling edge.
module tb_axi_realm_top;
  import realm_pkg::*;

  localparam int NM = 4;

  logic      clk = 1'b0, rst_n = 1'b0;
  cfg_req_t  cfg_req;
  cfg_rsp_t  cfg_rsp;
  axi_req_t  mreq  [NM];
  axi_resp_t mresp [NM];
  axi_req_t  xreq  [NM];
  axi_resp_t xresp [NM];
  axi_req_t  esreq [1];
  axi_resp_t esresp[1];
  axi_req_t  sreq  [1];
  axi_resp_t sresp [1];
  logic      sub_rst_n [1];
  logic      irq [1];
  logic      hang_b = 1'b0;
  int        checks = 0, failures = 0;

  always #5 clk = ~clk;

  axi_realm_top dut (
    .clk_i(clk), .rst_ni(rst_n), .cfg_req_i(cfg_req), .cfg_rsp_o(cfg_rsp),
    .mgr_req_i(mreq), .mgr_resp_o(mresp), .xbar_mgr_req_o(xreq), .xbar_mgr_resp_i(xresp),
    .xbar_sub_req_i(esreq), .xbar_sub_resp_o(esresp), .sub_req_o(sreq), .sub_resp_i(sresp),
    .sub_rst_no(sub_rst_n), .irq_o(irq)
  );

  // interconnect model
  for (genvar m = 0; m < 3; m++) begin : g_mem
    tb_axi_mem #(.RandStall(1'b1)) i_mem (
      .clk_i(clk), .rst_ni(rst_n), .req_i(xreq[m]), .resp_o(xresp[m]),
      .hang_aw_i(1'b0), .hang_w_i(1'b0), .hang_b_i(1'b0), .hang_r_i(1'b0)
    );
  end
  assign esreq[0] = xreq[3];
  assign xresp[3] = esresp[0];

  logic esub_rst_n;
  assign esub_rst_n = rst_n && sub_rst_n[0];
  tb_axi_mem #(.RandStall(1'b0)) i_emem (
    .clk_i(clk), .rst_ni(esub_rst_n), .req_i(sreq[0]), .resp_o(sresp[0]),
    .hang_aw_i(1'b0), .hang_w_i(1'b0), .hang_b_i(hang_b), .hang_r_i(1'b0)
  );

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ------------------------------------------------------------ monitors
  longint cyc = 0;
  int     aw_in [NM], aw_out [NM], ar_out [NM];
  longint t_aw_in [NM], t_aw_out [NM], t_wlast_in [NM];
  longint t_renew = 0;
  int     n_bypass = 0, n_frag = 0, n_wbuf = 0, n_deplete = 0, n_renew = 0, n_probe = 0;
  int     n_isolate = 0, n_timeout = 0, n_irq = 0, n_flush = 0, n_subreset = 0, n_recover = 0;
  int     n_reject = 0, n_claim = 0, n_handover = 0;
  logic   irq_q = 1'b0, srst_q = 1'b1;

  initial begin
    for (int m = 0; m < NM; m++) begin
      aw_in[m] = 0; aw_out[m] = 0; ar_out[m] = 0;
      t_aw_in[m] = 0; t_aw_out[m] = 0; t_wlast_in[m] = 0;
    end
  end

  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      for (int m = 0; m < NM; m++) begin
        if (mreq[m].aw_valid && mresp[m].aw_ready) begin aw_in[m]++; t_aw_in[m] = cyc; end
        if (mreq[m].w_valid && mresp[m].w_ready && mreq[m].w.last) t_wlast_in[m] = cyc;
        if (xreq[m].aw_valid && xresp[m].aw_ready) begin aw_out[m]++; t_aw_out[m] = cyc; end
        if (xreq[m].ar_valid && xresp[m].ar_ready) ar_out[m]++;
      end
      if (irq[0] && !irq_q) n_irq++;
      irq_q = irq[0];
      if (!sub_rst_n[0] && srst_q) n_subreset++;
      srst_q = sub_rst_n[0];
    end
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ config bus
  task automatic cfg_wr(input id_t id, input logic [15:0] addr, input logic [63:0] data,
                        output logic err);
    cfg_req = '{valid: 1'b1, write: 1'b1, addr: addr, wdata: data, id: id};
    @(negedge clk);
    while (!cfg_rsp.ready) @(negedge clk);
    err = cfg_rsp.error;
    @(posedge clk); #1;
    cfg_req = '0;
  endtask

  task automatic cfg_rd(input id_t id, input logic [15:0] addr, output logic [63:0] data,
                        output logic err);
    cfg_req = '{valid: 1'b1, write: 1'b0, addr: addr, wdata: '0, id: id};
    @(negedge clk);
    while (!cfg_rsp.ready) @(negedge clk);
    err  = cfg_rsp.error;
    data = cfg_rsp.rdata;
    @(posedge clk); #1;
    cfg_req = '0;
  endtask

  id_t owner;

  task automatic set(input logic [15:0] addr, input logic [63:0] data);
    logic err;
    cfg_wr(owner, addr, data, err);
    check(!err, $sformatf("configuration write to %h accepted", addr));
  endtask

  task automatic get(input logic [15:0] addr, output logic [63:0] data);
    logic err;
    cfg_rd(owner, addr, data, err);
    check(!err, $sformatf("configuration read of %h accepted", addr));
  endtask

  // poll a register until (value & mask) == want
  task automatic wait_reg(input logic [15:0] addr, input logic [63:0] mask, input logic [63:0] want);
    logic [63:0] d;
    logic err;
    do cfg_rd(owner, addr, d, err); while ((d & mask) != want);
  endtask

  // ------------------------------------------------------------ managers
  task automatic m_aw(input int m, input id_t id, input addr_t addr, input len_t len);
    mreq[m].aw       = '0;
    mreq[m].aw.id    = id;
    mreq[m].aw.addr  = addr;
    mreq[m].aw.len   = len;
    mreq[m].aw.size  = 3'd3;
    mreq[m].aw.burst = BURST_INCR;
    mreq[m].aw.cache = 4'b0010;
    mreq[m].aw_valid = 1'b1;
    @(negedge clk);
    while (!mresp[m].aw_ready) @(negedge clk);
    @(posedge clk); #1;
    mreq[m].aw_valid = 1'b0;
  endtask

  task automatic m_w(input int m, input len_t len, input data_t base, input int gap);
    for (int i = 0; i <= int'(len); i++) begin
      mreq[m].w.data  = base + data_t'(i);
      mreq[m].w.strb  = '1;
      mreq[m].w.last  = (i == int'(len));
      mreq[m].w_valid = 1'b1;
      @(negedge clk);
      while (!mresp[m].w_ready) @(negedge clk);
      @(posedge clk); #1;
      mreq[m].w_valid = 1'b0;
      if (i < int'(len)) begin
        repeat (gap) @(posedge clk);
        #1;
      end
    end
  endtask

  task automatic m_b(input int m, input id_t id, output logic [1:0] resp);
    @(negedge clk);
    while (!(mresp[m].b_valid && mresp[m].b.id == id)) @(negedge clk);
    resp = mresp[m].b.resp;
    @(posedge clk); #1;
  endtask

  task automatic m_write(input int m, input id_t id, input addr_t addr, input len_t len,
                         input data_t base, input int gap, output logic [1:0] resp);
    m_aw(m, id, addr, len);
    m_w(m, len, base, gap);
    m_b(m, id, resp);
  endtask

  // reads len+1 beats and compares them with base+i; counts data and R.last errors
  task automatic m_read(input int m, input id_t id, input addr_t addr, input len_t len,
                        input data_t base, output int errs, output logic [1:0] resp);
    int beat;
    mreq[m].ar       = '0;
    mreq[m].ar.id    = id;
    mreq[m].ar.addr  = addr;
    mreq[m].ar.len   = len;
    mreq[m].ar.size  = 3'd3;
    mreq[m].ar.burst = BURST_INCR;
    mreq[m].ar.cache = 4'b0010;
    mreq[m].ar_valid = 1'b1;
    @(negedge clk);
    while (!mresp[m].ar_ready) @(negedge clk);
    @(posedge clk); #1;
    mreq[m].ar_valid = 1'b0;
    errs = 0;
    resp = '0;
    beat = 0;
    while (beat <= int'(len)) begin
      @(negedge clk);
      if (mresp[m].r_valid && mresp[m].r.id == id) begin
        if (mresp[m].r.last != (beat == int'(len))) errs++;
        if (mresp[m].r.data != base + data_t'(beat)) errs++;
        resp |= mresp[m].r.resp;
        beat++;
      end
    end
    @(posedge clk); #1;
  endtask

  // ------------------------------------------------------------ sequence
  initial begin
    logic [1:0]  resp;
    logic [63:0] d;
    logic        err;
    int          errs, n0, a0;
    longint      t0;

    cfg_req = '0;
    for (int m = 0; m < NM; m++) begin
      mreq[m] = '0;
      mreq[m].b_ready = 1'b1;
      mreq[m].r_ready = 1'b1;
    end
    owner = 8'd5;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (3) @(posedge clk);
    #1;

    // ---- bus guard
    cfg_rd(8'd5, 16'h0000, d, err);
    check(err, "unclaimed configuration space rejects a read");
    if (err) n_reject++;
    cfg_wr(8'd5, 16'hFFF8, 64'd0, err);
    cfg_rd(8'd7, 16'hFFF8, d, err);
    check(!err && d[63] && d[7:0] == 8'd5, "space claimed by ID 5");
    if (!err && d[63] && d[7:0] == 8'd5) n_claim++;
    cfg_wr(8'd6, 16'h0000, 64'h1, err);
    check(err, "write by a non-owner rejected");
    if (err) n_reject++;
    get(16'h0000, d);
    check(d[0] == 1'b0, "rejected write did not reach the registers");
    cfg_wr(8'd5, 16'hFFF8, 64'd6, err);
    cfg_rd(8'd6, 16'h0000, d, err);
    check(!err, "new owner ID 6 gets through after handover");
    cfg_rd(8'd5, 16'h0000, d, err);
    check(err, "old owner rejected after handover");
    if (err) n_handover++;
    owner = 8'd6;

    // ---- unit 0 bypassed after reset
    m_write(0, 8'h1, 48'h1000, 8'd3, 64'h100, 0, resp);
    check(resp == RESP_OKAY, "bypassed write completes");
    check(t_aw_out[0] == t_aw_in[0], "bypassed unit forwards AW in the same cycle");
    if (t_aw_out[0] == t_aw_in[0]) n_bypass++;

    // ---- unit 0 active, 2-beat fragments
    set(16'h0000, 64'h0105);  // enable, write buffer, frag_len 1
    wait_reg(16'h0008, 64'h1, 64'h1);
    a0 = aw_out[0];
    m_write(0, 8'h2, 48'h2000, 8'd7, 64'h200, 0, resp);
    check(resp == RESP_OKAY, "fragmented write gets one OKAY");
    check(aw_out[0] - a0 == 4, $sformatf("8-beat write cut into 4 bursts (%0d)", aw_out[0] - a0));
    a0 = ar_out[0];
    m_read(0, 8'h3, 48'h2000, 8'd7, 64'h200, errs, resp);
    check(errs == 0 && resp == RESP_OKAY, "fragmented read returns the data with one R.last");
    check(ar_out[0] - a0 == 4, $sformatf("8-beat read cut into 4 bursts (%0d)", ar_out[0] - a0));
    if (errs == 0 && ar_out[0] - a0 == 4) n_frag++;

    // ---- write buffer: slowly written 2-beat burst
    m_write(0, 8'h4, 48'h3000, 8'd1, 64'h300, 4, resp);
    check(t_aw_out[0] == t_wlast_in[0] + 1,
          $sformatf("AW leaves one cycle after the last W (W %0d, AW %0d)", t_wlast_in[0], t_aw_out[0]));
    if (t_aw_out[0] == t_wlast_in[0] + 1) n_wbuf++;

    // ---- unit 1: 64 B write budget per 200 cycles on region 0
    set(16'h0240, 64'h0);               // region 0 start
    set(16'h0248, 64'h10000);           // region 0 end
    set(16'h0250, {32'hFFFF_FFFF, 32'd64});
    set(16'h0258, {32'd200, 32'd200});
    set(16'h0200, 64'hFF07);            // enable, regulate, write buffer
    wait_reg(16'h0208, 64'h1, 64'h1);
    m_write(1, 8'h1, 48'h4000, 8'd3, 64'h400, 0, resp);
    m_write(1, 8'h1, 48'h4020, 8'd3, 64'h420, 0, resp);
    get(16'h0208, d);
    check(d[2], "budget depleted after 64 B");
    if (d[2]) n_deplete++;
    t0 = cyc;
    fork
      m_write(1, 8'h1, 48'h4040, 8'd3, 64'h440, 0, resp);
      begin
        wait_reg(16'h0208, 64'h4, 64'h0);
        t_renew = cyc;
        n_renew++;
      end
    join
    check(resp == RESP_OKAY, "write held by regulation completes");
    check(t_aw_out[1] > t0 + 50 && t_aw_out[1] + 4 > t_renew,
          $sformatf("third write forwarded only after renewal (start %0d, renew %0d, AW %0d)", t0, t_renew, t_aw_out[1]));
    get(16'h0268, d);
    check(d[31:0] == 32'd96, $sformatf("byte counter shows 96 B written (%0d)", d[31:0]));
    get(16'h0220, d);
    check(d == 64'd3, $sformatf("transaction counter shows 3 writes (%0d)", d));
    if (d == 64'd3) n_probe++;
    get(16'h0210, d);
    check(d >= 64'd3, "latency sum grows with outstanding transactions");
    m_read(1, 8'h2, 48'h4040, 8'd3, 64'h440, errs, resp);
    check(errs == 0, "regulated data intact");

    // ---- unit 2: software isolation
    set(16'h0400, 64'hFF0D);            // enable, write buffer, isolate
    wait_reg(16'h0408, 64'h3, 64'h3);   // active and isolated
    n0 = aw_in[2];
    fork
      m_write(2, 8'h1, 48'h5000, 8'd1, 64'h500, 0, resp);
      begin
        repeat (40) @(posedge clk);
        #1;
        check(aw_in[2] == n0, "isolated manager's AW not accepted");
        if (aw_in[2] == n0) n_isolate++;
        set(16'h0400, 64'hFF05);
      end
    join
    check(resp == RESP_OKAY, "write completes once isolation is lifted");

    // ---- eRealm: budgets of 20 cycles per stage, interrupt and auto reset
    for (int k = 0; k < 6; k++) begin
      set(16'h1020 + 16'(k * 8), 64'd20);
      set(16'h1050 + 16'(k * 8), 64'd20);
    end
    set(16'h1000, 64'h7);
    wait_reg(16'h1008, 64'h80, 64'h80);
    m_write(3, 8'h9, 48'h6000, 8'd1, 64'h600, 0, resp);
    check(resp == RESP_OKAY, "write through the eRealm unit");
    hang_b = 1'b1;
    m_write(3, 8'h9, 48'h6100, 8'd1, 64'h610, 0, resp);
    check(resp == RESP_SLVERR, "write to a hanging subordinate completed with SLVERR");
    if (resp == RESP_SLVERR) n_flush++;
    hang_b = 1'b0;
    get(16'h1008, d);
    check(d[0] && d[1] && d[3:2] == 2'd1, $sformatf("timeout of a write logged (status %h)", d));
    if (d[0] && d[3:2] == 2'd1) n_timeout++;
    get(16'h1010, d);
    check(d[47:0] == 48'h6100, $sformatf("failing address logged (%h)", d[47:0]));
    check(irq[0], "interrupt raised");
    wait_reg(16'h1008, 64'h100, 64'h0);  // completion and reset done
    set(16'h1000, 64'h17);                // clear the log
    repeat (2) @(posedge clk);
    #1;
    check(!irq[0], "interrupt cleared");
    m_write(3, 8'h9, 48'h6200, 8'd1, 64'h620, 0, resp);
    m_read(3, 8'h9, 48'h6200, 8'd1, 64'h620, errs, resp);
    check(errs == 0 && resp == RESP_OKAY, "subordinate usable again after its reset");
    if (errs == 0 && resp == RESP_OKAY) n_recover++;

    // ---- every mechanism must have happened
    check(n_reject   > 0, "mechanism: guard rejection");
    check(n_claim    > 0, "mechanism: guard claim");
    check(n_handover > 0, "mechanism: guard handover");
    check(n_bypass   > 0, "mechanism: bypass");
    check(n_frag     > 0, "mechanism: fragmentation");
    check(n_wbuf     > 0, "mechanism: write buffer");
    check(n_deplete  > 0, "mechanism: budget depletion");
    check(n_renew    > 0, "mechanism: period renewal");
    check(n_probe    > 0, "mechanism: bandwidth and transaction probe");
    check(n_isolate  > 0, "mechanism: isolation");
    check(n_timeout  > 0, "mechanism: eRealm timeout");
    check(n_irq      > 0, "mechanism: interrupt");
    check(n_flush    > 0, "mechanism: completion with error");
    check(n_subreset > 0, "mechanism: subordinate reset");
    check(n_recover  > 0, "mechanism: recovery");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
