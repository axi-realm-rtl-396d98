// Testbench of irealm_mr, the monitoring and regulation unit. The probed port
// is driven directly with single-cycle handshakes. Two regions: region 0 has a
// 100-byte write budget per 50 cycles, region 1 a large budget. Checks the
// charging of (len+1) << size bytes to the matching region only, depletion when
// the budget is used up, renewal at the end of the period, the byte counters,
// the completed-transaction counters and the latency sum (one read outstanding
// for ten cycles adds ten).
// Drive convention: inputs change 1 ns after a rising edge.
module tb_irealm_mr;
  import realm_pkg::*;

  logic         clk = 1'b0, rst_n = 1'b0, regulate;
  region_cfg_t  rcfg  [2];
  region_stat_t rstat [2];
  logic [31:0]  lat_w, lat_r, txn_w, txn_r;
  logic         depleted;
  axi_req_t     req;
  axi_resp_t    resp;
  int           checks = 0, failures = 0;

  always #5 clk = ~clk;

  irealm_mr dut (
    .clk_i(clk), .rst_ni(rst_n), .regulate_i(regulate), .region_cfg_i(rcfg),
    .region_stat_o(rstat), .lat_sum_w_o(lat_w), .lat_sum_r_o(lat_r), .txn_w_o(txn_w),
    .txn_r_o(txn_r), .depleted_o(depleted), .req_i(req), .resp_i(resp)
  );

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // one AW handshake of len+1 beats of 8 bytes at addr
  task automatic aw(input addr_t addr, input len_t len);
    req.aw.addr  = addr;
    req.aw.len   = len;
    req.aw.size  = 3'd3;
    req.aw_valid = 1'b1;
    resp.aw_ready = 1'b1;
    @(posedge clk); #1;
    req.aw_valid  = 1'b0;
    resp.aw_ready = 1'b0;
  endtask

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t;
    req  = '0;
    resp = '0;
    req.b_ready = 1'b1;
    req.r_ready = 1'b1;
    regulate = 1'b0;
    rcfg[0] = '{start_addr: 48'h0, end_addr: 48'h1000, budget_w: 32'd100, budget_r: 32'd100000,
                period_w: 32'd50, period_r: 32'd50};
    rcfg[1] = '{start_addr: 48'h1000, end_addr: 48'h2000, budget_w: 32'd100000, budget_r: 32'd100000,
                period_w: 32'd50, period_r: 32'd50};
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);
    #1;

    regulate = 1'b1;
    repeat (2) @(posedge clk);
    #1;
    check(rstat[0].left_w == 32'd100 && !depleted, "budget loaded when regulation starts");
    aw(48'h100, 8'd3);
    aw(48'h1100, 8'd7);
    check(rstat[0].left_w == 32'd68 && rstat[1].left_w == 32'd100000 - 32'd64,
          $sformatf("bytes charged to the matching region (%0d)", rstat[0].left_w));
    aw(48'h200, 8'd3);
    aw(48'h300, 8'd3);
    check(!depleted && rstat[0].left_w == 32'd4, "4 bytes left, not depleted");
    aw(48'h400, 8'd0);
    check(depleted && rstat[0].left_w == 32'd0, "depleted when the budget is used up");
    t = 0;
    while (depleted && t < 100) begin
      @(posedge clk); #1;
      t++;
    end
    check(!depleted && t < 50 && rstat[0].left_w == 32'd100,
          $sformatf("budget renewed at the end of the period (after %0d cycles)", t));
    check(rstat[0].bytes_w == 32'd104 && rstat[1].bytes_w == 32'd64, "byte counters");

    // latency: one read outstanding for 10 cycles
    req.ar.addr  = 48'h100;
    req.ar.size  = 3'd3;
    req.ar_valid = 1'b1;
    resp.ar_ready = 1'b1;
    @(posedge clk); #1;
    req.ar_valid  = 1'b0;
    resp.ar_ready = 1'b0;
    repeat (9) @(posedge clk);
    #1;
    resp.r_valid = 1'b1;
    resp.r.last  = 1'b1;
    @(posedge clk); #1;
    resp.r_valid = 1'b0;
    @(posedge clk); #1;
    check(txn_r == 32'd1 && lat_r == 32'd10, $sformatf("read latency sum %0d over %0d reads", lat_r, txn_r));
    resp.b_valid = 1'b1;
    repeat (5) @(posedge clk);
    #1;
    resp.b_valid = 1'b0;
    check(txn_w == 32'd5, $sformatf("five writes completed (%0d)", txn_w));

    // without regulation nothing depletes
    regulate = 1'b0;
    aw(48'h100, 8'd255);
    check(!depleted, "no depletion while regulation is off");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
