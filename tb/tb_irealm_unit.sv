// Testbench of irealm_unit: a manager in front, a memory model with random
// stalls behind. Checks: after reset the unit is bypassed (AW forwarded in the
// same cycle); enabled with 4-beat fragments, a 16-beat write and read become
// four bursts each with the data intact and a single B and R.last; the write
// buffer forwards an AW only after its last W beat; with a 64-byte write budget
// per 150 cycles a second 64-byte write is held until the period renews the
// budget; software isolation holds new requests; disabling returns to bypass.
// Drive convention: inputs change 1 ns after a rising edge, outputs are
// sampled at the falling edge.
module tb_irealm_unit;
  import realm_pkg::*;

  logic         clk = 1'b0, rst_n = 1'b0;
  irealm_cfg_t  cfg;
  region_cfg_t  rcfg  [2];
  irealm_stat_t stat;
  region_stat_t rstat [2];
  axi_req_t     mreq, sreq;
  axi_resp_t    mresp, sresp;
  int           checks = 0, failures = 0;

  always #5 clk = ~clk;

  irealm_unit dut (
    .clk_i(clk), .rst_ni(rst_n), .cfg_i(cfg), .region_cfg_i(rcfg), .stat_o(stat),
    .region_stat_o(rstat), .mgr_req_i(mreq), .mgr_resp_o(mresp), .sub_req_o(sreq), .sub_resp_i(sresp)
  );

  tb_axi_mem #(.RandStall(1'b1)) i_mem (
    .clk_i(clk), .rst_ni(rst_n), .req_i(sreq), .resp_o(sresp),
    .hang_aw_i(1'b0), .hang_w_i(1'b0), .hang_b_i(1'b0), .hang_r_i(1'b0)
  );

  `include "tb_axi_tasks.svh"

  longint cyc = 0, t_aw_in = 0, t_aw_out = 0, t_wlast_in = 0;
  int     aw_out = 0, ar_out = 0, aw_in = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      if (mreq.aw_valid && mresp.aw_ready) begin aw_in++; t_aw_in = cyc; end
      if (mreq.w_valid && mresp.w_ready && mreq.w.last) t_wlast_in = cyc;
      if (sreq.aw_valid && sresp.aw_ready) begin aw_out++; t_aw_out = cyc; end
      if (sreq.ar_valid && sresp.ar_ready) ar_out++;
    end
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [1:0] resp;
    int lasterr, dataerr, n;
    longint t0;
    mreq = '0;
    mreq.b_ready = 1'b1;
    mreq.r_ready = 1'b1;
    cfg = '{enable: 1'b0, regulate: 1'b0, wbuf_en: 1'b1, isolate: 1'b0, frag_len: 8'd3};
    rcfg[0] = '{start_addr: 48'h0, end_addr: 48'h10000, budget_w: 32'd64, budget_r: 32'd100000,
                period_w: 32'd150, period_r: 32'd150};
    rcfg[1] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (3) @(posedge clk);
    #1;

    // bypass
    axi_write(8'h1, 48'h100, 8'd3, 4'b0010, 64'h10, resp);
    check(resp == RESP_OKAY && t_aw_out == t_aw_in && !stat.active, "bypassed: AW in the same cycle");

    // active, 4-beat fragments
    cfg.enable = 1'b1;
    while (!stat.active) @(posedge clk);
    #1;
    n = aw_out;
    axi_write(8'h2, 48'h1000, 8'd15, 4'b0010, 64'h100, resp);
    check(resp == RESP_OKAY && aw_out - n == 4, $sformatf("16-beat write sent as %0d bursts", aw_out - n));
    n = ar_out;
    axi_read(8'h3, 48'h1000, 8'd15, 4'b0010, 64'h100, 1'b1, lasterr, dataerr, resp);
    check(lasterr == 0 && dataerr == 0 && resp == RESP_OKAY && ar_out - n == 4,
          $sformatf("16-beat read as %0d bursts, data and R.last intact", ar_out - n));

    // write buffer
    axi_aw(8'h4, 48'h2000, 8'd1, 4'b0010, 1'b0, BURST_INCR);
    axi_w(8'd1, 64'h200, 5);
    axi_b(8'h4, resp);
    check(t_aw_out >= t_wlast_in + 1, $sformatf("AW after the last W (W %0d, AW %0d)", t_wlast_in, t_aw_out));

    // regulation
    cfg.regulate = 1'b1;
    repeat (2) @(posedge clk);
    #1;
    axi_write(8'h5, 48'h3000, 8'd7, 4'b0010, 64'h300, resp);
    repeat (2) @(posedge clk);
    #1;
    check(stat.depleted, "64 bytes use up the budget");
    t0 = cyc;
    axi_write(8'h5, 48'h3040, 8'd7, 4'b0010, 64'h340, resp);
    check(resp == RESP_OKAY && t_aw_out > t0 + 40, $sformatf("next write held until renewal (%0d cycles)", t_aw_out - t0));
    cfg.regulate = 1'b0;

    // software isolation
    cfg.isolate = 1'b1;
    repeat (3) @(posedge clk);
    #1;
    check(stat.isolated, "isolated on command");
    n = aw_in;
    mreq.aw = '0;
    mreq.aw.id = 8'h6;
    mreq.aw.addr = 48'h4000;
    mreq.aw_valid = 1'b1;
    repeat (10) @(posedge clk);
    #1;
    check(aw_in == n, "no AW accepted while isolated");
    mreq.aw_valid = 1'b0;
    cfg.isolate = 1'b0;

    // back to bypass
    cfg.enable = 1'b0;
    while (stat.active) @(posedge clk);
    #1;
    axi_write(8'h7, 48'h5000, 8'd15, 4'b0010, 64'h500, resp);
    check(resp == RESP_OKAY && t_aw_out == t_aw_in, "bypassed again after disabling");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

