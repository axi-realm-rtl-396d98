// Testbench of erealm_unit: a manager in front, a memory model behind whose
// channels can be made to hang and whose reset is the unit's subordinate reset.
// Stage budgets are 20 cycles. Checks, in order: after reset the unit is
// bypassed (IDs unchanged); enabled, the manager's IDs reach the subordinate
// remapped to compact ones and come back restored; a read whose R channel
// hangs is detected in stage 2 (waiting for the first beat) and logged with
// ID and address, raises the interrupt, is completed towards the manager with
// SLVERR beats ending in R.last, and resets the subordinate; the log clear
// drops the interrupt; traffic works
// again afterwards; a software reset pulses the subordinate's reset. Then the
// Ethernet setting of the evaluation: 256-beat reads with a data-stage budget
// of 2 cycles per beat pass, and a burst that stops after its first beat is
// caught in stage 3 about 512 cycles later, completed, and the subordinate is
// reset within two cycles of the detection.
// Drive convention: inputs change 1 ns after a rising edge, outputs are
// sampled at the falling edge.
module tb_erealm_unit;
  import realm_pkg::*;

  logic         clk = 1'b0, rst_n = 1'b0;
  erealm_cfg_t  cfg;
  logic [9:0]   bw [6];
  logic [9:0]   br [6];
  erealm_stat_t stat;
  logic         irq, sub_rst_n, hang_r = 1'b0;
  logic         valid_q = 1'b0;
  int           cyc = 0, rst_cyc = 0, log_cyc = 0, first_cyc = 0;
  axi_req_t     mreq, sreq;
  axi_resp_t    mresp, sresp;
  int           checks = 0, failures = 0, resets = 0;
  id_t          sub_aw_id;
  logic         srst_q = 1'b1;

  always #5 clk = ~clk;

  erealm_unit dut (
    .clk_i(clk), .rst_ni(rst_n), .cfg_i(cfg), .budget_w_i(bw), .budget_r_i(br),
    .stat_o(stat), .irq_o(irq), .sub_rst_no(sub_rst_n),
    .mgr_req_i(mreq), .mgr_resp_o(mresp), .sub_req_o(sreq), .sub_resp_i(sresp)
  );

  logic mem_rst_n;
  assign mem_rst_n = rst_n && sub_rst_n;
  tb_axi_mem #(.RandStall(1'b0)) i_mem (
    .clk_i(clk), .rst_ni(mem_rst_n), .req_i(sreq), .resp_o(sresp),
    .hang_aw_i(1'b0), .hang_w_i(1'b0), .hang_b_i(1'b0), .hang_r_i(hang_r)
  );

  `include "tb_axi_tasks.svh"

  always @(posedge clk) begin
    if (rst_n && sreq.aw_valid && sresp.aw_ready) sub_aw_id = sreq.aw.id;
    cyc++;
    if (rst_n && !sub_rst_n && srst_q) begin
      resets++;
      rst_cyc = cyc;
    end
    if (stat.valid && !valid_q) log_cyc = cyc;
    srst_q  = sub_rst_n;
    valid_q = stat.valid;
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
    mreq = '0;
    mreq.b_ready = 1'b1;
    mreq.r_ready = 1'b1;
    cfg = '0;
    sub_aw_id = '0;
    for (int k = 0; k < 6; k++) begin
      bw[k] = 10'd20;
      br[k] = 10'd20;
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (3) @(posedge clk);
    #1;

    // bypassed
    axi_write(8'h42, 48'h100, 8'd3, 4'b0010, 64'h10, resp);
    check(resp == RESP_OKAY && sub_aw_id == 8'h42 && !stat.active, "bypassed: ID unchanged");

    // enabled
    cfg.enable = 1'b1;
    cfg.irq_en = 1'b1;
    cfg.auto_reset = 1'b1;
    repeat (3) @(posedge clk);
    #1;
    check(stat.active, "unit active");
    axi_write(8'h42, 48'h200, 8'd3, 4'b0010, 64'h20, resp);
    check(resp == RESP_OKAY && sub_aw_id < 8'd2, $sformatf("ID 42 remapped to %0d", sub_aw_id));
    axi_read(8'h42, 48'h200, 8'd3, 4'b0010, 64'h20, 1'b1, lasterr, dataerr, resp);
    check(lasterr == 0 && dataerr == 0 && resp == RESP_OKAY, "read through the active unit, ID restored");
    check(!stat.valid && !irq, "no fault logged");

    // hanging R channel
    hang_r = 1'b1;
    n = resets;
    axi_read(8'h77, 48'h300, 8'd3, 4'b0010, 64'h0, 1'b0, lasterr, dataerr, resp);
    check(resp == RESP_SLVERR && lasterr == 0, "hung read completed with SLVERR and one R.last");
    hang_r = 1'b0;
    check(stat.valid && !stat.is_write && stat.cause == 2'd1 && stat.id == 8'h77 && stat.addr == 48'h300,
          $sformatf("timeout logged (cause %0d stage %0d id %h)", stat.cause, stat.stage, stat.id));
    check(stat.stage == 3'd2, $sformatf("while waiting for the first beat (stage %0d)", stat.stage));
    check(irq, "interrupt raised");
    check(resets == n + 1, "subordinate reset");
    // the fault is detected one cycle before it is logged; the reset must
    // start within two cycles of detection, i.e. at most one after logging
    check(rst_cyc >= log_cyc && rst_cyc - log_cyc <= 1,
          $sformatf("reset %0d cycles after the fault was logged", rst_cyc - log_cyc));
    while (stat.busy) @(posedge clk);
    #1;
    cfg.clear = 1'b1;
    @(posedge clk); #1;
    cfg.clear = 1'b0;
    check(!irq && !stat.valid, "log and interrupt cleared");
    axi_write(8'h42, 48'h400, 8'd1, 4'b0010, 64'h40, resp);
    axi_read(8'h42, 48'h400, 8'd1, 4'b0010, 64'h40, 1'b1, lasterr, dataerr, resp);
    check(resp == RESP_OKAY && dataerr == 0, "subordinate usable after the reset");

    // software reset
    n = resets;
    cfg.sw_reset = 1'b1;
    @(posedge clk); #1;
    cfg.sw_reset = 1'b0;
    repeat (10) @(posedge clk);
    #1;
    check(resets == n + 1 && !stat.valid, "software reset pulses the reset without logging a fault");
    axi_write(8'h42, 48'h500, 8'd0, 4'b0010, 64'h50, resp);
    check(resp == RESP_OKAY, "write after software reset");

    // Ethernet-like setting: 20-cycle budgets, 256-beat bursts, data stage at
    // 2 cycles per beat (512 cycles for a 256-beat burst)
    br[2] = 10'd2;
    bw[3] = 10'd2;
    axi_read(8'h42, 48'h8000, 8'd255, 4'b0010, 64'h0, 1'b0, lasterr, dataerr, resp);
    check(resp == RESP_OKAY && lasterr == 0 && !stat.valid, "256-beat read within its scaled budget");
    // the subordinate sends the first beat and then stops
    fork
      begin
        @(negedge clk iff (sresp.r_valid && sreq.r_ready));
        @(posedge clk);
        #1;
        hang_r = 1'b1;
        first_cyc = cyc;
      end
      axi_read(8'h42, 48'h9000, 8'd255, 4'b0010, 64'h0, 1'b0, lasterr, dataerr, resp);
    join
    hang_r = 1'b0;
    check(resp == RESP_SLVERR && lasterr == 0 && stat.valid && stat.stage == 3'd3 && stat.cause == 2'd1,
          $sformatf("stalled burst detected in the data stage (stage %0d) and completed", stat.stage));
    check(log_cyc - first_cyc >= 500 && log_cyc - first_cyc <= 515,
          $sformatf("detected %0d cycles after the first beat (budget 512)", log_cyc - first_cyc));
    check(rst_cyc >= log_cyc && rst_cyc - log_cyc <= 1, "subordinate reset within two cycles of detection");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
