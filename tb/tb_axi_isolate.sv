// Testbench of axi_isolate: a manager in front of the isolation cell, a memory
// model behind it. Checks that an AW accepted before isolation still gets its
// W beats and its B through, that isolated_o waits until nothing is
// outstanding, that new AW and AR requests are held while isolated, and that
// they pass once isolation is lifted.
// Drive convention: inputs change 1 ns after a rising edge.
module tb_axi_isolate;
  import realm_pkg::*;

  logic      clk = 1'b0, rst_n = 1'b0, iso, isolated;
  axi_req_t  mreq, sreq;
  axi_resp_t mresp, sresp;
  int        checks = 0, failures = 0;

  always #5 clk = ~clk;

  axi_isolate dut (
    .clk_i(clk), .rst_ni(rst_n), .isolate_i(iso), .isolated_o(isolated),
    .mgr_req_i(mreq), .mgr_resp_o(mresp), .sub_req_o(sreq), .sub_resp_i(sresp)
  );

  tb_axi_mem #(.RandStall(1'b0)) i_mem (
    .clk_i(clk), .rst_ni(rst_n), .req_i(sreq), .resp_o(sresp),
    .hang_aw_i(1'b0), .hang_w_i(1'b0), .hang_b_i(1'b0), .hang_r_i(1'b0)
  );

  `include "tb_axi_tasks.svh"

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  int aw_out = 0, ar_out = 0;
  always @(posedge clk) begin
    if (rst_n && sreq.aw_valid && sresp.aw_ready) aw_out++;
    if (rst_n && sreq.ar_valid && sresp.ar_ready) ar_out++;
  end

  initial begin : watchdog
    repeat (3000) @(posedge clk);
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
    iso = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (3) @(posedge clk);
    #1;

    check(!isolated, "not isolated after reset");
    // AW accepted, then isolation requested before the W beats
    axi_aw(8'h1, 48'h100, 8'd3, 4'b0010, 1'b0, BURST_INCR);
    iso = 1'b1;
    repeat (2) @(posedge clk);
    #1;
    check(!isolated, "not isolated while a write is outstanding");
    axi_w(8'd3, 64'h10, 0);
    axi_b(8'h1, resp);
    check(resp == RESP_OKAY, "outstanding write completes during isolation");
    repeat (2) @(posedge clk);
    #1;
    check(isolated, "isolated once drained");

    // new requests are held
    n = ar_out;
    mreq.ar = '0;
    mreq.ar.id = 8'h2;
    mreq.ar.addr = 48'h100;
    mreq.ar.len = 8'd3;
    mreq.ar.size = 3'd3;
    mreq.ar.burst = BURST_INCR;
    mreq.ar_valid = 1'b1;
    repeat (20) @(posedge clk);
    #1;
    check(ar_out == n && !mresp.ar_ready, "AR held while isolated");
    mreq.ar_valid = 1'b0;
    n = aw_out;
    mreq.aw = '0;
    mreq.aw.id = 8'h3;
    mreq.aw_valid = 1'b1;
    mreq.w_valid = 1'b1;
    repeat (20) @(posedge clk);
    #1;
    check(aw_out == n && !mresp.aw_ready && !mresp.w_ready, "AW and W held while isolated");
    mreq.aw_valid = 1'b0;
    mreq.w_valid = 1'b0;

    // released
    iso = 1'b0;
    @(posedge clk);
    #1;
    check(!isolated, "isolation lifted");
    axi_read(8'h2, 48'h100, 8'd3, 4'b0010, 64'h10, 1'b1, lasterr, dataerr, resp);
    check(lasterr == 0 && dataerr == 0 && resp == RESP_OKAY, "read after release returns the data");
    axi_write(8'h3, 48'h200, 8'd0, 4'b0010, 64'h20, resp);
    check(resp == RESP_OKAY, "write after release completes");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
