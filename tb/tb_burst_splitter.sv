// Testbench of burst_splitter: bursts from a manager go through the splitter
// into a memory model with random stalls. Checks fragment lengths and
// addresses, W.last placement, coalesced B, R.last gating, read-back data, the
// error subordinate for unsplittable requests, pass-through of short
// unsplittable requests, and the zero-cycle forwarding of the first fragment.
module tb_burst_splitter;
  import realm_pkg::*;

  logic      clk = 1'b0, rst_n = 1'b0;
  axi_req_t  mreq, sreq;
  axi_resp_t mresp, sresp;
  len_t      frag;
  int        checks = 0, failures = 0;

  always #5 clk = ~clk;

  burst_splitter #(.NumPending(16)) dut (
    .clk_i(clk), .rst_ni(rst_n), .frag_len_i(frag), .throttle_i(1'b0),
    .mgr_req_i(mreq), .mgr_resp_o(mresp), .sub_req_o(sreq), .sub_resp_i(sresp)
  );

  tb_axi_mem #(.RandStall(1'b1)) i_mem (
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

  // downstream monitor
  int    n_aw, n_ar, bad_len, bad_addr, n_wlast, n_b;
  addr_t exp_addr;
  always @(posedge clk) if (rst_n) begin
    if (sreq.aw_valid && sresp.aw_ready) begin
      n_aw++;
      if (sreq.aw.len > frag && sreq.aw.cache[1]) bad_len++;
      if (sreq.aw.addr != exp_addr) bad_addr++;
      exp_addr = sreq.aw.addr + ((addr_t'(sreq.aw.len) + 1) << 3);
    end
    if (sreq.ar_valid && sresp.ar_ready) begin
      n_ar++;
      if (sreq.ar.len > frag && sreq.ar.cache[1]) bad_len++;
    end
    if (sreq.w_valid && sresp.w_ready && sreq.w.last) n_wlast++;
    if (mresp.b_valid && mreq.b_ready) n_b++;
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [1:0] resp;
    int lasterr, dataerr;
    mreq = '0;
    mreq.b_ready = 1'b1;
    mreq.r_ready = 1'b1;
    frag = 8'd1;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk); #1;

    // 1) 8-beat write cut into 2-beat fragments
    n_aw = 0; n_wlast = 0; n_b = 0; bad_len = 0; bad_addr = 0; exp_addr = 48'h1000;
    axi_write(8'h3, 48'h1000, 8'd7, 4'b0010, 64'h100, resp);
    repeat (5) @(posedge clk);
    #1;
    check(n_aw == 4, $sformatf("8 beats / 2 -> 4 AW fragments, got %0d", n_aw));
    check(n_wlast == 4, $sformatf("W.last at each fragment end, got %0d", n_wlast));
    check(bad_len == 0 && bad_addr == 0, "fragment lengths and addresses");
    check(n_b == 1 && resp == RESP_OKAY, $sformatf("one coalesced OKAY B, got %0d", n_b));

    // 2) read back with single-beat fragments
    frag = 8'd0; n_ar = 0;
    axi_read(8'h5, 48'h1000, 8'd7, 4'b0010, 64'h100, 1'b1, lasterr, dataerr, resp);
    check(n_ar == 8, $sformatf("8 single-beat AR fragments, got %0d", n_ar));
    check(lasterr == 0, "R.last only at the end of the original burst");
    check(dataerr == 0 && resp == RESP_OKAY, "read-back data");

    // 3) 256-beat write at fragment 16, read back at fragment 256
    frag = 8'd15; n_aw = 0; exp_addr = 48'h20000; bad_addr = 0;
    axi_write(8'h1, 48'h20000, 8'd255, 4'b0010, 64'h5000, resp);
    repeat (5) @(posedge clk);
    #1;
    check(n_aw == 16 && bad_addr == 0 && resp == RESP_OKAY, $sformatf("256 beats / 16 -> 16 AWs, got %0d", n_aw));
    frag = 8'd255; n_ar = 0;
    axi_read(8'h1, 48'h20000, 8'd255, 4'b0010, 64'h5000, 1'b1, lasterr, dataerr, resp);
    check(n_ar == 1 && lasterr == 0 && dataerr == 0, "unfragmented 256-beat read back");

    // 4) non-modifiable burst longer than a fragment: error subordinate
    frag = 8'd0; n_aw = 0; n_ar = 0;
    axi_write(8'h7, 48'h3000, 8'd3, 4'b0000, 64'h0, resp);
    check(resp == RESP_SLVERR && n_aw == 0, "rejected write answered with SLVERR, not forwarded");
    axi_read(8'h7, 48'h3000, 8'd3, 4'b0000, 64'h0, 1'b0, lasterr, dataerr, resp);
    check(resp == RESP_SLVERR && n_ar == 0 && lasterr == 0, "rejected read: 4 SLVERR beats, last at end");

    // 5) non-modifiable single beat fits a fragment: passed whole
    axi_write(8'h7, 48'h3000, 8'd0, 4'b0000, 64'h77, resp);
    check(resp == RESP_OKAY && n_aw == 1, "short non-modifiable write forwarded");

    // 5b) non-modifiable burst of more than 16 beats may be cut
    n_aw = 0;
    axi_write(8'h7, 48'h3800, 8'd16, 4'b0000, 64'h900, resp);
    check(resp == RESP_OKAY && n_aw == 17, $sformatf("17-beat non-modifiable write cut into %0d", n_aw));

    // 6) zero latency: first fragment is visible downstream in the same cycle
    @(posedge clk); #1;
    mreq.ar = '0; mreq.ar.id = 8'h9; mreq.ar.addr = 48'h1000; mreq.ar.len = 8'd3;
    mreq.ar.size = 3'd3; mreq.ar.burst = BURST_INCR; mreq.ar.cache = 4'b0010;
    mreq.ar_valid = 1'b1;
    #1;
    check(sreq.ar_valid && sreq.ar.len == 8'd0, "first fragment forwarded combinationally");
    @(negedge clk);
    while (!mresp.ar_ready) @(negedge clk);
    @(posedge clk); #1;
    mreq.ar_valid = 1'b0;
    repeat (40) @(posedge clk);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
