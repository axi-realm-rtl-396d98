// Testbench of write_buffer: a slow writer (gaps between W beats) writes
// through the buffer into a memory model that is always ready. Checks that the
// AW leaves exactly one cycle after the last W beat entered, that the W beats
// then leave back to back, that the data arrives intact (read back), that a
// burst longer than the buffer still completes, and that the bypassed buffer
// forwards the AW in the same cycle.
module tb_write_buffer;
  import realm_pkg::*;

  logic      clk = 1'b0, rst_n = 1'b0, en;
  axi_req_t  mreq, sreq;
  axi_resp_t mresp, sresp;
  int        checks = 0, failures = 0;

  always #5 clk = ~clk;

  write_buffer #(.AwDepth(2), .BufferDepth(4)) dut (
    .clk_i(clk), .rst_ni(rst_n), .enable_i(en),
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

  longint cyc = 0, t_last_in = 0, t_aw_out = 0, t_aw_in = 0;
  int     w_out_gaps = 0, w_out_active = 0;
  always @(posedge clk) begin
    cyc++;
    if (mreq.w_valid && mresp.w_ready && mreq.w.last) t_last_in = cyc;
    if (mreq.aw_valid && mresp.aw_ready) t_aw_in = cyc;
    if (rst_n && sreq.aw_valid && sresp.aw_ready) begin
      t_aw_out = cyc;
      w_out_active = 1;
    end
    if (w_out_active && cyc > t_aw_out) begin
      if (sreq.w_valid && sresp.w_ready) begin
        if (sreq.w.last) w_out_active = 0;
      end else w_out_gaps++;
    end
  end

  initial begin : watchdog
    repeat (5000) @(posedge clk);
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
    en = 1'b1;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (3) @(posedge clk);
    #1;

    // slow 4-beat write: three idle cycles after each beat
    w_out_gaps = 0;
    axi_aw(8'h1, 48'h400, 8'd3, 4'b0010, 1'b0, BURST_INCR);
    axi_w(8'd3, 64'hA0, 3);
    axi_b(8'h1, resp);
    check(resp == RESP_OKAY, "write completes");
    check(t_aw_out == t_last_in + 1, $sformatf("AW leaves one cycle after last W (in %0d, out %0d)", t_last_in, t_aw_out));
    check(w_out_gaps == 0, $sformatf("W beats leave back to back, gaps %0d", w_out_gaps));
    axi_read(8'h2, 48'h400, 8'd3, 4'b0010, 64'hA0, 1'b1, lasterr, dataerr, resp);
    check(dataerr == 0 && lasterr == 0, "data intact");

    // 8-beat write, longer than the buffer: must not deadlock
    axi_aw(8'h1, 48'h800, 8'd7, 4'b0010, 1'b0, BURST_INCR);
    axi_w(8'd7, 64'hB0, 1);
    axi_b(8'h1, resp);
    axi_read(8'h2, 48'h800, 8'd7, 4'b0010, 64'hB0, 1'b1, lasterr, dataerr, resp);
    check(dataerr == 0 && resp == RESP_OKAY, "over-long burst completes by cut-through");

    // bypass: AW forwarded in the cycle it arrives
    en = 1'b0;
    repeat (3) @(posedge clk);
    #1;
    axi_aw(8'h1, 48'hC00, 8'd0, 4'b0010, 1'b0, BURST_INCR);
    check(t_aw_out == t_aw_in, "bypassed: AW forwarded without delay");
    axi_w(8'd0, 64'hC0, 0);
    axi_b(8'h1, resp);
    check(resp == RESP_OKAY, "bypassed write completes");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
