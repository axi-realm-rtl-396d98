// Testbench of erealm_tracker, driven at its channel-level ports. A write
// tracker (two IDs, two transactions each) and a read tracker are used.
// Budgets: 10 cycles for every stage except the write data stage, 5 cycles per
// beat. Checks: compact IDs are handed out per manager ID and translated back
// on the response; a third manager ID stalls while two are in use; a burst
// whose data stage stays within its length-scaled budget raises nothing while
// a slower one times out in stage 4; a B before the last W beat, a response to
// an unknown ID and an R.last on the wrong beat are protocol faults; with
// flush_i the tracker accepts the remaining W beats, answers every open
// transaction and ends empty.
// Drive convention: inputs change 1 ns after a rising edge, outputs are
// sampled at the falling edge.
module tb_erealm_tracker;
  import realm_pkg::*;

  logic       clk = 1'b0, rst_n = 1'b0, flush;
  logic [9:0] bud [6];
  int         checks = 0, failures = 0;

  // write tracker ports
  logic     ax_valid, ax_ready, w_valid, w_ready, w_last;
  logic     rsp_valid, rsp_ready, rsp_last, cmp_w_valid, cmp_w_last, cmp_ready;
  ax_chan_t ax;
  id_t      rsp_cid;
  logic     stall, cmp_w_rdy, cmp_valid, cmp_last, empty, fault;
  id_t      cid, rsp_id, cmp_id, fault_id;
  logic [1:0] cause;
  logic [2:0] stage;
  addr_t    fault_addr;

  always #5 clk = ~clk;

  erealm_tracker #(.IsWrite(1'b1)) dut (
    .clk_i(clk), .rst_ni(rst_n), .flush_i(flush), .budget_i(bud),
    .ax_valid_i(ax_valid), .ax_i(ax), .ax_ready_i(ax_ready), .ax_stall_o(stall), .ax_cid_o(cid),
    .w_valid_i(w_valid), .w_ready_i(w_ready), .w_last_i(w_last),
    .rsp_valid_i(rsp_valid), .rsp_ready_i(rsp_ready), .rsp_last_i(rsp_last), .rsp_cid_i(rsp_cid),
    .rsp_id_o(rsp_id), .cmp_w_valid_i(cmp_w_valid), .cmp_w_last_i(cmp_w_last),
    .cmp_w_ready_o(cmp_w_rdy), .cmp_valid_o(cmp_valid), .cmp_id_o(cmp_id), .cmp_last_o(cmp_last),
    .cmp_ready_i(cmp_ready), .empty_o(empty), .fault_o(fault), .fault_cause_o(cause),
    .fault_stage_o(stage), .fault_id_o(fault_id), .fault_addr_o(fault_addr)
  );

  // read tracker: shares the request and response drive signals
  logic rfault;
  logic [1:0] rcause;
  id_t  rcid;
  erealm_tracker #(.IsWrite(1'b0)) dut_r (
    .clk_i(clk), .rst_ni(rst_n), .flush_i(1'b0), .budget_i(bud),
    .ax_valid_i(ax_valid), .ax_i(ax), .ax_ready_i(ax_ready), .ax_stall_o(), .ax_cid_o(rcid),
    .w_valid_i(1'b0), .w_ready_i(1'b0), .w_last_i(1'b0),
    .rsp_valid_i(rsp_valid), .rsp_ready_i(rsp_ready), .rsp_last_i(rsp_last), .rsp_cid_i(rsp_cid),
    .rsp_id_o(), .cmp_w_valid_i(1'b0), .cmp_w_last_i(1'b0), .cmp_w_ready_o(), .cmp_valid_o(),
    .cmp_id_o(), .cmp_last_o(), .cmp_ready_i(1'b0), .empty_o(), .fault_o(rfault),
    .fault_cause_o(rcause), .fault_stage_o(), .fault_id_o(), .fault_addr_o()
  );

  // first fault since the last reset of the log
  logic       seen, rseen;
  logic [1:0] seen_cause, rseen_cause;
  logic [2:0] seen_stage;
  always @(posedge clk) begin
    if (rst_n && fault && !seen) begin
      seen = 1'b1; seen_cause = cause; seen_stage = stage;
    end
    if (rst_n && rfault && !rseen) begin
      rseen = 1'b1; rseen_cause = rcause;
    end
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic restart();
    rst_n = 1'b0;
    @(posedge clk); #1;
    rst_n = 1'b1;
    seen = 1'b0;
    rseen = 1'b0;
    @(posedge clk); #1;
  endtask

  // one request handshake; returns the compact ID
  task automatic req(input id_t id, input addr_t addr, input len_t len, output id_t c);
    ax = '0;
    ax.id = id;
    ax.addr = addr;
    ax.len = len;
    ax_valid = 1'b1;
    ax_ready = 1'b1;
    @(negedge clk);
    c = cid;
    @(posedge clk); #1;
    ax_valid = 1'b0;
    ax_ready = 1'b0;
  endtask

  task automatic wbeats(input int n, input int gap);
    for (int i = 0; i < n; i++) begin
      w_valid = 1'b1;
      w_ready = 1'b1;
      w_last  = (i == n - 1);
      @(posedge clk); #1;
      w_valid = 1'b0;
      w_ready = 1'b0;
      w_last  = 1'b0;
      repeat (gap) @(posedge clk);
      #1;
    end
  endtask

  task automatic rsp(input id_t c, input logic last, output id_t id);
    rsp_valid = 1'b1;
    rsp_ready = 1'b1;
    rsp_last  = last;
    rsp_cid   = c;
    @(negedge clk);
    id = rsp_id;
    @(posedge clk); #1;
    rsp_valid = 1'b0;
    rsp_ready = 1'b0;
    rsp_last  = 1'b0;
  endtask

  initial begin : watchdog
    repeat (3000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    id_t c0, c1, c2, id;
    flush = 1'b0;
    {ax_valid, ax_ready, w_valid, w_ready, w_last} = '0;
    {rsp_valid, rsp_ready, rsp_last, cmp_w_valid, cmp_w_last, cmp_ready} = '0;
    ax = '0;
    rsp_cid = '0;
    seen = 1'b0; rseen = 1'b0;
    seen_cause = '0; seen_stage = '0; rseen_cause = '0;
    for (int k = 0; k < 6; k++) bud[k] = 10'd10;
    bud[3] = 10'd5;
    repeat (3) @(posedge clk);
    restart();

    // remapping and the HT table limit
    req(8'h42, 48'h100, 8'd1, c0);
    req(8'h57, 48'h200, 8'd1, c1);
    check(c0 != c1 && c0 < 8'd2 && c1 < 8'd2, $sformatf("compact IDs %0d and %0d", c0, c1));
    ax = '0;
    ax.id = 8'h63;
    ax_valid = 1'b1;
    @(negedge clk);
    check(stall, "third manager ID stalls");
    #1;
    ax_valid = 1'b0;
    wbeats(2, 0);
    wbeats(2, 0);
    rsp(c1, 1'b1, id);
    check(id == 8'h57, "response translated back to ID 57");
    rsp(c0, 1'b1, id);
    check(id == 8'h42, "response translated back to ID 42");
    repeat (3) @(posedge clk);
    #1;
    check(!seen && empty, "no fault, tracker empty");

    // length-scaled data-stage budget: 4 beats, 3 idle cycles each (< 5 x 4)
    req(8'h42, 48'h300, 8'd3, c0);
    wbeats(4, 3);
    rsp(c0, 1'b1, id);
    check(!seen, "slow 4-beat burst within its scaled budget");
    // 2 beats 12 cycles apart (> 5 x 2)
    req(8'h42, 48'h340, 8'd1, c0);
    wbeats(2, 12);
    check(seen && seen_cause == 2'd1 && seen_stage == 3'd4,
          $sformatf("slow 2-beat burst times out in stage 4 (cause %0d stage %0d)", seen_cause, seen_stage));

    // B before the last W beat
    restart();
    req(8'h42, 48'h400, 8'd1, c0);
    w_valid = 1'b1;
    w_ready = 1'b1;
    @(posedge clk); #1;
    w_valid = 1'b0;
    w_ready = 1'b0;
    rsp(c0, 1'b1, id);
    check(seen && seen_cause == 2'd2, "B before W.last is a protocol fault");
    // response to an unknown ID
    restart();
    rsp(8'd1, 1'b1, id);
    check(seen && seen_cause == 2'd2, "B for an unknown ID is a protocol fault");

    // R.last on the wrong beat (read tracker)
    restart();
    req(8'h21, 48'h500, 8'd2, c0);
    rsp(rcid, 1'b0, id);
    rsp(rcid, 1'b1, id);
    check(rseen && rseen_cause == 2'd2, "early R.last is a protocol fault");

    // flush: one write without W data, one with W data but no B
    restart();
    req(8'h42, 48'h600, 8'd1, c0);
    req(8'h57, 48'h700, 8'd0, c1);
    flush = 1'b1;
    cmp_ready = 1'b1;
    @(negedge clk);
    check(cmp_w_rdy, "remaining W beats accepted while flushing");
    @(posedge clk); #1;
    cmp_w_valid = 1'b1;
    cmp_w_last  = 1'b0;
    @(posedge clk); #1;
    cmp_w_last  = 1'b1;
    @(posedge clk); #1;
    cmp_w_valid = 1'b1;
    cmp_w_last  = 1'b1;
    @(posedge clk); #1;
    cmp_w_valid = 1'b0;
    cmp_w_last  = 1'b0;
    repeat (6) @(posedge clk);
    #1;
    check(empty, "every write answered while flushing");
    flush = 1'b0;
    cmp_ready = 1'b0;

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
