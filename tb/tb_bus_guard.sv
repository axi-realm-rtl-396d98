// Testbench of bus_guard: configuration accesses from several manager IDs
// against a register-file stand-in that answers every access with a fixed
// value. Checks rejection before a claim, the claim, that a non-owner's access
// is answered with an error and never reaches the registers, the owner's
// access passing, the guard register read-back and the handover.
// Drive convention: inputs change 1 ns after a rising edge, outputs are
// sampled at the falling edge.
module tb_bus_guard;
  import realm_pkg::*;

  logic     clk = 1'b0, rst_n = 1'b0;
  cfg_req_t req, fwd;
  cfg_rsp_t rsp, regs;
  logic     claimed;
  id_t      owner;
  int       checks = 0, failures = 0, passed = 0;

  always #5 clk = ~clk;

  bus_guard dut (
    .clk_i(clk), .rst_ni(rst_n), .req_i(req), .rsp_o(rsp), .req_o(fwd), .rsp_i(regs),
    .claimed_o(claimed), .owner_o(owner)
  );

  assign regs = '{ready: 1'b1, rdata: 64'h1234, error: 1'b0};
  always @(posedge clk) if (rst_n && fwd.valid) passed++;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic access(input id_t id, input logic wr, input logic [15:0] addr,
                        input logic [63:0] wdata, output logic err, output logic [63:0] rdata);
    req = '{valid: 1'b1, write: wr, addr: addr, wdata: wdata, id: id};
    @(negedge clk);
    err   = rsp.error;
    rdata = rsp.rdata;
    @(posedge clk); #1;
    req = '0;
  endtask

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic        err;
    logic [63:0] d;
    int          n;
    req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);
    #1;

    check(!claimed, "unclaimed after reset");
    n = passed;
    access(8'd3, 1'b0, 16'h0010, '0, err, d);
    check(err && passed == n, "read before claim rejected and not forwarded");
    access(8'd3, 1'b1, 16'h0010, 64'h1, err, d);
    check(err && passed == n, "write before claim rejected and not forwarded");
    access(8'd4, 1'b0, 16'hFFF8, '0, err, d);
    check(!err && !d[63], "guard register reads unclaimed");

    access(8'd3, 1'b1, 16'hFFF8, '0, err, d);
    check(!err && claimed && owner == 8'd3, "ID 3 claims the space");
    access(8'd3, 1'b0, 16'h0010, '0, err, d);
    check(!err && d == 64'h1234 && passed == n + 1, "owner's read forwarded");
    access(8'd4, 1'b1, 16'h0010, 64'h1, err, d);
    check(err && passed == n + 1, "non-owner's write rejected and not forwarded");
    access(8'd4, 1'b1, 16'hFFF8, 64'd4, err, d);
    check(err && owner == 8'd3, "non-owner cannot take the space");
    access(8'd9, 1'b0, 16'hFFF8, '0, err, d);
    check(!err && d[63] && d[7:0] == 8'd3, "guard register shows the owner");

    access(8'd3, 1'b1, 16'hFFF8, 64'd4, err, d);
    check(!err && owner == 8'd4, "handover to ID 4");
    access(8'd3, 1'b1, 16'h0010, 64'h1, err, d);
    check(err, "former owner rejected");
    access(8'd4, 1'b1, 16'h0010, 64'h1, err, d);
    check(!err && passed == n + 2, "new owner's write forwarded");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
