// Testbench of realm_regs with its default size (four iRealm units with two
// regions each, one eRealm unit). Checks the reset values, that writes reach
// the right unit and region and read back, that status inputs are visible,
// that read-only and unmapped addresses answer with an error, and that the
// eRealm reset and clear commands are single-cycle pulses.
// Drive convention: inputs change 1 ns after a rising edge, outputs are
// sampled at the falling edge.
module tb_realm_regs;
  import realm_pkg::*;

  logic                clk = 1'b0, rst_n = 1'b0;
  cfg_req_t            req;
  cfg_rsp_t            rsp;
  irealm_cfg_t         icfg  [4];
  region_cfg_t         rcfg  [4][2];
  irealm_stat_t        istat [4];
  region_stat_t        rstat [4][2];
  erealm_cfg_t         ecfg  [1];
  logic [9:0]          ebw   [1][6];
  logic [9:0]          ebr   [1][6];
  erealm_stat_t        estat [1];
  int                  checks = 0, failures = 0, pulses = 0;

  always #5 clk = ~clk;

  realm_regs dut (
    .clk_i(clk), .rst_ni(rst_n), .req_i(req), .rsp_o(rsp),
    .icfg_o(icfg), .rcfg_o(rcfg), .istat_i(istat), .rstat_i(rstat),
    .ecfg_o(ecfg), .ebudget_w_o(ebw), .ebudget_r_o(ebr), .estat_i(estat)
  );

  always @(posedge clk) if (rst_n && ecfg[0].sw_reset) pulses++;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic access(input logic wr, input logic [15:0] addr, input logic [63:0] wdata,
                        output logic err, output logic [63:0] rdata);
    req = '{valid: 1'b1, write: wr, addr: addr, wdata: wdata, id: '0};
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
    req = '0;
    for (int u = 0; u < 4; u++) begin
      istat[u] = '0;
      istat[u].txn_w = 32'(100 + u);
      for (int r = 0; r < 2; r++) begin
        rstat[u][r] = '0;
        rstat[u][r].bytes_w = 32'(u * 16 + r);
      end
    end
    estat[0] = '0;
    estat[0].addr = 48'hABC;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);
    #1;

    check(!icfg[2].enable && icfg[2].wbuf_en && icfg[2].frag_len == 8'hFF, "iRealm reset values");
    check(!ecfg[0].enable, "eRealm disabled after reset");

    access(1'b1, 16'h0400, 64'h0307, err, d);
    check(!err && icfg[2].enable && icfg[2].regulate && icfg[2].frag_len == 8'h03 && !icfg[1].enable,
          "CTRL of unit 2 written, unit 1 untouched");
    access(1'b0, 16'h0400, '0, err, d);
    check(!err && d[15:0] == 16'h0307, "CTRL reads back");
    access(1'b1, 16'h0290, {32'd800, 32'd6400}, err, d);
    check(!err && rcfg[1][1].budget_w == 32'd6400 && rcfg[1][1].budget_r == 32'd800,
          "budget of unit 1 region 1 written");
    access(1'b1, 16'h0298, {32'd200, 32'd1600}, err, d);
    check(rcfg[1][1].period_w == 32'd1600 && rcfg[1][1].period_r == 32'd200, "period written");
    access(1'b1, 16'h0288, 64'h1234_5678, err, d);
    check(rcfg[1][1].end_addr == 48'h1234_5678 && rcfg[1][0].end_addr == '0, "region end written");
    access(1'b0, 16'h0620, '0, err, d);
    check(!err && d == 64'd103, "TXN_W of unit 3 visible");
    access(1'b0, 16'h06A8, '0, err, d);
    check(!err && d[31:0] == 32'd49, "byte counter of unit 3 region 1 visible");
    access(1'b1, 16'h0608, 64'h1, err, d);
    check(err, "write to a read-only register rejected");
    access(1'b0, 16'h0830, '0, err, d);
    check(err, "unmapped address rejected");

    access(1'b1, 16'h1028, 64'd300, err, d);
    access(1'b1, 16'h1060, 64'd20, err, d);
    check(ebw[0][1] == 10'd300 && ebr[0][2] == 10'd20, "eRealm stage budgets written");
    access(1'b0, 16'h1010, '0, err, d);
    check(!err && d[47:0] == 48'hABC, "eRealm error address visible");
    access(1'b1, 16'h1000, 64'h0F, err, d);
    check(ecfg[0].enable && ecfg[0].irq_en && ecfg[0].auto_reset, "eRealm CTRL written");
    repeat (3) @(posedge clk);
    #1;
    check(pulses == 1 && !ecfg[0].sw_reset, "software reset is a single-cycle pulse");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
