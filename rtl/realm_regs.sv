// realm_regs: the shared configuration and status register file of an
// AXI-REALM system.
//
// One file serves NumIrealm iRealm units with NumRegions regions each and
// NumErealm eRealm units. All registers are 64 bit, byte addressed, 8-byte
// aligned; accesses are answered in the same cycle, unmapped addresses and
// writes to read-only registers return an error. After reset every iRealm unit
// is bypassed and every eRealm unit deactivated, so the system is inert.
//
// iRealm unit u, base u*0x200:
//   0x00 CTRL     rw  [0] enable [1] regulate [2] wbuf_en [3] isolate
//                     [15:8] fragment length in beats minus one (reset 255)
//   0x08 STATUS   ro  [0] active [1] isolated [2] depleted
//   0x10 LAT_W    ro  write latency sum      0x18 LAT_R ro read latency sum
//   0x20 TXN_W    ro  completed writes       0x28 TXN_R ro completed reads
//   region r at 0x40 + r*0x40:
//     +0x00 START rw   +0x08 END rw (exclusive)
//     +0x10 BUDGET rw [31:0] write bytes [63:32] read bytes
//     +0x18 PERIOD rw [31:0] write cycles [63:32] read cycles
//     +0x20 LEFT   ro [31:0] write [63:32] read budget left
//     +0x28 BYTES  ro [31:0] write [63:32] read bytes transferred
// eRealm unit e, base 0x1000 + e*0x100:
//   0x00 CTRL     rw  [0] enable [1] irq_en [2] auto_reset;
//                     write 1 to [3] for a subordinate reset, to [4] to clear
//                     the error log (both read as 0)
//   0x08 STATUS   ro  [0] error logged [1] write [3:2] cause [6:4] stage
//                     [7] active [8] busy [23:16] manager ID
//   0x10 ERR_ADDR ro  address of the failing transaction
//   0x20+k*8      rw  write stage k+1 budget (k = 0..5)
//   0x50+k*8      rw  read stage k+1 budget (k = 0..5; a read has 4 stages,
//                     the last two registers are kept only for symmetry)
// The register set (per-region bounds, budget and period, per-unit control and
// status, eRealm budgets and error log) follows the paper's description; the
// address map and bit layout are this design's own.
module realm_regs
  import realm_pkg::*;
#(
  parameter int unsigned NumIrealm  = 4,
  parameter int unsigned NumRegions = 2,
  parameter int unsigned NumErealm  = 1,
  parameter int unsigned CntWidth   = 10
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  cfg_req_t            req_i,
  output cfg_rsp_t            rsp_o,
  output irealm_cfg_t         icfg_o    [NumIrealm],
  output region_cfg_t         rcfg_o    [NumIrealm][NumRegions],
  input  irealm_stat_t        istat_i   [NumIrealm],
  input  region_stat_t        rstat_i   [NumIrealm][NumRegions],
  output erealm_cfg_t         ecfg_o    [NumErealm],
  output logic [CntWidth-1:0] ebudget_w_o [NumErealm][6],
  output logic [CntWidth-1:0] ebudget_r_o [NumErealm][6],
  input  erealm_stat_t        estat_i   [NumErealm]
);
  typedef logic [CfgAddrWidth-1:0] a_t;
  typedef logic [CfgDataWidth-1:0] d_t;

  // base addresses of the register groups
  function automatic a_t ibase(int u);
    return a_t'(u * 32'h200);
  endfunction
  function automatic a_t rbase(int u, int r);
    return a_t'(u * 32'h200 + 32'h40 + r * 32'h40);
  endfunction
  function automatic a_t ebase(int e);
    return a_t'(32'h1000 + e * 32'h100);
  endfunction

  // stored eRealm control bits (the pulses are not stored)
  logic [2:0] ectrl_q [NumErealm];

  logic hit, ro;
  d_t   rdata;

  // ---------------------------------------------------------- read / decode
  always_comb begin
    hit   = 1'b0;
    ro    = 1'b0;
    rdata = '0;
    for (int u = 0; u < NumIrealm; u++) begin
      if (req_i.addr == ibase(u) + 16'h00) begin hit = 1'b1; rdata = d_t'({icfg_o[u].frag_len, 4'b0, icfg_o[u].isolate, icfg_o[u].wbuf_en, icfg_o[u].regulate, icfg_o[u].enable}); end
      if (req_i.addr == ibase(u) + 16'h08) begin hit = 1'b1; ro = 1'b1; rdata = d_t'({istat_i[u].depleted, istat_i[u].isolated, istat_i[u].active}); end
      if (req_i.addr == ibase(u) + 16'h10) begin hit = 1'b1; ro = 1'b1; rdata = d_t'(istat_i[u].lat_sum_w); end
      if (req_i.addr == ibase(u) + 16'h18) begin hit = 1'b1; ro = 1'b1; rdata = d_t'(istat_i[u].lat_sum_r); end
      if (req_i.addr == ibase(u) + 16'h20) begin hit = 1'b1; ro = 1'b1; rdata = d_t'(istat_i[u].txn_w); end
      if (req_i.addr == ibase(u) + 16'h28) begin hit = 1'b1; ro = 1'b1; rdata = d_t'(istat_i[u].txn_r); end
      for (int r = 0; r < NumRegions; r++) begin
        if (req_i.addr == rbase(u, r) + 16'h00) begin hit = 1'b1; rdata = d_t'(rcfg_o[u][r].start_addr); end
        if (req_i.addr == rbase(u, r) + 16'h08) begin hit = 1'b1; rdata = d_t'(rcfg_o[u][r].end_addr); end
        if (req_i.addr == rbase(u, r) + 16'h10) begin hit = 1'b1; rdata = {rcfg_o[u][r].budget_r, rcfg_o[u][r].budget_w}; end
        if (req_i.addr == rbase(u, r) + 16'h18) begin hit = 1'b1; rdata = {rcfg_o[u][r].period_r, rcfg_o[u][r].period_w}; end
        if (req_i.addr == rbase(u, r) + 16'h20) begin hit = 1'b1; ro = 1'b1; rdata = {rstat_i[u][r].left_r, rstat_i[u][r].left_w}; end
        if (req_i.addr == rbase(u, r) + 16'h28) begin hit = 1'b1; ro = 1'b1; rdata = {rstat_i[u][r].bytes_r, rstat_i[u][r].bytes_w}; end
      end
    end
    for (int e = 0; e < NumErealm; e++) begin
      if (req_i.addr == ebase(e) + 16'h00) begin hit = 1'b1; rdata = d_t'(ectrl_q[e]); end
      if (req_i.addr == ebase(e) + 16'h08) begin
        hit = 1'b1; ro = 1'b1;
        rdata = d_t'({estat_i[e].id, 7'b0, estat_i[e].busy, estat_i[e].active, estat_i[e].stage,
                      estat_i[e].cause, estat_i[e].is_write, estat_i[e].valid});
      end
      if (req_i.addr == ebase(e) + 16'h10) begin hit = 1'b1; ro = 1'b1; rdata = d_t'(estat_i[e].addr); end
      for (int k = 0; k < 6; k++)
        if (req_i.addr == ebase(e) + 16'h20 + a_t'(k * 8)) begin hit = 1'b1; rdata = d_t'(ebudget_w_o[e][k]); end
      for (int k = 0; k < 6; k++)
        if (req_i.addr == ebase(e) + 16'h50 + a_t'(k * 8)) begin hit = 1'b1; rdata = d_t'(ebudget_r_o[e][k]); end
    end
  end

  assign rsp_o.ready = 1'b1;
  assign rsp_o.rdata = rdata;
  assign rsp_o.error = !hit || (req_i.write && ro);

  // ---------------------------------------------------------------- writes
  logic we;
  assign we = req_i.valid && req_i.write && hit && !ro;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int u = 0; u < NumIrealm; u++) begin
        icfg_o[u] <= '{enable: 1'b0, regulate: 1'b0, wbuf_en: 1'b1, isolate: 1'b0, frag_len: 8'hFF};
        for (int r = 0; r < NumRegions; r++) rcfg_o[u][r] <= '0;
      end
      for (int e = 0; e < NumErealm; e++) begin
        ectrl_q[e] <= '0;
        for (int k = 0; k < 6; k++) begin
          ebudget_w_o[e][k] <= '0;
          ebudget_r_o[e][k] <= '0;
        end
      end
    end else if (we) begin
      for (int u = 0; u < NumIrealm; u++) begin
        if (req_i.addr == ibase(u)) begin
          icfg_o[u].enable   <= req_i.wdata[0];
          icfg_o[u].regulate <= req_i.wdata[1];
          icfg_o[u].wbuf_en  <= req_i.wdata[2];
          icfg_o[u].isolate  <= req_i.wdata[3];
          icfg_o[u].frag_len <= req_i.wdata[15:8];
        end
        for (int r = 0; r < NumRegions; r++) begin
          if (req_i.addr == rbase(u, r) + 16'h00) rcfg_o[u][r].start_addr <= req_i.wdata[AddrWidth-1:0];
          if (req_i.addr == rbase(u, r) + 16'h08) rcfg_o[u][r].end_addr   <= req_i.wdata[AddrWidth-1:0];
          if (req_i.addr == rbase(u, r) + 16'h10) begin
            rcfg_o[u][r].budget_w <= req_i.wdata[31:0];
            rcfg_o[u][r].budget_r <= req_i.wdata[63:32];
          end
          if (req_i.addr == rbase(u, r) + 16'h18) begin
            rcfg_o[u][r].period_w <= req_i.wdata[31:0];
            rcfg_o[u][r].period_r <= req_i.wdata[63:32];
          end
        end
      end
      for (int e = 0; e < NumErealm; e++) begin
        if (req_i.addr == ebase(e)) ectrl_q[e] <= req_i.wdata[2:0];
        for (int k = 0; k < 6; k++)
          if (req_i.addr == ebase(e) + 16'h20 + a_t'(k * 8)) ebudget_w_o[e][k] <= req_i.wdata[CntWidth-1:0];
        for (int k = 0; k < 6; k++)
          if (req_i.addr == ebase(e) + 16'h50 + a_t'(k * 8)) ebudget_r_o[e][k] <= req_i.wdata[CntWidth-1:0];
      end
    end
  end

  for (genvar e = 0; e < NumErealm; e++) begin : g_ecfg
    logic ctrl_wr;
    assign ctrl_wr = we && (req_i.addr == 16'h1000 + a_t'(e * 32'h100));
    assign ecfg_o[e] = '{enable: ectrl_q[e][0], irq_en: ectrl_q[e][1], auto_reset: ectrl_q[e][2],
                         sw_reset: ctrl_wr && req_i.wdata[3], clear: ctrl_wr && req_i.wdata[4]};
  end
endmodule
