// axi_realm_top: a complete AXI-REALM system around an existing interconnect.
//
// NumIrealm iRealm units sit between the managers and the interconnect's
// manager ports; NumErealm eRealm units sit between the interconnect's
// subordinate ports and the subordinates they guard. The interconnect itself
// (a round-robin AXI4 crossbar) is not part of this design: its ports are the
// xbar_* ports. All units are configured through one shared register file,
// which is reached over the configuration bus through the bus guard, so only
// the manager that claimed the configuration space can program the system.
// Each eRealm unit drives an interrupt and an active-low reset for its
// subordinate.
// Defaults follow the integration in which the design was evaluated: four
// iRealm units (two cores, two accelerators) with two regions each, sixteen
// outstanding fragments, a four-beat (256-bit) write buffer, and one eRealm unit
// tracking two IDs with two transactions each, with 10-bit stage counters.
// Timing: see the units; the system adds one cycle on writes through an
// active write buffer and nothing otherwise.
module axi_realm_top
  import realm_pkg::*;
#(
  parameter int unsigned NumIrealm    = 4,
  parameter int unsigned NumRegions   = 2,
  parameter int unsigned NumPending   = 16,
  parameter int unsigned BufferDepth  = 4,
  parameter int unsigned NumErealm    = 1,
  parameter int unsigned ENumIds      = 2,
  parameter int unsigned ENumPending  = 2,
  parameter int unsigned CntWidth     = 10
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  // configuration bus
  input  cfg_req_t  cfg_req_i,
  output cfg_rsp_t  cfg_rsp_o,
  // managers -> iRealm -> interconnect
  input  axi_req_t  mgr_req_i       [NumIrealm],
  output axi_resp_t mgr_resp_o      [NumIrealm],
  output axi_req_t  xbar_mgr_req_o  [NumIrealm],
  input  axi_resp_t xbar_mgr_resp_i [NumIrealm],
  // interconnect -> eRealm -> subordinates
  input  axi_req_t  xbar_sub_req_i  [NumErealm],
  output axi_resp_t xbar_sub_resp_o [NumErealm],
  output axi_req_t  sub_req_o       [NumErealm],
  input  axi_resp_t sub_resp_i      [NumErealm],
  output logic      sub_rst_no      [NumErealm],
  output logic      irq_o           [NumErealm]
);
  cfg_req_t            reg_req;
  cfg_rsp_t            reg_rsp;
  irealm_cfg_t         icfg  [NumIrealm];
  region_cfg_t         rcfg  [NumIrealm][NumRegions];
  irealm_stat_t        istat [NumIrealm];
  region_stat_t        rstat [NumIrealm][NumRegions];
  erealm_cfg_t         ecfg  [NumErealm];
  logic [CntWidth-1:0] ebw   [NumErealm][6];
  logic [CntWidth-1:0] ebr   [NumErealm][6];
  erealm_stat_t        estat [NumErealm];

  bus_guard i_guard (
    .clk_i, .rst_ni, .req_i(cfg_req_i), .rsp_o(cfg_rsp_o), .req_o(reg_req), .rsp_i(reg_rsp),
    .claimed_o(), .owner_o()
  );

  realm_regs #(
    .NumIrealm(NumIrealm), .NumRegions(NumRegions), .NumErealm(NumErealm), .CntWidth(CntWidth)
  ) i_regs (
    .clk_i, .rst_ni, .req_i(reg_req), .rsp_o(reg_rsp),
    .icfg_o(icfg), .rcfg_o(rcfg), .istat_i(istat), .rstat_i(rstat),
    .ecfg_o(ecfg), .ebudget_w_o(ebw), .ebudget_r_o(ebr), .estat_i(estat)
  );

  for (genvar u = 0; u < NumIrealm; u++) begin : g_irealm
    irealm_unit #(
      .NumRegions(NumRegions), .NumPending(NumPending), .BufferDepth(BufferDepth)
    ) i_irealm (
      .clk_i, .rst_ni, .cfg_i(icfg[u]), .region_cfg_i(rcfg[u]),
      .stat_o(istat[u]), .region_stat_o(rstat[u]),
      .mgr_req_i(mgr_req_i[u]), .mgr_resp_o(mgr_resp_o[u]),
      .sub_req_o(xbar_mgr_req_o[u]), .sub_resp_i(xbar_mgr_resp_i[u])
    );
  end

  for (genvar e = 0; e < NumErealm; e++) begin : g_erealm
    erealm_unit #(
      .NumIds(ENumIds), .NumPending(ENumPending), .CntWidth(CntWidth)
    ) i_erealm (
      .clk_i, .rst_ni, .cfg_i(ecfg[e]), .budget_w_i(ebw[e]), .budget_r_i(ebr[e]),
      .stat_o(estat[e]), .irq_o(irq_o[e]), .sub_rst_no(sub_rst_no[e]),
      .mgr_req_i(xbar_sub_req_i[e]), .mgr_resp_o(xbar_sub_resp_o[e]),
      .sub_req_o(sub_req_o[e]), .sub_resp_i(sub_resp_i[e])
    );
  end
endmodule
