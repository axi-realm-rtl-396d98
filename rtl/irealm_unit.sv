// irealm_unit: ingress guard placed between one manager and the interconnect.
//
// Path from the manager: isolation cell -> granular burst splitter -> write
// buffer -> interconnect. The monitoring and regulation unit watches the
// interconnect side and, when a region's budget is used up, both isolates the
// manager (no new bursts accepted) and throttles the splitter (no further
// fragments) until that region's period renews the budget.
//
// After reset the unit is bypassed: the manager is wired straight through, with
// no added latency. Setting cfg_i.enable switches the splitter and write buffer
// in; the switch in either direction first isolates the manager and waits until
// nothing is outstanding, then changes the path, then lifts isolation. Software
// can also isolate the manager with cfg_i.isolate. cfg_i.frag_len and the
// region settings may change at any time; cfg_i.wbuf_en takes effect when the
// write buffer is empty. Active, the unit adds one cycle (in the write buffer,
// writes only); the splitter forwards the first fragment combinationally.
// The structure and the mechanisms follow the paper; the reconfiguration
// handshake and the exact coupling of depletion to isolation and throttling are
// this design's own.
module irealm_unit
  import realm_pkg::*;
#(
  parameter int unsigned NumRegions  = 2,
  parameter int unsigned NumPending  = 16,
  parameter int unsigned BufferDepth = 4,
  parameter int unsigned AwDepth     = 2
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  irealm_cfg_t  cfg_i,
  input  region_cfg_t  region_cfg_i [NumRegions],
  output irealm_stat_t stat_o,
  output region_stat_t region_stat_o [NumRegions],
  input  axi_req_t     mgr_req_i,
  output axi_resp_t    mgr_resp_o,
  output axi_req_t     sub_req_o,
  input  axi_resp_t    sub_resp_i
);
  axi_req_t  iso_req, spl_req, wb_req, spl_in_req;
  axi_resp_t iso_resp, spl_resp, wb_resp, spl_in_resp;
  logic      active_q, isolate, isolated, depleted, reconfig;

  assign reconfig = (cfg_i.enable != active_q);
  assign isolate  = cfg_i.isolate || depleted || reconfig;

  axi_isolate i_isolate (
    .clk_i, .rst_ni, .isolate_i(isolate), .isolated_o(isolated),
    .mgr_req_i, .mgr_resp_o, .sub_req_o(iso_req), .sub_resp_i(iso_resp)
  );

  // path select: splitter + write buffer when active, straight through otherwise
  assign spl_in_req = active_q ? iso_req : '0;

  burst_splitter #(.NumPending(NumPending)) i_splitter (
    .clk_i, .rst_ni, .frag_len_i(cfg_i.frag_len), .throttle_i(depleted),
    .mgr_req_i(spl_in_req), .mgr_resp_o(spl_resp), .sub_req_o(spl_req), .sub_resp_i(spl_in_resp)
  );

  write_buffer #(.AwDepth(AwDepth), .BufferDepth(BufferDepth)) i_wbuf (
    .clk_i, .rst_ni, .enable_i(cfg_i.wbuf_en),
    .mgr_req_i(spl_req), .mgr_resp_o(spl_in_resp), .sub_req_o(wb_req), .sub_resp_i(wb_resp)
  );

  always_comb begin
    if (active_q) begin
      sub_req_o = wb_req;
      wb_resp   = sub_resp_i;
      iso_resp  = spl_resp;
    end else begin
      sub_req_o = iso_req;
      wb_resp   = '0;
      iso_resp  = sub_resp_i;
    end
  end

  irealm_mr #(.NumRegions(NumRegions)) i_mr (
    .clk_i, .rst_ni, .regulate_i(cfg_i.regulate && active_q),
    .region_cfg_i, .region_stat_o,
    .lat_sum_w_o(stat_o.lat_sum_w), .lat_sum_r_o(stat_o.lat_sum_r),
    .txn_w_o(stat_o.txn_w), .txn_r_o(stat_o.txn_r),
    .depleted_o(depleted), .req_i(sub_req_o), .resp_i(sub_resp_i)
  );

  assign stat_o.isolated = isolated;
  assign stat_o.depleted = depleted;
  assign stat_o.active   = active_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) active_q <= 1'b0;
    else if (reconfig && isolated) active_q <= cfg_i.enable;
  end
endmodule
