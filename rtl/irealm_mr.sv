// irealm_mr: the monitoring and regulation (M&R) unit of an iRealm unit.
//
// It watches the unit's downstream port, i.e. the fragmented traffic as it
// enters the interconnect. Each request is mapped to a subordinate region by
// the region decoders (the first region with start <= addr < end; a request
// outside every region is not regulated). Read and write are handled by
// identical bookkeeping: per region a budget in bytes and a period in cycles.
// At the start of each period the budget is reloaded; every request passing
// takes the bytes of its beats, (len+1) << size, from its region's budget. When
// any region's budget reaches zero `depleted_o` rises and stays high until that
// region's period ends; the unit uses it to isolate the manager and to hold back
// further fragments. Budgets and periods only count while `regulate_i` is high;
// rising `regulate_i` starts a fresh period in every region.
// The bus probe also counts bytes per region and direction (bandwidth) and,
// per direction, the number of completed transactions and the running sum of
// outstanding transactions over time. By Little's law the latter divided by the
// former is the mean latency, without per-transaction timestamps.
// The budget/period scheme, the per-region bookkeeping and the isolation on
// depletion follow the paper; charging bytes at the request and measuring
// latency through the outstanding count are this design's own choices.
module irealm_mr
  import realm_pkg::*;
#(
  parameter int unsigned NumRegions = 2
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  logic         regulate_i,
  input  region_cfg_t  region_cfg_i [NumRegions],
  output region_stat_t region_stat_o [NumRegions],
  output logic [31:0]  lat_sum_w_o,
  output logic [31:0]  lat_sum_r_o,
  output logic [31:0]  txn_w_o,
  output logic [31:0]  txn_r_o,
  output logic         depleted_o,
  // probe of the downstream port
  input  axi_req_t     req_i,
  input  axi_resp_t    resp_i
);
  logic aw_hs, ar_hs, b_hs, r_hs;
  logic [NumRegions-1:0] aw_sel, ar_sel, dep;
  logic [16:0] aw_bytes, ar_bytes;
  logic [31:0] per_cnt_w_q [NumRegions];
  logic [31:0] per_cnt_r_q [NumRegions];
  logic [31:0] out_w_q, out_r_q;
  logic        regulate_q;

  assign aw_hs    = req_i.aw_valid && resp_i.aw_ready;
  assign ar_hs    = req_i.ar_valid && resp_i.ar_ready;
  assign b_hs     = resp_i.b_valid && req_i.b_ready;
  assign r_hs     = resp_i.r_valid && req_i.r_ready && resp_i.r.last;
  assign aw_bytes = burst_bytes(req_i.aw.len, req_i.aw.size);
  assign ar_bytes = burst_bytes(req_i.ar.len, req_i.ar.size);

  // region decoders: first matching region wins
  always_comb begin
    logic fw, fr;
    fw = 1'b0;
    fr = 1'b0;
    aw_sel = '0;
    ar_sel = '0;
    for (int r = 0; r < NumRegions; r++) begin
      if (!fw && req_i.aw.addr >= region_cfg_i[r].start_addr && req_i.aw.addr < region_cfg_i[r].end_addr) begin
        aw_sel[r] = 1'b1;
        fw = 1'b1;
      end
      if (!fr && req_i.ar.addr >= region_cfg_i[r].start_addr && req_i.ar.addr < region_cfg_i[r].end_addr) begin
        ar_sel[r] = 1'b1;
        fr = 1'b1;
      end
    end
  end

  function automatic logic [31:0] charge(logic [31:0] left, logic [16:0] bytes);
    return (left > 32'(bytes)) ? left - 32'(bytes) : '0;
  endfunction

  for (genvar r = 0; r < NumRegions; r++) begin : g_region
    logic renew_w, renew_r;
    assign renew_w = regulate_i && (!regulate_q || per_cnt_w_q[r] + 32'd1 >= region_cfg_i[r].period_w);
    assign renew_r = regulate_i && (!regulate_q || per_cnt_r_q[r] + 32'd1 >= region_cfg_i[r].period_r);
    // a region with an empty address range is unused and never depletes
    assign dep[r]  = regulate_i && regulate_q &&
                     (region_cfg_i[r].end_addr > region_cfg_i[r].start_addr) &&
                     ((region_stat_o[r].left_w == '0) || (region_stat_o[r].left_r == '0));

    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) begin
        per_cnt_w_q[r]   <= '0;
        per_cnt_r_q[r]   <= '0;
        region_stat_o[r] <= '0;
      end else begin
        if (aw_hs && aw_sel[r]) region_stat_o[r].bytes_w <= region_stat_o[r].bytes_w + 32'(aw_bytes);
        if (ar_hs && ar_sel[r]) region_stat_o[r].bytes_r <= region_stat_o[r].bytes_r + 32'(ar_bytes);
        if (renew_w) begin
          per_cnt_w_q[r]          <= '0;
          region_stat_o[r].left_w <= region_cfg_i[r].budget_w;
        end else if (regulate_i) begin
          per_cnt_w_q[r] <= per_cnt_w_q[r] + 32'd1;
          if (aw_hs && aw_sel[r]) region_stat_o[r].left_w <= charge(region_stat_o[r].left_w, aw_bytes);
        end
        if (renew_r) begin
          per_cnt_r_q[r]          <= '0;
          region_stat_o[r].left_r <= region_cfg_i[r].budget_r;
        end else if (regulate_i) begin
          per_cnt_r_q[r] <= per_cnt_r_q[r] + 32'd1;
          if (ar_hs && ar_sel[r]) region_stat_o[r].left_r <= charge(region_stat_o[r].left_r, ar_bytes);
        end
      end
    end
  end

  assign depleted_o = |dep;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      regulate_q  <= 1'b0;
      out_w_q     <= '0;
      out_r_q     <= '0;
      lat_sum_w_o <= '0;
      lat_sum_r_o <= '0;
      txn_w_o     <= '0;
      txn_r_o     <= '0;
    end else begin
      regulate_q  <= regulate_i;
      out_w_q     <= out_w_q + 32'(aw_hs) - 32'(b_hs);
      out_r_q     <= out_r_q + 32'(ar_hs) - 32'(r_hs);
      lat_sum_w_o <= lat_sum_w_o + out_w_q;
      lat_sum_r_o <= lat_sum_r_o + out_r_q;
      txn_w_o     <= txn_w_o + 32'(b_hs);
      txn_r_o     <= txn_r_o + 32'(r_hs);
    end
  end
endmodule
