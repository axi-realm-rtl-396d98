// erealm_unit: egress guard placed between the interconnect and one
// subordinate.
//
// A write tracker and a read tracker (erealm_tracker) follow every transaction
// to the subordinate through its stages, remap the manager IDs to compact
// ones and compare each stage's duration with its programmed budget. On the
// first timeout or protocol violation the unit
//   * logs cause, stage, direction, manager ID and address (kept until
//     cfg_i.clear) and raises irq_o if cfg_i.irq_en,
//   * cuts the subordinate off and completes every outstanding transaction
//     towards the interconnect itself (remaining W beats accepted, SLVERR
//     responses, missing R beats), so that nothing upstream locks up,
//   * if cfg_i.auto_reset, resets the subordinate through the reset controller
//     from the cycle after detection.
// It returns to normal operation once all transactions are completed and the
// reset is over; a request that was waiting at the fault is then forwarded to
// the freshly reset subordinate. cfg_i.sw_reset does the same on command.
// After reset the unit is bypassed (no tracking, IDs unchanged); cfg_i.enable
// switches it in or out when no transaction is in flight. Forwarding is
// combinational in both modes, so the unit adds no latency.
// Following the paper: ID remapping, DOTQ tracking, stage budgets scaled by
// burst length, error logging, interrupt or AXI error response, reset of the
// subordinate. This design's own: the completion procedure, the switching rule
// and which fault is logged when several coincide.
module erealm_unit
  import realm_pkg::*;
#(
  parameter int unsigned NumIds      = 2,
  parameter int unsigned NumPending  = 2,
  parameter int unsigned CntWidth    = 10,
  parameter int unsigned ResetCycles = 4
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  erealm_cfg_t         cfg_i,
  input  logic [CntWidth-1:0] budget_w_i [6],
  input  logic [CntWidth-1:0] budget_r_i [6],
  output erealm_stat_t        stat_o,
  output logic                irq_o,
  output logic                sub_rst_no,
  input  axi_req_t            mgr_req_i,
  output axi_resp_t           mgr_resp_o,
  output axi_req_t            sub_req_o,
  input  axi_resp_t           sub_resp_i
);
  typedef enum logic {S_NORMAL, S_FLUSH} state_e;
  state_e state_q;
  logic   active_q, flush, rst_busy, trigger_rst;

  // tracker signals
  logic  wr_stall, rd_stall, wr_empty, rd_empty;
  id_t   wr_cid, rd_cid, wr_rsp_id, rd_rsp_id, wr_cmp_id, rd_cmp_id;
  logic  wr_cmp_w_ready, wr_cmp_valid, rd_cmp_valid, wr_cmp_last, rd_cmp_last;
  logic  wr_fault, rd_fault;
  logic [1:0] wr_cause, rd_cause;
  logic [2:0] wr_stage, rd_stage;
  id_t   wr_fid, rd_fid;
  addr_t wr_faddr, rd_faddr;
  logic  track;

  assign flush = (state_q == S_FLUSH);
  assign track = active_q && !flush;

  erealm_tracker #(.IsWrite(1'b1), .NumIds(NumIds), .NumPending(NumPending), .CntWidth(CntWidth)) i_wr (
    .clk_i, .rst_ni, .flush_i(flush), .budget_i(budget_w_i),
    .ax_valid_i(track && mgr_req_i.aw_valid), .ax_i(mgr_req_i.aw), .ax_ready_i(sub_resp_i.aw_ready),
    .ax_stall_o(wr_stall), .ax_cid_o(wr_cid),
    .w_valid_i(track && mgr_req_i.w_valid), .w_ready_i(sub_resp_i.w_ready), .w_last_i(mgr_req_i.w.last),
    .rsp_valid_i(track && sub_resp_i.b_valid), .rsp_ready_i(mgr_req_i.b_ready), .rsp_last_i(1'b1),
    .rsp_cid_i(sub_resp_i.b.id), .rsp_id_o(wr_rsp_id),
    .cmp_w_valid_i(mgr_req_i.w_valid), .cmp_w_last_i(mgr_req_i.w.last), .cmp_w_ready_o(wr_cmp_w_ready),
    .cmp_valid_o(wr_cmp_valid), .cmp_id_o(wr_cmp_id), .cmp_last_o(wr_cmp_last), .cmp_ready_i(mgr_req_i.b_ready),
    .empty_o(wr_empty),
    .fault_o(wr_fault), .fault_cause_o(wr_cause), .fault_stage_o(wr_stage), .fault_id_o(wr_fid), .fault_addr_o(wr_faddr)
  );

  erealm_tracker #(.IsWrite(1'b0), .NumIds(NumIds), .NumPending(NumPending), .CntWidth(CntWidth)) i_rd (
    .clk_i, .rst_ni, .flush_i(flush), .budget_i(budget_r_i),
    .ax_valid_i(track && mgr_req_i.ar_valid), .ax_i(mgr_req_i.ar), .ax_ready_i(sub_resp_i.ar_ready),
    .ax_stall_o(rd_stall), .ax_cid_o(rd_cid),
    .w_valid_i(1'b0), .w_ready_i(1'b0), .w_last_i(1'b0),
    .rsp_valid_i(track && sub_resp_i.r_valid), .rsp_ready_i(mgr_req_i.r_ready), .rsp_last_i(sub_resp_i.r.last),
    .rsp_cid_i(sub_resp_i.r.id), .rsp_id_o(rd_rsp_id),
    .cmp_w_valid_i(1'b0), .cmp_w_last_i(1'b0), .cmp_w_ready_o(),
    .cmp_valid_o(rd_cmp_valid), .cmp_id_o(rd_cmp_id), .cmp_last_o(rd_cmp_last), .cmp_ready_i(mgr_req_i.r_ready),
    .empty_o(rd_empty),
    .fault_o(rd_fault), .fault_cause_o(rd_cause), .fault_stage_o(rd_stage), .fault_id_o(rd_fid), .fault_addr_o(rd_faddr)
  );

  // ---------------------------------------------------------------- datapath
  always_comb begin
    sub_req_o  = mgr_req_i;
    mgr_resp_o = sub_resp_i;
    if (flush) begin
      sub_req_o           = '0;
      mgr_resp_o          = '0;
      mgr_resp_o.w_ready  = wr_cmp_w_ready;
      mgr_resp_o.b_valid  = wr_cmp_valid;
      mgr_resp_o.b.id     = wr_cmp_id;
      mgr_resp_o.b.resp   = RESP_SLVERR;
      mgr_resp_o.r_valid  = rd_cmp_valid;
      mgr_resp_o.r.id     = rd_cmp_id;
      mgr_resp_o.r.resp   = RESP_SLVERR;
      mgr_resp_o.r.last   = rd_cmp_last;
    end else if (active_q) begin
      sub_req_o.aw.id     = wr_cid;
      sub_req_o.aw_valid  = mgr_req_i.aw_valid && !wr_stall;
      mgr_resp_o.aw_ready = sub_resp_i.aw_ready && !wr_stall;
      sub_req_o.ar.id     = rd_cid;
      sub_req_o.ar_valid  = mgr_req_i.ar_valid && !rd_stall;
      mgr_resp_o.ar_ready = sub_resp_i.ar_ready && !rd_stall;
      mgr_resp_o.b.id     = wr_rsp_id;
      mgr_resp_o.r.id     = rd_rsp_id;
    end
  end

  // ------------------------------------------------------------ fault handling
  logic fault;
  assign fault       = track && (wr_fault || rd_fault);
  assign trigger_rst = (fault && cfg_i.auto_reset) || cfg_i.sw_reset;

  erealm_reset_ctrl #(.ResetCycles(ResetCycles)) i_rst_ctrl (
    .clk_i, .rst_ni, .trigger_i(trigger_rst), .sub_rst_no, .busy_o(rst_busy)
  );

  // outstanding count while bypassed, to switch modes only when quiet
  logic [8:0] byp_w_q, byp_r_q;
  logic       quiet;
  assign quiet = wr_empty && rd_empty && byp_w_q == '0 && byp_r_q == '0 &&
                 !mgr_req_i.aw_valid && !mgr_req_i.ar_valid && !mgr_req_i.w_valid;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q  <= S_NORMAL;
      active_q <= 1'b0;
      stat_o   <= '0;
      byp_w_q  <= '0;
      byp_r_q  <= '0;
    end else begin
      if (!active_q) begin
        byp_w_q <= byp_w_q + 9'(mgr_req_i.aw_valid && sub_resp_i.aw_ready)
                           - 9'(sub_resp_i.b_valid && mgr_req_i.b_ready);
        byp_r_q <= byp_r_q + 9'(mgr_req_i.ar_valid && sub_resp_i.ar_ready)
                           - 9'(sub_resp_i.r_valid && mgr_req_i.r_ready && sub_resp_i.r.last);
      end
      unique case (state_q)
        S_NORMAL: begin
          if (fault || (active_q && cfg_i.sw_reset)) state_q <= S_FLUSH;
          else if (quiet && cfg_i.enable != active_q) active_q <= cfg_i.enable;
        end
        S_FLUSH: if (wr_empty && rd_empty && !rst_busy) state_q <= S_NORMAL;
        default: state_q <= S_NORMAL;
      endcase
      if (cfg_i.clear) stat_o.valid <= 1'b0;
      if (fault && !stat_o.valid) begin
        stat_o.valid    <= 1'b1;
        stat_o.is_write <= wr_fault;
        stat_o.cause    <= wr_fault ? wr_cause : rd_cause;
        stat_o.stage    <= wr_fault ? wr_stage : rd_stage;
        stat_o.id       <= wr_fault ? wr_fid : rd_fid;
        stat_o.addr     <= wr_fault ? wr_faddr : rd_faddr;
      end
      stat_o.active <= active_q;
      stat_o.busy   <= flush || rst_busy;
    end
  end

  assign irq_o = stat_o.valid && cfg_i.irq_en;

endmodule
