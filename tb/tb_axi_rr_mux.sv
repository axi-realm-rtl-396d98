// tb_axi_rr_mux: behavioural two-manager, one-subordinate AXI4 interconnect
// with round-robin arbitration, standing in for the crossbar in the workload
// testbenches.
//
// AW and AR are each arbitrated round-robin among the two managers; a grant is
// held while the chosen request waits, so requests stay stable. The manager
// index is put in ID bit 7 (managers must use IDs below 128) and B and R are
// routed back by it, with the bit cleared. W beats follow the order in which
// AWs were granted: the W channel belongs to the oldest granted write until its
// W.last, which is the behaviour of common crossbars that lets a slow writer
// block others. Purely combinational apart from the grant state and the
// W-order queue.
module tb_axi_rr_mux
  import realm_pkg::*;
(
  input  logic      clk_i,
  input  logic      rst_ni,
  input  axi_req_t  mgr_req_i  [2],
  output axi_resp_t mgr_resp_o [2],
  output axi_req_t  sub_req_o,
  input  axi_resp_t sub_resp_i
);
  logic aw_prio, ar_prio, aw_lock, ar_lock, aw_lsel, ar_lsel;
  logic aw_sel, ar_sel;
  logic wq[$];
  logic w_have, w_sel;

  function automatic logic pick(logic v0, logic v1, logic prio);
    if (v0 && v1) return prio;
    return v1;
  endfunction

  assign aw_sel = aw_lock ? aw_lsel : pick(mgr_req_i[0].aw_valid, mgr_req_i[1].aw_valid, aw_prio);
  assign ar_sel = ar_lock ? ar_lsel : pick(mgr_req_i[0].ar_valid, mgr_req_i[1].ar_valid, ar_prio);

  always_comb begin
    sub_req_o = '0;
    for (int m = 0; m < 2; m++) mgr_resp_o[m] = '0;

    sub_req_o.aw_valid    = mgr_req_i[aw_sel].aw_valid;
    sub_req_o.aw          = mgr_req_i[aw_sel].aw;
    sub_req_o.aw.id[7]    = aw_sel;
    mgr_resp_o[aw_sel].aw_ready = sub_resp_i.aw_ready;

    sub_req_o.ar_valid    = mgr_req_i[ar_sel].ar_valid;
    sub_req_o.ar          = mgr_req_i[ar_sel].ar;
    sub_req_o.ar.id[7]    = ar_sel;
    mgr_resp_o[ar_sel].ar_ready = sub_resp_i.ar_ready;

    if (w_have) begin
      sub_req_o.w_valid          = mgr_req_i[w_sel].w_valid;
      sub_req_o.w                = mgr_req_i[w_sel].w;
      mgr_resp_o[w_sel].w_ready  = sub_resp_i.w_ready;
    end

    for (int m = 0; m < 2; m++) begin
      mgr_resp_o[m].b         = sub_resp_i.b;
      mgr_resp_o[m].b.id[7]   = 1'b0;
      mgr_resp_o[m].b_valid   = sub_resp_i.b_valid && (sub_resp_i.b.id[7] == m[0]);
      mgr_resp_o[m].r         = sub_resp_i.r;
      mgr_resp_o[m].r.id[7]   = 1'b0;
      mgr_resp_o[m].r_valid   = sub_resp_i.r_valid && (sub_resp_i.r.id[7] == m[0]);
    end
    sub_req_o.b_ready = mgr_req_i[sub_resp_i.b.id[7]].b_ready;
    sub_req_o.r_ready = mgr_req_i[sub_resp_i.r.id[7]].r_ready;
  end

  always @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      aw_prio <= 1'b0; ar_prio <= 1'b0;
      aw_lock <= 1'b0; ar_lock <= 1'b0;
      aw_lsel <= 1'b0; ar_lsel <= 1'b0;
      wq.delete();
      w_have <= 1'b0;
      w_sel  <= 1'b0;
    end else begin
      aw_lock <= sub_req_o.aw_valid && !sub_resp_i.aw_ready;
      aw_lsel <= aw_sel;
      ar_lock <= sub_req_o.ar_valid && !sub_resp_i.ar_ready;
      ar_lsel <= ar_sel;
      if (sub_req_o.aw_valid && sub_resp_i.aw_ready) aw_prio <= !aw_sel;
      if (sub_req_o.ar_valid && sub_resp_i.ar_ready) ar_prio <= !ar_sel;
      if (w_have && sub_req_o.w_valid && sub_resp_i.w_ready && sub_req_o.w.last) void'(wq.pop_front());
      if (sub_req_o.aw_valid && sub_resp_i.aw_ready) wq.push_back(aw_sel);
      w_have <= (wq.size() != 0);
      w_sel  <= (wq.size() != 0) ? wq[0] : 1'b0;
    end
  end
endmodule
