// axi_isolate: the isolation cell at the input of an iRealm unit.
//
// While `isolate_i` is high no new AW or AR request is let through; requests
// that were already accepted finish normally, including their W beats and their
// B/R responses. `isolated_o` rises once isolation is requested and nothing is
// outstanding any more, so the unit behind the cell may then be reconfigured.
// A request whose valid was already presented downstream is held until it is
// accepted, so isolation never withdraws a valid (AXI4 stability rule).
// W beats are passed only for writes whose AW has been passed (or is passed in
// the same cycle), so that W data of a blocked AW cannot slip through.
// The paper gives the cell's purpose (isolate during reconfiguration, on budget
// depletion or on software command); the counters and the W credit rule are
// this design's own. Purely combinational forwarding: no added latency.
module axi_isolate
  import realm_pkg::*;
#(
  parameter int unsigned MaxOutstanding = 256
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  input  logic      isolate_i,
  output logic      isolated_o,
  input  axi_req_t  mgr_req_i,
  output axi_resp_t mgr_resp_o,
  output axi_req_t  sub_req_o,
  input  axi_resp_t sub_resp_i
);
  localparam int unsigned CntW = $clog2(MaxOutstanding + 1);

  logic [CntW-1:0] wr_out_q, rd_out_q, w_credit_q;
  logic aw_held_q, ar_held_q;
  logic aw_pass, ar_pass, aw_hs, ar_hs, w_hs, b_hs, r_last_hs, w_pass;

  assign aw_pass = (!isolate_i || aw_held_q) && (wr_out_q != CntW'(MaxOutstanding));
  assign ar_pass = (!isolate_i || ar_held_q) && (rd_out_q != CntW'(MaxOutstanding));

  always_comb begin
    sub_req_o = mgr_req_i;
    sub_req_o.aw_valid = mgr_req_i.aw_valid && aw_pass;
    sub_req_o.ar_valid = mgr_req_i.ar_valid && ar_pass;
    sub_req_o.w_valid  = mgr_req_i.w_valid && w_pass;
    mgr_resp_o = sub_resp_i;
    mgr_resp_o.aw_ready = sub_resp_i.aw_ready && aw_pass;
    mgr_resp_o.ar_ready = sub_resp_i.ar_ready && ar_pass;
    mgr_resp_o.w_ready  = sub_resp_i.w_ready && w_pass;
  end

  assign aw_hs     = sub_req_o.aw_valid && sub_resp_i.aw_ready;
  assign ar_hs     = sub_req_o.ar_valid && sub_resp_i.ar_ready;
  assign w_pass    = (w_credit_q != '0) || aw_hs;
  assign w_hs      = sub_req_o.w_valid && sub_resp_i.w_ready && mgr_req_i.w.last;
  assign b_hs      = sub_resp_i.b_valid && mgr_req_i.b_ready;
  assign r_last_hs = sub_resp_i.r_valid && mgr_req_i.r_ready && sub_resp_i.r.last;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wr_out_q   <= '0;
      rd_out_q   <= '0;
      w_credit_q <= '0;
      aw_held_q  <= 1'b0;
      ar_held_q  <= 1'b0;
    end else begin
      wr_out_q   <= wr_out_q + CntW'(aw_hs) - CntW'(b_hs);
      rd_out_q   <= rd_out_q + CntW'(ar_hs) - CntW'(r_last_hs);
      w_credit_q <= w_credit_q + CntW'(aw_hs) - CntW'(w_hs);
      aw_held_q  <= sub_req_o.aw_valid && !sub_resp_i.aw_ready;
      ar_held_q  <= sub_req_o.ar_valid && !sub_resp_i.ar_ready;
    end
  end

  assign isolated_o = isolate_i && (wr_out_q == '0) && (rd_out_q == '0) && !aw_held_q && !ar_held_q;

endmodule
