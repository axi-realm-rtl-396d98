// axi_err_sub: error subordinate that terminates requests the burst splitter
// cannot handle.
//
// It accepts one write and one read request at a time. For a write it absorbs
// every W beat up to and including the one with last set, then answers with a
// single SLVERR B response. For a read it returns len+1 R beats carrying
// SLVERR and zero data, the final one with last set. Responses carry the ID of
// the request. The paper states that unsupported transactions are answered by
// an error subordinate; the exact behaviour here follows the AXI4 rules.
module axi_err_sub
  import realm_pkg::*;
(
  input  logic      clk_i,
  input  logic      rst_ni,
  input  axi_req_t  req_i,
  output axi_resp_t resp_o,
  output logic      busy_o
);
  typedef enum logic [1:0] {W_IDLE, W_DATA, W_RESP} wstate_e;
  wstate_e wstate_q;
  id_t     wid_q, rid_q;
  logic    rbusy_q;
  len_t    rcnt_q;

  always_comb begin
    resp_o          = '0;
    resp_o.aw_ready = (wstate_q == W_IDLE);
    resp_o.w_ready  = (wstate_q == W_DATA);
    resp_o.b_valid  = (wstate_q == W_RESP);
    resp_o.b.id     = wid_q;
    resp_o.b.resp   = RESP_SLVERR;
    resp_o.ar_ready = !rbusy_q;
    resp_o.r_valid  = rbusy_q;
    resp_o.r.id     = rid_q;
    resp_o.r.resp   = RESP_SLVERR;
    resp_o.r.last   = (rcnt_q == '0);
  end

  assign busy_o = (wstate_q != W_IDLE) || rbusy_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wstate_q <= W_IDLE;
      wid_q    <= '0;
      rid_q    <= '0;
      rbusy_q  <= 1'b0;
      rcnt_q   <= '0;
    end else begin
      unique case (wstate_q)
        W_IDLE: if (req_i.aw_valid) begin
          wid_q    <= req_i.aw.id;
          wstate_q <= W_DATA;
        end
        W_DATA: if (req_i.w_valid && req_i.w.last) wstate_q <= W_RESP;
        W_RESP: if (req_i.b_ready) wstate_q <= W_IDLE;
        default: wstate_q <= W_IDLE;
      endcase
      if (!rbusy_q && req_i.ar_valid) begin
        rbusy_q <= 1'b1;
        rid_q   <= req_i.ar.id;
        rcnt_q  <= req_i.ar.len;
      end else if (rbusy_q && req_i.r_ready) begin
        if (rcnt_q == '0) rbusy_q <= 1'b0;
        else rcnt_q <= rcnt_q - 1'b1;
      end
    end
  end
endmodule
