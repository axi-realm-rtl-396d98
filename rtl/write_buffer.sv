// write_buffer: stops a slow writer from holding the W channel of the
// interconnect.
//
// AW requests (up to AwDepth) and W beats (up to BufferDepth) are stored. A
// buffered AW is sent downstream only once every beat of its burst, up to the
// one with W.last, is in the buffer; its beats then follow back to back from
// the buffer. Downstream, a write therefore never waits on its manager's data.
// Since a burst longer than the buffer could never be complete, the buffer
// falls back to cut-through when it is full and holds no last beat; the burst
// splitter in front keeps fragments short enough that this does not happen
// when it is set up as intended.
// AR, B and R pass untouched. Latency: one cycle from the last W beat entering
// to the AW leaving. With enable_i low the buffer is bypassed combinationally;
// a change of enable_i takes effect only when the buffer is empty.
// The paper gives the forwarding rule and the size (two AWs and one fragmented
// burst); the cut-through fallback and the switch-when-empty rule are this
// design's own.
module write_buffer
  import realm_pkg::*;
#(
  parameter int unsigned AwDepth     = 2,
  parameter int unsigned BufferDepth = 4
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  input  logic      enable_i,
  input  axi_req_t  mgr_req_i,
  output axi_resp_t mgr_resp_o,
  output axi_req_t  sub_req_o,
  input  axi_resp_t sub_resp_i
);
  localparam int unsigned CntW = $clog2(BufferDepth + AwDepth + 1);

  logic     mode_q, idle;
  ax_chan_t aw_head;
  w_chan_t  w_head;
  logic     aw_full, aw_empty, w_full, w_empty;
  logic     aw_in_hs, w_in_hs, aw_out_hs, w_out_hs, aw_send;
  logic [CntW-1:0] complete_q, owed_q;
  logic [8:0]      byp_owed_q;  // bursts whose AW passed in bypass but whose W has not

  assign idle = aw_empty && w_empty && (owed_q == '0) && (byp_owed_q == '0);

  realm_fifo #(.Depth(AwDepth), .T(ax_chan_t)) i_aw (
    .clk_i, .rst_ni, .flush_i(1'b0), .push_i(aw_in_hs), .data_i(mgr_req_i.aw),
    .pop_i(aw_out_hs), .data_o(aw_head), .full_o(aw_full), .empty_o(aw_empty), .count_o()
  );
  realm_fifo #(.Depth(BufferDepth), .T(w_chan_t)) i_w (
    .clk_i, .rst_ni, .flush_i(1'b0), .push_i(w_in_hs), .data_i(mgr_req_i.w),
    .pop_i(w_out_hs), .data_o(w_head), .full_o(w_full), .empty_o(w_empty), .count_o()
  );

  // An AW may leave when a complete burst not yet claimed is buffered, or as
  // cut-through when the buffer is full of an incomplete burst.
  assign aw_send = !aw_empty && ((complete_q > owed_q) || (w_full && owed_q == '0 && complete_q == '0));

  always_comb begin
    sub_req_o  = mgr_req_i;
    mgr_resp_o = sub_resp_i;
    if (mode_q) begin
      sub_req_o.aw       = aw_head;
      sub_req_o.aw_valid = aw_send;
      sub_req_o.w        = w_head;
      sub_req_o.w_valid  = !w_empty && (owed_q != '0);
      mgr_resp_o.aw_ready = !aw_full;
      mgr_resp_o.w_ready  = !w_full;
    end
  end

  assign aw_in_hs  = mode_q && mgr_req_i.aw_valid && !aw_full;
  assign w_in_hs   = mode_q && mgr_req_i.w_valid && !w_full;
  assign aw_out_hs = mode_q && sub_req_o.aw_valid && sub_resp_i.aw_ready;
  assign w_out_hs  = mode_q && sub_req_o.w_valid && sub_resp_i.w_ready;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      mode_q     <= 1'b0;
      complete_q <= '0;
      owed_q     <= '0;
      byp_owed_q <= '0;
    end else begin
      if (!mode_q)
        byp_owed_q <= byp_owed_q + 9'(mgr_req_i.aw_valid && sub_resp_i.aw_ready)
                                 - 9'(mgr_req_i.w_valid && sub_resp_i.w_ready && mgr_req_i.w.last);
      complete_q <= complete_q + CntW'(w_in_hs && mgr_req_i.w.last) - CntW'(w_out_hs && w_head.last);
      owed_q     <= owed_q + CntW'(aw_out_hs) - CntW'(w_out_hs && w_head.last);
      if (idle && !mgr_req_i.aw_valid && !mgr_req_i.w_valid) mode_q <= enable_i;
    end
  end

  // W beats only leave for a write whose AW has already left.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
    (mode_q && sub_req_o.w_valid) |-> (owed_q != '0));

endmodule
