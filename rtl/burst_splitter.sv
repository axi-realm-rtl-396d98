// burst_splitter: the granular burst splitter of the iRealm unit.
//
// Incoming bursts are cut into fragments of at most frag_len_i+1 beats (1 to
// 256 beats, runtime configurable). The splitter keeps the meta information of
// the burst being cut (the "meta buffer": ID, address, size, flags and the
// beats still to issue), emits the fragments one after the other and advances
// the address after each. Write data is passed through with W.last inserted at
// every fragment boundary. Write responses of the fragments are coalesced into
// one B for the original burst (carrying an error if any fragment failed); read
// data passes through with R.last suppressed except at the end of the original
// burst. Bursts that must not be cut (exclusive accesses, non-modifiable
// accesses of up to 16 beats and WRAP bursts) pass whole if they fit one
// fragment and are otherwise rejected to an error subordinate, which answers
// with SLVERR.
//
// Timing: the first fragment is forwarded combinationally (no added latency);
// later fragments follow back to back. The input request is accepted together
// with the handshake of its first fragment. At most NumPending fragments per
// direction may be outstanding. `throttle_i` stops new fragments from being
// offered (a fragment already offered is held until accepted).
// A rejected request is only accepted when nothing is outstanding, so the error
// responses never break the same-ID response order.
// Following the paper: the fragment range, meta buffer, coalescing of B and
// gating of R.last, the error subordinate. This design's own: the exact set of
// rejected requests, the error accumulation and the ordering guard.
module burst_splitter
  import realm_pkg::*;
#(
  parameter int unsigned NumPending = 16
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  input  len_t      frag_len_i,
  input  logic      throttle_i,
  input  axi_req_t  mgr_req_i,
  output axi_resp_t mgr_resp_o,
  output axi_req_t  sub_req_o,
  input  axi_resp_t sub_resp_i
);
  // ---------------------------------------------------------------- helpers
  // AXI4 allows a non-modifiable burst to be split only when it is longer than
  // 16 beats
  function automatic logic can_cut(ax_chan_t ax);
    return !ax.lock && (ax.cache[1] || ax.len > 8'd15) && (ax.burst != BURST_WRAP);
  endfunction

  function automatic len_t frag_of(ax_chan_t ax, len_t fl, logic cut);
    if (!cut) return ax.len;
    return (ax.len > fl) ? fl : ax.len;
  endfunction

  // ----------------------------------------------------------- error subordinate
  axi_req_t  err_req;
  axi_resp_t err_resp;
  logic      err_busy;

  axi_err_sub i_err (.clk_i, .rst_ni, .req_i(err_req), .resp_o(err_resp), .busy_o(err_busy));

  // ------------------------------------------------------------- write request
  logic     aw_busy_q, aw_held_q, aw_cerr_q, aw_cut_q, aw_cut;
  ax_chan_t aw_cur_q, aw_src;
  len_t     aw_frag;
  logic     aw_reject, aw_out_valid, aw_out_hs, aw_last_frag;
  logic     wq_full, wq_empty, wq_hit, wq_hit_last, wq_hit_err, wq_carry;
  logic     wl_full, wl_empty;
  len_t     wl_head;
  logic     aw_to_err;

  assign aw_src       = aw_busy_q ? aw_cur_q : mgr_req_i.aw;
  // whether the burst may be cut is decided on the original burst only
  assign aw_cut       = aw_busy_q ? aw_cut_q : can_cut(mgr_req_i.aw);
  assign aw_frag      = frag_of(aw_src, frag_len_i, aw_cut);
  assign aw_last_frag = (aw_frag == aw_src.len);
  assign aw_reject    = !aw_busy_q && mgr_req_i.aw_valid && !can_cut(mgr_req_i.aw) &&
                        (mgr_req_i.aw.len > frag_len_i);
  assign aw_out_valid = (aw_busy_q || (mgr_req_i.aw_valid && !aw_reject)) &&
                        !wq_full && !wl_full && !err_busy && (!throttle_i || aw_held_q);
  assign aw_out_hs    = aw_out_valid && sub_resp_i.aw_ready;
  // rejected write: only when nothing is outstanding and no W is in flight
  assign aw_to_err    = aw_reject && wq_empty && wl_empty && !err_busy;

  // --------------------------------------------------------------- read request
  logic     ar_busy_q, ar_held_q, ar_cut_q, ar_cut;
  ax_chan_t ar_cur_q, ar_src;
  len_t     ar_frag;
  logic     ar_reject, ar_out_valid, ar_out_hs, ar_last_frag;
  logic     rq_full, rq_empty, rq_hit, rq_hit_last, rq_hit_err, rq_carry;
  logic     ar_to_err;

  assign ar_src       = ar_busy_q ? ar_cur_q : mgr_req_i.ar;
  assign ar_cut       = ar_busy_q ? ar_cut_q : can_cut(mgr_req_i.ar);
  assign ar_frag      = frag_of(ar_src, frag_len_i, ar_cut);
  assign ar_last_frag = (ar_frag == ar_src.len);
  assign ar_reject    = !ar_busy_q && mgr_req_i.ar_valid && !can_cut(mgr_req_i.ar) &&
                        (mgr_req_i.ar.len > frag_len_i);
  assign ar_out_valid = (ar_busy_q || (mgr_req_i.ar_valid && !ar_reject)) &&
                        !rq_full && !err_busy && (!throttle_i || ar_held_q);
  assign ar_out_hs    = ar_out_valid && sub_resp_i.ar_ready;
  assign ar_to_err    = ar_reject && rq_empty && !err_busy;

  // -------------------------------------------------------- W fragment lengths
  // Beat count of each issued write fragment, in AW order, to place W.last.
  len_t wbeat_q;
  logic w_to_err, w_out_hs, w_frag_end;

  realm_fifo #(.Depth(NumPending), .T(len_t)) i_wlen (
    .clk_i, .rst_ni, .flush_i(1'b0),
    .push_i(aw_out_hs), .data_i(aw_frag),
    .pop_i(w_out_hs && w_frag_end), .data_o(wl_head),
    .full_o(wl_full), .empty_o(wl_empty), .count_o()
  );

  assign w_to_err   = (err_busy && !err_resp.aw_ready) || (aw_to_err);
  assign w_frag_end = (wbeat_q == wl_head);
  assign w_out_hs   = mgr_req_i.w_valid && !wl_empty && !w_to_err && sub_resp_i.w_ready;

  // -------------------------------------------------------------- meta queues
  logic b_pop, b_swallow, r_pop;

  burst_meta_queue #(.Depth(NumPending)) i_wq (
    .clk_i, .rst_ni,
    .push_i(aw_out_hs), .push_id_i(aw_src.id), .push_last_i(aw_last_frag), .push_err_i(aw_cerr_q),
    .full_o(wq_full), .empty_o(wq_empty),
    .lookup_id_i(sub_resp_i.b.id), .hit_o(wq_hit), .hit_last_o(wq_hit_last), .hit_err_o(wq_hit_err),
    .pop_i(b_pop), .pop_err_i(sub_resp_i.b.resp[1]), .carry_err_o(wq_carry)
  );

  burst_meta_queue #(.Depth(NumPending)) i_rq (
    .clk_i, .rst_ni,
    .push_i(ar_out_hs), .push_id_i(ar_src.id), .push_last_i(ar_last_frag), .push_err_i(1'b0),
    .full_o(rq_full), .empty_o(rq_empty),
    .lookup_id_i(sub_resp_i.r.id), .hit_o(rq_hit), .hit_last_o(rq_hit_last), .hit_err_o(rq_hit_err),
    .pop_i(r_pop), .pop_err_i(1'b0), .carry_err_o(rq_carry)
  );

  // Non-final fragments' B responses are absorbed here.
  assign b_swallow = sub_resp_i.b_valid && wq_hit && !wq_hit_last;
  assign b_pop     = sub_resp_i.b_valid && (b_swallow || mgr_req_i.b_ready) && !err_busy;
  assign r_pop     = sub_resp_i.r_valid && sub_resp_i.r.last && mgr_req_i.r_ready && !err_busy;

  // --------------------------------------------------------------- wiring
  always_comb begin
    sub_req_o = '0;
    // AW
    sub_req_o.aw       = aw_src;
    sub_req_o.aw.len   = aw_frag;
    sub_req_o.aw_valid = aw_out_valid;
    // AR
    sub_req_o.ar       = ar_src;
    sub_req_o.ar.len   = ar_frag;
    sub_req_o.ar_valid = ar_out_valid;
    // W
    sub_req_o.w        = mgr_req_i.w;
    sub_req_o.w.last   = w_frag_end;
    sub_req_o.w_valid  = mgr_req_i.w_valid && !wl_empty && !w_to_err;
    // responses
    sub_req_o.b_ready  = !err_busy && (b_swallow || mgr_req_i.b_ready);
    sub_req_o.r_ready  = !err_busy && mgr_req_i.r_ready;

    err_req          = '0;
    err_req.aw       = mgr_req_i.aw;
    err_req.aw_valid = aw_to_err;
    err_req.ar       = mgr_req_i.ar;
    err_req.ar_valid = ar_to_err;
    err_req.w        = mgr_req_i.w;
    err_req.w_valid  = mgr_req_i.w_valid && w_to_err;
    err_req.b_ready  = mgr_req_i.b_ready;
    err_req.r_ready  = mgr_req_i.r_ready;

    mgr_resp_o = '0;
    mgr_resp_o.aw_ready = aw_to_err || (!aw_busy_q && aw_out_hs);
    mgr_resp_o.ar_ready = ar_to_err || (!ar_busy_q && ar_out_hs);
    mgr_resp_o.w_ready  = w_to_err ? err_resp.w_ready : (!wl_empty && sub_resp_i.w_ready);
    if (err_busy) begin
      mgr_resp_o.b_valid = err_resp.b_valid;
      mgr_resp_o.b       = err_resp.b;
      mgr_resp_o.r_valid = err_resp.r_valid;
      mgr_resp_o.r       = err_resp.r;
    end else begin
      mgr_resp_o.b_valid = sub_resp_i.b_valid && !b_swallow;
      mgr_resp_o.b       = sub_resp_i.b;
      if (wq_hit_err) mgr_resp_o.b.resp = RESP_SLVERR;
      mgr_resp_o.r_valid = sub_resp_i.r_valid;
      mgr_resp_o.r       = sub_resp_i.r;
      mgr_resp_o.r.last  = sub_resp_i.r.last && (!rq_hit || rq_hit_last);
    end
  end

  // --------------------------------------------------------------- state
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      aw_busy_q <= 1'b0;
      ar_busy_q <= 1'b0;
      aw_cur_q  <= '0;
      ar_cur_q  <= '0;
      aw_held_q <= 1'b0;
      ar_held_q <= 1'b0;
      aw_cerr_q <= 1'b0;
      aw_cut_q  <= 1'b0;
      ar_cut_q  <= 1'b0;
      wbeat_q   <= '0;
    end else begin
      aw_held_q <= aw_out_valid && !sub_resp_i.aw_ready;
      ar_held_q <= ar_out_valid && !sub_resp_i.ar_ready;
      if (aw_out_hs) begin
        aw_busy_q     <= !aw_last_frag;
        aw_cur_q      <= aw_src;
        aw_cur_q.addr <= next_addr(aw_src.addr, aw_src.size, aw_src.burst, 9'(aw_frag) + 9'd1);
        aw_cur_q.len  <= aw_src.len - aw_frag - 8'd1;
        aw_cerr_q     <= 1'b0;
        aw_cut_q      <= aw_cut;
      end
      if (wq_carry) aw_cerr_q <= 1'b1;
      if (ar_out_hs) begin
        ar_busy_q     <= !ar_last_frag;
        ar_cur_q      <= ar_src;
        ar_cur_q.addr <= next_addr(ar_src.addr, ar_src.size, ar_src.burst, 9'(ar_frag) + 9'd1);
        ar_cur_q.len  <= ar_src.len - ar_frag - 8'd1;
        ar_cut_q      <= ar_cut;
      end
      if (w_out_hs) wbeat_q <= w_frag_end ? '0 : wbeat_q + 8'd1;
    end
  end

  // A fragment offered downstream must stay offered until accepted.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
    sub_req_o.aw_valid && !sub_resp_i.aw_ready |=> sub_req_o.aw_valid);
  assert property (@(posedge clk_i) disable iff (!rst_ni)
    sub_req_o.ar_valid && !sub_resp_i.ar_ready |=> sub_req_o.ar_valid);

endmodule
