// tb_axi_mem: behavioural AXI4 memory subordinate for the testbenches.
//
// Accepts any number of outstanding requests and answers them in order:
// writes are stored per byte lane into a sparse memory, reads return the
// stored data (unwritten words read as a pattern of their address). With
// RandStall set, ready and valid signals are withheld at random. The hang_*
// inputs freeze one channel to emulate a faulty device; rst_ni clears all
// pending work (the memory contents survive).
module tb_axi_mem
  import realm_pkg::*;
#(
  parameter bit RandStall = 1'b1
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  input  axi_req_t  req_i,
  output axi_resp_t resp_o,
  input  logic      hang_aw_i,
  input  logic      hang_w_i,
  input  logic      hang_b_i,
  input  logic      hang_r_i
);
  ax_chan_t   awq[$];
  ax_chan_t   arq[$];
  b_chan_t    bq[$];
  data_t      mem [addr_t];
  int unsigned wbeat, rbeat;
  // plain copies of the queue state, read by the combinational outputs
  int unsigned n_aw, n_ar, n_b;
  b_chan_t     b_head;
  ax_chan_t    ar_head;
  logic aw_rdy, w_rdy, ar_rdy, b_vld, r_vld;
  data_t r_data;
  logic  r_last;

  function automatic data_t rd_word(addr_t a);
    addr_t wa;
    wa = (a >> 3) << 3;
    if (mem.exists(wa)) return mem[wa];
    return data_t'({16'hA5A5, wa});
  endfunction

  function automatic addr_t beat_addr(ax_chan_t ax, int unsigned beat);
    if (ax.burst == BURST_FIXED) return ax.addr;
    return ((ax.addr >> ax.size) << ax.size) + (addr_t'(beat) << ax.size);
  endfunction

  function automatic logic coin();
    return !RandStall || ($urandom_range(0, 3) != 0);
  endfunction

  always_comb begin
    resp_o          = '0;
    resp_o.aw_ready = aw_rdy && !hang_aw_i;
    resp_o.ar_ready = ar_rdy && !hang_aw_i;
    resp_o.w_ready  = w_rdy && !hang_w_i && (n_aw > 0);
    resp_o.b_valid  = b_vld && !hang_b_i && (n_b > 0);
    resp_o.b        = b_head;
    resp_o.r_valid  = r_vld && !hang_r_i && (n_ar > 0);
    resp_o.r.id     = ar_head.id;
    resp_o.r.data   = r_data;
    resp_o.r.resp   = RESP_OKAY;
    resp_o.r.last   = r_last;
  end

  always @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      awq.delete();
      arq.delete();
      bq.delete();
      wbeat  = 0;
      rbeat  = 0;
      n_aw   = 0;
      n_ar   = 0;
      n_b    = 0;
      b_head = '0;
      ar_head = '0;
      r_data = '0;
      r_last = 1'b0;
      aw_rdy <= 1'b0;
      w_rdy  <= 1'b0;
      ar_rdy <= 1'b0;
      b_vld  <= 1'b0;
      r_vld  <= 1'b0;
    end else begin
      if (req_i.aw_valid && resp_o.aw_ready) awq.push_back(req_i.aw);
      if (req_i.ar_valid && resp_o.ar_ready) arq.push_back(req_i.ar);
      if (req_i.w_valid && resp_o.w_ready) begin
        addr_t a;
        data_t d;
        a = (beat_addr(awq[0], wbeat) >> 3) << 3;
        d = rd_word(a);
        for (int i = 0; i < StrbWidth; i++)
          if (req_i.w.strb[i]) d[8*i +: 8] = req_i.w.data[8*i +: 8];
        mem[a] = d;
        if (req_i.w.last) begin
          bq.push_back('{id: awq[0].id, resp: RESP_OKAY});
          void'(awq.pop_front());
          wbeat = 0;
        end else wbeat++;
      end
      if (resp_o.b_valid && req_i.b_ready) void'(bq.pop_front());
      if (resp_o.r_valid && req_i.r_ready) begin
        if (resp_o.r.last) begin
          void'(arq.pop_front());
          rbeat = 0;
        end else rbeat++;
      end
      // nonblocking, so that no other process sees the outputs move at the edge
      n_aw <= awq.size();
      n_ar <= arq.size();
      n_b  <= bq.size();
      if (bq.size() > 0) b_head <= bq[0];
      if (arq.size() > 0) begin
        ar_head <= arq[0];
        r_data  <= rd_word(beat_addr(arq[0], rbeat));
        r_last  <= (rbeat == int'(arq[0].len));
      end
      aw_rdy <= coin();
      w_rdy  <= coin();
      ar_rdy <= coin();
      b_vld  <= coin();
      r_vld  <= coin();
    end
  end
endmodule
