// erealm_tracker: transaction tracking for one direction of an eRealm unit.
//
// It holds every outstanding transaction to the guarded subordinate in the
// dynamic outstanding transaction queue (DOTQ), made of three linked tables:
//  * HT (ID head-tail) table, NumIds slots: one per active transaction ID,
//    holding the manager's ID, the head and tail of that ID's list and its
//    length. The slot number is the compact ID sent to the subordinate, so the
//    HT table is also the ID remapper: NumIds IDs need only $clog2(NumIds) bits.
//  * LD (linked data) table, NumIds*NumPending entries: per transaction the
//    address, burst length, stage, stage counter, beat count and the link to
//    the next transaction of the same ID.
//  * W table (write direction only): the LD entries in AW order, since W beats
//    carry no ID; the head entry owns the W beats on the channel. Reads need no
//    such table: R beats carry their ID, and the HT head is the owner.
// A request with no free slot (new ID and HT full, ID already at NumPending
// transactions, or LD full) is held back (ax_stall_o).
//
// Stages, numbered as in the budgets array (budget_i[k] is stage k+1):
//   write: 1 aw_valid->aw_ready, 2 aw accepted->first w_valid, 3 w_valid->
//          w_ready, 4 first W beat->w_last, 5 w_last->b_valid, 6 b_valid->b_ready
//   read:  1 ar_valid->ar_ready, 2 ar accepted->first r_valid, 3 first R beat->
//          r_last, 4 r_valid->r_ready
// Stages 2 and 4 of a write and 3 of a read use budget x (len+1); the others use
// the budget as is. Stages 1, 3 and 6 (read: 1 and 4) are channel handshakes
// timed by one counter per channel; the others by a counter in each LD entry.
// Stage 5 of a write and stage 2 of a read only count while the transaction is
// the oldest of its ID, so it is not charged for earlier responses of its ID.
// A budget of 0 leaves its stage unchecked. Counters are CntWidth bits and
// saturate; a scaled budget above their range is clipped to it.
// Faults: a counter reaching its budget (timeout) or a protocol violation (a
// response for an ID with nothing outstanding, a write response before the last
// W beat, R.last on the wrong beat). fault_o is combinational, with cause,
// stage, manager ID and address of the transaction concerned.
// While flush_i is high the tracker completes every outstanding transaction
// towards the manager instead of the subordinate: it accepts the remaining W
// beats, then answers each write with a SLVERR B and each read with its missing
// R beats, all in per-ID order, until empty_o.
// The table structure, stage list and length-scaled budgets follow the paper;
// the stage/counter split, the protocol checks and the completion order are this
// design's own.
module erealm_tracker
  import realm_pkg::*;
#(
  parameter bit          IsWrite    = 1'b1,
  parameter int unsigned NumIds     = 2,
  parameter int unsigned NumPending = 2,
  parameter int unsigned CntWidth   = 10
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic                flush_i,
  input  logic [CntWidth-1:0] budget_i [6],
  // request channel: manager's request, subordinate's ready
  input  logic                ax_valid_i,
  input  ax_chan_t            ax_i,
  input  logic                ax_ready_i,
  output logic                ax_stall_o,
  output id_t                 ax_cid_o,
  // write data channel as seen at the subordinate (write direction only)
  input  logic                w_valid_i,
  input  logic                w_ready_i,
  input  logic                w_last_i,
  // response channel from the subordinate, compact ID
  input  logic                rsp_valid_i,
  input  logic                rsp_ready_i,
  input  logic                rsp_last_i,
  input  id_t                 rsp_cid_i,
  output id_t                 rsp_id_o,
  // completion towards the manager while flushing
  input  logic                cmp_w_valid_i,
  input  logic                cmp_w_last_i,
  output logic                cmp_w_ready_o,
  output logic                cmp_valid_o,
  output id_t                 cmp_id_o,
  output logic                cmp_last_o,
  input  logic                cmp_ready_i,
  output logic                empty_o,
  // fault report
  output logic                fault_o,
  output logic [1:0]          fault_cause_o,  // 1: timeout, 2: protocol
  output logic [2:0]          fault_stage_o,
  output id_t                 fault_id_o,
  output addr_t               fault_addr_o
);
  localparam int unsigned NumEntries = NumIds * NumPending;
  localparam int unsigned HW = (NumIds > 1) ? $clog2(NumIds) : 1;
  localparam int unsigned EW = (NumEntries > 1) ? $clog2(NumEntries) : 1;
  localparam int unsigned PW = $clog2(NumPending + 1);
  localparam logic [CntWidth-1:0] CntMax = '1;

  typedef enum logic [1:0] {E_WAIT, E_DATA, E_RESP} est_e;

  typedef struct packed {
    logic        valid;
    id_t         ext_id;
    logic [PW-1:0] cnt;
    logic [EW-1:0] head;
    logic [EW-1:0] tail;
  } ht_t;

  typedef struct packed {
    logic          valid;
    logic [EW-1:0] next;
    logic [HW-1:0] hid;
    addr_t         addr;
    len_t          len;
    est_e          st;
    logic [CntWidth-1:0] cnt;
    len_t          beats;
  } ld_t;

  ht_t [NumIds-1:0]     ht_q, ht_d;
  ld_t [NumEntries-1:0] ld_q, ld_d;
  logic [CntWidth-1:0] ax_cnt_q, w_cnt_q, rsp_cnt_q;

  // ---------------------------------------------------------------- W table
  logic [EW-1:0] wt_head;
  logic          wt_empty, wt_push, wt_pop;
  logic [EW-1:0] alloc_e;

  if (IsWrite) begin : g_wtable
    realm_fifo #(.Depth(NumEntries), .T(logic [EW-1:0])) i_wtable (
      .clk_i, .rst_ni, .flush_i(1'b0), .push_i(wt_push), .data_i(alloc_e),
      .pop_i(wt_pop), .data_o(wt_head), .full_o(), .empty_o(wt_empty), .count_o()
    );
  end else begin : g_no_wtable
    assign wt_head  = '0;
    assign wt_empty = 1'b1;
  end

  // ------------------------------------------------------------- helpers
  function automatic logic [CntWidth-1:0] scaled(logic [CntWidth-1:0] b, len_t len);
    logic [CntWidth+8:0] p;
    p = (CntWidth+9)'(b) * ((CntWidth+9)'(len) + 1);
    return (p > (CntWidth+9)'(CntMax)) ? CntMax : p[CntWidth-1:0];
  endfunction

  function automatic logic [CntWidth-1:0] sat_inc(logic [CntWidth-1:0] c);
    return (c == CntMax) ? c : c + 1'b1;
  endfunction

  // stage number (1-based) of an entry state
  function automatic logic [2:0] stage_of(est_e st);
    if (IsWrite) return (st == E_WAIT) ? 3'd2 : (st == E_DATA) ? 3'd4 : 3'd5;
    else         return (st == E_WAIT) ? 3'd2 : 3'd3;
  endfunction

  function automatic logic [CntWidth-1:0] limit_of(est_e st, len_t len,
                                                  logic [CntWidth-1:0] b [6]);
    if (IsWrite) begin
      if (st == E_WAIT) return scaled(b[1], len);
      if (st == E_DATA) return scaled(b[3], len);
      return b[4];
    end else begin
      if (st == E_WAIT) return b[1];
      return scaled(b[2], len);
    end
  endfunction

  // ------------------------------------------------------------ lookups
  logic          ax_hit, ht_free, ld_free;
  logic [HW-1:0] ax_hid, free_hid;
  logic          ax_hs;

  always_comb begin
    ax_hit   = 1'b0;
    ax_hid   = '0;
    ht_free  = 1'b0;
    free_hid = '0;
    ld_free  = 1'b0;
    alloc_e  = '0;
    for (int h = NumIds - 1; h >= 0; h--) begin
      if (ht_q[h].valid && ht_q[h].ext_id == ax_i.id) begin
        ax_hit = 1'b1;
        ax_hid = HW'(h);
      end
      if (!ht_q[h].valid) begin
        ht_free  = 1'b1;
        free_hid = HW'(h);
      end
    end
    for (int e = NumEntries - 1; e >= 0; e--) begin
      if (!ld_q[e].valid) begin
        ld_free = 1'b1;
        alloc_e = EW'(e);
      end
    end
  end

  assign ax_stall_o = flush_i || !ld_free || (ax_hit ? (ht_q[ax_hid].cnt == PW'(NumPending)) : !ht_free);
  assign ax_cid_o   = ax_hit ? id_t'(ax_hid) : id_t'(free_hid);
  assign ax_hs      = ax_valid_i && ax_ready_i && !ax_stall_o;
  assign wt_push    = IsWrite && ax_hs;

  // response lookup (compact ID -> HT slot)
  logic          rsp_known;
  logic [HW-1:0] rsp_hid;
  logic [EW-1:0] rsp_e;
  assign rsp_hid   = rsp_cid_i[HW-1:0];
  assign rsp_known = (rsp_cid_i < id_t'(NumIds)) && ht_q[rsp_hid].valid;
  assign rsp_e     = ht_q[rsp_hid].head;
  assign rsp_id_o  = ht_q[rsp_hid].ext_id;

  // completion candidate while flushing: first ID whose head may be answered
  logic          cmp_found;
  logic [HW-1:0] cmp_hid;
  logic [EW-1:0] cmp_e;
  always_comb begin
    cmp_found = 1'b0;
    cmp_hid   = '0;
    for (int h = NumIds - 1; h >= 0; h--) begin
      if (ht_q[h].valid && (!IsWrite || ld_q[ht_q[h].head].st == E_RESP)) begin
        cmp_found = 1'b1;
        cmp_hid   = HW'(h);
      end
    end
  end
  assign cmp_e         = ht_q[cmp_hid].head;
  assign cmp_valid_o   = flush_i && cmp_found;
  assign cmp_id_o      = ht_q[cmp_hid].ext_id;
  assign cmp_last_o    = IsWrite || (ld_q[cmp_e].beats == ld_q[cmp_e].len);
  assign cmp_w_ready_o = flush_i && IsWrite && !wt_empty;

  // ------------------------------------------------------------ next state
  logic          proto_err;
  logic          retire;
  logic [EW-1:0] retire_e;
  logic          is_head;
  logic [HW-1:0] rh, ah;
  logic [CntWidth-1:0] lim;

  // the direction as a signal, so that both response branches are elaborated
  logic is_wr;
  assign is_wr = IsWrite;

  always_comb begin
    for (int h = 0; h < NumIds; h++) ht_d[h] = ht_q[h];
    for (int e = 0; e < NumEntries; e++) ld_d[e] = ld_q[e];
    proto_err = 1'b0;
    retire    = 1'b0;
    retire_e  = '0;
    wt_pop    = 1'b0;
    is_head   = 1'b0;
    rh        = '0;
    ah        = '0;

    if (!flush_i) begin
      // stage counters
      for (int e = 0; e < NumEntries; e++) begin
        if (ld_q[e].valid) begin
          is_head = (ht_q[ld_q[e].hid].head == EW'(e));
          if (ld_q[e].st == E_DATA || (IsWrite && ld_q[e].st == E_WAIT) || is_head)
            ld_d[e].cnt = sat_inc(ld_q[e].cnt);
        end
      end
      // write data
      for (int e = 0; e < NumEntries; e++) begin
        if (IsWrite && !wt_empty && w_valid_i && wt_head == EW'(e)) begin
          if (ld_q[e].st == E_WAIT) begin
            ld_d[e].st  = E_DATA;
            ld_d[e].cnt = '0;
          end
          if (w_ready_i) begin
            ld_d[e].beats = ld_q[e].beats + 8'd1;
            if (w_last_i) begin
              ld_d[e].st  = E_RESP;
              ld_d[e].cnt = '0;
              wt_pop = 1'b1;
            end
          end
        end
      end
      // responses
      if (rsp_valid_i) begin
        if (!rsp_known) proto_err = 1'b1;
        else if (is_wr) begin
          if (ld_q[rsp_e].st != E_RESP) proto_err = 1'b1;
          else if (rsp_ready_i) begin
            retire   = 1'b1;
            retire_e = rsp_e;
          end
        end else begin
          if (ld_q[rsp_e].st == E_WAIT) begin
            ld_d[rsp_e].st  = E_DATA;
            ld_d[rsp_e].cnt = '0;
          end
          if (rsp_last_i != (ld_q[rsp_e].beats == ld_q[rsp_e].len)) proto_err = 1'b1;
          else if (rsp_ready_i) begin
            ld_d[rsp_e].beats = ld_q[rsp_e].beats + 8'd1;
            if (rsp_last_i) begin
              retire   = 1'b1;
              retire_e = rsp_e;
            end
          end
        end
      end
    end else begin
      // completion towards the manager
      for (int e = 0; e < NumEntries; e++) begin
        if (IsWrite && !wt_empty && cmp_w_valid_i && cmp_w_last_i && wt_head == EW'(e)) begin
          ld_d[e].st = E_RESP;
          wt_pop = 1'b1;
        end
      end
      if (cmp_valid_o && cmp_ready_i) begin
        if (cmp_last_o) begin
          retire   = 1'b1;
          retire_e = cmp_e;
        end else begin
          ld_d[cmp_e].beats = ld_q[cmp_e].beats + 8'd1;
        end
      end
    end

    if (retire) begin
      rh = ld_q[retire_e].hid;
      ld_d[retire_e].valid = 1'b0;
      ht_d[rh].head = ld_q[retire_e].next;
      ht_d[rh].cnt  = ht_q[rh].cnt - 1'b1;
      if (ht_q[rh].cnt == PW'(1)) ht_d[rh].valid = 1'b0;
    end

    if (ax_hs) begin
      ah = ax_hit ? ax_hid : free_hid;
      ld_d[alloc_e] = '{valid: 1'b1, next: '0, hid: ah, addr: ax_i.addr, len: ax_i.len,
                        st: E_WAIT, cnt: '0, beats: '0};
      if (ht_d[ah].valid) begin
        ld_d[ht_q[ah].tail].next = alloc_e;
        ht_d[ah].tail = alloc_e;
        ht_d[ah].cnt  = ht_d[ah].cnt + 1'b1;
      end else begin
        ht_d[ah] = '{valid: 1'b1, ext_id: ax_i.id, cnt: PW'(1), head: alloc_e, tail: alloc_e};
      end
    end
  end

  // ------------------------------------------------------------ fault select
  always_comb begin
    fault_o       = 1'b0;
    fault_cause_o = '0;
    fault_stage_o = '0;
    fault_id_o    = '0;
    fault_addr_o  = '0;
    lim           = '0;
    if (!flush_i) begin
      // channel handshake stages
      if (rsp_valid_i && budget_i[IsWrite ? 5 : 3] != '0 && rsp_cnt_q >= budget_i[IsWrite ? 5 : 3]) begin
        fault_o       = 1'b1;
        fault_cause_o = 2'd1;
        fault_stage_o = IsWrite ? 3'd6 : 3'd4;
        fault_id_o    = rsp_known ? ht_q[rsp_hid].ext_id : rsp_cid_i;
        fault_addr_o  = ld_q[rsp_e].addr;
      end
      if (IsWrite && w_valid_i && !wt_empty && budget_i[2] != '0 && w_cnt_q >= budget_i[2]) begin
        fault_o       = 1'b1;
        fault_cause_o = 2'd1;
        fault_stage_o = 3'd3;
        fault_id_o    = ht_q[ld_q[wt_head].hid].ext_id;
        fault_addr_o  = ld_q[wt_head].addr;
      end
      if (ax_valid_i && !ax_stall_o && budget_i[0] != '0 && ax_cnt_q >= budget_i[0]) begin
        fault_o       = 1'b1;
        fault_cause_o = 2'd1;
        fault_stage_o = 3'd1;
        fault_id_o    = ax_i.id;
        fault_addr_o  = ax_i.addr;
      end
      // per-transaction stages, lowest entry reported
      for (int e = NumEntries - 1; e >= 0; e--) begin
        lim = limit_of(ld_q[e].st, ld_q[e].len, budget_i);
        if (ld_q[e].valid && lim != '0 && ld_q[e].cnt >= lim) begin
          fault_o       = 1'b1;
          fault_cause_o = 2'd1;
          fault_stage_o = stage_of(ld_q[e].st);
          fault_id_o    = ht_q[ld_q[e].hid].ext_id;
          fault_addr_o  = ld_q[e].addr;
        end
      end
      // protocol violations take precedence
      if (proto_err) begin
        fault_o       = 1'b1;
        fault_cause_o = 2'd2;
        fault_stage_o = IsWrite ? 3'd5 : 3'd3;
        fault_id_o    = rsp_known ? ht_q[rsp_hid].ext_id : rsp_cid_i;
        fault_addr_o  = rsp_known ? ld_q[rsp_e].addr : '0;
      end
    end
  end

  assign empty_o = ~|ht_valid_vec();

  function automatic logic [NumIds-1:0] ht_valid_vec();
    logic [NumIds-1:0] v;
    for (int h = 0; h < NumIds; h++) v[h] = ht_q[h].valid;
    return v;
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int h = 0; h < NumIds; h++) ht_q[h] <= '0;
      for (int e = 0; e < NumEntries; e++) ld_q[e] <= '0;
      ax_cnt_q  <= '0;
      w_cnt_q   <= '0;
      rsp_cnt_q <= '0;
    end else begin
      for (int h = 0; h < NumIds; h++) ht_q[h] <= ht_d[h];
      for (int e = 0; e < NumEntries; e++) ld_q[e] <= ld_d[e];
      ax_cnt_q  <= (!flush_i && ax_valid_i && !ax_ready_i && !ax_stall_o) ? sat_inc(ax_cnt_q) : '0;
      w_cnt_q   <= (!flush_i && w_valid_i && !w_ready_i) ? sat_inc(w_cnt_q) : '0;
      rsp_cnt_q <= (!flush_i && rsp_valid_i && !rsp_ready_i) ? sat_inc(rsp_cnt_q) : '0;
    end
  end
endmodule
