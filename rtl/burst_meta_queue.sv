// burst_meta_queue: the splitter's record of outstanding fragments, one queue
// per direction.
//
// Every fragment issued downstream is pushed with its ID and whether it is the
// final fragment of the original burst. Responses of different IDs may return
// in any order, but those of one ID return in issue order (AXI4 ordering rule
// 3), so a response is matched with the oldest entry of its ID. The queue is
// kept in age order and collapses when an entry leaves. `err` accumulates an
// error response of an earlier fragment of the same burst so the coalesced
// write response can report it: when a non-final entry leaves with an error,
// the error moves to the next entry of that ID, or, if the burst's next
// fragment has not been issued yet, to the next push (carry_err_o).
module burst_meta_queue
  import realm_pkg::*;
#(
  parameter int unsigned Depth = 16
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  logic push_i,
  input  id_t  push_id_i,
  input  logic push_last_i,
  input  logic push_err_i,
  output logic full_o,
  output logic empty_o,
  input  id_t  lookup_id_i,
  output logic hit_o,
  output logic hit_last_o,
  output logic hit_err_o,
  input  logic pop_i,
  input  logic pop_err_i,
  output logic carry_err_o
);
  typedef struct packed {
    logic valid;
    id_t  id;
    logic last;
    logic err;
  } entry_t;

  localparam int unsigned IdxW = (Depth > 1) ? $clog2(Depth) : 1;

  entry_t          q_q [Depth];
  entry_t          q_d [Depth];
  logic [IdxW-1:0] first_idx, second_idx;
  logic            first_hit, second_hit;
  logic [IdxW:0]   cnt;

  always_comb begin
    first_hit  = 1'b0;
    second_hit = 1'b0;
    first_idx  = '0;
    second_idx = '0;
    cnt        = '0;
    for (int i = 0; i < Depth; i++) begin
      if (q_q[i].valid) cnt = cnt + 1'b1;
      if (q_q[i].valid && q_q[i].id == lookup_id_i) begin
        if (!first_hit) begin
          first_hit = 1'b1;
          first_idx = IdxW'(i);
        end else if (!second_hit) begin
          second_hit = 1'b1;
          second_idx = IdxW'(i);
        end
      end
    end
  end

  assign full_o     = (cnt == (IdxW+1)'(Depth));
  assign empty_o    = (cnt == '0);
  assign hit_o      = first_hit;
  assign hit_last_o = q_q[first_idx].last;
  assign hit_err_o  = q_q[first_idx].err;
  // The error of a leaving non-final fragment has no later entry to go to.
  assign carry_err_o = pop_i && first_hit && !q_q[first_idx].last && !second_hit &&
                       (pop_err_i || q_q[first_idx].err);

  always_comb begin
    logic [IdxW:0] n;
    for (int i = 0; i < Depth; i++) q_d[i] = q_q[i];
    if (pop_i && first_hit) begin
      if (!q_q[first_idx].last && second_hit && (pop_err_i || q_q[first_idx].err))
        q_d[second_idx].err = 1'b1;
      for (int i = 0; i < Depth - 1; i++)
        if (IdxW'(i) >= first_idx) q_d[i] = q_d[i+1];
      q_d[Depth-1] = '0;
    end
    n = '0;
    for (int i = 0; i < Depth; i++) if (q_d[i].valid) n = n + 1'b1;
    if (push_i && !full_o) begin
      for (int i = 0; i < Depth; i++)
        if ((IdxW+1)'(i) == n) q_d[i] = '{valid: 1'b1, id: push_id_i, last: push_last_i, err: push_err_i};
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < Depth; i++) q_q[i] <= '0;
    end else begin
      for (int i = 0; i < Depth; i++) q_q[i] <= q_d[i];
    end
  end
endmodule
