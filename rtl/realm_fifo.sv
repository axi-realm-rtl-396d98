// realm_fifo: small synchronous FIFO used throughout the design.
//
// Depth entries of type T, registered storage, first-word fall-through: the
// head entry is visible on data_o while empty_o is low. push and pop may occur
// in the same cycle; pushing when full or popping when empty is ignored.
module realm_fifo #(
  parameter int unsigned Depth = 4,
  parameter type         T     = logic [7:0]
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  logic flush_i,
  input  logic push_i,
  input  T     data_i,
  input  logic pop_i,
  output T     data_o,
  output logic full_o,
  output logic empty_o,
  output logic [$clog2(Depth+1)-1:0] count_o
);
  localparam int unsigned PtrW = (Depth > 1) ? $clog2(Depth) : 1;
  localparam int unsigned CntW = $clog2(Depth + 1);

  T                mem_q [Depth];
  logic [PtrW-1:0] rd_q, wr_q;
  logic [CntW-1:0] cnt_q;
  logic            do_push, do_pop;

  assign full_o  = (cnt_q == CntW'(Depth));
  assign empty_o = (cnt_q == '0);
  assign count_o = cnt_q;
  assign data_o  = mem_q[rd_q];
  assign do_push = push_i && !full_o;
  assign do_pop  = pop_i && !empty_o;

  function automatic logic [PtrW-1:0] incr(logic [PtrW-1:0] p);
    return (p == PtrW'(Depth - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
      for (int i = 0; i < Depth; i++) mem_q[i] <= '0;
    end else if (flush_i) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (do_push) begin
        mem_q[wr_q] <= data_i;
        wr_q        <= incr(wr_q);
      end
      if (do_pop) rd_q <= incr(rd_q);
      cnt_q <= cnt_q + CntW'(do_push) - CntW'(do_pop);
    end
  end
endmodule
