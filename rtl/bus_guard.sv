// bus_guard: protects the AXI-REALM configuration space from managers that
// do not own it.
//
// Ownership is keyed by the ID of the accessing manager. After reset the space
// is unclaimed: every access returns an error, except a write to the guard
// register, which claims the space for the writer. From then on only the owner
// gets through; other managers get an error and their access never reaches the
// registers. The owner hands ownership over by writing the new owner's ID to the
// guard register. Reading the guard register (allowed to anyone) returns
// bit 63 = claimed and the owner's ID in the low bits.
// Interface: the single-cycle configuration bus of realm_pkg on both sides;
// combinational, no added latency. The claim/handover protocol follows the
// paper; the register's address and its bit layout are this design's own.
module bus_guard
  import realm_pkg::*;
#(
  parameter logic [CfgAddrWidth-1:0] GuardAddr = 16'hFFF8
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  cfg_req_t req_i,
  output cfg_rsp_t rsp_o,
  output cfg_req_t req_o,
  input  cfg_rsp_t rsp_i,
  output logic     claimed_o,
  output id_t      owner_o
);
  logic claimed_q;
  id_t  owner_q;
  logic is_guard, is_owner;

  assign is_guard  = (req_i.addr == GuardAddr);
  assign is_owner  = claimed_q && (req_i.id == owner_q);
  assign claimed_o = claimed_q;
  assign owner_o   = owner_q;

  always_comb begin
    req_o = req_i;
    req_o.valid = req_i.valid && !is_guard && is_owner;
    rsp_o = '0;
    if (is_guard) begin
      rsp_o.ready = 1'b1;
      rsp_o.rdata = {claimed_q, {(CfgDataWidth-1-IdWidth){1'b0}}, owner_q};
      rsp_o.error = req_i.write && claimed_q && !is_owner;
    end else if (is_owner) begin
      rsp_o = rsp_i;
    end else begin
      rsp_o.ready = 1'b1;
      rsp_o.error = 1'b1;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      claimed_q <= 1'b0;
      owner_q   <= '0;
    end else if (req_i.valid && req_i.write && is_guard) begin
      if (!claimed_q) begin
        claimed_q <= 1'b1;
        owner_q   <= req_i.id;
      end else if (is_owner) begin
        owner_q <= req_i.wdata[IdWidth-1:0];
      end
    end
  end
endmodule
