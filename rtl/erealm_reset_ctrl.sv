// erealm_reset_ctrl: reset controller for the subordinate guarded by an
// eRealm unit.
//
// A trigger (a detected fault with automatic reset enabled, or a software
// command) drives the active-low subordinate reset low from the next clock edge
// on, for ResetCycles cycles; busy_o is high meanwhile. A trigger during a reset
// restarts the count. The paper asks for a reset within one to two cycles of a
// fault; the hold time is this design's choice.
module erealm_reset_ctrl #(
  parameter int unsigned ResetCycles = 4
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  logic trigger_i,
  output logic sub_rst_no,
  output logic busy_o
);
  localparam int unsigned CW = $clog2(ResetCycles + 1);
  logic [CW-1:0] cnt_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) cnt_q <= '0;
    else if (trigger_i) cnt_q <= CW'(ResetCycles);
    else if (cnt_q != '0) cnt_q <= cnt_q - 1'b1;
  end

  assign sub_rst_no = (cnt_q == '0);
  assign busy_o     = (cnt_q != '0);
endmodule
