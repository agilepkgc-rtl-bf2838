// clm_clk_gate -- clock-tree gate of the CLM domain.
//
// Older deep package states stop the CLM clock by switching off its PLL and pay
// a few microseconds of relock on wakeup. In PC1A the PLL stays locked and the
// CLM clock distribution is gated at its root instead. The ClkGate request
// comes from the APMU clock domain, so it passes a SYNC_STAGES-flop
// synchroniser on the CLM clock, then an enable flop clocked on the falling
// edge; the clock is ANDed with that enable. Because the enable only changes
// while the clock is low, the gated clock never carries a shortened pulse.
//
// Interface: clk_clm is the CLM PLL output, clk_gate_req the APMU's ClkGate,
// gclk_clm the root of the CLM clock tree, gated the synchronised state (high
// while the tree is stopped). Timing: the tree stops or restarts
// SYNC_STAGES CLM cycles plus half a cycle after the request changes.
//
// Following the architecture: ClkGate, the gate at the clock tree with the PLL
// kept running, one to two cycles. This design's own choices: the synchroniser
// and the falling-edge enable flop.
module clm_clk_gate #(
  parameter int unsigned SYNC_STAGES = 2
) (
  input  logic clk_clm,
  input  logic rst_n,
  input  logic clk_gate_req,
  output logic gclk_clm,
  output logic gated
);

  logic [SYNC_STAGES-1:0] sync_q;
  logic                   en_n_q;

  always_ff @(posedge clk_clm or negedge rst_n) begin
    if (!rst_n) sync_q <= '0;
    else        sync_q <= {sync_q[SYNC_STAGES-2:0], clk_gate_req};
  end

  always_ff @(negedge clk_clm or negedge rst_n) begin
    if (!rst_n) en_n_q <= 1'b1;
    else        en_n_q <= ~sync_q[SYNC_STAGES-1];
  end

  assign gclk_clm = clk_clm & en_n_q;
  assign gated    = sync_q[SYNC_STAGES-1];

endmodule
