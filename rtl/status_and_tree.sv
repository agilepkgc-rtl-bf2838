// status_and_tree -- AND aggregation of per-unit status bits (InCC1, InL0s).
//
// Every core reports "I am in CC1" and every high-speed IO controller reports
// "my link is in L0s/L0p". Instead of routing one wire per unit to the APMU,
// neighbouring units are combined with AND gates so that a whole group costs
// one long-distance wire. Following the floorplan of the reference SoC, the
// gates form a chain: the first two inputs are ANDed, and each further input
// is ANDed onto the running result, so that the chain can follow a column of
// tiles. The output is high only when every input of the group is high.
//
// Interface: in[N-1:0] status bits, out = AND of all of them. Purely
// combinational, no clock; N is the size of the group (5 cores or 3 IO
// controllers in the reference SoC).
module status_and_tree #(
  parameter int unsigned N = 5
) (
  input  logic [N-1:0] in,
  output logic         out
);

  logic [N-1:0] chain;

  assign chain[0] = in[0];
  for (genvar i = 1; i < N; i++) begin : g_and
    assign chain[i] = chain[i-1] & in[i];
  end

  assign out = chain[N-1];

endmodule
