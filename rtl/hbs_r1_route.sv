// hbs_r1_route: routing logic of an R1 (level-1) data switch.
//
// Every R1 switch uses the same equations, taken from the paper's figure:
//   Up  = R1[2] | R1[1] | R1[0]      (another cluster is targeted)
//   D_j = R1[3] & R0[j]              (own cluster targeted, core j selected)
// R1 is relative: R1[3] is the switch's own cluster, both for a packet from a
// local core and, after R2's rotation, for one coming down from R2. The Up
// output is suppressed for a packet that arrived on the Up input, so a packet
// never turns back up the tree; that rule is this design's addition.
// mask bit j (j<K) is D_j, bit K is Up. Combinational.
module hbs_r1_route
  import hbs_pkg::*;
(
  input  logic [RB_W-1:0] rbits,    // {r1, r0}
  input  logic            from_up,
  output logic [K:0]      mask
);

  logic [K-1:0] r1, r0;
  assign {r1, r0} = rbits;

  always_comb begin
    for (int j = 0; j < K; j++) mask[j] = r1[K-1] & r0[j];
    mask[K] = ~from_up & (|r1[K-2:0]);
  end

endmodule
