// hbs_r2_route: routing logic of the R2 (level-2) data switch.
//
// R2 routes exactly: it forwards a packet to every cluster whose bit is set in
// the packet's absolute cluster mask, except the cluster it came from, whose
// R1 switch has already delivered locally. Illegal copies can therefore only
// arise below R1, as the paper describes for HBS. The absolute mask is
// produced by hbs_r2_switch, which rotates the relative R1 field on each
// input's wires (a packet from cluster s is rotated left by s+1, undoing the
// source-side rotation by K-1-s). Exact routing and the rotation are the
// paper's; these equations are derived from them. Combinational.
module hbs_r2_route
  import hbs_pkg::*;
(
  input  logic [K-1:0] r1_abs,   // absolute cluster mask, bit c = cluster c
  input  logic [1:0]   in_port,  // cluster the packet arrived from
  output logic [K-1:0] mask      // bit c = down port to cluster c
);

  always_comb begin
    for (int c = 0; c < K; c++) mask[c] = r1_abs[c] & (c != int'(in_port));
  end

endmodule
