// hbs_encoder: turns a set of target cores into HBS routing bits.
//
// targets is a flat bit string, bit K*c+j = core j of cluster c (core j sits
// on down port D_j of R1 switch c; higher indices are further left in the tree
// drawing). The encoder forms
//   cluster mask  cl[c] = OR of the K target bits of cluster c
//   core mask     r0    = OR over clusters of their K target bits
//   r1                  = cl rotated left by (K-1-src_cluster), so that
//                         r1[K-1] is the source cluster itself.
// The HBS tree then reaches every core j of every cluster c with cl[c] & r0[j];
// exact is 1 when that product equals the target set, i.e. no core will have
// to filter. The mask/product form and the relative R1 field with the source
// cluster at the MSB follow the paper's worked examples; the core numbering
// and doing the conversion in logic on the LUT write path are this design's
// choices. Purely combinational.
module hbs_encoder
  import hbs_pkg::*;
(
  input  logic [1:0]        src_cluster,
  input  logic [NCORES-1:0] targets,
  output logic [RB_W-1:0]   rbits,   // {r1, r0}
  output logic              exact
);

  logic [K-1:0]      cl;
  logic [K-1:0]      r0;
  logic [NCORES-1:0] reach;

  always_comb begin
    r0 = '0;
    for (int c = 0; c < NCLUST; c++) begin
      cl[c] = |targets[c*K +: K];
      r0    = r0 | targets[c*K +: K];
    end
    for (int c = 0; c < NCLUST; c++)
      reach[c*K +: K] = cl[c] ? r0 : '0;
  end

  assign rbits = {rotl(cl, (K - 1 - int'(src_cluster))), r0};
  assign exact = (reach == targets);

endmodule
