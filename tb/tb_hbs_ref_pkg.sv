// tb_hbs_ref_pkg: reference model of HBS addressing for the testbenches.
//
// Written from the tree drawing rather than from the RTL's rotate helper:
// clusters and cores are counted by their position from the left (L = 3 - c,
// P = 3 - j), and the relative R1 field lists the source cluster first (bit 3)
// and then the clusters met when walking rightwards with wrap-around.
package tb_hbs_ref_pkg;

  // Relative R1 bit that stands for cluster c, seen from source cluster s.
  function automatic int rel_bit(input int s, input int c);
    int ls, lc;
    ls = 3 - s;
    lc = 3 - c;
    return 3 - ((lc - ls + 4) % 4);
  endfunction

  // Expected HBS bits {r1, r0} for a target set from a core of cluster s.
  function automatic logic [7:0] encode(input int s, input logic [15:0] t);
    logic [3:0] r1, r0;
    r1 = '0;
    r0 = '0;
    for (int c = 0; c < 4; c++)
      for (int j = 0; j < 4; j++)
        if (t[4*c+j]) begin
          r1[rel_bit(s, c)] = 1'b1;
          r0[j] = 1'b1;
        end
    return {r1, r0};
  endfunction

  // Cores a packet {r1, r0} sent from cluster s is delivered to (unfiltered).
  function automatic logic [15:0] reach(input int s, input logic [7:0] rb);
    logic [15:0] m;
    m = '0;
    for (int c = 0; c < 4; c++)
      for (int j = 0; j < 4; j++)
        m[4*c+j] = rb[4 + rel_bit(s, c)] & rb[j];
    return m;
  endfunction

endpackage
