// hbs_pkg: types and constants shared by the HBS multicast NoC.
//
// A spike travels as one single-word packet: 8 routing bits in hierarchical
// bit string (HBS) form plus a 10-bit source-neuron tag, 18 bits on parallel
// wires. The routing bits are two 4-bit masks, one per tree level:
//   r1 - cluster mask. In a packet leaving a core it is relative to the
//        source cluster: r1[3] is the source's own cluster and r1[2:0] are
//        the other three clusters in left-rotated order. R2 rotates it so that
//        r1[3] always means "the cluster this packet is now entering".
//   r0 - core mask, bit j = down port D_j of every selected R1 switch.
// The 4/4/10 split and the R1 equations follow the paper; the field order in
// the word and the tag layout {core id, local neuron} are this design's.
package hbs_pkg;

  localparam int unsigned K       = 4;             // nodes per hierarchy level
  localparam int unsigned NCLUST  = 4;             // R1 switches
  localparam int unsigned NCORES  = NCLUST * K;    // 16 cores
  localparam int unsigned TAG_W   = 10;            // source neuron tag
  localparam int unsigned RB_W    = 2 * K;         // routing bits
  localparam int unsigned PKT_W   = RB_W + TAG_W;  // 18-bit packet
  localparam int unsigned CORE_W  = $clog2(NCORES);
  localparam int unsigned LNRN_W  = TAG_W - CORE_W; // 6-bit local neuron index

  typedef struct packed {
    logic [K-1:0]     r1;
    logic [K-1:0]     r0;
    logic [TAG_W-1:0] tag;
  } pkt_t;

  // Left rotation of a K-bit mask by n positions.
  function automatic logic [K-1:0] rotl(input logic [K-1:0] x, input int unsigned n);
    logic [K-1:0] y;
    for (int unsigned b = 0; b < K; b++) y[b] = x[(b + K - (n % K)) % K];
    return y;
  endfunction

endpackage
