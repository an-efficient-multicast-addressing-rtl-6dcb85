// hbs_noc_top: 16-core multicast spike NoC with hierarchical bit string
// (HBS) addressing.
//
// Structure (two-level tree): core id = 4*c + j sits on down port D_j of the
// R1 switch of cluster c; the four R1 switches hang off one R2 switch.
// Each core has
//   - an hbs_src_lut: a spike of local neuron n becomes one 18-bit packet
//     {r1, r0, tag = {core id, n}} carrying the neuron's HBS routing bits,
//   - an hbs_filter_lut: packets arriving at the core are kept or discarded
//     by their source tag (discards pulse drop[core]).
// The neural cores themselves are not part of this RTL: spikes enter on
// spike_*, accepted events leave on evt_*.
// Programming: cfg_src_we writes neuron cfg_nrn of core cfg_core with the
// multicast tree for the target set cfg_targets (bit = core id); one
// hbs_encoder converts the set to HBS bits on the way in, relative to the
// core's cluster, and cfg_exact reports whether the set is reachable without
// filtering. cfg_flt_we writes the accept bit cfg_accept for tag cfg_tag in
// core cfg_core's filter.
// Timing with no contention: the source LUT register, each switch buffer and
// the filter register each add one clock edge, so evt_valid rises 2 cycles
// after the edge that takes the spike for a core of the same cluster
// (LUT, R1, filter) and 4 cycles after it for another cluster (LUT, R1, R2,
// R1, filter). Tree, switch counts, packet width and R1 equations follow the
// paper; the programming port and the handshakes are this design's.
module hbs_noc_top
  import hbs_pkg::*;
#(
  parameter int unsigned NEURONS = 40,
  parameter int unsigned DEPTH   = 4
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // spikes from the neural cores
  input  logic [NCORES-1:0]              spike_valid,
  output logic [NCORES-1:0]              spike_ready,
  input  logic [NCORES-1:0][LNRN_W-1:0]  spike_nrn,
  // events delivered to the neural cores
  output logic [NCORES-1:0]              evt_valid,
  input  logic [NCORES-1:0]              evt_ready,
  output logic [NCORES-1:0][TAG_W-1:0]   evt_tag,
  output logic [NCORES-1:0]              drop,
  // LUT programming
  input  logic                           cfg_src_we,
  input  logic                           cfg_flt_we,
  input  logic [CORE_W-1:0]              cfg_core,
  input  logic [LNRN_W-1:0]              cfg_nrn,
  input  logic [NCORES-1:0]              cfg_targets,
  input  logic [TAG_W-1:0]               cfg_tag,
  input  logic                           cfg_accept,
  output logic                           cfg_exact
);

  logic [RB_W-1:0] cfg_rbits;

  hbs_encoder u_enc (
    .src_cluster(cfg_core[CORE_W-1 -: 2]),
    .targets    (cfg_targets),
    .rbits      (cfg_rbits),
    .exact      (cfg_exact)
  );

  // core <-> R1 links
  logic [NCORES-1:0] up_valid, up_ready, dn_valid, dn_ready;
  pkt_t [NCORES-1:0] up_pkt, dn_pkt;
  // R1 <-> R2 links
  logic [NCLUST-1:0] r1u_valid, r1u_ready, r2d_valid, r2d_ready;
  pkt_t [NCLUST-1:0] r1u_pkt, r2d_pkt;

  for (genvar n = 0; n < NCORES; n++) begin : g_core
    hbs_src_lut #(.NEURONS(NEURONS), .CORE_ID(n)) u_src (
      .clk, .rst_n,
      .spike_valid(spike_valid[n]),
      .spike_ready(spike_ready[n]),
      .spike_nrn  (spike_nrn[n]),
      .cfg_we     (cfg_src_we && cfg_core == CORE_W'(n)),
      .cfg_nrn,
      .cfg_rbits,
      .pkt_valid  (up_valid[n]),
      .pkt_ready  (up_ready[n]),
      .pkt        (up_pkt[n])
    );
    hbs_filter_lut u_flt (
      .clk, .rst_n,
      .pkt_valid (dn_valid[n]),
      .pkt_ready (dn_ready[n]),
      .pkt       (dn_pkt[n]),
      .cfg_we    (cfg_flt_we && cfg_core == CORE_W'(n)),
      .cfg_tag,
      .cfg_accept,
      .evt_valid (evt_valid[n]),
      .evt_ready (evt_ready[n]),
      .evt_tag   (evt_tag[n]),
      .drop      (drop[n])
    );
  end

  for (genvar c = 0; c < NCLUST; c++) begin : g_r1
    hbs_r1_switch #(.DEPTH(DEPTH)) u_r1 (
      .clk, .rst_n,
      .in_valid ({r2d_valid[c], up_valid[c*K +: K]}),
      .in_ready ({r2d_ready[c], up_ready[c*K +: K]}),
      .in_data  ({r2d_pkt[c],   up_pkt[c*K +: K]}),
      .out_valid({r1u_valid[c], dn_valid[c*K +: K]}),
      .out_ready({r1u_ready[c], dn_ready[c*K +: K]}),
      .out_data ({r1u_pkt[c],   dn_pkt[c*K +: K]})
    );
  end

  hbs_r2_switch #(.DEPTH(DEPTH)) u_r2 (
    .clk, .rst_n,
    .in_valid (r1u_valid),
    .in_ready (r1u_ready),
    .in_data  (r1u_pkt),
    .out_valid(r2d_valid),
    .out_ready(r2d_ready),
    .out_data (r2d_pkt)
  );

endmodule
