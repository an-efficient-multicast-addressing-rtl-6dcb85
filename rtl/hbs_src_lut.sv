// hbs_src_lut: source-side routing LUT of one core.
//
// One entry per neuron of the core (NEURONS, 40 by default) holds the 8 HBS
// routing bits of that neuron's multicast tree. A spike (spike_valid with the
// local neuron index) reads the entry and loads a one-word output register
// with the packet {r1, r0, tag}, tag = {CORE_ID, neuron}. The register is
// released by pkt_ready; spike_ready is high while the register is empty or
// being emptied, so one spike per cycle is sustained. Latency: one cycle.
// Entries are written through cfg_we/cfg_nrn/cfg_rbits. One LUT entry per
// source neuron for tree multicast is the paper's; the tag layout, handshake
// and write port are this design's choices. Spikes with an index >= NEURONS
// are accepted and dropped. Entries are not reset: program a neuron before
// it fires. The upper four tag bits are the constant CORE_ID.
module hbs_src_lut
  import hbs_pkg::*;
#(
  parameter int unsigned NEURONS = 40,
  parameter int unsigned CORE_ID = 0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              spike_valid,
  output logic              spike_ready,
  input  logic [LNRN_W-1:0] spike_nrn,
  input  logic              cfg_we,
  input  logic [LNRN_W-1:0] cfg_nrn,
  input  logic [RB_W-1:0]   cfg_rbits,
  output logic              pkt_valid,
  input  logic              pkt_ready,
  output pkt_t              pkt
);

  logic [RB_W-1:0] lut [NEURONS];
  logic            in_range;

  assign in_range    = (int'(spike_nrn) < NEURONS);
  assign spike_ready = ~pkt_valid | pkt_ready;

  always_ff @(posedge clk) begin
    if (cfg_we && int'(cfg_nrn) < NEURONS) lut[cfg_nrn] <= cfg_rbits;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pkt_valid <= 1'b0;
      pkt       <= '0;
    end else if (spike_ready) begin
      pkt_valid <= spike_valid & in_range;
      if (spike_valid && in_range)
        pkt <= '{r1:  lut[spike_nrn][RB_W-1:K],
                 r0:  lut[spike_nrn][K-1:0],
                 tag: {CORE_W'(CORE_ID), spike_nrn}};
    end
  end

endmodule
