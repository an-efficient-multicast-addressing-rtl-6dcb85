// hbs_filter_lut: target-side filter of one core.
//
// HBS addresses a product of a cluster mask and a core mask, so some cores
// receive packets they were never meant to get. Every arriving packet is
// looked up by its source tag in a 2^TAG_W x 1-bit table: a 1 passes the
// event (the tag) on to the neural core, a 0 discards it and pulses drop for
// one cycle. The table is written through cfg_we/cfg_tag/cfg_accept and
// cleared by reset, so a core accepts nothing until programmed. The filter's
// function is the paper's; the direct-indexed table (in place of a CAM), the
// one-word output register and the handshake are this design's. A packet is
// taken in the cycle it arrives when the output register is free or being
// emptied; latency is one cycle.
module hbs_filter_lut
  import hbs_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             pkt_valid,
  output logic             pkt_ready,
  input  pkt_t             pkt,
  input  logic             cfg_we,
  input  logic [TAG_W-1:0] cfg_tag,
  input  logic             cfg_accept,
  output logic             evt_valid,
  input  logic             evt_ready,
  output logic [TAG_W-1:0] evt_tag,
  output logic             drop
);

  logic [(1<<TAG_W)-1:0] accept;
  logic                  take;

  assign pkt_ready = ~evt_valid | evt_ready;
  assign take      = pkt_valid & pkt_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      accept    <= '0;
      evt_valid <= 1'b0;
      evt_tag   <= '0;
      drop      <= 1'b0;
    end else begin
      if (cfg_we) accept[cfg_tag] <= cfg_accept;
      drop <= take & ~accept[pkt.tag];
      if (pkt_ready) begin
        evt_valid <= take & accept[pkt.tag];
        if (take) evt_tag <= pkt.tag;
      end
    end
  end

endmodule
