// hbs_r2_switch: level-2 data switch joining the four R1 switches.
//
// Port c connects the R1 switch of cluster c. A packet arriving from cluster
// s has its R1 field rotated left by s+1 on the input wires, which turns the
// source-relative mask into the absolute cluster mask; it is buffered in that
// form and routed by hbs_r2_route (every set cluster except s). On the wires
// of output c the field is rotated left by K-1-c, so the receiving R1 switch
// sees its own cluster at R1[3] and applies the same equations as every other
// R1. Both rotations are fixed wiring, as the paper notes. R2 has only the
// four down ports: the paper's fifth port would lead to a level it does not
// describe. One cycle per hop when unblocked.
module hbs_r2_switch
  import hbs_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [K-1:0]       in_valid,
  output logic [K-1:0]       in_ready,
  input  pkt_t [K-1:0]       in_data,
  output logic [K-1:0]       out_valid,
  input  logic [K-1:0]       out_ready,
  output pkt_t [K-1:0]       out_data
);

  logic [K-1:0][PKT_W-1:0] in_w, out_w, head;
  logic [K-1:0]            head_valid;
  logic [K-1:0][K-1:0]     route;

  for (genvar p = 0; p < K; p++) begin : g_port
    pkt_t pi, po, h;
    assign pi       = in_data[p];
    assign in_w[p]  = {rotl(pi.r1, p + 1), pi.r0, pi.tag};
    assign h        = pkt_t'(head[p]);
    assign po       = pkt_t'(out_w[p]);
    assign out_data[p] = '{r1: rotl(po.r1, K - 1 - p), r0: po.r0, tag: po.tag};
    hbs_r2_route u_route (
      .r1_abs (h.r1),
      .in_port(2'(p)),
      .mask   (route[p])
    );
  end

  hbs_switch_core #(.NPORTS(K), .W(PKT_W), .DEPTH(DEPTH)) u_core (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data(in_w),
    .head_valid, .head_data(head), .route,
    .out_valid, .out_ready, .out_data(out_w)
  );

endmodule
