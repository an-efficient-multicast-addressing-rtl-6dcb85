// hbs_r1_switch: level-1 data switch of the HBS tree.
//
// Five ports: port j (0..3) connects core j of the cluster (down port D_j,
// D3 drawn leftmost), port 4 (UP) connects to R2. It is hbs_switch_core with
// hbs_r1_route on every input: D_j = R1[3] & R0[j], Up = R1[2]|R1[1]|R1[0],
// with Up masked for packets that came down from R2. Packets pass unchanged.
// Every R1 switch is identical and needs no knowledge of its position; that
// is the point of the relative R1 field. One cycle per hop when unblocked.
module hbs_r1_switch
  import hbs_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [K:0]             in_valid,
  output logic [K:0]             in_ready,
  input  pkt_t [K:0]             in_data,
  output logic [K:0]             out_valid,
  input  logic [K:0]             out_ready,
  output pkt_t [K:0]             out_data
);

  localparam int unsigned NP = K + 1;
  localparam int unsigned UP = K;

  logic [NP-1:0][PKT_W-1:0] in_w, out_w, head;
  logic [NP-1:0]            head_valid;
  logic [NP-1:0][NP-1:0]    route;

  for (genvar p = 0; p < NP; p++) begin : g_port
    pkt_t h;
    assign in_w[p]     = in_data[p];
    assign out_data[p] = pkt_t'(out_w[p]);
    assign h           = pkt_t'(head[p]);
    hbs_r1_route u_route (
      .rbits  ({h.r1, h.r0}),
      .from_up(p == UP),
      .mask   (route[p])
    );
  end

  hbs_switch_core #(.NPORTS(NP), .W(PKT_W), .DEPTH(DEPTH)) u_core (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data(in_w),
    .head_valid, .head_data(head), .route,
    .out_valid, .out_ready, .out_data(out_w)
  );

endmodule
