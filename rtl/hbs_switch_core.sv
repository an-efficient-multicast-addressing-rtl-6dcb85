// hbs_switch_core: input-buffered multicast crossbar shared by R1 and R2.
//
// Each of NPORTS inputs has an hbs_fifo. The head of every buffer is shown to
// the level's routing logic (outside this module) on head_data, which returns
// an NPORTS-bit output mask per input on route. Each output has a round-robin
// arbiter over the inputs whose head still needs that output. A packet is
// forked: each output copies it when its arbiter grants it and the output is
// ready, a per-input "served" mask remembers which outputs are done, and the
// buffer pops in the cycle its last outstanding output takes the packet. A
// head with an empty mask is discarded. Outputs are driven straight from the
// buffer heads (no output register): one cycle per switch when not blocked.
// The paper states only that all switches share one micro-architecture with
// five ports and uniform buffering; this organisation is this design's.
module hbs_switch_core #(
  parameter int unsigned NPORTS = 5,
  parameter int unsigned W      = 18,
  parameter int unsigned DEPTH  = 4
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [NPORTS-1:0]            in_valid,
  output logic [NPORTS-1:0]            in_ready,
  input  logic [NPORTS-1:0][W-1:0]     in_data,
  output logic [NPORTS-1:0]            head_valid,
  output logic [NPORTS-1:0][W-1:0]     head_data,
  input  logic [NPORTS-1:0][NPORTS-1:0] route,     // route[i][o]: input i wants output o
  output logic [NPORTS-1:0]            out_valid,
  input  logic [NPORTS-1:0]            out_ready,
  output logic [NPORTS-1:0][W-1:0]     out_data
);

  logic [NPORTS-1:0]             pop;
  logic [NPORTS-1:0][NPORTS-1:0] served;    // served[i][o]
  logic [NPORTS-1:0][NPORTS-1:0] pending;   // pending[i][o]
  logic [NPORTS-1:0][NPORTS-1:0] req;       // req[o][i]
  logic [NPORTS-1:0][NPORTS-1:0] grant;     // grant[o][i]
  logic [NPORTS-1:0][NPORTS-1:0] taken;     // taken[i][o]: copy leaves this cycle

  for (genvar i = 0; i < NPORTS; i++) begin : g_in
    hbs_fifo #(.W(W), .DEPTH(DEPTH)) u_buf (
      .clk, .rst_n,
      .in_valid (in_valid[i]),
      .in_ready (in_ready[i]),
      .in_data  (in_data[i]),
      .out_valid(head_valid[i]),
      .out_ready(pop[i]),
      .out_data (head_data[i])
    );
  end

  always_comb begin
    for (int i = 0; i < NPORTS; i++)
      pending[i] = head_valid[i] ? (route[i] & ~served[i]) : '0;
    for (int o = 0; o < NPORTS; o++)
      for (int i = 0; i < NPORTS; i++)
        req[o][i] = pending[i][o];
  end

  for (genvar o = 0; o < NPORTS; o++) begin : g_out
    hbs_rr_arbiter #(.N(NPORTS)) u_arb (
      .clk, .rst_n,
      .req    (req[o]),
      .advance(out_valid[o] & out_ready[o]),
      .hold   (out_valid[o] & ~out_ready[o]),
      .grant  (grant[o])
    );
    assign out_valid[o] = |req[o];
    always_comb begin
      out_data[o] = '0;
      for (int i = 0; i < NPORTS; i++)
        if (grant[o][i]) out_data[o] = head_data[i];
    end
  end

  always_comb begin
    for (int i = 0; i < NPORTS; i++) begin
      for (int o = 0; o < NPORTS; o++)
        taken[i][o] = grant[o][i] & out_ready[o];
      pop[i] = head_valid[i] && ((pending[i] & ~taken[i]) == '0);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      served <= '0;
    end else begin
      for (int i = 0; i < NPORTS; i++)
        served[i] <= pop[i] ? '0 : (served[i] | taken[i]);
    end
  end

  for (genvar o = 0; o < NPORTS; o++) begin : g_chk
    // A granted output word stays put until the receiver takes it.
    a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
                                 out_valid[o] && !out_ready[o] |=> out_valid[o] && $stable(out_data[o]));
    a_onehot: assert property (@(posedge clk) disable iff (!rst_n)
                               out_valid[o] |-> $onehot(grant[o]));
  end

endmodule
