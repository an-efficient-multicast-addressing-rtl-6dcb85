// hbs_rr_arbiter: round-robin arbiter with grant hold, one per switch output.
//
// grant is one-hot among the asserted req bits, searching from the requester
// after the last one served. While a granted word waits (hold = valid and not
// ready at the output), the same grant is kept so the output data stays
// stable until it is taken. The priority pointer moves past the winner when
// the word is taken (advance). Round-robin order is this design's choice.
module hbs_rr_arbiter #(
  parameter int unsigned N = 5
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         advance,   // granted word taken this cycle
  input  logic         hold,      // granted word offered but refused this cycle
  output logic [N-1:0] grant
);

  logic [N-1:0] last;       // one-hot: most recently served requester
  logic [N-1:0] held;       // grant being held
  logic         held_v;
  logic [N-1:0] pick;

  // Requesters strictly above the last winner get priority; if there are
  // none, the search wraps to the lowest requester.
  logic [N-1:0] above, req_hi;

  always_comb begin
    above  = ~(last | (last - 1'b1));
    req_hi = req & above;
    pick   = (req_hi != '0) ? (req_hi & (~req_hi + 1'b1)) : (req & (~req + 1'b1));
    grant  = (held_v && |(held & req)) ? held : pick;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last   <= N'(1) << (N - 1);
      held   <= '0;
      held_v <= 1'b0;
    end else begin
      if (advance) last <= grant;
      held_v <= hold;
      held   <= grant;
    end
  end

endmodule
