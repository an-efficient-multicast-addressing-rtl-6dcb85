// tb_hbs_r2_switch: random packets from the four R1 switches. For a packet
// from cluster s the expected destinations are the other clusters named in
// its source-relative R1 field, and the copy leaving towards cluster c must
// carry the same cluster set re-expressed relative to c (so R1[3] = 1 there).
// Both are computed with the reference model, not the RTL's rotation.
module tb_hbs_r2_switch;
  import hbs_pkg::*;
  import tb_hbs_ref_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] in_valid, in_ready, out_valid, out_ready;
  pkt_t [N-1:0] in_data, out_data;
  int checks = 0, failures = 0;
  pkt_t sbq [N][N][$];
  logic [6:0] seq [N];
  logic [N-1:0] in_f, refused = '0;
  int copies = 0;

  hbs_r2_switch dut (.*);

  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s @%0t", msg, $time);
    end
  endtask

  // Expected copy of packet k (from cluster s) as seen by cluster c.
  function automatic pkt_t as_seen(input int s, input int c, input pkt_t k);
    pkt_t q;
    q = k;
    for (int x = 0; x < 4; x++) q.r1[rel_bit(c, x)] = k.r1[rel_bit(s, x)];
    return q;
  endfunction

  always @(posedge clk) if (rst_n) begin
    for (int o = 0; o < N; o++) if (out_valid[o] && out_ready[o]) begin
      int src;
      src = int'(out_data[o].tag[9:7]);
      copies++;
      chk(out_data[o].r1[3], "receiving cluster at R1[3]");
      chk(src < N && sbq[src][o].size() != 0 && out_data[o] == sbq[src][o][0], "copy content/order/port");
      if (src < N && sbq[src][o].size() != 0) void'(sbq[src][o].pop_front());
    end
  end

  initial begin
    in_valid = '0; out_ready = '1; in_data = '0;
    for (int i = 0; i < N; i++) seq[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // paper example: source cluster c=2 (2nd from left), R1 = 1011 names the
    // clusters 1st and 4th from the left (c=3, c=0) besides its own.
    @(negedge clk);
    in_valid[2] = 1; in_data[2] = '{r1: 4'b1011, r0: 4'b0010, tag: {3'd2, 7'h7F}};
    sbq[2][3].push_back(as_seen(2, 3, in_data[2]));
    sbq[2][0].push_back(as_seen(2, 0, in_data[2]));
    @(posedge clk); #1 in_valid[2] = 0;
    chk(out_valid == 4'b1001, "exact routing to clusters 3 and 0 in one cycle");
    for (int cyc = 0; cyc < 6000; cyc++) begin
      @(negedge clk);
      for (int i = 0; i < N; i++) if (!refused[i]) begin
        in_valid[i] = (cyc < 5800) && (($urandom_range(3 - 1, 0)) == 0);
        in_data[i] = '{r1: 4'($urandom), r0: 4'($urandom), tag: {3'(i), seq[i]}};
      end
      out_ready = 4'($urandom) | 4'($urandom);
      #1;
      in_f = in_valid & in_ready;
      refused = in_valid & ~in_ready;
      @(posedge clk);
      for (int i = 0; i < N; i++) if (in_f[i]) begin
        for (int c = 0; c < N; c++)
          if (c != i && in_data[i].r1[rel_bit(i, c)]) sbq[i][c].push_back(as_seen(i, c, in_data[i]));
        seq[i]++;
      end
    end
    out_ready = '1;
    repeat (40) @(posedge clk);
    for (int i = 0; i < N; i++) for (int o = 0; o < N; o++)
      chk(sbq[i][o].size() == 0, "all copies delivered");
    $display("copies=%0d", copies);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
