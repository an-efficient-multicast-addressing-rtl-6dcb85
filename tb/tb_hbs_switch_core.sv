// tb_hbs_switch_core: 5-port multicast crossbar under random multicast
// traffic and random output back-pressure. Each packet carries its own output
// mask in its low bits (the testbench plays the routing logic) and its input
// port and a sequence number above. A scoreboard per (input, output) pair
// checks that every output gets exactly the packets that named it, in order,
// and nothing else. Also checked: one cycle from input to output with no
// contention, a forked packet reaching several outputs in one cycle, and a
// packet with an empty mask being discarded.
module tb_hbs_switch_core;
  localparam int N = 5, W = 18, DEPTH = 4;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] in_valid, in_ready, head_valid, out_valid, out_ready;
  logic [N-1:0][W-1:0] in_data, head_data, out_data;
  logic [N-1:0][N-1:0] route;
  int checks = 0, failures = 0;
  logic [7:0] seq [N];
  logic [7:0] sbq [N][N][$];   // expected sequence numbers per input, output
  logic [N-1:0] in_f, refused = '0;
  int sent = 0, copies = 0, forks = 0;

  hbs_switch_core #(.NPORTS(N), .W(W), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  always_comb for (int i = 0; i < N; i++) route[i] = head_data[i][N-1:0];

  function automatic logic [W-1:0] mk(input int src, input logic [7:0] s, input logic [4:0] m);
    return {2'b00, 3'(src), s, m};
  endfunction

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s @%0t", msg, $time);
    end
  endtask

  // scoreboard on every output handshake
  always @(posedge clk) if (rst_n) begin
    for (int o = 0; o < N; o++) if (out_valid[o] && out_ready[o]) begin
      int src;
      src = int'(out_data[o][15:13]);
      copies++;
      chk(src < N && out_data[o][o], "copy only on a named output");
      if (src < N) begin
        chk(sbq[src][o].size() != 0 && sbq[src][o][0] == out_data[o][12:5], "order per input/output");
        if (sbq[src][o].size() != 0) void'(sbq[src][o].pop_front());
      end
    end
  end

  initial begin
    in_valid = '0; out_ready = '1; in_data = '0;
    for (int i = 0; i < N; i++) seq[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // latency: input 2 -> outputs {1,3}, all outputs ready
    @(negedge clk);
    in_valid[2] = 1; in_data[2] = mk(2, 8'hA0, 5'b01010);
    sbq[2][1].push_back(8'hA0); sbq[2][3].push_back(8'hA0);
    @(posedge clk); #1 in_valid[2] = 0;
    chk(out_valid == 5'b01010 && out_data[1] == mk(2, 8'hA0, 5'b01010) &&
        out_data[3] == mk(2, 8'hA0, 5'b01010), "fork in one cycle, one-cycle latency");
    @(posedge clk); #1;
    chk(out_valid == '0 && head_valid == '0, "forked packet popped");
    @(negedge clk);
    // empty mask: discarded
    in_valid[4] = 1; in_data[4] = mk(4, 8'h11, 5'b00000);
    @(posedge clk); #1 in_valid[4] = 0;
    chk(out_valid == '0, "empty mask produces nothing");
    @(posedge clk); #1;
    chk(head_valid == '0, "empty mask discarded");
    // random traffic
    for (int cyc = 0; cyc < 6000; cyc++) begin
      @(negedge clk);
      for (int i = 0; i < N; i++) begin
        if (!refused[i]) begin
          logic [4:0] m;
          in_valid[i] = (cyc <= 5800) && (($urandom_range(4 - 1, 0)) == 0);
          m = 5'($urandom);
          in_data[i] = mk(i, seq[i], m);
        end
      end
      out_ready = (cyc % 1000 < 300) ? 5'($urandom) & 5'($urandom) : 5'($urandom) | 5'($urandom);
      #1;
      in_f = in_valid & in_ready;
      refused = in_valid & ~in_ready;
      @(posedge clk);
      for (int i = 0; i < N; i++) if (in_f[i]) begin
        logic [4:0] m;
        m = in_data[i][4:0];
        sent++;
        if ($countones(m) > 1) forks++;
        for (int o = 0; o < N; o++) if (m[o]) sbq[i][o].push_back(seq[i]);
        seq[i]++;
      end
    end
    out_ready = '1;
    repeat (50) @(posedge clk);
    for (int i = 0; i < N; i++) for (int o = 0; o < N; o++)
      chk(sbq[i][o].size() == 0, "all copies delivered");
    chk(forks > 100, "multicast forks exercised");
    $display("sent=%0d copies=%0d forks=%0d", sent, copies, forks);
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
