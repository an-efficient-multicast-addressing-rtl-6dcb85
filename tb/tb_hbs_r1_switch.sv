// tb_hbs_r1_switch: random HBS packets on all five ports of an R1 switch,
// random back-pressure. Expected outputs come from the R1 equations
// (D_j = R1[3] & R0[j]; Up = R1[2]|R1[1]|R1[0], never back up for a packet
// from Up); every copy must be unchanged and arrive in order per
// (input, output) pair. The tag carries the input port and a sequence number.
module tb_hbs_r1_switch;
  import hbs_pkg::*;
  localparam int N = 5;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] in_valid, in_ready, out_valid, out_ready;
  pkt_t [N-1:0] in_data, out_data;
  int checks = 0, failures = 0;
  pkt_t sbq [N][N][$];
  logic [6:0] seq [N];
  logic [N-1:0] in_f, refused = '0;
  int up_copies = 0, down_copies = 0;

  hbs_r1_switch dut (.*);

  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s @%0t", msg, $time);
    end
  endtask

  function automatic logic [N-1:0] exp_mask(input int p, input pkt_t k);
    logic [N-1:0] m;
    for (int j = 0; j < 4; j++) m[j] = k.r1[3] & k.r0[j];
    m[4] = (p != 4) && (k.r1[2:0] != 3'b000);
    return m;
  endfunction

  always @(posedge clk) if (rst_n) begin
    for (int o = 0; o < N; o++) if (out_valid[o] && out_ready[o]) begin
      int src;
      src = int'(out_data[o].tag[9:7]);
      if (o == 4) up_copies++; else down_copies++;
      chk(src < N && sbq[src][o].size() != 0 && out_data[o] == sbq[src][o][0], "copy content/order/port");
      if (src < N && sbq[src][o].size() != 0) void'(sbq[src][o].pop_front());
    end
  end

  initial begin
    in_valid = '0; out_ready = '1; in_data = '0;
    for (int i = 0; i < N; i++) seq[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // paper example (no illegal copies): from the source core, R1=1011,
    // R0=0010 goes to the local D1 and Up in the same cycle
    @(negedge clk);
    in_valid[0] = 1; in_data[0] = '{r1: 4'b1011, r0: 4'b0010, tag: 10'h07F};
    sbq[0][1].push_back(in_data[0]); sbq[0][4].push_back(in_data[0]);
    @(posedge clk); #1 in_valid[0] = 0;
    chk(out_valid == 5'b10010, "local D1 + Up in one cycle");
    for (int cyc = 0; cyc < 6000; cyc++) begin
      @(negedge clk);
      for (int i = 0; i < N; i++) if (!refused[i]) begin
        in_valid[i] = (cyc < 5800) && (($urandom_range(4 - 1, 0)) == 0);
        in_data[i] = '{r1: 4'($urandom), r0: 4'($urandom), tag: {3'(i), seq[i]}};
        if (i == 4) in_data[i].r1[3] = 1'b1;  // R2 always sets R1[3]
      end
      out_ready = 5'($urandom) | 5'($urandom);
      #1;
      in_f = in_valid & in_ready;
      refused = in_valid & ~in_ready;
      @(posedge clk);
      for (int i = 0; i < N; i++) if (in_f[i]) begin
        logic [N-1:0] m;
        m = exp_mask(i, in_data[i]);
        for (int o = 0; o < N; o++) if (m[o]) sbq[i][o].push_back(in_data[i]);
        seq[i]++;
      end
    end
    out_ready = '1;
    repeat (40) @(posedge clk);
    for (int i = 0; i < N; i++) for (int o = 0; o < N; o++)
      chk(sbq[i][o].size() == 0, "all copies delivered");
    $display("up=%0d down=%0d", up_copies, down_copies);
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
