// tb_hbs_filter_lut: programs a random accept table, sends random packets
// under back-pressure and checks that accepted tags come out in order, that
// rejected ones only pulse drop, and that nothing is accepted after reset.
module tb_hbs_filter_lut;
  import hbs_pkg::*;
  logic clk = 0, rst_n = 0;
  logic pkt_valid, pkt_ready, cfg_we, cfg_accept, evt_valid, evt_ready, drop;
  pkt_t pkt;
  logic [TAG_W-1:0] cfg_tag, evt_tag;
  logic acc_m [1024];
  logic [TAG_W-1:0] exp_q[$];
  bit in_f, out_f, refused = 0;
  int checks = 0, failures = 0, exp_drops = 0, drops = 0;

  hbs_filter_lut dut (.*);

  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s @%0t", msg, $time);
    end
  endtask

  always @(posedge clk) if (rst_n && drop) drops++;

  initial begin
    pkt_valid = 0; cfg_we = 0; evt_ready = 1; pkt = '0; cfg_tag = '0; cfg_accept = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // before programming every packet is dropped
    @(negedge clk);
    pkt_valid = 1; pkt = '{r1: 4'hF, r0: 4'hF, tag: 10'd77};
    @(negedge clk);
    pkt_valid = 0;
    chk(!evt_valid && drop, "reset table rejects");
    for (int t = 0; t < 1024; t++) begin
      @(negedge clk);
      acc_m[t] = ($urandom_range(2 - 1, 0)) != 0;
      cfg_we = 1; cfg_tag = TAG_W'(t); cfg_accept = acc_m[t];
    end
    @(negedge clk) cfg_we = 0;
    drops = 0;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      if (!refused) begin
        pkt_valid = ($urandom_range(3 - 1, 0)) != 0;
        pkt = pkt_t'($urandom);
      end
      evt_ready = ($urandom_range(3 - 1, 0)) != 0;
      #1;
      out_f = evt_valid && evt_ready;
      in_f = pkt_valid && pkt_ready;
      refused = pkt_valid && !pkt_ready;
      @(posedge clk);
      if (out_f) begin
        chk(exp_q.size() != 0 && evt_tag == exp_q[0], "accepted tag/order");
        if (exp_q.size() != 0) void'(exp_q.pop_front());
      end
      if (in_f) begin
        if (acc_m[pkt.tag]) exp_q.push_back(pkt.tag);
        else exp_drops++;
      end
    end
    repeat (3) @(posedge clk);
    chk(drops == exp_drops, "drop count");
    $display("drops=%0d expected=%0d", drops, exp_drops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
