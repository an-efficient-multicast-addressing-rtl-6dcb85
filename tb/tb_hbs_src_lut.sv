// tb_hbs_src_lut: programs random routing bits for all 40 neurons of core 9,
// fires random spikes under random back-pressure and checks every packet
// {r1, r0, tag} in order, the one-cycle latency, that out-of-range neuron
// indices make no packet, and that back-to-back spikes run at one per cycle.
module tb_hbs_src_lut;
  import hbs_pkg::*;
  localparam int NEURONS = 40, CORE_ID = 9;
  logic clk = 0, rst_n = 0;
  logic spike_valid, spike_ready, cfg_we, pkt_valid, pkt_ready;
  logic [LNRN_W-1:0] spike_nrn, cfg_nrn;
  logic [RB_W-1:0] cfg_rbits;
  pkt_t pkt;
  logic [7:0] table_m [NEURONS];
  pkt_t exp_q[$];
  bit in_f, out_f, refused = 0;
  int checks = 0, failures = 0;

  hbs_src_lut #(.NEURONS(NEURONS), .CORE_ID(CORE_ID)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s @%0t", msg, $time);
    end
  endtask

  initial begin
    spike_valid = 0; cfg_we = 0; pkt_ready = 1; spike_nrn = '0; cfg_nrn = '0; cfg_rbits = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < NEURONS; n++) begin
      @(negedge clk);
      table_m[n] = 8'($urandom);
      cfg_we = 1; cfg_nrn = LNRN_W'(n); cfg_rbits = table_m[n];
    end
    @(negedge clk) cfg_we = 0;
    // latency and rate: 3 spikes on consecutive cycles, ready held high
    for (int k = 0; k < 3; k++) begin
      spike_valid = 1; spike_nrn = LNRN_W'(k + 5);
      @(posedge clk);
      chk(spike_ready, "ready at full rate");
      #1;
      chk(pkt_valid && pkt.tag == {4'(CORE_ID), 6'(k + 5)} &&
          {pkt.r1, pkt.r0} == table_m[k + 5], "one-cycle latency");
      @(negedge clk);
    end
    spike_valid = 0;
    @(negedge clk);
    // out-of-range index: no packet
    spike_valid = 1; spike_nrn = 6'd50;
    @(negedge clk);
    spike_valid = 0;
    chk(!pkt_valid, "out-of-range index dropped");
    // random traffic with back-pressure
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      if (!refused) begin
        spike_valid = ($urandom_range(2 - 1, 0)) != 0;
        spike_nrn = LNRN_W'($urandom_range(NEURONS - 1, 0));
      end
      pkt_ready = ($urandom_range(3 - 1, 0)) != 0;
      #1;
      out_f = pkt_valid && pkt_ready;
      in_f = spike_valid && spike_ready;
      refused = spike_valid && !spike_ready;
      @(posedge clk);
      if (out_f) begin
        chk(exp_q.size() != 0 && pkt == exp_q[0], "packet content/order");
        if (exp_q.size() != 0) void'(exp_q.pop_front());
      end
      if (in_f)
        exp_q.push_back('{r1: table_m[spike_nrn][7:4], r0: table_m[spike_nrn][3:0],
                          tag: {4'(CORE_ID), spike_nrn}});
    end
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
