// tb_hbs_noc_top: end-to-end test of the 16-core HBS NoC at its default
// parameters (40 neurons per core, 4-word buffers).
//
// 1. Programs a multicast target set for every neuron of every core through
//    the configuration port (mix of exact HBS sets, arbitrary sets, unicast,
//    local-only and empty sets), checks cfg_exact against the reference
//    model, and programs every core's filter to accept exactly the sources
//    that target it.
// 2. Runs the two worked examples of the HBS tree drawing: a legal multicast
//    and one whose HBS tree also reaches cores 10 and 6, which must drop it.
// 3. Measures latency: 2 cycles after the spike is taken for a core of the
//    same cluster, 4 cycles for another cluster.
// 4. Fires random spikes from all cores with phases of event back-pressure.
//    Every core must receive each wanted event exactly once and drop exactly
//    the illegal copies the reference model predicts.
// Mechanisms counted (each must occur): multicast fork, inter-cluster route
// through R2, local-only route, illegal copy dropped, spike stalled by
// back-pressure, output contention at R2 and at an R1 switch, U-turn
// suppressed at R1, empty tree discarded.
module tb_hbs_noc_top;
  import hbs_pkg::*;
  import tb_hbs_ref_pkg::*;
  localparam int NRN = 40;

  logic clk = 0, rst_n = 0;
  logic [15:0] spike_valid, spike_ready, evt_valid, evt_ready, drop;
  logic [15:0][5:0] spike_nrn;
  logic [15:0][9:0] evt_tag;
  logic cfg_src_we, cfg_flt_we, cfg_accept, cfg_exact;
  logic [3:0] cfg_core;
  logic [5:0] cfg_nrn;
  logic [15:0] cfg_targets;
  logic [9:0] cfg_tag;

  hbs_noc_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [15:0] tset [16][NRN];
  int exp_evt [16][1024];     // outstanding wanted events per core and tag
  int exp_drop [16], got_drop [16];
  int n_fork = 0, n_r2 = 0, n_local = 0, n_drop = 0, n_stall = 0, n_cont_r2 = 0,
      n_cont_r1 = 0, n_uturn = 0, n_empty = 0, n_spikes = 0, n_events = 0;
  logic [15:0] sp_f, sp_refused = '0;
  logic [15:0][5:0] sp_nrn;
  logic rec_drops = 1'b0;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s @%0t", msg, $time);
    end
  endtask

  function automatic logic [15:0] random_set();
    logic [3:0] cm, pm;
    logic [15:0] t;
    case ($urandom_range(6 - 1, 0))
      0, 1: begin                         // exact HBS set
        cm = 4'($urandom) | 4'b0001 << ($urandom_range(4 - 1, 0));
        pm = 4'($urandom) | 4'b0001 << ($urandom_range(4 - 1, 0));
        for (int c = 0; c < 4; c++) t[4*c +: 4] = cm[c] ? pm : 4'b0;
      end
      2: begin                            // arbitrary sparse set
        for (int b = 0; b < 16; b++) t[b] = ($urandom_range(5 - 1, 0)) == 0;
      end
      3: t = 16'b1 << ($urandom_range(16 - 1, 0));    // unicast
      4: t = 16'($urandom) & (16'hF << (4 * ($urandom_range(4 - 1, 0))));
      default: t = (($urandom_range(4 - 1, 0)) == 0) ? 16'b0 : 16'($urandom);
    endcase
    return t;
  endfunction

  task automatic program_src(input int n, input int k, input logic [15:0] t);
    @(negedge clk);
    cfg_src_we = 1; cfg_core = 4'(n); cfg_nrn = 6'(k); cfg_targets = t;
    tset[n][k] = t;
    #1;
    chk(cfg_exact == (reach(n / 4, encode(n / 4, t)) == t), "cfg_exact");
    @(posedge clk); #1 cfg_src_we = 0;
  endtask

  task automatic program_flt(input int m, input logic [9:0] tag, input logic a);
    @(negedge clk);
    cfg_flt_we = 1; cfg_core = 4'(m); cfg_tag = tag; cfg_accept = a;
    @(posedge clk); #1 cfg_flt_we = 0;
  endtask

  // expected effects of one spike of neuron k of core n
  task automatic expect_spike(input int n, input int k);
    logic [15:0] t, r;
    t = tset[n][k];
    r = reach(n / 4, encode(n / 4, t));
    n_spikes++;
    if (r == 16'b0) n_empty++;
    if ($countones(r) > 1) n_fork++;
    if ((r & ~(16'hF << (4 * (n / 4)))) != 0) n_r2++;
    else if (r != 0) n_local++;
    for (int m = 0; m < 16; m++) begin
      if (t[m]) exp_evt[m][{n[3:0], k[5:0]}]++;
      else if (r[m]) exp_drop[m]++;
    end
  endtask

  // delivered events and drops
  always @(posedge clk) if (rst_n) begin
    for (int m = 0; m < 16; m++) begin
      if (evt_valid[m] && evt_ready[m]) begin
        n_events++;
        chk(exp_evt[m][evt_tag[m]] > 0, "wanted event, delivered once");
        exp_evt[m][evt_tag[m]]--;
      end
      if (drop[m]) begin
        got_drop[m]++;
        n_drop++;
      end
    end
    // contention: two inputs want one output in the same cycle
    for (int o = 0; o < 4; o++) begin
      logic [3:0] rq;
      for (int i = 0; i < 4; i++) rq[i] = dut.u_r2.u_core.req[o][i];
      if ($countones(rq) > 1) n_cont_r2++;
    end
    for (int o = 0; o < 5; o++) begin
      logic [4:0] rq;
      for (int i = 0; i < 5; i++) rq[i] = dut.g_r1[1].u_r1.u_core.req[o][i];
      if ($countones(rq) > 1) n_cont_r1++;
    end
  end

  // a packet from R2 at an R1 head whose R1 bits name other clusters
  for (genvar c = 0; c < 4; c++) begin : g_uturn
    always @(posedge clk) if (rst_n) begin
      pkt_t h;
      h = pkt_t'(dut.g_r1[c].u_r1.head[4]);
      if (dut.g_r1[c].u_r1.head_valid[4] && h.r1[2:0] != 3'b0 &&
          dut.g_r1[c].u_r1.u_core.served[4] == '0)
        n_uturn++;
    end
  end

  task automatic wait_idle(input int cycles);
    repeat (cycles) @(posedge clk);
  endtask

  task automatic check_all_done(input string what);
    int left;
    left = 0;
    for (int m = 0; m < 16; m++) for (int g = 0; g < 1024; g++) left += exp_evt[m][g];
    chk(left == 0, {what, ": all wanted events delivered"});
    for (int m = 0; m < 16; m++) chk(got_drop[m] == exp_drop[m], {what, ": drops per core"});
  endtask

  // one spike, then measure the cycles until evt_valid at core m
  task automatic latency(input int n, input int k, input int m, input int want);
    int cyc;
    @(negedge clk);
    spike_valid[n] = 1; spike_nrn[n] = 6'(k);
    @(posedge clk);
    expect_spike(n, k);
    #1 spike_valid[n] = 0;
    cyc = 0;
    while (!evt_valid[m] && cyc < 20) begin
      @(posedge clk); #1;
      cyc++;
    end
    chk(cyc == want, "latency");
    $display("latency core %0d -> core %0d: %0d cycles", n, m, cyc);
  endtask

  initial begin
    spike_valid = '0; spike_nrn = '0; evt_ready = '1;
    cfg_src_we = 0; cfg_flt_we = 0; cfg_core = '0; cfg_nrn = '0; cfg_targets = '0;
    cfg_tag = '0; cfg_accept = 0;
    for (int m = 0; m < 16; m++) begin
      exp_drop[m] = 0; got_drop[m] = 0;
      for (int g = 0; g < 1024; g++) exp_evt[m][g] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // --- programming
    for (int n = 0; n < 16; n++)
      for (int k = 0; k < NRN; k++) program_src(n, k, random_set());
    // worked examples: core 8 neuron 0 -> cores 13, 9, 1 (legal);
    // core 4 neuron 0 -> cores 15,14,11,7,3,2 (reaches 10 and 6 as well)
    program_src(8, 0, 16'b0010_0010_0000_0010);
    chk(cfg_exact, "legal example is exact");
    program_src(4, 0, 16'b1100_1000_1000_1100);
    chk(!cfg_exact, "illegal example is not exact");
    // latency probes: core 5 neuron 1 -> core 6 (same cluster) and core 12
    program_src(5, 1, 16'b0001_0000_0100_0000);
    for (int n = 0; n < 16; n++)
      for (int k = 0; k < NRN; k++)
        for (int m = 0; m < 16; m++)
          if (tset[n][k][m]) program_flt(m, {n[3:0], k[5:0]}, 1'b1);

    // --- worked examples
    @(negedge clk);
    spike_valid[8] = 1; spike_nrn[8] = 6'd0;
    @(posedge clk); expect_spike(8, 0);
    #1 spike_valid[8] = 0;
    wait_idle(10);
    check_all_done("legal example");
    @(negedge clk);
    spike_valid[4] = 1; spike_nrn[4] = 6'd0;
    @(posedge clk); expect_spike(4, 0);
    #1 spike_valid[4] = 0;
    wait_idle(10);
    check_all_done("illegal example");
    chk(got_drop[10] == 1 && got_drop[6] == 1 && n_drop == 2, "drops exactly at cores 10 and 6");

    // --- latency
    latency(5, 1, 6, 2);
    wait_idle(10);
    latency(5, 1, 12, 4);
    wait_idle(10);

    // --- random traffic
    for (int cyc = 0; cyc < 20000; cyc++) begin
      @(negedge clk);
      for (int n = 0; n < 16; n++) if (!sp_refused[n]) begin
        spike_valid[n] = (cyc < 19000) && (($urandom_range(100 - 1, 0)) < (((cyc / 2000) % 2) != 0 ? 4 : 15));
        spike_nrn[n] = 6'($urandom_range(NRN - 1, 0));
      end
      if ((cyc / 1500) % 3 == 1) evt_ready = 16'($urandom) & 16'($urandom);
      else evt_ready = '1;
      #1;
      sp_f = spike_valid & spike_ready;
      sp_nrn = spike_nrn;
      sp_refused = spike_valid & ~spike_ready;
      n_stall += $countones(sp_refused);
      @(posedge clk);
      for (int n = 0; n < 16; n++) if (sp_f[n]) expect_spike(n, int'(sp_nrn[n]));
    end
    evt_ready = '1;
    wait_idle(200);
    check_all_done("random traffic");

    $display("spikes=%0d events=%0d drops=%0d forks=%0d via_R2=%0d local=%0d stalls=%0d cont_R2=%0d cont_R1=%0d uturn_blocked=%0d empty=%0d",
             n_spikes, n_events, n_drop, n_fork, n_r2, n_local, n_stall, n_cont_r2, n_cont_r1, n_uturn, n_empty);
    chk(n_fork > 0, "multicast fork happened");
    chk(n_r2 > 0, "inter-cluster route happened");
    chk(n_local > 0, "local-only route happened");
    chk(n_drop > 0, "illegal copy dropped");
    chk(n_stall > 0, "spike stalled by back-pressure");
    chk(n_cont_r2 > 0, "contention at R2");
    chk(n_cont_r1 > 0, "contention at R1");
    chk(n_uturn > 0, "U-turn suppressed");
    chk(n_empty > 0, "empty tree discarded");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
