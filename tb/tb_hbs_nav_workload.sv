// tb_hbs_nav_workload: the evaluated workload shape on the full-size NoC.
//
// A spiking network of 6 layers of 100 neurons (3 recurrent layers, then 3
// fully connected ones) is mapped onto the 16 cores: neurons are placed in
// order, moving to the next core when a core holds 40 neurons or, at random,
// earlier (only while enough room is left for the rest). Each neuron
// projects to every neuron of the next layer, and a recurrent layer also to
// its own layer; its target set is the set of cores holding those neurons.
// Every neuron's tree and every core's filter are programmed, then 400 time
// steps are run; in each step every neuron fires with probability 1/16 and
// the NoC drains before the next step. The original spike trace is not
// available, so the activity here is random; layer order, all-to-all
// projections and firing rate are this testbench's assumptions.
// Checks: every wanted event arrives once, every core drops exactly the
// predicted illegal copies, and HBS never creates more illegal copies than
// the symbol (0/1/*) encoding would for the same spikes. The numbers of
// illegal copies under both encodings are printed.
module tb_hbs_nav_workload;
  import hbs_pkg::*;
  import tb_hbs_ref_pkg::*;
  localparam int LAYERS = 6, PER_LAYER = 100, NTOT = LAYERS * PER_LAYER, CAP = 40;
  localparam int STEPS = 400;

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
  int core_of [NTOT], slot_of [NTOT];
  logic [15:0] tset [NTOT];
  int exp_evt [16][1024];
  int exp_drop [16], got_drop [16];
  longint ill_hbs = 0, ill_sym = 0, wanted = 0, n_spikes = 0;
  int n_exact = 0;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s @%0t", msg, $time);
    end
  endtask

  // cores covered by the smallest 0/1/* pattern over the 4 core-id bits
  function automatic int sym_region(input logic [15:0] t);
    logic [3:0] and_v, or_v;
    int n;
    and_v = '1; or_v = '0;
    for (int m = 0; m < 16; m++) if (t[m]) begin
      and_v &= 4'(m);
      or_v  |= 4'(m);
    end
    if (t == 0) return 0;
    n = 1;
    for (int b = 0; b < 4; b++) if (and_v[b] != or_v[b]) n *= 2;
    return n;
  endfunction

  always @(posedge clk) if (rst_n) begin
    for (int m = 0; m < 16; m++) begin
      if (evt_valid[m] && evt_ready[m]) begin
        chk(exp_evt[m][evt_tag[m]] > 0, "wanted event, delivered once");
        exp_evt[m][evt_tag[m]]--;
      end
      if (drop[m]) got_drop[m]++;
    end
  end

  initial begin
    int core, used, left_after;
    int ids [16][$];
    spike_valid = '0; spike_nrn = '0; evt_ready = '1;
    cfg_src_we = 0; cfg_flt_we = 0; cfg_core = '0; cfg_nrn = '0; cfg_targets = '0;
    cfg_tag = '0; cfg_accept = 0;
    for (int m = 0; m < 16; m++) begin
      exp_drop[m] = 0; got_drop[m] = 0;
      for (int g = 0; g < 1024; g++) exp_evt[m][g] = 0;
    end
    // mapping
    core = 0; used = 0;
    for (int n = 0; n < NTOT; n++) begin
      left_after = NTOT - n;                  // neurons still to place, this one included
      if (used == CAP || (used > 0 && ($urandom_range(20 - 1, 0)) == 0 && (15 - core) * CAP >= left_after)) begin
        core++; used = 0;
      end
      core_of[n] = core; slot_of[n] = used; used++;
      ids[core].push_back(n);
    end
    chk(core < 16, "mapping fits in 16 cores");
    $display("mapping uses %0d cores", core + 1);
    // target sets
    for (int n = 0; n < NTOT; n++) begin
      int l;
      l = n / PER_LAYER;
      tset[n] = '0;
      for (int d = 0; d < NTOT; d++) begin
        int ld;
        ld = d / PER_LAYER;
        if (ld == l + 1 || (l < 3 && ld == l)) tset[n][core_of[d]] = 1'b1;
      end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // programming
    for (int n = 0; n < NTOT; n++) begin
      @(negedge clk);
      cfg_src_we = 1; cfg_core = 4'(core_of[n]); cfg_nrn = 6'(slot_of[n]); cfg_targets = tset[n];
      #1;
      chk(cfg_exact == (reach(core_of[n] / 4, encode(core_of[n] / 4, tset[n])) == tset[n]), "cfg_exact");
      if (cfg_exact) n_exact++;
      @(posedge clk); #1 cfg_src_we = 0;
      for (int m = 0; m < 16; m++) if (tset[n][m]) begin
        @(negedge clk);
        cfg_flt_we = 1; cfg_core = 4'(m); cfg_tag = {4'(core_of[n]), 6'(slot_of[n])}; cfg_accept = 1;
        @(posedge clk); #1 cfg_flt_we = 0;
      end
    end
    // time steps
    for (int st = 0; st < STEPS; st++) begin
      int q [16][$];
      for (int n = 0; n < NTOT; n++) if (($urandom_range(16 - 1, 0)) == 0) begin
        logic [15:0] r;
        q[core_of[n]].push_back(slot_of[n]);
        r = reach(core_of[n] / 4, encode(core_of[n] / 4, tset[n]));
        n_spikes++;
        for (int m = 0; m < 16; m++) begin
          if (tset[n][m]) begin
            exp_evt[m][{4'(core_of[n]), 6'(slot_of[n])}]++;
            wanted++;
          end else if (r[m]) begin
            exp_drop[m]++;
            ill_hbs++;
          end
        end
        ill_sym += sym_region(tset[n]) - $countones(tset[n]);
      end
      // each core sends its spikes, one per accepted cycle
      while (1) begin
        logic [15:0] f;
        bit any;
        any = 0;
        @(negedge clk);
        for (int m = 0; m < 16; m++) begin
          spike_valid[m] = q[m].size() != 0;
          if (q[m].size() != 0) begin
            spike_nrn[m] = 6'(q[m][0]);
            any = 1;
          end
        end
        if (!any) break;
        #1 f = spike_valid & spike_ready;
        @(posedge clk);
        for (int m = 0; m < 16; m++) if (f[m]) void'(q[m].pop_front());
      end
      spike_valid = '0;
      repeat (30) @(posedge clk);
    end
    repeat (50) @(posedge clk);
    begin
      int left;
      left = 0;
      for (int m = 0; m < 16; m++) for (int g = 0; g < 1024; g++) left += exp_evt[m][g];
      chk(left == 0, "all wanted events delivered");
    end
    for (int m = 0; m < 16; m++) chk(got_drop[m] == exp_drop[m], "drops per core");
    chk(ill_hbs <= ill_sym, "HBS creates no more illegal copies than symbol encoding");
    chk(n_spikes > 0 && wanted > 0, "traffic generated");
    $display("neurons with exact trees=%0d of %0d", n_exact, NTOT);
    $display("spikes=%0d wanted deliveries=%0d illegal copies: HBS=%0d symbol=%0d",
             n_spikes, wanted, ill_hbs, ill_sym);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
