// tb_hbs_encoder: checks hbs_encoder against the reference encoding for all
// four source clusters and every possible target set, and against the worked
// examples printed in the paper's figures (HBS field values).
module tb_hbs_encoder;
  import tb_hbs_ref_pkg::*;

  logic [1:0]  src_cluster;
  logic [15:0] targets;
  logic [7:0]  rbits;
  logic        exact;
  int checks = 0, failures = 0;

  hbs_encoder dut (.src_cluster, .targets, .rbits, .exact);

  task automatic check(input string what, input logic [7:0] exp_rb, input logic exp_ex);
    #1;
    checks++;
    if (rbits !== exp_rb || exact !== exp_ex) begin
      failures++;
      if (failures < 10)
        $display("FAIL %s: s=%0d t=%h rbits=%b exp=%b exact=%b exp=%b",
                 what, src_cluster, targets, rbits, exp_rb, exact, exp_ex);
    end
  endtask

  initial begin
    // Worked example with no illegal copy: source in the 2nd cluster from the
    // left (c=2); targets = 3rd core from the left (j=1) of clusters 1,2,4
    // from the left (c=3,2,0). Figure prints R1 = 1011.
    src_cluster = 2;
    targets = 16'b0010_0010_0000_0010;
    check("fig-top", {4'b1011, 4'b0010}, 1'b1);
    // Example with illegal copies: source in cluster c=1; figure prints
    // R1 = 1111, R0 = 1100.
    src_cluster = 1;
    targets = 16'b1100_1000_1000_1100;
    check("fig-bottom", {4'b1111, 4'b1100}, 1'b0);
    // Overview example: L1 = 1111, L0 = 0011 from the leftmost cluster.
    src_cluster = 3;
    targets = 16'b0011_0011_0011_0011;
    check("fig-overview", {4'b1111, 4'b0011}, 1'b1);
    // Exhaustive
    for (int s = 0; s < 4; s++) begin
      for (int t = 0; t < 65536; t++) begin
        logic [7:0] e;
        src_cluster = 2'(s);
        targets = 16'(t);
        e = encode(s, 16'(t));
        check("exhaustive", e, reach(s, e) == 16'(t));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
