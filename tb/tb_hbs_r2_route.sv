// tb_hbs_r2_route: exhaustive check of R2 exact routing: every cluster in the
// absolute mask except the arrival cluster.
module tb_hbs_r2_route;
  logic [3:0] r1_abs;
  logic [1:0] in_port;
  logic [3:0] mask;
  int checks = 0, failures = 0;

  hbs_r2_route dut (.r1_abs, .in_port, .mask);

  initial begin
    for (int p = 0; p < 4; p++) begin
      for (int v = 0; v < 16; v++) begin
        logic [3:0] e;
        r1_abs = 4'(v);
        in_port = 2'(p);
        e = 4'(v) & ~(4'b0001 << p);
        #1;
        checks++;
        if (mask !== e) begin
          failures++;
          $display("FAIL abs=%b port=%0d mask=%b exp=%b", r1_abs, in_port, mask, e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
