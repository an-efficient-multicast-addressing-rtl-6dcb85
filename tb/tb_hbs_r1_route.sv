// tb_hbs_r1_route: exhaustive check of the R1 routing equations
//   Up = R1[2]|R1[1]|R1[0] (not for packets from Up), D_j = R1[3] & R0[j].
module tb_hbs_r1_route;
  logic [7:0] rbits;
  logic       from_up;
  logic [4:0] mask;
  int checks = 0, failures = 0;

  hbs_r1_route dut (.rbits, .from_up, .mask);

  initial begin
    for (int u = 0; u < 2; u++) begin
      for (int v = 0; v < 256; v++) begin
        logic [4:0] e;
        rbits = 8'(v);
        from_up = u[0];
        e[0] = rbits[7] && rbits[0];
        e[1] = rbits[7] && rbits[1];
        e[2] = rbits[7] && rbits[2];
        e[3] = rbits[7] && rbits[3];
        e[4] = !from_up && (rbits[6] || rbits[5] || rbits[4]);
        #1;
        checks++;
        if (mask !== e) begin
          failures++;
          $display("FAIL rbits=%b from_up=%0d mask=%b exp=%b", rbits, from_up, mask, e);
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
