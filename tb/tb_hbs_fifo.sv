// tb_hbs_fifo: random traffic with random back-pressure against a queue
// model; checks order, data, full/empty flags and the one-cycle latency.
module tb_hbs_fifo;
  localparam int W = 18, DEPTH = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  int checks = 0, failures = 0;
  logic [W-1:0] q[$];
  bit push_f, pop_f, refused = 0;

  hbs_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s @%0t", msg, $time);
    end
  endtask

  initial begin
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(!out_valid && in_ready, "empty after reset");
    // latency: word written at one edge is visible right after it
    in_valid = 1; in_data = 18'h2A5A5;
    @(posedge clk); q.push_back(in_data);
    #1 in_valid = 0;
    chk(out_valid && out_data == 18'h2A5A5, "one-cycle latency");
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      // compare visible state with the model
      chk(out_valid == (q.size() != 0), "out_valid");
      chk(in_ready == (q.size() != DEPTH), "in_ready");
      if (out_valid && q.size() != 0) chk(out_data == q[0], "data/order");
      // hold a refused word, else pick a new one
      if (!refused) begin
        in_valid = ($urandom_range(3 - 1, 0)) != 0;
        in_data  = W'($urandom);
      end
      out_ready = (cyc < 1000) ? (($urandom_range(4 - 1, 0)) == 0) : (($urandom_range(3 - 1, 0)) != 0);
      #1;
      push_f  = in_valid && in_ready;
      pop_f   = out_valid && out_ready;
      refused = in_valid && !in_ready;
      @(posedge clk);
      if (pop_f) void'(q.pop_front());
      if (push_f) q.push_back(in_data);
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
