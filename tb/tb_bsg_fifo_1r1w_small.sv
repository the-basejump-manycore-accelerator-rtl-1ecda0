// Self-checking test of bsg_fifo_1r1w_small: random pushes and pops against a
// queue model. Checks data order, that a pushed word is not visible in the
// cycle it is pushed but is in the next one, that ready_o falls after els_p
// words, and that a full FIFO accepts nothing.
module tb_bsg_fifo_1r1w_small;
  localparam int W = 8, ELS = 2;
  logic clk = 0, reset = 1;
  always #5 clk = ~clk;
  logic v_i, ready_o, v_o, yumi_i;
  logic [W-1:0] data_i, data_o;
  int checks = 0, failures = 0;
  logic [W-1:0] q[$];

  bsg_fifo_1r1w_small #(.width_p(W), .els_p(ELS)) dut (.clk_i(clk), .reset_i(reset), .*);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    v_i = 0; yumi_i = 0; data_i = 0;
    repeat (3) @(posedge clk);
    reset = 0;
    @(negedge clk);
    check(!v_o && ready_o, "empty after reset");
    // Latency: push at one edge, visible after it, not before.
    v_i = 1; data_i = 8'h5a;
    #1 check(!v_o, "no fall-through in the push cycle");
    @(posedge clk); #1 v_i = 0;
    check(v_o && data_o == 8'h5a, "visible one cycle after push");
    q.push_back(8'h5a);
    // Fill to full.
    @(negedge clk);
    v_i = 1; data_i = 8'h11;
    @(posedge clk); #1 v_i = 0; q.push_back(8'h11);
    check(!ready_o, "not ready when holding els_p words");
    v_i = 1; data_i = 8'hff;                       // must be ignored
    @(posedge clk); #1 v_i = 0;
    check(!ready_o, "still full");
    // Random traffic.
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      v_i = ($urandom % 3) != 0;
      data_i = W'($urandom);
      yumi_i = v_o && (($urandom % 3) != 0);
      if (v_o) check(q.size() > 0 && data_o == q[0], "head matches model");
      check(v_o == (q.size() != 0), "valid matches model");
      check(ready_o == (q.size() < ELS), "ready matches model");
      @(posedge clk);
      if (yumi_i) void'(q.pop_front());
      if (v_i && ready_o) q.push_back(data_i);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
