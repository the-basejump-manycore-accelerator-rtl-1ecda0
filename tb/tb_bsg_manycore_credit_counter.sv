// Self-checking test of bsg_manycore_credit_counter: reset value, down/up
// under random traffic against a model, and simultaneous up and down.
module tb_bsg_manycore_credit_counter;
  localparam int MAX = 6;
  logic clk = 0, reset = 1;
  always #5 clk = ~clk;
  logic down, up;
  logic [$clog2(MAX+1)-1:0] credits;
  int checks = 0, failures = 0, model;

  bsg_manycore_credit_counter #(.max_out_credits_p(MAX)) dut (.clk_i(clk), .reset_i(reset), .down_i(down), .up_i(up), .credits_o(credits));

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s credits=%0d model=%0d", msg, credits, model); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    down = 0; up = 0; model = MAX;
    repeat (3) @(posedge clk);
    reset = 0;
    @(negedge clk);
    check(credits == MAX, "reset value is max_out_credits_p");
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      check(credits == model, "count matches model");
      down = (model > 0) && ($urandom % 2);
      up   = (model < MAX) && ($urandom % 2);
      if (cyc % 500 == 1) begin down = (model > 0); up = (model > 0); end  // both at once
      @(posedge clk);
      model = model - int'(down) + int'(up);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
