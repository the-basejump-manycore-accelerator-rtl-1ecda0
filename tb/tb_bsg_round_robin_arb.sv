// Self-checking test of bsg_round_robin_arb: compares grants with a reference
// round-robin pointer model under random requests and random use of grants,
// and checks that with every input requesting, grants rotate 0,1,2,3,4.
module tb_bsg_round_robin_arb;
  localparam int N = 5;
  logic clk = 0, reset = 1;
  always #5 clk = ~clk;
  logic [N-1:0] reqs, grants;
  logic v, yumi;
  int checks = 0, failures = 0;
  int last;

  bsg_round_robin_arb #(.inputs_p(N)) dut (.clk_i(clk), .reset_i(reset), .reqs_i(reqs), .grants_o(grants), .v_o(v), .yumi_i(yumi));

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s reqs=%b grants=%b last=%0d", msg, reqs, grants, last); end
  endtask

  function automatic logic [N-1:0] model(input logic [N-1:0] r, input int l);
    for (int k = 1; k <= N; k++) if (r[(l + k) % N]) return N'(1) << ((l + k) % N);
    return '0;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    reqs = 0; yumi = 0; last = N - 1;
    repeat (3) @(posedge clk);
    reset = 0;
    // All requesting, every grant used: strict rotation.
    for (int i = 0; i < 2 * N; i++) begin
      @(negedge clk);
      reqs = '1; yumi = 1;
      #1 check(grants == (N'(1) << (i % N)), "rotation with all requesting");
      @(posedge clk); last = i % N;
    end
    for (int cyc = 0; cyc < 2000; cyc++) begin
      @(negedge clk);
      reqs = N'($urandom); yumi = ($urandom % 4) != 0;
      #1;
      check(grants == model(reqs, last), "grant matches model");
      check(v == (reqs != 0), "valid iff any request");
      @(posedge clk);
      if (yumi && v) for (int i = 0; i < N; i++) if (grants[i]) last = i;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
