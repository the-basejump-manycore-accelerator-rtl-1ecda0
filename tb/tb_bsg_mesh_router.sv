// Self-checking test of bsg_mesh_router at (x,y) = (2,2).
// 1. Latency: a packet entering the W input leaves E exactly one cycle later.
// 2. Round-robin: P, W, E and S all send to N at once; each is served within
//    five grants.
// 3. Random traffic from all five inputs to destinations that respect the
//    routing rules (nothing from N goes W or E), with random output stalls.
//    A reference XY-routing function gives each packet's expected output;
//    every packet must leave there, in order per input/output pair, and none
//    may be lost or duplicated.
module tb_bsg_mesh_router;
  import bsg_noc_pkg::*;
  localparam int XW = 4, YW = 5, W = 24;   // data = {tag[14:0], y[4:0], x[3:0]}
  localparam logic [XW-1:0] MX = 2;
  localparam logic [YW-1:0] MY = 2;
  logic clk = 0, reset = 1;
  always #5 clk = ~clk;

  logic [4:0] v_i, ready_o, v_o, ready_i;
  logic [4:0][W-1:0] data_i, data_o;
  int checks = 0, failures = 0;
  logic [W-1:0] q[5][5][$];   // expected, by [in][out]
  int tag = 0;

  bsg_mesh_router #(.width_p(W), .x_cord_width_p(XW), .y_cord_width_p(YW)) dut (
    .clk_i(clk), .reset_i(reset), .my_x_i(MX), .my_y_i(MY),
    .v_i, .data_i, .ready_o, .v_o, .data_o, .ready_i);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic int route(input logic [W-1:0] d);
    logic [XW-1:0] x = d[XW-1:0];
    logic [YW-1:0] y = d[XW+:YW];
    if (x < MX) return 1;
    if (x > MX) return 2;
    if (y < MY) return 3;
    if (y > MY) return 4;
    return 0;
  endfunction

  // A legal destination for a packet entering from side `in`.
  function automatic logic [W-1:0] pick(input int in);
    logic [XW-1:0] x; logic [YW-1:0] y;
    forever begin
      x = XW'($urandom % 5); y = YW'($urandom % 5);
      case (in)
        1: if (x < MX) continue;                 // from W: not back W
        2: if (x > MX) continue;                 // from E: not back E
        3: if (x != MX || y < MY) continue;      // from N: only S or P
        4: if (y > MY) continue;                 // from S: not back S
        default: ;
      endcase
      break;
    end
    tag++;
    return {15'(tag), y, x};
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int served[5];
  initial begin
    v_i = 0; data_i = '0; ready_i = '1;
    repeat (3) @(posedge clk);
    reset = 0;
    // 1. latency W -> E
    @(negedge clk);
    v_i[1] = 1; data_i[1] = {15'd1, 5'd2, 4'd4};
    @(posedge clk); #1 v_i = 0;
    check(v_o[2] && data_o[2] == {15'd1, 5'd2, 4'd4}, "W->E leaves one cycle after entering");
    @(posedge clk); #1;
    check(v_o == 0, "nothing left");
    // 2. four inputs to N at once
    @(negedge clk);
    for (int d = 0; d < 5; d++) if (d != 3) begin v_i[d] = 1; data_i[d] = {15'(d), 5'd0, 4'd2}; end
    @(posedge clk); #1 v_i = 0;
    for (int k = 0; k < 4; k++) begin
      check(v_o[3], "N output busy while requests wait");
      served[data_o[3][W-1 -: 15]]++;
      @(posedge clk); #1;
    end
    check(served[0] == 1 && served[1] == 1 && served[2] == 1 && served[4] == 1, "each input served once in four cycles");
    // 3. random
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      ready_i = 5'($urandom) | 5'($urandom);
      for (int d = 0; d < 5; d++) begin
        if (!v_i[d] || ready_o[d]) begin
          v_i[d] = ($urandom % 2) && cyc < 3800;
          data_i[d] = pick(d);
        end
      end
      #1;
      @(posedge clk);
      for (int d = 0; d < 5; d++) if (v_i[d] && ready_o[d]) q[d][route(data_i[d])].push_back(data_i[d]);
      for (int o = 0; o < 5; o++) if (v_o[o] && ready_i[o]) begin
        bit found = 0;
        for (int d = 0; d < 5; d++) if (q[d][o].size() > 0 && q[d][o][0] == data_o[o]) begin
          found = 1; void'(q[d][o].pop_front());
        end
        check(found && route(data_o[o]) == o, $sformatf("output %0d delivered expected packet %h", o, data_o[o]));
      end
      if (cyc >= 3800) for (int d = 0; d < 5; d++) v_i[d] = v_i[d] & ~ready_o[d];
    end
    begin
      int left = 0;
      for (int d = 0; d < 5; d++) for (int o = 0; o < 5; o++) left += q[d][o].size();
      check(left == 0, $sformatf("all packets delivered (%0d left)", left));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
