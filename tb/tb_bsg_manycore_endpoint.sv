// Self-checking test of the barebones endpoint: an incoming request appears on
// fifo_v_o one cycle after it is on the link and is buffered up to fifo_els_p
// deep (link ready then falls); outgoing requests and responses pass to the
// link in the same cycle with the link's ready; an incoming response appears
// on returned_v_o one cycle later and is drained without a handshake.
`include "bsg_manycore_packet.svh"
module tb_bsg_manycore_endpoint;
  import bsg_manycore_pkg::*;
  localparam int XW = 4, YW = 5, DW = 32, AW = 20, ELS = 4;
  localparam int FW = `bsg_manycore_packet_width(AW, DW, XW, YW);
  localparam int RW = `bsg_manycore_return_packet_width(DW, XW, YW);
  typedef `bsg_manycore_link_sif_s(AW, DW, XW, YW) link_sif_s;

  logic clk = 0, reset = 1;
  always #5 clk = ~clk;
  link_sif_s li, lo;
  logic fifo_v, fifo_yumi, out_v, out_ready, ret_v, ret_ready, returned_v;
  logic [FW-1:0] fifo_data, out_pkt;
  logic [RW-1:0] ret_data, returned_data;
  int checks = 0, failures = 0;

  bsg_manycore_endpoint #(.x_cord_width_p(XW), .y_cord_width_p(YW), .data_width_p(DW), .addr_width_p(AW), .fifo_els_p(ELS)) dut (
    .clk_i(clk), .reset_i(reset), .link_sif_i(li), .link_sif_o(lo),
    .fifo_v_o(fifo_v), .fifo_data_o(fifo_data), .fifo_yumi_i(fifo_yumi),
    .out_v_i(out_v), .out_packet_i(out_pkt), .out_ready_o(out_ready),
    .returning_v_i(ret_v), .returning_data_i(ret_data), .returning_ready_o(ret_ready),
    .returned_v_o(returned_v), .returned_data_o(returned_data));

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    li = '0; fifo_yumi = 0; out_v = 0; out_pkt = '0; ret_v = 0; ret_data = '0;
    repeat (3) @(posedge clk);
    reset = 0;
    // Fill the request FIFO with ELS packets, nothing consumed.
    for (int i = 0; i < ELS; i++) begin
      @(negedge clk);
      check(lo.fwd.ready_and_rev, "request FIFO has room");
      li.fwd.v = 1; li.fwd.data = FW'(i + 10);
      if (i == 0) #1 check(!fifo_v, "not visible in the cycle it arrives");
      @(posedge clk); #1;
      check(fifo_v && fifo_data == FW'(10), "head is the first packet");
    end
    li.fwd.v = 0;
    #1 check(!lo.fwd.ready_and_rev, "link ready falls when the FIFO is full");
    for (int i = 0; i < ELS; i++) begin
      @(negedge clk);
      check(fifo_v && fifo_data == FW'(i + 10), "packets leave in order");
      fifo_yumi = 1;
      @(posedge clk); #1 fifo_yumi = 0;
    end
    check(!fifo_v, "empty");
    // Outgoing request and response pass straight through.
    @(negedge clk);
    out_v = 1; out_pkt = FW'(123); ret_v = 1; ret_data = RW'(77);
    li.fwd.ready_and_rev = 0; li.rev.ready_and_rev = 1;
    #1 check(lo.fwd.v && lo.fwd.data == FW'(123) && !out_ready, "request on link, ready follows link");
    check(lo.rev.v && lo.rev.data == RW'(77) && ret_ready, "response on link, ready follows link");
    out_v = 0; ret_v = 0;
    // Incoming response: one cycle, then drained.
    @(negedge clk);
    li.rev.v = 1; li.rev.data = RW'(55);
    @(posedge clk); #1 li.rev.v = 0;
    check(returned_v && returned_data == RW'(55), "response returned one cycle later");
    @(posedge clk); #1;
    check(!returned_v, "response drained without handshake");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
