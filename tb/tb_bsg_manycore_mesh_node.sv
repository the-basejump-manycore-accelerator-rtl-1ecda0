// Self-checking test of bsg_manycore_mesh_node at (x,y) = (1,1): forward and
// reverse packets injected on each side (and on the processor port) must
// leave on the side given by X-then-Y routing, one cycle later, on the same
// network they entered, and the ready bits must appear in the right bundle.
`include "bsg_manycore_packet.svh"
module tb_bsg_manycore_mesh_node;
  import bsg_manycore_pkg::*;
  localparam int XW = 4, YW = 5, DW = 32, AW = 20;
  localparam int LW = `bsg_manycore_link_sif_width(AW, DW, XW, YW);
  typedef `bsg_manycore_link_sif_s(AW, DW, XW, YW) link_sif_s;
  typedef `bsg_manycore_packet_s(AW, DW, XW, YW) packet_s;
  typedef `bsg_manycore_return_packet_s(DW, XW, YW) return_packet_s;

  logic clk = 0, reset = 1;
  always #5 clk = ~clk;
  link_sif_s [3:0] li, lo;
  link_sif_s pi, po;
  int checks = 0, failures = 0;

  bsg_manycore_mesh_node #(.x_cord_width_p(XW), .y_cord_width_p(YW), .data_width_p(DW), .addr_width_p(AW)) dut (
    .clk_i(clk), .reset_i(reset), .my_x_i(XW'(1)), .my_y_i(YW'(1)),
    .links_sif_i(li), .links_sif_o(lo), .proc_link_sif_i(pi), .proc_link_sif_o(po));

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic link_sif_s idle();
    link_sif_s l = '0;
    l.fwd.ready_and_rev = 1; l.rev.ready_and_rev = 1;
    return l;
  endfunction

  // side: 0..3 = W,E,N,S ; 4 = processor port
  task automatic send_fwd(input int side, input int dx, input int dy, input int out_side, input logic [31:0] tag);
    packet_s p = '0;
    link_sif_s got;
    p.x_cord = XW'(dx); p.y_cord = YW'(dy); p.data = tag; p.op = e_remote_store;
    @(negedge clk);
    if (side == 4) begin pi.fwd.v = 1; pi.fwd.data = p; end
    else begin li[side].fwd.v = 1; li[side].fwd.data = p; end
    @(posedge clk); #1;
    pi.fwd.v = 0; for (int s = 0; s < 4; s++) li[s].fwd.v = 0;
    got = (out_side == 4) ? po : lo[out_side];
    check(got.fwd.v && packet_s'(got.fwd.data) == p, $sformatf("fwd %0d -> %0d in one cycle", side, out_side));
    check(!lo[0].rev.v && !lo[1].rev.v && !lo[2].rev.v && !lo[3].rev.v && !po.rev.v, "forward packet stays off the reverse network");
  endtask

  task automatic send_rev(input int side, input int dx, input int dy, input int out_side, input logic [31:0] tag);
    return_packet_s r = '0;
    link_sif_s got;
    r.x_cord = XW'(dx); r.y_cord = YW'(dy); r.data = tag; r.pkt_type = e_return_data;
    @(negedge clk);
    if (side == 4) begin pi.rev.v = 1; pi.rev.data = r; end
    else begin li[side].rev.v = 1; li[side].rev.data = r; end
    @(posedge clk); #1;
    pi.rev.v = 0; for (int s = 0; s < 4; s++) li[s].rev.v = 0;
    got = (out_side == 4) ? po : lo[out_side];
    check(got.rev.v && return_packet_s'(got.rev.data) == r, $sformatf("rev %0d -> %0d in one cycle", side, out_side));
    check(!lo[0].fwd.v && !lo[1].fwd.v && !lo[2].fwd.v && !lo[3].fwd.v && !po.fwd.v, "reverse packet stays off the forward network");
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < 4; s++) li[s] = idle();
    pi = idle();
    repeat (3) @(posedge clk);
    reset = 0;
    @(negedge clk);
    for (int s = 0; s < 4; s++) check(lo[s].fwd.ready_and_rev && lo[s].rev.ready_and_rev, "ready on every side after reset");
    send_fwd(0, 3, 1, 1, 32'h100);   // W -> E
    send_fwd(1, 0, 1, 0, 32'h101);   // E -> W
    send_fwd(4, 1, 0, 2, 32'h102);   // P -> N
    send_fwd(2, 1, 3, 3, 32'h103);   // N -> S
    send_fwd(3, 1, 1, 4, 32'h104);   // S -> P
    send_fwd(3, 2, 0, 1, 32'h105);   // S -> E (south I/O turn)
    send_rev(4, 0, 1, 0, 32'h200);   // P -> W
    send_rev(1, 1, 3, 3, 32'h201);   // E -> S
    send_rev(3, 0, 0, 0, 32'h202);   // S -> W (south I/O turn)
    send_rev(0, 1, 1, 4, 32'h203);   // W -> P
    // Back-pressure: E neighbour not ready; the W input FIFO (2 deep) fills.
    @(negedge clk);
    li[1].fwd.ready_and_rev = 0;
    li[0].fwd.v = 1; li[0].fwd.data = '0; li[0].fwd.data[XW-1:0] = 3; li[0].fwd.data[XW+:YW] = 1;
    repeat (3) @(posedge clk);
    #1 check(!lo[0].fwd.ready_and_rev, "W input not ready once its FIFO is full");
    check(lo[1].fwd.v, "E output keeps offering the packet");
    li[0].fwd.v = 0; li[1].fwd.ready_and_rev = 1;
    repeat (3) @(posedge clk);
    #1 check(lo[0].fwd.ready_and_rev && !lo[1].fwd.v, "drained");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
