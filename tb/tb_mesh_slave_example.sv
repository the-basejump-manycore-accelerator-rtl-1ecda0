// Self-checking test of mesh_slave_example. The testbench plays the network:
// it stores a pattern with random byte masks into random words, loads words
// back and swaps one, checking every response packet against a memory model
// in the testbench, and checks that a load answer leaves the slave two cycles
// after the request reaches it (one in the endpoint FIFO, one in the memory).
`include "bsg_manycore_packet.svh"
module tb_mesh_slave_example;
  import bsg_manycore_pkg::*;
  localparam int XW = 4, YW = 5, DW = 32, AW = 20, ELS = 64;
  typedef `bsg_manycore_link_sif_s(AW, DW, XW, YW) link_sif_s;
  typedef `bsg_manycore_packet_s(AW, DW, XW, YW) packet_s;
  typedef `bsg_manycore_return_packet_s(DW, XW, YW) return_packet_s;

  logic clk = 0, reset = 1;
  always #5 clk = ~clk;
  link_sif_s li, lo;
  return_packet_s rp;
  assign rp = return_packet_s'(lo.rev.data);
  int checks = 0, failures = 0;
  logic [DW-1:0] model [ELS];
  bit written [ELS];

  mesh_slave_example #(.x_cord_width_p(XW), .y_cord_width_p(YW), .data_width_p(DW), .addr_width_p(AW), .els_p(ELS)) dut (
    .clk_i(clk), .reset_i(reset), .link_sif_i(li), .link_sif_o(lo), .my_x_i(XW'(2)), .my_y_i(YW'(3)));

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic send(input packet_op_e op, input int addr, input logic [DW-1:0] data, input logic [3:0] mask,
                      output int lat, output return_packet_s r);
    packet_s p = '0;
    p.op = op; p.addr = AW'(addr); p.data = data; p.op_ex = mask;
    p.src_x_cord = 1; p.src_y_cord = 0; p.x_cord = 2; p.y_cord = 3;
    @(negedge clk);
    li.fwd.v = 1; li.fwd.data = p;
    @(posedge clk); #1 li.fwd.v = 0;
    lat = 1;
    while (!lo.rev.v && lat < 20) begin @(posedge clk); #1; lat++; end
    r = rp;
    check(lo.rev.v && r.x_cord == 1 && r.y_cord == 0, "response addressed to the source");
    @(posedge clk);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lat; return_packet_s r;
    li = '0; li.fwd.ready_and_rev = 1; li.rev.ready_and_rev = 1;
    repeat (3) @(posedge clk);
    reset = 0;
    // full-word stores first so every word is defined
    for (int a = 0; a < ELS; a++) begin
      model[a] = $urandom;
      send(e_remote_store, a, model[a], 4'hf, lat, r);
      check(r.pkt_type == e_return_credit, "store answered with a credit");
    end
    for (int i = 0; i < 200; i++) begin
      int a = $urandom % ELS;
      if ($urandom % 2) begin
        logic [DW-1:0] d = $urandom; logic [3:0] m = 4'($urandom);
        send(e_remote_store, a, d, m, lat, r);
        for (int b = 0; b < 4; b++) if (m[b]) model[a][8*b+:8] = d[8*b+:8];
        check(r.pkt_type == e_return_credit, "masked store credited");
      end else begin
        send(e_remote_load, a, 0, 4'hf, lat, r);
        check(r.pkt_type == e_return_data && r.data == model[a], $sformatf("load %0d data", a));
        check(lat == 2, $sformatf("load answered after 2 cycles (got %0d)", lat));
      end
    end
    send(e_remote_swap_rl, 7, 32'hdeadbeef, 4'h0, lat, r);
    check(r.pkt_type == e_return_data && r.data == model[7], "swap returns old word");
    model[7] = 32'hdeadbeef;
    send(e_remote_load, 7, 0, 4'hf, lat, r);
    check(r.data == 32'hdeadbeef, "swap stored new word");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
