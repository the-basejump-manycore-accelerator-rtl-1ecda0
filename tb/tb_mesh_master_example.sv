// Self-checking test of mesh_master_example. The testbench plays the network
// and a remote memory whose answers are on the link D + 1 = 6 cycles after
// the cycle a request leaves the master. It checks that the master stays idle while frozen,
// starts when a configuration store unfreezes it, writes word i = i to
// addresses 0..num_words_p-1 of the given destination, reads them back,
// reports no errors, reports a first-load latency of D + 2 (one extra cycle in
// its endpoint's response FIFO), and finishes with all credits back. A second
// run with one corrupted answer must report exactly one error.
`include "bsg_manycore_packet.svh"
module tb_mesh_master_example;
  import bsg_manycore_pkg::*;
  localparam int XW = 4, YW = 5, DW = 32, AW = 20, NW = 16, D = 5;
  typedef `bsg_manycore_link_sif_s(AW, DW, XW, YW) link_sif_s;
  typedef `bsg_manycore_packet_s(AW, DW, XW, YW) packet_s;
  typedef `bsg_manycore_return_packet_s(DW, XW, YW) return_packet_s;

  logic clk = 0, reset = 1;
  always #5 clk = ~clk;
  link_sif_s li, lo;
  packet_s fp;
  assign fp = packet_s'(lo.fwd.data);
  logic done; logic [15:0] errors, latency;
  int checks = 0, failures = 0, cyc = 0, corrupt = -1;
  logic [DW-1:0] mem [1024];
  return_packet_s pend[$]; int pend_t[$];
  int stores = 0, loads = 0;

  mesh_master_example #(.x_cord_width_p(XW), .y_cord_width_p(YW), .data_width_p(DW), .addr_width_p(AW), .num_words_p(NW)) dut (
    .clk_i(clk), .reset_i(reset), .link_sif_i(li), .link_sif_o(lo), .my_x_i(XW'(0)), .my_y_i(YW'(4)),
    .dest_x_i(XW'(1)), .dest_y_i(YW'(4)), .done_o(done), .errors_o(errors), .latency_o(latency));

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // Network + memory model.
  always @(posedge clk) begin
    cyc++;
    if (!reset && lo.fwd.v && li.fwd.ready_and_rev) begin
      return_packet_s r = '0;
      r.x_cord = fp.src_x_cord; r.y_cord = fp.src_y_cord;
      check(fp.x_cord == 1 && fp.y_cord == 4, "request goes to the destination");
      if (fp.op == e_remote_store) begin
        check(fp.data == DW'(fp.addr), "word i holds i");
        mem[fp.addr[9:0]] = fp.data; r.pkt_type = e_return_credit; stores++;
      end else begin
        r.pkt_type = e_return_data; r.data = mem[fp.addr[9:0]];
        if (loads == corrupt) r.data = ~r.data;
        loads++;
      end
      pend.push_back(r); pend_t.push_back(cyc + D);
    end
  end
  always @(negedge clk) begin
    li.rev.v = 0;
    if (pend.size() > 0 && pend_t[0] <= cyc) begin
      li.rev.v = 1; li.rev.data = pend.pop_front(); void'(pend_t.pop_front());
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int corrupt_idx);
    packet_s p = '0;
    corrupt = corrupt_idx; stores = 0; loads = 0;
    reset = 1;
    repeat (3) @(posedge clk);
    reset = 0;
    repeat (20) @(posedge clk);
    #1 check(!lo.fwd.v && !done, "frozen master sends nothing");
    // unfreeze: store 0 to configuration address 0
    p.op = e_remote_store; p.addr = {1'b1, 19'd0}; p.x_cord = 0; p.y_cord = 4;
    @(negedge clk); li.fwd.v = 1; li.fwd.data = p;
    @(posedge clk); #1 li.fwd.v = 0;
    for (int i = 0; i < 500 && !done; i++) @(posedge clk);
    #1;
    check(done, "master finished");
    check(stores == NW && loads == NW, "num_words_p stores and loads");
  endtask

  initial begin
    li = '0; li.fwd.ready_and_rev = 1; li.rev.ready_and_rev = 1;
    run(-1);
    check(errors == 0, "no mismatches");
    check(latency == 16'(D + 2), $sformatf("first load latency %0d", latency));
    check(dut.credits_lo == 80, "all credits back at done");
    run(3);
    check(errors == 1, "one corrupted answer is detected");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
