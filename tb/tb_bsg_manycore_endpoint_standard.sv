// Self-checking test of bsg_manycore_endpoint_standard. The testbench plays
// the router on the link side and a small memory core on the slave side.
// Checked: a store is offered with its address/data/mask and acknowledged by
// a credit packet to its source; a load's data goes out in the cycle the core
// returns it; responses held by a stalled reverse link keep their order; no
// more requests are offered than there are reserved response slots; a swap is
// offered as load-then-store and returns the old value; configuration writes
// set freeze and toggle the arbiter-priority bit and are never offered to the
// core; the credit counter limits outstanding requests and only data
// responses reach returned_v_r_o.
`include "bsg_manycore_packet.svh"
module tb_bsg_manycore_endpoint_standard;
  import bsg_manycore_pkg::*;
  localparam int XW = 4, YW = 5, DW = 32, AW = 20, ELS = 4, MAXC = 3;
  typedef `bsg_manycore_link_sif_s(AW, DW, XW, YW) link_sif_s;
  typedef `bsg_manycore_packet_s(AW, DW, XW, YW) packet_s;
  typedef `bsg_manycore_return_packet_s(DW, XW, YW) return_packet_s;

  logic clk = 0, reset = 1;
  always #5 clk = ~clk;
  link_sif_s li, lo;
  return_packet_s rp;
  assign rp = return_packet_s'(lo.rev.data);
  logic in_v, in_yumi, in_we, returning_v, out_v, out_ready, returned_v, freeze, arb;
  logic [DW-1:0] in_data, returning_data, returned_data;
  logic [3:0] in_mask;
  logic [AW-1:0] in_addr;
  packet_s out_pkt;
  logic [1:0] credits;
  int checks = 0, failures = 0;

  bsg_manycore_endpoint_standard #(.x_cord_width_p(XW), .y_cord_width_p(YW), .fifo_els_p(ELS),
    .data_width_p(DW), .addr_width_p(AW), .max_out_credits_p(MAXC)) dut (
    .clk_i(clk), .reset_i(reset), .link_sif_i(li), .link_sif_o(lo),
    .in_v_o(in_v), .in_yumi_i(in_yumi), .in_data_o(in_data), .in_mask_o(in_mask), .in_addr_o(in_addr), .in_we_o(in_we),
    .returning_v_i(returning_v), .returning_data_i(returning_data),
    .out_v_i(out_v), .out_packet_i(out_pkt), .out_ready_o(out_ready),
    .returned_data_r_o(returned_data), .returned_v_r_o(returned_v), .out_credits_o(credits),
    .my_x_i(XW'(1)), .my_y_i(YW'(1)), .freeze_r_o(freeze), .reverse_arb_pr_o(arb));

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (t=%0t)", msg, $time); end
  endtask

  // Core: a 16-word memory that takes a request whenever core_en is set.
  logic core_en = 1;
  logic [DW-1:0] mem [16];
  int offered_while_full = 0;
  assign in_yumi = in_v & core_en;
  always_ff @(posedge clk) begin
    if (reset) returning_v <= 0;
    else begin
      returning_v <= in_yumi & ~in_we;
      returning_data <= mem[in_addr[3:0]];
      if (in_yumi && in_we) for (int b = 0; b < 4; b++) if (in_mask[b]) mem[in_addr[3:0]][8*b+:8] <= in_data[8*b+:8];
    end
  end

  task automatic inject(input packet_op_e op, input logic [AW-1:0] addr, input logic [DW-1:0] data, input logic [3:0] mask);
    packet_s p = '0;
    p.op = op; p.addr = addr; p.data = data; p.op_ex = mask;
    p.src_x_cord = 3; p.src_y_cord = 2; p.x_cord = 1; p.y_cord = 1;
    @(negedge clk);
    li.fwd.v = 1; li.fwd.data = p;
    @(posedge clk); #1 li.fwd.v = 0;
  endtask

  // Wait for the next response on the link and check it.
  task automatic expect_resp(input return_type_e t, input logic [DW-1:0] d, input string msg, input int max_wait = 10);
    int n = 0;
    while (!lo.rev.v && n < max_wait) begin @(posedge clk); #1; n++; end
    check(lo.rev.v && rp.pkt_type == t && (t == e_return_credit || rp.data == d)
          && rp.x_cord == 3 && rp.y_cord == 2, msg);
    @(posedge clk); #1;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    li = '0; li.fwd.ready_and_rev = 1; li.rev.ready_and_rev = 1;
    out_v = 0; out_pkt = '0;
    for (int i = 0; i < 16; i++) mem[i] = 32'h1000 + i;
    repeat (3) @(posedge clk);
    reset = 0;
    @(negedge clk);
    check(freeze == 1 && arb == 0 && credits == MAXC, "reset state");

    // 1. masked store, offered the cycle after it arrives, then a credit
    inject(e_remote_store, 20'd5, 32'hAABBCCDD, 4'b0101);
    check(in_v && in_we && in_addr == 5 && in_data == 32'hAABBCCDD && in_mask == 4'b0101, "store offered with its fields");
    @(posedge clk); #1;
    check(lo.rev.v && rp.pkt_type == e_return_credit, "credit sent the cycle after the store is taken");
    expect_resp(e_return_credit, 0, "store credit to source");
    check(mem[5] == 32'h00BB10DD, "masked store wrote only selected bytes");

    // 2. load: data packet in the cycle the core returns it
    inject(e_remote_load, 20'd5, 0, 4'hf);
    check(in_v && !in_we, "load offered");
    @(posedge clk); #1;
    check(returning_v && lo.rev.v && rp.data == 32'h00BB10DD, "load data leaves with returning_v");
    expect_resp(e_return_data, 32'h00BB10DD, "load response");

    // 3. reverse link stalled: six loads, only ELS offered
    @(negedge clk); li.rev.ready_and_rev = 0;
    for (int i = 0; i < 6; i++) inject(e_remote_load, 20'(i), 0, 4'hf);
    repeat (4) @(posedge clk); #1;
    check(!in_v, "no request offered without a free response slot");
    check(dut.pend_fifo.count_r == ELS, "every response slot reserved");
    @(negedge clk); li.rev.ready_and_rev = 1;
    #1;
    for (int i = 0; i < 6; i++) expect_resp(e_return_data, mem[i], $sformatf("stalled load %0d returned in order", i), 20);

    // 4. swap: load of the old value, then store of the new one
    inject(e_remote_swap_aq, 20'd9, 32'h12345678, 4'hf);
    check(in_v && !in_we && in_addr == 9, "swap first offered as a load");
    @(posedge clk); #1;
    check(in_v && in_we && in_addr == 9 && in_data == 32'h12345678 && in_mask == 4'hf, "then as a full-word store");
    expect_resp(e_return_data, 32'h1009, "swap returns old value");
    check(mem[9] == 32'h12345678, "swap wrote new value");

    // 5. configuration space
    inject(e_remote_store, {1'b1, 19'd0}, 32'h0, 4'hf);
    check(!in_v, "config store not offered to the core");
    expect_resp(e_return_credit, 0, "config store credited");
    check(freeze == 0, "freeze register cleared (unfreeze)");
    inject(e_remote_store, {1'b1, 19'd4}, 32'h0, 4'hf);
    expect_resp(e_return_credit, 0, "arb toggle credited");
    check(arb == 1, "arbiter priority toggled");
    inject(e_remote_store, {1'b1, 19'd4}, 32'h0, 4'hf);
    expect_resp(e_return_credit, 0, "arb toggle credited");
    check(arb == 0, "arbiter priority toggled back");
    inject(e_remote_store, {1'b1, 19'd0}, 32'h1, 4'hf);
    expect_resp(e_return_credit, 0, "freeze store credited");
    check(freeze == 1, "frozen again");
    inject(e_remote_load, {1'b1, 19'd0}, 0, 4'hf);
    expect_resp(e_return_data, 32'h1, "config load returns freeze value");

    // 6. master side: credits
    @(negedge clk);
    out_v = 1; out_pkt = '0; out_pkt.op = e_remote_store; out_pkt.x_cord = 4;
    for (int i = 0; i < MAXC; i++) begin
      #1 check(out_ready && lo.fwd.v, $sformatf("request %0d sent with credits", i));
      @(posedge clk); @(negedge clk);
    end
    check(credits == 0 && !out_ready && !lo.fwd.v, "no request leaves without credit");
    li.fwd.ready_and_rev = 1;
    // return a credit then a data response
    li.rev.v = 1; li.rev.data = '0;
    @(posedge clk); #1 li.rev.v = 0;
    check(!returned_v, "credit response is not returned data");
    @(posedge clk); #1;
    check(credits == 1 && out_ready, "credit returned; request may go");
    @(posedge clk); #1 out_v = 0;
    check(credits == 0, "credit taken again");
    begin
      return_packet_s r = '0; r.pkt_type = e_return_data; r.data = 32'hCAFE;
      @(negedge clk); li.rev.v = 1; li.rev.data = r;
      @(posedge clk); #1 li.rev.v = 0;
      check(returned_v && returned_data == 32'hCAFE, "data response on returned_v_r_o one cycle later");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
