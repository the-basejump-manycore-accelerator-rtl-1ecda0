// bsg_manycore_endpoint_standard: the endpoint a tile normally uses. It wraps
// the barebones endpoint and enforces the network's rules so that the
// attached core sees a plain master/slave interface.
//
// Slave side (requests arriving from the network):
//   in_v_o / in_yumi_i with in_addr_o (word address), in_data_o, in_mask_o
//   (one bit per byte) and in_we_o. A request is offered only while a
//   response slot is reserved for it, so the response can always be taken.
//   The core answers a load with returning_v_i / returning_data_i at least
//   one cycle after yumi-ing it; stores need no answer from the core.
//   Responses leave in request order: a store is acknowledged with a credit
//   packet once the core has yumi-ed it (committed), a load with a data
//   packet. Load data that cannot leave at once waits in a small FIFO; when
//   nothing waits it is passed through in the cycle it arrives.
//   Atomic swap (either swap op code) is presented to the core as a load of
//   the old value followed, in the next offer, by a full-word store of the new
//   value; no other request is offered in between, so the pair is atomic for
//   any core that commits in order. The old value is returned.
// Configuration space (word address MSB = 1) is served here, not by the core:
//   config address 0: freeze register (write 0 = unfreeze, 1 = freeze),
//   config address 4: every write toggles reverse_arb_pr_o.
//   Loads there return the register's value.
// Master side (requests leaving):
//   out_v_i / out_packet_i / out_ready_o, valid/ready. A credit counter starts
//   at max_out_credits_p, is taken by each request and given back by each
//   response; with no credit left out_ready_o stays low. out_credits_o ==
//   max_out_credits_p means every request has completed (fence).
//   Load data returns on returned_v_r_o / returned_data_r_o with no handshake.
// Timing: a request spends one cycle in the input FIFO before in_v_o; a
// response enters the network in the cycle the core returns it.
`include "bsg_manycore_packet.svh"
module bsg_manycore_endpoint_standard
  import bsg_manycore_pkg::*;
#(
  parameter int unsigned x_cord_width_p        = 4,
  parameter int unsigned y_cord_width_p        = 5,
  parameter int unsigned fifo_els_p            = 4,
  parameter int unsigned data_width_p          = 32,
  parameter int unsigned addr_width_p          = 20,
  parameter int unsigned max_out_credits_p     = 80,
  parameter bit          warn_out_of_credits_p = 1'b1,
  parameter bit          freeze_init_p         = 1'b1,
  localparam int unsigned link_w   = `bsg_manycore_link_sif_width(addr_width_p, data_width_p, x_cord_width_p, y_cord_width_p),
  localparam int unsigned fwd_w    = `bsg_manycore_packet_width(addr_width_p, data_width_p, x_cord_width_p, y_cord_width_p),
  localparam int unsigned credit_w = $clog2(max_out_credits_p + 1),
  localparam int unsigned mask_w   = data_width_p >> 3
) (
  input  logic                      clk_i,
  input  logic                      reset_i,
  input  logic [link_w-1:0]         link_sif_i,
  output logic [link_w-1:0]         link_sif_o,

  // in_request (valid/yumi)
  output logic                      in_v_o,
  input  logic                      in_yumi_i,
  output logic [data_width_p-1:0]   in_data_o,
  output logic [mask_w-1:0]         in_mask_o,
  output logic [addr_width_p-1:0]   in_addr_o,
  output logic                      in_we_o,

  // in_response (valid only)
  input  logic                      returning_v_i,
  input  logic [data_width_p-1:0]   returning_data_i,

  // out_request (valid/ready)
  input  logic                      out_v_i,
  input  logic [fwd_w-1:0]          out_packet_i,
  output logic                      out_ready_o,

  // out_response (valid only)
  output logic [data_width_p-1:0]   returned_data_r_o,
  output logic                      returned_v_r_o,

  output logic [credit_w-1:0]       out_credits_o,
  input  logic [x_cord_width_p-1:0] my_x_i,
  input  logic [y_cord_width_p-1:0] my_y_i,
  output logic                      freeze_r_o,
  output logic                      reverse_arb_pr_o
);
  typedef `bsg_manycore_packet_s(addr_width_p, data_width_p, x_cord_width_p, y_cord_width_p) packet_s;
  typedef `bsg_manycore_return_packet_s(data_width_p, x_cord_width_p, y_cord_width_p) return_packet_s;

  // A reserved response slot, in request order.
  typedef struct packed {
    logic [y_cord_width_p-1:0] src_y_cord;
    logic [x_cord_width_p-1:0] src_x_cord;
    return_type_e              pkt_type;
    logic                      need_core_data;  // data comes from returning_data_i
    logic [data_width_p-1:0]   data;            // data known at accept time
  } pending_s;

  // ---------------- barebones endpoint ----------------
  logic           fifo_v, fifo_yumi;
  packet_s        pkt;
  logic           ep_out_v, ep_out_ready;
  logic           resp_v, resp_ready;
  return_packet_s resp_pkt;
  logic           ret_v;
  return_packet_s ret_pkt;

  bsg_manycore_endpoint #(
    .x_cord_width_p(x_cord_width_p), .y_cord_width_p(y_cord_width_p),
    .data_width_p(data_width_p), .addr_width_p(addr_width_p), .fifo_els_p(fifo_els_p)
  ) bb (
    .clk_i, .reset_i, .link_sif_i, .link_sif_o,
    .fifo_v_o(fifo_v), .fifo_data_o(pkt), .fifo_yumi_i(fifo_yumi),
    .out_v_i(ep_out_v), .out_packet_i(out_packet_i), .out_ready_o(ep_out_ready),
    .returning_v_i(resp_v), .returning_data_i(resp_pkt), .returning_ready_o(resp_ready),
    .returned_v_o(ret_v), .returned_data_o(ret_pkt)
  );

  // ---------------- incoming requests ----------------
  wire is_cfg  = pkt.addr[addr_width_p-1];
  wire is_swap = (pkt.op == e_remote_swap_aq) || (pkt.op == e_remote_swap_rl);
  wire is_st   = (pkt.op == e_remote_store);
  wire [addr_width_p-2:0] cfg_addr = pkt.addr[addr_width_p-2:0];

  logic     swap_wr_r;       // second (store) half of a swap is being offered
  logic     freeze_r, arb_pr_r;
  logic     pend_ready, pend_v, pend_enq, pend_yumi;
  pending_s pend_in, pend_head;
  logic     cfg_take;

  assign in_v_o    = fifo_v & ~is_cfg & (swap_wr_r | pend_ready);
  assign in_addr_o = pkt.addr;
  assign in_data_o = pkt.data;
  assign in_we_o   = swap_wr_r | is_st;
  assign in_mask_o = is_st ? pkt.op_ex : {mask_w{1'b1}};

  assign cfg_take = fifo_v & is_cfg & pend_ready;

  wire core_take = in_yumi_i & in_v_o;
  assign fifo_yumi = cfg_take | (core_take & (swap_wr_r | ~is_swap));

  logic [data_width_p-1:0] cfg_rdata;
  always_comb begin
    cfg_rdata = '0;
    if (cfg_addr == (addr_width_p-1)'(cfg_freeze_addr_gp))      cfg_rdata[0] = freeze_r;
    else if (cfg_addr == (addr_width_p-1)'(cfg_arb_pr_addr_gp)) cfg_rdata[0] = arb_pr_r;
  end

  always_comb begin
    pend_in.src_y_cord     = pkt.src_y_cord;
    pend_in.src_x_cord     = pkt.src_x_cord;
    pend_in.pkt_type       = is_st ? e_return_credit : e_return_data;
    pend_in.need_core_data = ~is_cfg & ~is_st;
    pend_in.data           = is_cfg ? cfg_rdata : '0;
  end
  assign pend_enq = cfg_take | (core_take & ~swap_wr_r);

  always_ff @(posedge clk_i) begin
    if (reset_i) begin
      swap_wr_r <= 1'b0;
      freeze_r  <= freeze_init_p;
      arb_pr_r  <= 1'b0;
    end else begin
      if (core_take) swap_wr_r <= ~swap_wr_r & is_swap;
      if (cfg_take && pkt.op != e_remote_load) begin
        if (cfg_addr == (addr_width_p-1)'(cfg_freeze_addr_gp))      freeze_r <= pkt.data[0];
        else if (cfg_addr == (addr_width_p-1)'(cfg_arb_pr_addr_gp)) arb_pr_r <= ~arb_pr_r;
      end
    end
  end
  assign freeze_r_o       = freeze_r;
  assign reverse_arb_pr_o = arb_pr_r;

  bsg_fifo_1r1w_small #(.width_p($bits(pending_s)), .els_p(fifo_els_p)) pend_fifo (
    .clk_i, .reset_i,
    .v_i(pend_enq), .ready_o(pend_ready), .data_i(pend_in),
    .v_o(pend_v), .data_o(pend_head), .yumi_i(pend_yumi)
  );

  // ---------------- responses ----------------
  logic                    dfifo_v, dfifo_ready, dfifo_enq, dfifo_yumi;
  logic [data_width_p-1:0] dfifo_data;

  wire head_has_data = ~pend_head.need_core_data | dfifo_v | returning_v_i;
  assign resp_v = pend_v & head_has_data;
  always_comb begin
    resp_pkt.pkt_type = pend_head.pkt_type;
    resp_pkt.y_cord   = pend_head.src_y_cord;
    resp_pkt.x_cord   = pend_head.src_x_cord;
    if (!pend_head.need_core_data) resp_pkt.data = pend_head.data;
    else if (dfifo_v)              resp_pkt.data = dfifo_data;
    else                           resp_pkt.data = returning_data_i;
  end
  wire resp_fire = resp_v & resp_ready;
  assign pend_yumi  = resp_fire;
  assign dfifo_yumi = resp_fire & pend_head.need_core_data & dfifo_v;
  // Core data is buffered unless it leaves in the very cycle it arrives.
  assign dfifo_enq  = returning_v_i & ~(resp_fire & pend_head.need_core_data & ~dfifo_v);

  bsg_fifo_1r1w_small #(.width_p(data_width_p), .els_p(fifo_els_p)) data_fifo (
    .clk_i, .reset_i,
    .v_i(dfifo_enq), .ready_o(dfifo_ready), .data_i(returning_data_i),
    .v_o(dfifo_v), .data_o(dfifo_data), .yumi_i(dfifo_yumi)
  );

  a_returning_has_room: assert property (@(posedge clk_i) disable iff (reset_i)
    dfifo_enq |-> dfifo_ready);
  a_returning_expected: assert property (@(posedge clk_i) disable iff (reset_i)
    returning_v_i |-> pend_v);

  // ---------------- outgoing requests and credits ----------------
  logic [credit_w-1:0] credits;
  wire have_credit = (credits != '0);
  assign ep_out_v    = out_v_i & have_credit;
  assign out_ready_o = ep_out_ready & have_credit;

  bsg_manycore_credit_counter #(.max_out_credits_p(max_out_credits_p)) credit_cnt (
    .clk_i, .reset_i,
    .down_i(out_v_i & out_ready_o), .up_i(ret_v), .credits_o(credits)
  );
  assign out_credits_o = credits;

  assign returned_v_r_o    = ret_v & (ret_pkt.pkt_type == e_return_data);
  assign returned_data_r_o = ret_pkt.data;

  // Simulation-only notice when a request waits for lack of credit.
  logic warned_r;
  always_ff @(posedge clk_i) begin
    if (reset_i) warned_r <= 1'b0;
    else begin
      warned_r <= out_v_i & ~have_credit;
      if (warn_out_of_credits_p && out_v_i && !have_credit && !warned_r)
        $display("%m: out of credits at (%0d,%0d)", my_x_i, my_y_i);
    end
  end
endmodule
