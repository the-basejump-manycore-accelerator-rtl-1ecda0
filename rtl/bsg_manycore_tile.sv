// bsg_manycore_tile: one position of the mesh. A mesh node (forward and
// reverse routers) with a standard endpoint on its P port; the endpoint's
// core-side ports are the tile's ports, so any core or accelerator that
// speaks the endpoint handshakes can be attached outside. Its latency is that
// of its parts (one cycle per router, one cycle in the endpoint input FIFO).
`include "bsg_manycore_packet.svh"
module bsg_manycore_tile #(
  parameter int unsigned x_cord_width_p    = 4,
  parameter int unsigned y_cord_width_p    = 5,
  parameter int unsigned data_width_p      = 32,
  parameter int unsigned addr_width_p      = 20,
  parameter int unsigned router_fifo_els_p = 2,
  parameter int unsigned fifo_els_p        = 4,
  parameter int unsigned max_out_credits_p = 80,
  parameter logic [3:0]  stub_p            = 4'b0000,
  localparam int unsigned link_w   = `bsg_manycore_link_sif_width(addr_width_p, data_width_p, x_cord_width_p, y_cord_width_p),
  localparam int unsigned fwd_w    = `bsg_manycore_packet_width(addr_width_p, data_width_p, x_cord_width_p, y_cord_width_p),
  localparam int unsigned credit_w = $clog2(max_out_credits_p + 1),
  localparam int unsigned mask_w   = data_width_p >> 3
) (
  input  logic                      clk_i,
  input  logic                      reset_i,
  input  logic [x_cord_width_p-1:0] my_x_i,
  input  logic [y_cord_width_p-1:0] my_y_i,
  input  logic [3:0][link_w-1:0]    links_sif_i,
  output logic [3:0][link_w-1:0]    links_sif_o,

  output logic                      in_v_o,
  input  logic                      in_yumi_i,
  output logic [data_width_p-1:0]   in_data_o,
  output logic [mask_w-1:0]         in_mask_o,
  output logic [addr_width_p-1:0]   in_addr_o,
  output logic                      in_we_o,
  input  logic                      returning_v_i,
  input  logic [data_width_p-1:0]   returning_data_i,
  input  logic                      out_v_i,
  input  logic [fwd_w-1:0]          out_packet_i,
  output logic                      out_ready_o,
  output logic [data_width_p-1:0]   returned_data_r_o,
  output logic                      returned_v_r_o,
  output logic [credit_w-1:0]       out_credits_o,
  output logic                      freeze_r_o,
  output logic                      reverse_arb_pr_o
);
  logic [link_w-1:0] proc_li, proc_lo;

  bsg_manycore_mesh_node #(
    .x_cord_width_p(x_cord_width_p), .y_cord_width_p(y_cord_width_p), .data_width_p(data_width_p),
    .addr_width_p(addr_width_p), .fifo_els_p(router_fifo_els_p), .stub_p(stub_p)
  ) node (
    .clk_i, .reset_i, .my_x_i, .my_y_i, .links_sif_i, .links_sif_o,
    .proc_link_sif_i(proc_lo), .proc_link_sif_o(proc_li)
  );

  bsg_manycore_endpoint_standard #(
    .x_cord_width_p(x_cord_width_p), .y_cord_width_p(y_cord_width_p), .fifo_els_p(fifo_els_p),
    .data_width_p(data_width_p), .addr_width_p(addr_width_p), .max_out_credits_p(max_out_credits_p)
  ) endpoint (
    .clk_i, .reset_i, .link_sif_i(proc_li), .link_sif_o(proc_lo),
    .in_v_o, .in_yumi_i, .in_data_o, .in_mask_o, .in_addr_o, .in_we_o,
    .returning_v_i, .returning_data_i, .out_v_i, .out_packet_i, .out_ready_o,
    .returned_data_r_o, .returned_v_r_o, .out_credits_o, .my_x_i, .my_y_i,
    .freeze_r_o, .reverse_arb_pr_o
  );
endmodule
