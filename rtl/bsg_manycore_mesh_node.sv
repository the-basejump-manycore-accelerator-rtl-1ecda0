// bsg_manycore_mesh_node: the network part of one tile. It holds two
// independent routers: the forward router carries request packets (loads,
// stores, swaps) and the reverse router carries response packets (store
// credits and load data) back to the requester. Keeping the responses on a
// separate network that always drains is what makes the mesh deadlock free.
//
// Each side (W, E, N, S) and the processor port (P) is one link bundle per
// direction: link_o carries this node's outgoing forward and reverse traffic
// and the ready for the neighbour's incoming traffic. stub_p removes the
// buffers of unused sides (bit 0 = W ... bit 3 = S). Latency: one cycle per
// router on each network.
`include "bsg_manycore_packet.svh"
module bsg_manycore_mesh_node
  import bsg_noc_pkg::*;
#(
  parameter int unsigned x_cord_width_p = 4,
  parameter int unsigned y_cord_width_p = 5,
  parameter int unsigned data_width_p   = 32,
  parameter int unsigned addr_width_p   = 20,
  parameter int unsigned fifo_els_p     = 2,
  parameter logic [3:0]  stub_p         = 4'b0000,
  localparam int unsigned link_w = `bsg_manycore_link_sif_width(addr_width_p, data_width_p, x_cord_width_p, y_cord_width_p)
) (
  input  logic                      clk_i,
  input  logic                      reset_i,
  input  logic [x_cord_width_p-1:0] my_x_i,
  input  logic [y_cord_width_p-1:0] my_y_i,
  input  logic [3:0][link_w-1:0]    links_sif_i,    // W, E, N, S
  output logic [3:0][link_w-1:0]    links_sif_o,
  input  logic [link_w-1:0]         proc_link_sif_i,
  output logic [link_w-1:0]         proc_link_sif_o
);
  typedef `bsg_manycore_link_sif_s(addr_width_p, data_width_p, x_cord_width_p, y_cord_width_p) link_sif_s;
  localparam int unsigned fwd_w = `bsg_manycore_packet_width(addr_width_p, data_width_p, x_cord_width_p, y_cord_width_p);
  localparam int unsigned rev_w = `bsg_manycore_return_packet_width(data_width_p, x_cord_width_p, y_cord_width_p);

  link_sif_s [dirs_gp-1:0] li, lo;
  assign li[0] = link_sif_s'(proc_link_sif_i);
  assign proc_link_sif_o = lo[0];
  for (genvar d = 1; d < dirs_gp; d++) begin : g_side
    assign li[d] = link_sif_s'(links_sif_i[d-1]);
    assign links_sif_o[d-1] = lo[d];
  end

  logic [dirs_gp-1:0]            f_v_i, f_rdy_o, f_v_o, f_rdy_i, r_v_i, r_rdy_o, r_v_o, r_rdy_i;
  logic [dirs_gp-1:0][fwd_w-1:0] f_d_i, f_d_o;
  logic [dirs_gp-1:0][rev_w-1:0] r_d_i, r_d_o;

  for (genvar d = 0; d < dirs_gp; d++) begin : g_map
    assign f_v_i[d]   = li[d].fwd.v;
    assign f_d_i[d]   = li[d].fwd.data;
    assign f_rdy_i[d] = li[d].fwd.ready_and_rev;
    assign r_v_i[d]   = li[d].rev.v;
    assign r_d_i[d]   = li[d].rev.data;
    assign r_rdy_i[d] = li[d].rev.ready_and_rev;
    assign lo[d].fwd.v             = f_v_o[d];
    assign lo[d].fwd.data          = f_d_o[d];
    assign lo[d].fwd.ready_and_rev = f_rdy_o[d];
    assign lo[d].rev.v             = r_v_o[d];
    assign lo[d].rev.data          = r_d_o[d];
    assign lo[d].rev.ready_and_rev = r_rdy_o[d];
  end

  bsg_mesh_router #(.width_p(fwd_w), .x_cord_width_p(x_cord_width_p), .y_cord_width_p(y_cord_width_p),
                    .fifo_els_p(fifo_els_p), .stub_p(stub_p)) fwd_router (
    .clk_i, .reset_i, .my_x_i, .my_y_i,
    .v_i(f_v_i), .data_i(f_d_i), .ready_o(f_rdy_o),
    .v_o(f_v_o), .data_o(f_d_o), .ready_i(f_rdy_i)
  );

  bsg_mesh_router #(.width_p(rev_w), .x_cord_width_p(x_cord_width_p), .y_cord_width_p(y_cord_width_p),
                    .fifo_els_p(fifo_els_p), .stub_p(stub_p)) rev_router (
    .clk_i, .reset_i, .my_x_i, .my_y_i,
    .v_i(r_v_i), .data_i(r_d_i), .ready_o(r_rdy_o),
    .v_o(r_v_o), .data_o(r_d_o), .ready_i(r_rdy_i)
  );
endmodule
