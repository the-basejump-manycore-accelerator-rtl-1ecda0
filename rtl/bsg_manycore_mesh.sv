// bsg_manycore_mesh: the accelerator network as a whole.
//
// num_tiles_x_p x num_tiles_y_p tiles (default 16 x 16) sit at coordinates
// (x, y), x growing eastward from 0 and y growing southward from 0. Each tile
// is a mesh node (forward and reverse routers) plus a standard endpoint; the
// endpoint's core-side handshakes of every tile are ports of this module,
// indexed [y][x], so cores or accelerators are attached outside.
// The west, east and north edges are stubbed (no buffers) and tied off.
// I/O is allowed only under the south edge: row y = num_tiles_y_p holds one
// I/O node per column, wired straight to the S side of the bottom-row router
// above it. Column 0 holds a master example (writes then reads back a memory
// region chosen by master_dest_x_i / master_dest_y_i once it is unfrozen),
// the other columns hold memory slave examples. Responses from the I/O row
// turn S->W / S->E in the bottom routers, the one turn the routers keep for it.
// Coordinate widths follow from the mesh size: x needs $clog2(num_tiles_x_p)
// bits and y $clog2(num_tiles_y_p + 1) so that the I/O row can be addressed.
`include "bsg_manycore_packet.svh"
module bsg_manycore_mesh #(
  parameter int unsigned num_tiles_x_p     = 16,
  parameter int unsigned num_tiles_y_p     = 16,
  parameter int unsigned data_width_p      = 32,
  parameter int unsigned addr_width_p      = 20,
  parameter int unsigned router_fifo_els_p = 2,
  parameter int unsigned fifo_els_p        = 4,
  parameter int unsigned max_out_credits_p = 80,
  parameter int unsigned io_mem_els_p      = 1024,
  parameter int unsigned master_words_p    = 16,
  localparam int unsigned x_cord_width_lp = (num_tiles_x_p > 1) ? $clog2(num_tiles_x_p) : 1,
  localparam int unsigned y_cord_width_lp = $clog2(num_tiles_y_p + 1),
  localparam int unsigned link_w   = `bsg_manycore_link_sif_width(addr_width_p, data_width_p, x_cord_width_lp, y_cord_width_lp),
  localparam int unsigned fwd_w    = `bsg_manycore_packet_width(addr_width_p, data_width_p, x_cord_width_lp, y_cord_width_lp),
  localparam int unsigned credit_w = $clog2(max_out_credits_p + 1),
  localparam int unsigned mask_w   = data_width_p >> 3
) (
  input  logic clk_i,
  input  logic reset_i,

  // Core-side ports of every tile, [y][x]
  output logic [num_tiles_y_p-1:0][num_tiles_x_p-1:0]                   in_v_o,
  input  logic [num_tiles_y_p-1:0][num_tiles_x_p-1:0]                   in_yumi_i,
  output logic [num_tiles_y_p-1:0][num_tiles_x_p-1:0][data_width_p-1:0] in_data_o,
  output logic [num_tiles_y_p-1:0][num_tiles_x_p-1:0][mask_w-1:0]       in_mask_o,
  output logic [num_tiles_y_p-1:0][num_tiles_x_p-1:0][addr_width_p-1:0] in_addr_o,
  output logic [num_tiles_y_p-1:0][num_tiles_x_p-1:0]                   in_we_o,
  input  logic [num_tiles_y_p-1:0][num_tiles_x_p-1:0]                   returning_v_i,
  input  logic [num_tiles_y_p-1:0][num_tiles_x_p-1:0][data_width_p-1:0] returning_data_i,
  input  logic [num_tiles_y_p-1:0][num_tiles_x_p-1:0]                   out_v_i,
  input  logic [num_tiles_y_p-1:0][num_tiles_x_p-1:0][fwd_w-1:0]        out_packet_i,
  output logic [num_tiles_y_p-1:0][num_tiles_x_p-1:0]                   out_ready_o,
  output logic [num_tiles_y_p-1:0][num_tiles_x_p-1:0][data_width_p-1:0] returned_data_r_o,
  output logic [num_tiles_y_p-1:0][num_tiles_x_p-1:0]                   returned_v_r_o,
  output logic [num_tiles_y_p-1:0][num_tiles_x_p-1:0][credit_w-1:0]     out_credits_o,
  output logic [num_tiles_y_p-1:0][num_tiles_x_p-1:0]                   freeze_r_o,
  output logic [num_tiles_y_p-1:0][num_tiles_x_p-1:0]                   reverse_arb_pr_o,

  // Master example in the south I/O row, column 0
  input  logic [x_cord_width_lp-1:0] master_dest_x_i,
  input  logic [y_cord_width_lp-1:0] master_dest_y_i,
  output logic                       master_done_o,
  output logic [15:0]                master_errors_o,
  output logic [15:0]                master_latency_o
);
  typedef `bsg_manycore_link_sif_s(addr_width_p, data_width_p, x_cord_width_lp, y_cord_width_lp) link_sif_s;

  // Unconnected edge: never valid, always ready (anything arriving is dropped).
  link_sif_s tieoff;
  always_comb begin
    tieoff = '0;
    tieoff.fwd.ready_and_rev = 1'b1;
    tieoff.rev.ready_and_rev = 1'b1;
  end

  localparam int unsigned LW = 0, LE = 1, LN = 2, LS = 3;

  logic [num_tiles_y_p-1:0][num_tiles_x_p-1:0][3:0][link_w-1:0] lo;   // links out of each tile
  logic [num_tiles_y_p-1:0][num_tiles_x_p-1:0][3:0][link_w-1:0] li;   // links into each tile
  logic [num_tiles_x_p-1:0][link_w-1:0] io_lo;                        // links out of the I/O row

  for (genvar y = 0; y < num_tiles_y_p; y++) begin : g_y
    for (genvar x = 0; x < num_tiles_x_p; x++) begin : g_x
      assign li[y][x][LW] = (x > 0)                 ? lo[y][x-1][LE] : tieoff;
      assign li[y][x][LE] = (x < num_tiles_x_p - 1) ? lo[y][x+1][LW] : tieoff;
      assign li[y][x][LN] = (y > 0)                 ? lo[y-1][x][LS] : tieoff;
      assign li[y][x][LS] = (y < num_tiles_y_p - 1) ? lo[y+1][x][LN] : io_lo[x];

      bsg_manycore_tile #(
        .x_cord_width_p(x_cord_width_lp), .y_cord_width_p(y_cord_width_lp),
        .data_width_p(data_width_p), .addr_width_p(addr_width_p),
        .router_fifo_els_p(router_fifo_els_p), .fifo_els_p(fifo_els_p),
        .max_out_credits_p(max_out_credits_p),
        .stub_p({1'b0, (y == 0), (x == num_tiles_x_p - 1), (x == 0)})
      ) tile (
        .clk_i, .reset_i,
        .my_x_i(x_cord_width_lp'(x)), .my_y_i(y_cord_width_lp'(y)),
        .links_sif_i(li[y][x]), .links_sif_o(lo[y][x]),
        .in_v_o(in_v_o[y][x]), .in_yumi_i(in_yumi_i[y][x]), .in_data_o(in_data_o[y][x]),
        .in_mask_o(in_mask_o[y][x]), .in_addr_o(in_addr_o[y][x]), .in_we_o(in_we_o[y][x]),
        .returning_v_i(returning_v_i[y][x]), .returning_data_i(returning_data_i[y][x]),
        .out_v_i(out_v_i[y][x]), .out_packet_i(out_packet_i[y][x]), .out_ready_o(out_ready_o[y][x]),
        .returned_data_r_o(returned_data_r_o[y][x]), .returned_v_r_o(returned_v_r_o[y][x]),
        .out_credits_o(out_credits_o[y][x]), .freeze_r_o(freeze_r_o[y][x]),
        .reverse_arb_pr_o(reverse_arb_pr_o[y][x])
      );
    end
  end

  // South I/O row.
  for (genvar x = 0; x < num_tiles_x_p; x++) begin : g_io
    if (x == 0) begin : g_master
      mesh_master_example #(
        .x_cord_width_p(x_cord_width_lp), .y_cord_width_p(y_cord_width_lp),
        .data_width_p(data_width_p), .addr_width_p(addr_width_p), .fifo_els_p(fifo_els_p),
        .max_out_credits_p(max_out_credits_p), .num_words_p(master_words_p)
      ) master (
        .clk_i, .reset_i,
        .link_sif_i(lo[num_tiles_y_p-1][x][LS]), .link_sif_o(io_lo[x]),
        .my_x_i(x_cord_width_lp'(x)), .my_y_i(y_cord_width_lp'(num_tiles_y_p)),
        .dest_x_i(master_dest_x_i), .dest_y_i(master_dest_y_i),
        .done_o(master_done_o), .errors_o(master_errors_o), .latency_o(master_latency_o)
      );
    end else begin : g_slave
      mesh_slave_example #(
        .x_cord_width_p(x_cord_width_lp), .y_cord_width_p(y_cord_width_lp),
        .data_width_p(data_width_p), .addr_width_p(addr_width_p), .fifo_els_p(fifo_els_p),
        .max_out_credits_p(max_out_credits_p), .els_p(io_mem_els_p)
      ) slave (
        .clk_i, .reset_i,
        .link_sif_i(lo[num_tiles_y_p-1][x][LS]), .link_sif_o(io_lo[x]),
        .my_x_i(x_cord_width_lp'(x)), .my_y_i(y_cord_width_lp'(num_tiles_y_p))
      );
    end
  end
endmodule
