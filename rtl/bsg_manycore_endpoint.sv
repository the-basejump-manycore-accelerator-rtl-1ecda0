// bsg_manycore_endpoint: the barebones endpoint. It turns the link bundle of a
// router's P port into local handshakes and does nothing else:
//   * incoming requests (forward network) are buffered in a fifo_els_p-entry
//     FIFO and offered with valid/yumi (fifo_v_o / fifo_yumi_i);
//   * outgoing requests go straight onto the link with valid/ready;
//   * outgoing responses go straight onto the link with valid/ready;
//   * incoming responses (reverse network) pass through a fifo_els_p-entry
//     FIFO that is drained every cycle, so they appear with a plain valid
//     (returned_v_o) and must be taken when they appear.
// It does not count credits and does not guarantee that the attached logic
// drains its input; the standard endpoint adds those rules.
// Timing: one cycle through either input FIFO; output paths are combinational.
`include "bsg_manycore_packet.svh"
module bsg_manycore_endpoint #(
  parameter int unsigned x_cord_width_p = 4,
  parameter int unsigned y_cord_width_p = 5,
  parameter int unsigned data_width_p   = 32,
  parameter int unsigned addr_width_p   = 20,
  parameter int unsigned fifo_els_p     = 4,
  localparam int unsigned link_w = `bsg_manycore_link_sif_width(addr_width_p, data_width_p, x_cord_width_p, y_cord_width_p),
  localparam int unsigned fwd_w  = `bsg_manycore_packet_width(addr_width_p, data_width_p, x_cord_width_p, y_cord_width_p),
  localparam int unsigned rev_w  = `bsg_manycore_return_packet_width(data_width_p, x_cord_width_p, y_cord_width_p)
) (
  input  logic              clk_i,
  input  logic              reset_i,
  input  logic [link_w-1:0] link_sif_i,
  output logic [link_w-1:0] link_sif_o,

  // incoming requests
  output logic              fifo_v_o,
  output logic [fwd_w-1:0]  fifo_data_o,
  input  logic              fifo_yumi_i,

  // outgoing requests
  input  logic              out_v_i,
  input  logic [fwd_w-1:0]  out_packet_i,
  output logic              out_ready_o,

  // outgoing responses
  input  logic              returning_v_i,
  input  logic [rev_w-1:0]  returning_data_i,
  output logic              returning_ready_o,

  // incoming responses
  output logic              returned_v_o,
  output logic [rev_w-1:0]  returned_data_o
);
  typedef `bsg_manycore_link_sif_s(addr_width_p, data_width_p, x_cord_width_p, y_cord_width_p) link_sif_s;
  link_sif_s li, lo;
  assign li = link_sif_s'(link_sif_i);
  assign link_sif_o = lo;

  logic req_fifo_ready, ret_fifo_ready;

  bsg_fifo_1r1w_small #(.width_p(fwd_w), .els_p(fifo_els_p)) req_fifo (
    .clk_i, .reset_i,
    .v_i(li.fwd.v), .ready_o(req_fifo_ready), .data_i(li.fwd.data),
    .v_o(fifo_v_o), .data_o(fifo_data_o), .yumi_i(fifo_yumi_i)
  );

  bsg_fifo_1r1w_small #(.width_p(rev_w), .els_p(fifo_els_p)) ret_fifo (
    .clk_i, .reset_i,
    .v_i(li.rev.v), .ready_o(ret_fifo_ready), .data_i(li.rev.data),
    .v_o(returned_v_o), .data_o(returned_data_o), .yumi_i(returned_v_o)
  );

  assign lo.fwd.v             = out_v_i;
  assign lo.fwd.data          = out_packet_i;
  assign lo.fwd.ready_and_rev = req_fifo_ready;
  assign out_ready_o          = li.fwd.ready_and_rev;

  assign lo.rev.v             = returning_v_i;
  assign lo.rev.data          = returning_data_i;
  assign lo.rev.ready_and_rev = ret_fifo_ready;
  assign returning_ready_o    = li.rev.ready_and_rev;
endmodule
