// mesh_slave_example: a word-addressed memory attached to the network as a
// slave through a standard endpoint.
//
// It can always serve a request, so it consumes every offered request in the
// cycle it appears (yumi = valid). A store writes the bytes selected by the
// mask; a load reads the word and returns it one cycle later (the read data
// and its valid are registered). The endpoint turns the swap operation into a
// load followed by a full-word store, both served here. The low
// $clog2(els_p) bits of the word address select the word. The master side of
// the endpoint is unused and tied off.
`include "bsg_manycore_packet.svh"
module mesh_slave_example #(
  parameter int unsigned x_cord_width_p    = 4,
  parameter int unsigned y_cord_width_p    = 5,
  parameter int unsigned data_width_p      = 32,
  parameter int unsigned addr_width_p      = 20,
  parameter int unsigned fifo_els_p        = 4,
  parameter int unsigned max_out_credits_p = 80,
  parameter int unsigned els_p             = 1024,
  localparam int unsigned link_w = `bsg_manycore_link_sif_width(addr_width_p, data_width_p, x_cord_width_p, y_cord_width_p),
  localparam int unsigned fwd_w  = `bsg_manycore_packet_width(addr_width_p, data_width_p, x_cord_width_p, y_cord_width_p),
  localparam int unsigned mask_w = data_width_p >> 3,
  localparam int unsigned idx_w  = (els_p > 1) ? $clog2(els_p) : 1
) (
  input  logic                      clk_i,
  input  logic                      reset_i,
  input  logic [link_w-1:0]         link_sif_i,
  output logic [link_w-1:0]         link_sif_o,
  input  logic [x_cord_width_p-1:0] my_x_i,
  input  logic [y_cord_width_p-1:0] my_y_i
);
  logic                    in_v_lo, in_yumi_li, in_we_lo;
  logic [data_width_p-1:0] in_data_lo;
  logic [mask_w-1:0]       in_mask_lo;
  logic [addr_width_p-1:0] in_addr_lo;
  logic                    returning_v_r;
  logic [data_width_p-1:0] returning_data_r;

  bsg_manycore_endpoint_standard #(
    .x_cord_width_p(x_cord_width_p), .y_cord_width_p(y_cord_width_p), .fifo_els_p(fifo_els_p),
    .data_width_p(data_width_p), .addr_width_p(addr_width_p), .max_out_credits_p(max_out_credits_p)
  ) endpoint (
    .clk_i, .reset_i, .link_sif_i, .link_sif_o,
    .in_v_o(in_v_lo), .in_yumi_i(in_yumi_li), .in_data_o(in_data_lo), .in_mask_o(in_mask_lo),
    .in_addr_o(in_addr_lo), .in_we_o(in_we_lo),
    .returning_v_i(returning_v_r), .returning_data_i(returning_data_r),
    .out_v_i(1'b0), .out_packet_i({fwd_w{1'b0}}), .out_ready_o(),
    .returned_data_r_o(), .returned_v_r_o(), .out_credits_o(),
    .my_x_i, .my_y_i, .freeze_r_o(), .reverse_arb_pr_o()
  );

  // The memory can always handle the request.
  assign in_yumi_li = in_v_lo;

  logic [mask_w-1:0][7:0] mem_r [els_p];
  wire  [idx_w-1:0]       idx = in_addr_lo[idx_w-1:0];

  always_ff @(posedge clk_i) begin
    if (in_yumi_li && in_we_lo) begin
      for (int b = 0; b < int'(mask_w); b++)
        if (in_mask_lo[b]) mem_r[idx][b] <= in_data_lo[8*b+:8];
    end
    returning_data_r <= mem_r[idx];
  end

  // Returning data is valid one cycle after a read request was taken.
  always_ff @(posedge clk_i) begin
    if (reset_i) returning_v_r <= 1'b0;
    else         returning_v_r <= in_yumi_li & ~in_we_lo;
  end
endmodule
