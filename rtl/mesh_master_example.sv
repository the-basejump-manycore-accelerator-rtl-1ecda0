// mesh_master_example: a master that exercises one remote memory region.
//
// After its endpoint is unfrozen (a store of 0 to its configuration address 0
// from anywhere in the mesh), it writes num_words_p words to the destination
// tile given by dest_x_i / dest_y_i, word i holding the value i at word
// address i, then reads the same addresses back and compares each returned
// word with the value written. Stores and loads to one destination are
// ordered by the network, so no fence is needed between the two phases.
// States: eIdle -> eWriting -> eReading -> eWaiting -> eDone.
// A counter starts in the cycle the first load is handed to the endpoint;
// its value when the first load data returns is reported on latency_o (7 in
// an unloaded network with the memory one hop away). done_o rises when every
// load has returned and every credit is back; errors_o counts mismatches.
`include "bsg_manycore_packet.svh"
module mesh_master_example
  import bsg_manycore_pkg::*;
#(
  parameter int unsigned x_cord_width_p    = 4,
  parameter int unsigned y_cord_width_p    = 5,
  parameter int unsigned data_width_p      = 32,
  parameter int unsigned addr_width_p      = 20,
  parameter int unsigned fifo_els_p        = 4,
  parameter int unsigned max_out_credits_p = 80,
  parameter int unsigned num_words_p       = 16,
  localparam int unsigned link_w   = `bsg_manycore_link_sif_width(addr_width_p, data_width_p, x_cord_width_p, y_cord_width_p),
  localparam int unsigned credit_w = $clog2(max_out_credits_p + 1)
) (
  input  logic                      clk_i,
  input  logic                      reset_i,
  input  logic [link_w-1:0]         link_sif_i,
  output logic [link_w-1:0]         link_sif_o,
  input  logic [x_cord_width_p-1:0] my_x_i,
  input  logic [y_cord_width_p-1:0] my_y_i,
  input  logic [x_cord_width_p-1:0] dest_x_i,
  input  logic [y_cord_width_p-1:0] dest_y_i,
  output logic                      done_o,
  output logic [15:0]               errors_o,
  output logic [15:0]               latency_o
);
  typedef `bsg_manycore_packet_s(addr_width_p, data_width_p, x_cord_width_p, y_cord_width_p) packet_s;
  typedef enum logic [2:0] {eIdle, eWriting, eReading, eWaiting, eDone} state_e;

  state_e                  stat_r;
  logic [addr_width_p-1:0] addr_r;
  logic [data_width_p-1:0] data_r;
  logic [data_width_p-1:0] expect_r;
  logic [15:0]             count_r;
  logic                    counting_r, latched_r;

  logic                    out_v_li, out_ready_lo;
  packet_s                 out_packet_li;
  packet_op_e              eOp_n;
  logic [data_width_p-1:0] returned_data_lo;
  logic                    returned_v_lo, freeze_lo;
  logic [credit_w-1:0]     credits_lo;

  bsg_manycore_endpoint_standard #(
    .x_cord_width_p(x_cord_width_p), .y_cord_width_p(y_cord_width_p), .fifo_els_p(fifo_els_p),
    .data_width_p(data_width_p), .addr_width_p(addr_width_p), .max_out_credits_p(max_out_credits_p)
  ) endpoint (
    .clk_i, .reset_i, .link_sif_i, .link_sif_o,
    .in_v_o(), .in_yumi_i(1'b0), .in_data_o(), .in_mask_o(), .in_addr_o(), .in_we_o(),
    .returning_v_i(1'b0), .returning_data_i('0),
    .out_v_i(out_v_li), .out_packet_i(out_packet_li), .out_ready_o(out_ready_lo),
    .returned_data_r_o(returned_data_lo), .returned_v_r_o(returned_v_lo), .out_credits_o(credits_lo),
    .my_x_i, .my_y_i, .freeze_r_o(freeze_lo), .reverse_arb_pr_o()
  );

  assign eOp_n    = (stat_r == eWriting) ? e_remote_store : e_remote_load;
  assign out_v_li = (stat_r == eWriting) || (stat_r == eReading);
  assign out_packet_li = '{
      addr       : addr_r
     ,op         : eOp_n
     ,op_ex      : {(data_width_p>>3){1'b1}}
     ,data       : data_r
     ,src_y_cord : my_y_i
     ,src_x_cord : my_x_i
     ,y_cord     : dest_y_i
     ,x_cord     : dest_x_i
  };

  wire sent  = out_v_li & out_ready_lo;
  wire last  = (addr_r == addr_width_p'(num_words_p - 1));

  always_ff @(posedge clk_i) begin
    if (reset_i) begin
      stat_r     <= eIdle;
      addr_r     <= '0;
      data_r     <= '0;
      expect_r   <= '0;
      errors_o   <= '0;
      count_r    <= '0;
      counting_r <= 1'b0;
      latched_r  <= 1'b0;
      latency_o  <= '0;
    end else begin
      unique case (stat_r)
        eIdle:    if (!freeze_lo) stat_r <= eWriting;
        eWriting: if (sent) begin
                    addr_r <= last ? '0 : addr_r + 1'b1;
                    data_r <= last ? '0 : data_r + 1'b1;
                    if (last) stat_r <= eReading;
                  end
        eReading: if (sent) begin
                    addr_r <= addr_r + 1'b1;
                    if (last) stat_r <= eWaiting;
                  end
        eWaiting: if (expect_r == data_width_p'(num_words_p) &&
                      credits_lo == credit_w'(max_out_credits_p)) stat_r <= eDone;
        eDone:    ;
        default:  stat_r <= eIdle;
      endcase

      // Latency counter: cycle 0 is the cycle the first load is sent.
      if (stat_r == eReading && sent && addr_r == '0) begin
        counting_r <= 1'b1;
        count_r    <= 16'd1;
      end else if (counting_r) begin
        count_r <= count_r + 1'b1;
      end
      if (returned_v_lo) begin
        expect_r <= expect_r + 1'b1;
        if (returned_data_lo != expect_r) errors_o <= errors_o + 1'b1;
        if (!latched_r) begin
          latched_r  <= 1'b1;
          latency_o  <= count_r;
          counting_r <= 1'b0;
        end
      end
    end
  end

  assign done_o = (stat_r == eDone);
endmodule
