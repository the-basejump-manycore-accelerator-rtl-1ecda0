// bsg_mesh_router: five-port buffered router of the mesh (P, W, E, N, S).
//
// Every enabled input has a small FIFO (2 entries by default); there are no
// output buffers, so a packet at the head of an input FIFO crosses the switch
// and leaves on the output link in the same cycle it is granted. Each output
// has its own round-robin arbiter over the inputs that want it.
//
// Routing is dimension ordered: X first, then Y. X grows eastward and Y grows
// southward. A packet whose x differs from the router's goes W or E; once x
// matches it goes N or S; when both match it is delivered to P. The switch
// omits the N->W and N->E turns (never needed by X-then-Y routing when nothing
// is attached on the north edge) and U-turns, but keeps S->W and S->E so that
// I/O attached under the south edge can answer. A packet asking for an
// omitted turn trips an assertion.
//
// stub_p (bit 0 = W, 1 = E, 2 = N, 3 = S) removes a side: no FIFO is built, the
// side never drives valid and it accepts and drops whatever arrives.
//
// Packets are opaque width_p-bit words whose least significant bits hold the
// destination x coordinate, followed by the destination y coordinate.
// Timing: one cycle per router (the input FIFO), plus arbitration waits.
module bsg_mesh_router
  import bsg_noc_pkg::*;
#(
  parameter int unsigned width_p        = 16,
  parameter int unsigned x_cord_width_p = 4,
  parameter int unsigned y_cord_width_p = 5,
  parameter int unsigned fifo_els_p     = 2,
  parameter logic [3:0]  stub_p         = 4'b0000
) (
  input  logic                      clk_i,
  input  logic                      reset_i,
  input  logic [x_cord_width_p-1:0] my_x_i,
  input  logic [y_cord_width_p-1:0] my_y_i,

  input  logic [dirs_gp-1:0]               v_i,
  input  logic [dirs_gp-1:0][width_p-1:0]  data_i,
  output logic [dirs_gp-1:0]               ready_o,

  output logic [dirs_gp-1:0]               v_o,
  output logic [dirs_gp-1:0][width_p-1:0]  data_o,
  input  logic [dirs_gp-1:0]               ready_i
);
  // allowed[in][out]: the turns the switch implements.
  function automatic logic allowed(input int unsigned in_d, input int unsigned out_d);
    if (in_d == out_d && in_d != int'(P)) return 1'b0;                 // no U-turns
    if (in_d == int'(N) && (out_d == int'(W) || out_d == int'(E))) return 1'b0;
    if ((in_d == int'(W) && out_d == int'(W)) || (in_d == int'(E) && out_d == int'(E))) return 1'b0;
    return 1'b1;
  endfunction

  logic [dirs_gp-1:0]              fifo_v, fifo_yumi;
  logic [dirs_gp-1:0][width_p-1:0] fifo_data;

  for (genvar d = 0; d < dirs_gp; d++) begin : g_in
    if (d != 0 && stub_p[d-1]) begin : g_stub
      assign fifo_v[d]    = 1'b0;
      assign fifo_data[d] = '0;
      assign ready_o[d]   = 1'b1;
    end else begin : g_fifo
      bsg_fifo_1r1w_small #(.width_p(width_p), .els_p(fifo_els_p)) fifo (
        .clk_i, .reset_i,
        .v_i(v_i[d]), .ready_o(ready_o[d]), .data_i(data_i[d]),
        .v_o(fifo_v[d]), .data_o(fifo_data[d]), .yumi_i(fifo_yumi[d])
      );
    end
  end

  // Dimension-ordered route decode of each input's head packet.
  logic [dirs_gp-1:0][dirs_gp-1:0] want;   // want[in][out]
  for (genvar d = 0; d < dirs_gp; d++) begin : g_dec
    wire [x_cord_width_p-1:0] dx = fifo_data[d][x_cord_width_p-1:0];
    wire [y_cord_width_p-1:0] dy = fifo_data[d][x_cord_width_p+:y_cord_width_p];
    always_comb begin
      want[d] = '0;
      if      (dx < my_x_i) want[d][W] = 1'b1;
      else if (dx > my_x_i) want[d][E] = 1'b1;
      else if (dy < my_y_i) want[d][N] = 1'b1;
      else if (dy > my_y_i) want[d][S] = 1'b1;
      else                  want[d][P] = 1'b1;
    end
    a_turn_exists: assert property (@(posedge clk_i) disable iff (reset_i)
      fifo_v[d] |-> ((want[d] & {allowed(d, 4), allowed(d, 3), allowed(d, 2), allowed(d, 1), allowed(d, 0)}) != '0))
      else $error("router (%0d,%0d): input %0d asks for a turn the switch omits", my_x_i, my_y_i, d);
  end

  // One round-robin arbiter per output.
  logic [dirs_gp-1:0][dirs_gp-1:0] grant;  // grant[out][in]
  for (genvar o = 0; o < dirs_gp; o++) begin : g_out
    logic [dirs_gp-1:0] reqs;
    for (genvar i = 0; i < dirs_gp; i++) begin : g_req
      if (allowed(i, o)) begin : g_a
        assign reqs[i] = fifo_v[i] & want[i][o];
      end else begin : g_na
        assign reqs[i] = 1'b0;
      end
    end
    bsg_round_robin_arb #(.inputs_p(dirs_gp)) arb (
      .clk_i, .reset_i, .reqs_i(reqs), .grants_o(grant[o]), .v_o(v_o[o]),
      .yumi_i(v_o[o] & ready_i[o])
    );
    always_comb begin
      data_o[o] = '0;
      for (int i = 0; i < dirs_gp; i++) if (grant[o][i]) data_o[o] = fifo_data[i];
    end
  end

  always_comb begin
    fifo_yumi = '0;
    for (int o = 0; o < dirs_gp; o++)
      for (int i = 0; i < dirs_gp; i++)
        if (grant[o][i] && ready_i[o]) fifo_yumi[i] = 1'b1;
  end
endmodule
