// bsg_manycore_credit_counter: counts the requests a node may still send.
//
// It starts at max_out_credits_p after reset, goes down by one for every
// request that leaves the node and up by one for every response (store credit
// or load data) that comes back. A node whose count equals max_out_credits_p
// has nothing outstanding: every store it sent has been committed at its
// destination, which is how a store fence / memory barrier is implemented.
// Both events in one cycle leave the count unchanged. Taking a credit at zero
// or returning one past the maximum is a protocol error (assertions).
module bsg_manycore_credit_counter #(
  parameter int unsigned max_out_credits_p = 80,
  localparam int unsigned credit_width_lp = $clog2(max_out_credits_p + 1)
) (
  input  logic                       clk_i,
  input  logic                       reset_i,
  input  logic                       down_i,
  input  logic                       up_i,
  output logic [credit_width_lp-1:0] credits_o
);
  logic [credit_width_lp-1:0] count_r;

  always_ff @(posedge clk_i) begin
    if (reset_i)               count_r <= credit_width_lp'(max_out_credits_p);
    else if (down_i && !up_i)  count_r <= count_r - 1'b1;
    else if (up_i && !down_i)  count_r <= count_r + 1'b1;
  end

  assign credits_o = count_r;

  a_no_underflow: assert property (@(posedge clk_i) disable iff (reset_i)
    (down_i && !up_i) |-> (count_r != '0));
  a_no_overflow: assert property (@(posedge clk_i) disable iff (reset_i)
    (up_i && !down_i) |-> (count_r != credit_width_lp'(max_out_credits_p)));
endmodule
