// bsg_round_robin_arb: round-robin arbiter for one router output.
//
// Among the asserted requests it grants the first one found after the input
// granted last (searching upward, wrapping), so with five inputs a waiting
// packet is served after at most four others. The priority pointer moves only
// when the grant is used (yumi_i), so a grant held against a stalled output
// does not rotate away. Grants are combinational from reqs_i.
module bsg_round_robin_arb #(
  parameter int unsigned inputs_p = 5
) (
  input  logic                clk_i,
  input  logic                reset_i,
  input  logic [inputs_p-1:0] reqs_i,
  output logic [inputs_p-1:0] grants_o,
  output logic                v_o,
  input  logic                yumi_i
);
  localparam int unsigned idx_w = (inputs_p > 1) ? $clog2(inputs_p) : 1;

  logic [idx_w-1:0] last_r;
  logic [idx_w-1:0] sel;

  always_comb begin
    grants_o = '0;
    sel      = last_r;
    v_o      = 1'b0;
    for (int unsigned k = 1; k <= inputs_p; k++) begin
      automatic logic [idx_w-1:0] idx = idx_w'((int'(last_r) + k) % inputs_p);
      if (!v_o && reqs_i[idx]) begin
        v_o           = 1'b1;
        grants_o[idx] = 1'b1;
        sel           = idx;
      end
    end
  end

  // Reset places the pointer on the last input so that input 0 has priority first.
  always_ff @(posedge clk_i) begin
    if (reset_i)                  last_r <= idx_w'(inputs_p - 1);
    else if (yumi_i && v_o)       last_r <= sel;
  end
endmodule
