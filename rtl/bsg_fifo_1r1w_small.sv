// bsg_fifo_1r1w_small: small synchronous FIFO used for every buffer of the
// network (router inputs, endpoint request and response inputs).
//
// A word written at a clock edge is visible at the head in the next cycle and
// never in the same cycle: crossing one FIFO costs exactly one cycle, which is
// what the network's latency budget counts. Input side is valid/ready
// (ready_o = not full), output side is valid/yumi (yumi_i only while v_o).
// ready_o depends only on the FIFO's own state, never on yumi_i: chained
// routers therefore have no combinational path from one FIFO's pop to the
// next one's push, and a 2-entry FIFO still sustains one word per cycle.
// Storage is a plain register array; reset empties the FIFO.
module bsg_fifo_1r1w_small #(
  parameter int unsigned width_p = 8,
  parameter int unsigned els_p   = 2
) (
  input  logic               clk_i,
  input  logic               reset_i,
  input  logic               v_i,
  output logic               ready_o,
  input  logic [width_p-1:0] data_i,
  output logic               v_o,
  output logic [width_p-1:0] data_o,
  input  logic               yumi_i
);
  localparam int unsigned ptr_w = (els_p > 1) ? $clog2(els_p) : 1;

  logic [width_p-1:0] mem_r [els_p];
  logic [ptr_w-1:0]   rd_r, wr_r;
  logic [ptr_w:0]     count_r;

  wire enq = v_i & ready_o;
  wire deq = yumi_i & v_o;

  assign ready_o = (count_r != ($bits(count_r))'(els_p));
  assign v_o     = (count_r != '0);
  assign data_o  = mem_r[rd_r];

  function automatic logic [ptr_w-1:0] inc(input logic [ptr_w-1:0] p);
    return (p == ptr_w'(els_p - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk_i) begin
    if (reset_i) begin
      rd_r    <= '0;
      wr_r    <= '0;
      count_r <= '0;
    end else begin
      if (enq) wr_r <= inc(wr_r);
      if (deq) rd_r <= inc(rd_r);
      if (enq && !deq)      count_r <= count_r + 1'b1;
      else if (deq && !enq) count_r <= count_r - 1'b1;
    end
  end

  always_ff @(posedge clk_i) begin
    if (enq) mem_r[wr_r] <= data_i;
  end

  // Dequeue only what is there (valid/yumi rule).
  a_yumi_needs_valid: assert property (@(posedge clk_i) disable iff (reset_i) yumi_i |-> v_o);
endmodule
