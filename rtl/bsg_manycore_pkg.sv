// bsg_manycore_pkg: operation codes of request packets and the type field of
// response packets on the reverse network.
//
// Request op codes follow the network definition: 2'b00 remote load,
// 2'b01 remote store, 2'b10 / 2'b11 atomic swap (acquire / release flavour).
// The response type (credit for a store, data for a load or swap) is this
// design's own encoding.
package bsg_manycore_pkg;
  typedef enum logic [1:0] {
    e_remote_load    = 2'b00,
    e_remote_store   = 2'b01,
    e_remote_swap_aq = 2'b10,
    e_remote_swap_rl = 2'b11
  } packet_op_e;

  typedef enum logic {
    e_return_credit = 1'b0,
    e_return_data   = 1'b1
  } return_type_e;

  // Configuration registers, reached when the MSB of the word address is 1.
  localparam int unsigned cfg_freeze_addr_gp  = 0;  // write 0 = unfreeze, 1 = freeze
  localparam int unsigned cfg_arb_pr_addr_gp  = 4;  // every write toggles reverse_arb_pr
endpackage
