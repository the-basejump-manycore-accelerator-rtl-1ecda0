// Packet and link bundle layouts of the manycore network.
//
// Request packet (forward network). The destination coordinates sit in the
// least significant bits (x lowest, then y) so that a router can route any
// packet type without knowing its other fields.
//   { addr, op, op_ex, data, src_y_cord, src_x_cord, y_cord, x_cord }
// Response packet (reverse network):
//   { pkt_type, data, y_cord, x_cord }
// Link bundle (one direction of one side of a node): the forward network's
// valid/data going out plus the ready for the forward traffic coming in, and
// the same for the reverse network.
`ifndef BSG_MANYCORE_PACKET_SVH
`define BSG_MANYCORE_PACKET_SVH

`define bsg_manycore_packet_width(aw, dw, xw, yw) ((aw) + 2 + ((dw) >> 3) + (dw) + 2 * (yw) + 2 * (xw))
`define bsg_manycore_return_packet_width(dw, xw, yw) (1 + (dw) + (yw) + (xw))

`define bsg_manycore_packet_s(aw, dw, xw, yw)   \
  struct packed {                               \
    logic [(aw)-1:0]          addr;             \
    bsg_manycore_pkg::packet_op_e op;           \
    logic [((dw)>>3)-1:0]     op_ex;            \
    logic [(dw)-1:0]          data;             \
    logic [(yw)-1:0]          src_y_cord;       \
    logic [(xw)-1:0]          src_x_cord;       \
    logic [(yw)-1:0]          y_cord;           \
    logic [(xw)-1:0]          x_cord;           \
  }

`define bsg_manycore_return_packet_s(dw, xw, yw) \
  struct packed {                                \
    bsg_manycore_pkg::return_type_e pkt_type;    \
    logic [(dw)-1:0]          data;              \
    logic [(yw)-1:0]          y_cord;            \
    logic [(xw)-1:0]          x_cord;            \
  }

`define bsg_manycore_link_sif_s(aw, dw, xw, yw)                                  \
  struct packed {                                                                \
    struct packed {                                                              \
      logic v;                                                                   \
      logic ready_and_rev;                                                       \
      logic [`bsg_manycore_packet_width(aw, dw, xw, yw)-1:0] data;               \
    } fwd;                                                                       \
    struct packed {                                                              \
      logic v;                                                                   \
      logic ready_and_rev;                                                       \
      logic [`bsg_manycore_return_packet_width(dw, xw, yw)-1:0] data;            \
    } rev;                                                                       \
  }

`define bsg_manycore_link_sif_width(aw, dw, xw, yw) \
  (4 + `bsg_manycore_packet_width(aw, dw, xw, yw) + `bsg_manycore_return_packet_width(dw, xw, yw))

`endif
