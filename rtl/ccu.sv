// ccu: Configuration Control Unit of one NoC node.
//
// All nodes of a torus row share one configuration bus. In every cycle the
// bus carries a node identifier and one configuration word for each of the
// node's three circular buffers: the routing memory (RM), the WAG memory and
// the CNT/CMP memory. The CCU compares the bus identifier with the node's own
// identifier (the "=" comparator of the paper's figure, output SEL) and, when
// they match, raises the write enable of the three local buffers and hands
// each its field; the fields stay zero while the node is not addressed, so
// nothing from another node's traffic reaches the local buffers. The unit is combinational: the buffers write at the end of
// the same cycle. Identifier ID_IDLE (all ones) addresses no node.
// Field set and comparator follow the paper; the field order is this
// design's choice, and the CNT/CMP field is 11 bits wide, not 10.
module ccu
  import ldpc_pkg::*;
(
  input  logic [ID_W-1:0]   my_id,
  input  cfg_bus_t          bus,
  output logic              sel,
  output logic [RM_W-1:0]   rm_word,
  output logic [MEM_AW-1:0] wag_word,
  output logic [CNT_W-1:0]  cnt_word
);
  assign sel      = (bus.node_id == my_id) && (bus.node_id != ID_IDLE);
  assign rm_word  = sel ? bus.rm  : '0;
  assign wag_word = sel ? bus.wag : '0;
  assign cnt_word = sel ? bus.cnt : '0;
endmodule
