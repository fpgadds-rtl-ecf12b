// fpgadds_pkg -- constants and types shared by the fpgaDDS communication fabric.
//
// Every hardware-mapped topic (HMT) is an AXI4-Stream network. A beat carries one
// 64-bit data word and TLAST, which marks the last word of a serialized ROS message;
// TLAST is what lets the topic arbitrate on whole messages. The 64-bit width is not
// printed in the source publication: it is the width at which its measured HMT
// transfer times (3146 kB in 3.93 ms at 100 MHz) come out as one word per cycle.
// No TKEEP/TSTRB/TID/TDEST side channels are carried (the fabric is a static,
// per-topic network, so no routing information is needed); messages are padded to
// whole words by the publisher.
package fpgadds_pkg;

  // Stream data width in bits (8 bytes per beat).
  parameter int unsigned DATA_W = 64;

  // Width of a message length in words. 2^19 words = 4 MiB covers the largest
  // message size evaluated (3146 kB = 393216 words).
  parameter int unsigned LEN_W = 19;

  typedef logic [DATA_W-1:0] word_t;
  typedef logic [LEN_W-1:0]  len_t;

  // One AXI4-Stream beat (TVALID/TREADY travel beside it).
  typedef struct packed {
    word_t tdata;
    logic  tlast;
  } axis_beat_t;

endpackage
