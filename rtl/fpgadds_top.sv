// fpgadds_top -- the example fpgaDDS communication architecture with two
// hardware-mapped topics, A and B, between six hardware nodes.
//
// The connections are those of the publication's example figure:
//   node 1 -> A,  node 2 -> A,  node 2 -> B,  node 3 -> B      (publishers)
//   A -> FIFO -> node 4,  B -> node 5,  B -> node 6              (subscribers)
// So topic A merges two publishers into one buffered subscriber (arbiter + FIFO) and
// topic B merges two publishers and broadcasts to two subscribers (arbiter +
// broadcaster). Every node port has its DDS adapter: a dds_pub_adapter serializes a
// message from the node's memory onto the topic, a dds_sub_adapter de-serializes it
// into the subscriber's memory. The nodes themselves (application logic) are outside
// this module; their adapter control and memory ports are the ports of the top.
//
// Port arrays are indexed by connection, not by node:
//   pub_*[0] node 1 on A, pub_*[1] node 2 on A, pub_*[2] node 2 on B, pub_*[3] node 3 on B
//   sub_*[0] node 4 on A, sub_*[1] node 5 on B,  sub_*[2] node 6 on B
// Timing: see the adapters; topic A adds one cycle (its FIFO), topic B none. The
// fabric moves one 64-bit word per cycle on each topic; only a topic's own
// publishers compete for it, which is why more publishers lengthen transfer time and
// more subscribers do not. FIFO_DEPTH is this design's choice.
module fpgadds_top
  import fpgadds_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 512
) (
  input  logic  clk,
  input  logic  rst_n,
  // publisher adapters
  input  logic  pub_start   [4],
  input  len_t  pub_len     [4],
  output logic  pub_busy    [4],
  output logic  pub_done    [4],
  output len_t  pub_rd_addr [4],
  input  word_t pub_rd_data [4],
  // subscriber adapters
  input  logic  sub_start    [3],
  input  logic  sub_blocking [3],
  output logic  sub_busy     [3],
  output logic  sub_done     [3],
  output logic  sub_ok       [3],
  output len_t  sub_count    [3],
  output logic  sub_wr_en    [3],
  output len_t  sub_wr_addr  [3],
  output word_t sub_wr_data  [3]
);

  // publisher streams, indexed like pub_*
  logic       p_valid [4];
  logic       p_ready [4];
  axis_beat_t p_beat  [4];
  // subscriber streams, indexed like sub_*
  logic       s_valid [3];
  logic       s_ready [3];
  axis_beat_t s_beat  [3];

  for (genvar i = 0; i < 4; i++) begin : g_pub
    dds_pub_adapter u_pub (
      .clk, .rst_n,
      .start(pub_start[i]), .len(pub_len[i]), .busy(pub_busy[i]), .done(pub_done[i]),
      .rd_addr(pub_rd_addr[i]), .rd_data(pub_rd_data[i]),
      .m_valid(p_valid[i]), .m_ready(p_ready[i]), .m_beat(p_beat[i])
    );
  end

  for (genvar i = 0; i < 3; i++) begin : g_sub
    dds_sub_adapter u_sub (
      .clk, .rst_n,
      .start(sub_start[i]), .blocking(sub_blocking[i]), .busy(sub_busy[i]),
      .done(sub_done[i]), .ok(sub_ok[i]), .count(sub_count[i]),
      .wr_en(sub_wr_en[i]), .wr_addr(sub_wr_addr[i]), .wr_data(sub_wr_data[i]),
      .s_valid(s_valid[i]), .s_ready(s_ready[i]), .s_beat(s_beat[i])
    );
  end

  // topic-side ends of the two HMTs
  logic       a_pub_ready [2];
  logic       a_sub_valid [1];
  axis_beat_t a_sub_beat  [1];
  logic       b_pub_ready [2];
  logic       b_sub_valid [2];
  axis_beat_t b_sub_beat  [2];

  // Topic A: publishers node 1 and node 2, one subscriber (node 4) behind a FIFO.
  hmt #(.NUM_PUB(2), .NUM_SUB(1), .SUB_FIFO(32'h1), .FIFO_DEPTH(FIFO_DEPTH)) u_hmt_a (
    .clk, .rst_n,
    .pub_valid('{p_valid[0], p_valid[1]}),
    .pub_ready(a_pub_ready),
    .pub_beat ('{p_beat[0], p_beat[1]}),
    .sub_valid(a_sub_valid),
    .sub_ready('{s_ready[0]}),
    .sub_beat (a_sub_beat)
  );

  // Topic B: publishers node 2 and node 3, subscribers node 5 and node 6, no FIFO.
  hmt #(.NUM_PUB(2), .NUM_SUB(2), .SUB_FIFO(32'h0), .FIFO_DEPTH(FIFO_DEPTH)) u_hmt_b (
    .clk, .rst_n,
    .pub_valid('{p_valid[2], p_valid[3]}),
    .pub_ready(b_pub_ready),
    .pub_beat ('{p_beat[2], p_beat[3]}),
    .sub_valid(b_sub_valid),
    .sub_ready('{s_ready[1], s_ready[2]}),
    .sub_beat (b_sub_beat)
  );

  assign p_ready[0] = a_pub_ready[0];
  assign p_ready[1] = a_pub_ready[1];
  assign p_ready[2] = b_pub_ready[0];
  assign p_ready[3] = b_pub_ready[1];
  assign s_valid[0] = a_sub_valid[0];
  assign s_beat[0]  = a_sub_beat[0];
  assign s_valid[1] = b_sub_valid[0];
  assign s_beat[1]  = b_sub_beat[0];
  assign s_valid[2] = b_sub_valid[1];
  assign s_beat[2]  = b_sub_beat[1];

endmodule
