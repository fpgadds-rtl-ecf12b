// hmt -- one hardware-mapped topic (HMT): the static AXI4-Stream network that carries
// a single ROS 2 topic between hardware nodes.
//
// The structure follows the publication: the network is generated per topic from its
// number of publishers and subscribers.
//   * one publisher, one subscriber: a plain stream connection from input to output;
//   * several publishers: an axis_msg_arbiter merges them, forwarding whole messages;
//   * several subscribers: an axis_broadcast copies each beat to all of them;
//   * any subscriber may have an optional axis_fifo (bit i of SUB_FIFO) that decouples
//     it from the topic; a full FIFO blocks the topic, nothing is dropped.
// Arbiter and broadcaster are chained as arbiter -> broadcaster, so a topic with any
// numbers of publishers and subscribers is built from the same two pieces.
//
// Interface: NUM_PUB stream inputs (pub_*), NUM_SUB stream outputs (sub_*).
// Timing: without FIFOs the topic adds no register stage (zero-cycle latency, one
// 64-bit word per cycle); a FIFO adds one cycle. Defaults describe topic B of the
// publication's example architecture (two publishers, two subscribers, no FIFO).
// FIFO_DEPTH and the round-robin arbitration are this design's choices.
module hmt
  import fpgadds_pkg::*;
#(
  parameter int unsigned NUM_PUB    = 2,
  parameter int unsigned NUM_SUB    = 2,
  parameter logic [31:0] SUB_FIFO   = 32'h0,
  parameter int unsigned FIFO_DEPTH = 512
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       pub_valid [NUM_PUB],
  output logic       pub_ready [NUM_PUB],
  input  axis_beat_t pub_beat  [NUM_PUB],
  output logic       sub_valid [NUM_SUB],
  input  logic       sub_ready [NUM_SUB],
  output axis_beat_t sub_beat  [NUM_SUB]
);

  // merged topic stream
  logic       t_valid, t_ready;
  axis_beat_t t_beat;
  // per-subscriber stream, before the optional FIFO
  logic       b_valid [NUM_SUB];
  logic       b_ready [NUM_SUB];
  axis_beat_t b_beat  [NUM_SUB];

  // ---- publisher side --------------------------------------------------------
  if (NUM_PUB > 1) begin : g_arb
    axis_msg_arbiter #(.N(NUM_PUB)) u_arb (
      .clk, .rst_n,
      .s_valid(pub_valid), .s_ready(pub_ready), .s_beat(pub_beat),
      .m_valid(t_valid),   .m_ready(t_ready),   .m_beat(t_beat)
    );
  end else begin : g_one_pub
    assign t_valid      = pub_valid[0];
    assign t_beat       = pub_beat[0];
    assign pub_ready[0] = t_ready;
  end

  // ---- subscriber side -------------------------------------------------------
  if (NUM_SUB > 1) begin : g_bc
    axis_broadcast #(.N(NUM_SUB)) u_bc (
      .clk, .rst_n,
      .s_valid(t_valid), .s_ready(t_ready), .s_beat(t_beat),
      .m_valid(b_valid), .m_ready(b_ready), .m_beat(b_beat)
    );
  end else begin : g_one_sub
    assign b_valid[0] = t_valid;
    assign b_beat[0]  = t_beat;
    assign t_ready    = b_ready[0];
  end

  for (genvar i = 0; i < NUM_SUB; i++) begin : g_sub
    if (SUB_FIFO[i]) begin : g_fifo
      axis_fifo #(.DEPTH(FIFO_DEPTH)) u_fifo (
        .clk, .rst_n,
        .s_valid(b_valid[i]),   .s_ready(b_ready[i]),   .s_beat(b_beat[i]),
        .m_valid(sub_valid[i]), .m_ready(sub_ready[i]), .m_beat(sub_beat[i]),
        .level()
      );
    end else begin : g_direct
      assign sub_valid[i] = b_valid[i];
      assign sub_beat[i]  = b_beat[i];
      assign b_ready[i]   = sub_ready[i];
    end
  end

endmodule
