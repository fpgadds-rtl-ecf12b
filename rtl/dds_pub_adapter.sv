// dds_pub_adapter -- publisher half of the DDS adapter between a hardware node and a
// hardware-mapped topic.
//
// ROS 2 message objects must be serialized before they travel over a topic stream.
// In the source design this hardware is generated per message type from a flattened
// list of the message's primitives and arrays (nested messages resolved), writing them
// one after another to the AXI4-Stream. Here the flattened message is a block of
// 64-bit words in the node's local memory; the adapter reads word 0..len-1 and sends
// them as one stream packet, TLAST on the last word, which is the message boundary the
// topic arbitrates on. How primitives are packed into words is left to the node.
//
// The call is blocking: once started, the adapter presents each word until the topic
// accepts it; if a subscriber FIFO is full, publishing stalls (Keep-All / Reliable).
// A non-blocking publish is not offered, because an AXI4-Stream master may not
// withdraw a presented word.
//
// Interface: start (one-cycle pulse, accepted when !busy) with len >= 1 words; the
// node memory is read through rd_addr/rd_data with zero-cycle read latency (rd_data
// must show word rd_addr in the same cycle); done pulses in the cycle the last word is
// accepted. Timing: first word is presented the cycle after start, then one word per
// cycle while m_ready is high: a len-word message takes len cycles plus one.
module dds_pub_adapter
  import fpgadds_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  len_t       len,
  output logic       busy,
  output logic       done,
  output len_t       rd_addr,
  input  word_t      rd_data,
  output logic       m_valid,
  input  logic       m_ready,
  output axis_beat_t m_beat
);

  len_t addr, last_addr;

  assign m_valid      = busy;
  assign rd_addr      = addr;
  assign m_beat.tdata = rd_data;
  assign m_beat.tlast = (addr == last_addr);
  assign done         = m_valid && m_ready && m_beat.tlast;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      addr      <= '0;
      last_addr <= '0;
    end else if (!busy) begin
      if (start && len != '0) begin
        busy      <= 1'b1;
        addr      <= '0;
        last_addr <= len - 1'b1;
      end
    end else if (m_ready) begin
      if (m_beat.tlast) busy <= 1'b0;
      else              addr <= addr + 1'b1;
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_valid && !m_ready |=> m_valid && m_beat.tlast == $past(m_beat.tlast) && rd_addr == $past(rd_addr));

endmodule
