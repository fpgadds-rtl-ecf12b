// axis_fifo -- optional AXI4-Stream FIFO in front of one subscriber of a topic.
//
// Decouples a subscriber from its hardware-mapped topic: the topic can deliver up to
// DEPTH beats while the subscriber is busy and reads them later (asynchronous
// communication). When the FIFO is full it deasserts s_ready, so the publisher is
// blocked rather than data being dropped, as the Keep-All / Reliable QoS requires.
//
// How it works: a circular buffer of DEPTH beats with read and write pointers and an
// occupancy counter; the head beat is read from the array combinationally. DEPTH is
// not given by the publication; 512 (one 36 Kb block RAM at 64+1 bits) is this
// design's choice, and any power of two works.
//
// Interface: s_valid/s_ready/s_beat in, m_valid/m_ready/m_beat out, level = stored
// beats. Timing: a beat written in cycle t can be read in cycle t+1; one beat per
// cycle in and out, simultaneously.
module axis_fifo
  import fpgadds_pkg::*;
#(
  parameter int unsigned DEPTH = 512
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       s_valid,
  output logic       s_ready,
  input  axis_beat_t s_beat,
  output logic       m_valid,
  input  logic       m_ready,
  output axis_beat_t m_beat,
  output logic [$clog2(DEPTH):0] level
);

  localparam int unsigned AW = $clog2(DEPTH);

  axis_beat_t   mem [DEPTH];
  logic [AW-1:0] wr_ptr, rd_ptr;
  logic [AW:0]   count;

  wire push = s_valid && s_ready;
  wire pop  = m_valid && m_ready;

  assign s_ready = (count != (AW+1)'(DEPTH));
  assign m_valid = (count != '0);
  assign m_beat  = mem[rd_ptr];
  assign level   = count;

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= s_beat;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= wr_ptr + 1'b1;
      if (pop)  rd_ptr <= rd_ptr + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    count <= (AW+1)'(DEPTH));

endmodule
