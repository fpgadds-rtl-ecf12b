// axis_broadcast -- 1:N AXI4-Stream broadcast of one topic to all its subscribers.
//
// A hardware-mapped topic with several subscribers copies every beat to each of them
// (the role of the vendor "AXI Broadcaster" block in the source design). Each output
// accepts the beat on its own: a per-output "done" flag remembers which subscribers
// have already taken the current beat, and the input beat is retired only when all
// have. A slow subscriber therefore stalls the topic (Reliable, Keep-All delivery: no
// message is ever dropped), but a fast one is not forced to wait in lock-step and
// never sees a beat twice. The done-flag scheme is this design's choice; the
// publication only states that the message is broadcast to all subscribers.
//
// Interface: s_valid/s_ready/s_beat in, arrays m_valid/m_ready/m_beat of N out.
// Timing: zero latency, combinational through-path; m_valid never depends on m_ready
// in the same cycle.
module axis_broadcast
  import fpgadds_pkg::*;
#(
  parameter int unsigned N = 2
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       s_valid,
  output logic       s_ready,
  input  axis_beat_t s_beat,
  output logic       m_valid [N],
  input  logic       m_ready [N],
  output axis_beat_t m_beat  [N]
);

  logic [N-1:0] done;
  logic [N-1:0] taken_now;   // output i has taken the beat, now or earlier

  always_comb begin
    for (int unsigned i = 0; i < N; i++) begin
      m_valid[i]   = s_valid && !done[i];
      m_beat[i]    = s_beat;
      taken_now[i] = done[i] || m_ready[i];
    end
  end

  assign s_ready = &taken_now;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done <= '0;
    end else if (s_valid) begin
      if (s_ready) done <= '0;
      else begin
        for (int unsigned i = 0; i < N; i++)
          if (m_ready[i]) done[i] <= 1'b1;
      end
    end
  end

  a_in_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_valid && !s_ready |=> s_valid && $stable(s_beat));

endmodule
