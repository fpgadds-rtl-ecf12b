// axis_msg_arbiter -- N:1 AXI4-Stream merge that arbitrates on complete messages.
//
// A hardware-mapped topic with several publishers gathers their streams here, in the
// role the source design gives a vendor "AXI Interconnect" configured for
// message-granular arbitration: once a publisher's first beat is presented on the
// output, that publisher keeps the output until its TLAST beat has been accepted, so
// the subscribers always see whole messages, never interleaved ones.
//
// How it works: while no message is in flight the arbiter picks, among the inputs
// whose TVALID is high, the first one at or after a round-robin pointer, and passes
// it straight through (no added latency). The choice is latched (locked) as soon as
// the output is presented and not completed in the same cycle, so TDATA stays stable
// under back-pressure. When the TLAST beat is accepted the lock drops and the pointer
// moves past the served input. Round-robin fairness is this design's choice; the
// publication only says the input messages are arbitrated.
//
// Interface: s_valid/s_ready/s_beat per input (arrays of N), m_valid/m_ready/m_beat
// on the output. Timing: combinational path from inputs to output, zero cycles of
// latency, one beat per cycle, no bubble between back-to-back messages.
module axis_msg_arbiter
  import fpgadds_pkg::*;
#(
  parameter int unsigned N = 2
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       s_valid [N],
  output logic       s_ready [N],
  input  axis_beat_t s_beat  [N],
  output logic       m_valid,
  input  logic       m_ready,
  output axis_beat_t m_beat
);

  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic          locked;
  logic [IW-1:0] grant;
  logic [IW-1:0] ptr;
  logic [IW-1:0] pick;
  logic          any_valid;
  logic [IW-1:0] sel;

  // Round-robin pick: first valid input at or after ptr.
  always_comb begin
    pick      = ptr;
    any_valid = 1'b0;
    for (int unsigned k = 0; k < N; k++) begin
      logic [IW-1:0] idx;
      idx = IW'((int'(ptr) + k) % N);
      if (!any_valid && s_valid[idx]) begin
        pick      = idx;
        any_valid = 1'b1;
      end
    end
  end

  assign sel     = locked ? grant : pick;
  assign m_valid = locked ? s_valid[grant] : any_valid;
  assign m_beat  = s_beat[sel];

  always_comb begin
    for (int unsigned i = 0; i < N; i++)
      s_ready[i] = m_ready && (IW'(i) == sel) && (locked || any_valid);
  end

  wire xfer_last = m_valid && m_ready && m_beat.tlast;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked <= 1'b0;
      grant  <= '0;
      ptr    <= '0;
    end else if (!locked) begin
      if (any_valid) begin
        grant <= pick;
        if (xfer_last) ptr <= (int'(pick) == N-1) ? '0 : pick + 1'b1;
        else           locked <= 1'b1;
      end
    end else if (xfer_last) begin
      locked <= 1'b0;
      ptr    <= (int'(grant) == N-1) ? '0 : grant + 1'b1;
    end
  end

  // AXI4-Stream rule: a presented beat stays presented, unchanged, until taken.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_valid && !m_ready |=> m_valid && $stable(m_beat));

endmodule
