// hw_node_model -- behavioural model of a hardware ROS 2 node, for testbenches only.
//
// The application nodes themselves (image filters, lane detection, ...) are not part
// of the communication fabric; this model stands in for one, with the stream ports a
// node has towards its topics. Per frame it takes IN_WORDS words from its input
// topic, "computes", and publishes OUT_WORDS words (only for frames whose bit is set
// in PUB_MASK, frame number modulo 32). Output word k of frame f is
// {NODE_ID[7:0], f[15:0], k[39:0]}; the frame number is copied from bits 55:40 of the
// first input word, so a frame can be followed down a chain of nodes.
//
// Two execution modes, the two the fabric supports:
//   DATAFLOW = 0: receive, compute and send one after another; compute takes
//                 COMPUTE_CYCLES cycles with both streams idle;
//   DATAFLOW = 1: the phases overlap: output word k is sent as soon as the matching
//                 share of the input, ceil((k+1)*IN_WORDS/OUT_WORDS) words, has
//                 arrived (a pipelined streaming kernel at one word per cycle).
module hw_node_model
  import fpgadds_pkg::*;
#(
  parameter int unsigned NODE_ID        = 0,
  parameter int unsigned IN_WORDS       = 16,
  parameter int unsigned OUT_WORDS      = 16,
  parameter int unsigned COMPUTE_CYCLES = 16,
  parameter bit          DATAFLOW       = 0,
  parameter logic [31:0] PUB_MASK       = 32'hFFFF_FFFF
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       s_valid,
  output logic       s_ready,
  input  axis_beat_t s_beat,
  output logic       m_valid,
  input  logic       m_ready,
  output axis_beat_t m_beat,
  output int         frames_done
);

  typedef enum logic [1:0] {RECV, COMPUTE, SEND} phase_t;
  phase_t phase;
  longint rc, sc;        // words received / sent in this frame
  int     comp;
  logic [15:0] frame;
  bit     publish;

  wire in_xfer  = s_valid && s_ready;
  wire out_xfer = m_valid && m_ready;
  wire [4:0] fbit = (rc == 0 && in_xfer) ? s_beat.tdata[44:40] : frame[4:0];

  always_comb begin
    m_beat.tdata = {8'(NODE_ID), frame, 40'(sc)};
    m_beat.tlast = (sc == longint'(OUT_WORDS) - 1);
    if (DATAFLOW) begin
      s_ready = (rc < longint'(IN_WORDS));
      m_valid = publish && rc > 0 && sc < longint'(OUT_WORDS) &&
                (rc * longint'(OUT_WORDS) >= (sc + 1) * longint'(IN_WORDS));
    end else begin
      s_ready = (phase == RECV);
      m_valid = (phase == SEND) && publish;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase <= RECV; rc <= 0; sc <= 0; comp <= 0; frame <= '0; publish <= 0; frames_done <= 0;
    end else begin
      automatic longint rc_n = rc + longint'(in_xfer);
      automatic longint sc_n = sc + longint'(out_xfer);
      if (in_xfer && rc == 0) begin
        frame   <= s_beat.tdata[55:40];
        publish <= PUB_MASK[fbit];
      end
      rc <= rc_n;
      sc <= sc_n;
      if (DATAFLOW) begin
        if (rc_n == longint'(IN_WORDS) && (sc_n == longint'(OUT_WORDS) || !publish)) begin
          rc <= 0; sc <= 0; frames_done <= frames_done + 1;
        end
      end else begin
        case (phase)
          RECV:    if (rc_n == longint'(IN_WORDS)) begin phase <= COMPUTE; comp <= 0; end
          COMPUTE: if (comp + 1 >= int'(COMPUTE_CYCLES)) phase <= SEND; else comp <= comp + 1;
          SEND:    if (!publish || sc_n == longint'(OUT_WORDS)) begin
                     phase <= RECV; rc <= 0; sc <= 0; frames_done <= frames_done + 1;
                   end
          default: phase <= RECV;
        endcase
      end
    end
  end

endmodule
