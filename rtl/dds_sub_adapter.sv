// dds_sub_adapter -- subscriber half of the DDS adapter between a hardware-mapped
// topic and a hardware node.
//
// De-serializes one message: it takes stream words from the topic and writes them to
// consecutive addresses of the node's local message memory until the word with TLAST,
// then reports how many words arrived. As in the source design's generated take
// functions there are two versions, chosen per call with `blocking`:
//   * blocking: wait until a message arrives, then receive it;
//   * non-blocking: if no word is waiting on the topic in the cycle of the call,
//     return at once with ok = 0 and leave the topic untouched.
// The word-addressed memory port and the single ok/count result are this design's
// choices; the publication gives the behaviour, not the interface.
//
// Interface: start (pulse, accepted when !busy), blocking; wr_en/wr_addr/wr_data to
// node memory; done pulses when the call ends, with ok and count (words) valid in
// that cycle and held afterwards. Timing: s_ready is high only while receiving; one
// word per cycle; done is the cycle after the TLAST word (or after a failed
// non-blocking start).
module dds_sub_adapter
  import fpgadds_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic       blocking,
  output logic       busy,
  output logic       done,
  output logic       ok,
  output len_t       count,
  output logic       wr_en,
  output len_t       wr_addr,
  output word_t      wr_data,
  input  logic       s_valid,
  output logic       s_ready,
  input  axis_beat_t s_beat
);

  len_t addr;

  assign s_ready = busy;
  assign wr_en   = s_valid && s_ready;
  assign wr_addr = addr;
  assign wr_data = s_beat.tdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      ok    <= 1'b0;
      count <= '0;
      addr  <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          addr <= '0;
          if (blocking || s_valid) begin
            busy <= 1'b1;
          end else begin
            done  <= 1'b1;       // non-blocking call, nothing waiting
            ok    <= 1'b0;
            count <= '0;
          end
        end
      end else if (s_valid) begin
        addr <= addr + 1'b1;
        if (s_beat.tlast) begin
          busy  <= 1'b0;
          done  <= 1'b1;
          ok    <= 1'b1;
          count <= addr + 1'b1;
        end
      end
    end
  end

endmodule
