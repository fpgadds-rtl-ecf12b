// tb_axis_msg_arbiter -- self-checking test of the message-granular N:1 arbiter.
//
// Three publishers send numbered messages of random length (1..8 words) with random
// gaps; the sink stalls at random. Each word carries its source, message number, word
// index and message length, so the checker can verify, without modelling the arbiter,
// that every message arrives whole (no interleaving), in per-source order, with TLAST
// exactly on its last word, and that nothing is lost or duplicated. A second phase
// keeps all inputs busy and the sink always ready, and checks the zero-bubble
// throughput (one word per cycle) and that grants rotate round robin.
module tb_axis_msg_arbiter;
  import fpgadds_pkg::*;

  localparam int N    = 3;
  localparam int MSGS = 200;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       s_valid [N];
  logic       s_ready [N];
  axis_beat_t s_beat  [N];
  logic       m_valid, m_ready;
  axis_beat_t m_beat;

  axis_msg_arbiter #(.N(N)) dut (.*);

  int checks = 0, failures = 0;
  bit phase2 = 0;
  int gap_pct = 50;

  function automatic word_t enc(int src, int msg, int idx, int len);
    return {8'(src), 16'(msg), 16'(idx), 16'(len), 8'hA5};
  endfunction

  // ---- publishers: synchronous FSMs ----
  int sent_msgs [N];
  int idx_q [N];
  int len_q [N];
  for (genvar i = 0; i < N; i++) begin : g_src
    always @(posedge clk) begin
      if (!rst_n) begin
        s_valid[i]   <= 0;
        sent_msgs[i] <= 0;
        idx_q[i]     <= 0;
        len_q[i]     <= 0;
      end else begin
        automatic bit start_new = 0;
        if (s_valid[i] && s_ready[i]) begin
          if (idx_q[i] == len_q[i]-1) begin
            s_valid[i]   <= 0;
            sent_msgs[i] <= sent_msgs[i] + 1;
            start_new = 1;
          end else begin
            idx_q[i] <= idx_q[i] + 1;
            s_beat[i] <= '{tdata: enc(i, sent_msgs[i], idx_q[i]+1, len_q[i]),
                           tlast: (idx_q[i]+1 == len_q[i]-1)};
          end
        end else if (!s_valid[i]) start_new = 1;
        if (start_new) begin
          automatic int m = sent_msgs[i] + ((s_valid[i] && s_ready[i]) ? 1 : 0);
          if (m < MSGS && (phase2 || ($urandom_range(99) >= gap_pct))) begin
            automatic int l = phase2 ? 4 : 1 + $urandom_range(7);
            s_valid[i] <= 1;
            idx_q[i]   <= 0;
            len_q[i]   <= l;
            s_beat[i]  <= '{tdata: enc(i, m, 0, l), tlast: (l == 1)};
          end
        end
      end
    end
  end

  // ---- sink ----
  always @(posedge clk) m_ready <= phase2 ? 1'b1 : ($urandom_range(99) < 70);

  // ---- checker ----
  int  rx_msgs [N];
  bit  in_msg = 0;
  int  cur_src, cur_idx, cur_len;
  int  conflicts = 0;
  int  last_src = -1, rr_ok = 0, rr_bad = 0;
  always @(posedge clk) if (rst_n) begin
    automatic int nv = 0;
    for (int i = 0; i < N; i++) nv += s_valid[i];
    if (nv > 1) conflicts++;
    if (m_valid && m_ready) begin
      automatic int src = int'(m_beat.tdata[63:56]);
      automatic int msg = int'(m_beat.tdata[55:40]);
      automatic int idx = int'(m_beat.tdata[39:24]);
      automatic int len = int'(m_beat.tdata[23:8]);
      checks++;
      if (!in_msg) begin
        if (idx != 0 || src >= N || msg != rx_msgs[src]) begin
          failures++; $display("FAIL start src=%0d msg=%0d idx=%0d exp msg %0d", src, msg, idx, rx_msgs[src]);
        end
        if (phase2 && last_src >= 0) begin
          if (src == (last_src + 1) % N) rr_ok++; else rr_bad++;
        end
        cur_src = src; cur_idx = idx; cur_len = len;
      end else begin
        if (src != cur_src || idx != cur_idx + 1 || len != cur_len) begin
          failures++; $display("FAIL interleave src=%0d/%0d idx=%0d/%0d", src, cur_src, idx, cur_idx+1);
        end
        cur_idx = idx;
      end
      if (m_beat.tlast != (idx == len-1)) begin
        failures++; $display("FAIL tlast idx=%0d len=%0d", idx, len);
      end
      if (m_beat.tlast) begin
        in_msg = 0; rx_msgs[src]++; last_src = src;
      end else in_msg = 1;
    end
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, t1;
    for (int i = 0; i < N; i++) rx_msgs[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (rx_msgs[0] == MSGS && rx_msgs[1] == MSGS && rx_msgs[2] == MSGS);
    checks++;
    if (conflicts == 0) begin failures++; $display("FAIL no arbitration conflict seen"); end
    // phase 2: saturated inputs, 4-word messages, always-ready sink
    @(posedge clk);
    for (int i = 0; i < N; i++) begin rx_msgs[i] = 0; end
    rst_n = 0; @(posedge clk); @(negedge clk);
    phase2 = 1; last_src = -1; rst_n = 1;
    wait (s_valid[0] && s_valid[1] && s_valid[2]);
    @(posedge clk); t0 = int'($time);
    wait (rx_msgs[0] == 30 && rx_msgs[1] == 30 && rx_msgs[2] == 30);
    t1 = int'($time);
    checks++;
    // 90 messages of 4 words at one word per cycle; first accepted at t0
    if ((t1 - t0) / 10 != 90*4 - 1) begin
      failures++; $display("FAIL throughput: %0d cycles for 360 words", (t1-t0)/10 + 1);
    end
    checks++;
    if (rr_bad != 0 || rr_ok == 0) begin failures++; $display("FAIL round robin ok=%0d bad=%0d", rr_ok, rr_bad); end
    $display("arbitration conflicts=%0d rr_ok=%0d", conflicts, rr_ok);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
