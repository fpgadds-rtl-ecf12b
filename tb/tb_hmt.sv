// tb_hmt -- self-checking test of a hardware-mapped topic.
//
// Instance u_multi: two publishers, three subscribers, subscriber 1 behind a 4-deep
// FIFO. Publishers send numbered messages of random length; subscribers accept at
// random. Each subscriber checks that it receives whole, non-interleaved messages in
// per-publisher order with TLAST on the last word; at the end all three must have
// received the same messages in the same order (one topic, one message order), and
// all messages of both publishers. The FIFO must have filled at least once and the
// topic must have stalled on a slow subscriber.
// Instance u_single: one publisher, one subscriber: the topic is a plain connection,
// so a word must appear at the output in the same cycle, and back-pressure must reach
// the publisher in the same cycle.
module tb_hmt;
  import fpgadds_pkg::*;

  localparam int NP = 2, NS = 3, MSGS = 150;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       pub_valid [NP];
  logic       pub_ready [NP];
  axis_beat_t pub_beat  [NP];
  logic       sub_valid [NS];
  logic       sub_ready [NS];
  axis_beat_t sub_beat  [NS];

  hmt #(.NUM_PUB(NP), .NUM_SUB(NS), .SUB_FIFO(32'b010), .FIFO_DEPTH(4)) u_multi (
    .clk, .rst_n, .pub_valid, .pub_ready, .pub_beat, .sub_valid, .sub_ready, .sub_beat);

  logic       p1_valid [1];
  logic       p1_ready [1];
  axis_beat_t p1_beat  [1];
  logic       s1_valid [1];
  logic       s1_ready [1];
  axis_beat_t s1_beat  [1];

  hmt #(.NUM_PUB(1), .NUM_SUB(1)) u_single (
    .clk, .rst_n, .pub_valid(p1_valid), .pub_ready(p1_ready), .pub_beat(p1_beat),
    .sub_valid(s1_valid), .sub_ready(s1_ready), .sub_beat(s1_beat));

  int checks = 0, failures = 0;

  function automatic word_t enc(int src, int msg, int idx, int len);
    return {8'(src), 16'(msg), 16'(idx), 16'(len), 8'h3C};
  endfunction

  // ---- publishers ----
  int sent [NP];
  int pidx [NP];
  int plen [NP];
  for (genvar i = 0; i < NP; i++) begin : g_pub
    always @(posedge clk) begin
      if (!rst_n) begin
        pub_valid[i] <= 0; sent[i] <= 0; pidx[i] <= 0; plen[i] <= 0;
      end else begin
        automatic bit free = !pub_valid[i];
        automatic int m = sent[i];
        if (pub_valid[i] && pub_ready[i]) begin
          if (pidx[i] == plen[i] - 1) begin
            pub_valid[i] <= 0; m = sent[i] + 1; sent[i] <= m; free = 1;
          end else begin
            pidx[i] <= pidx[i] + 1;
            pub_beat[i] <= '{tdata: enc(i, m, pidx[i] + 1, plen[i]), tlast: (pidx[i] + 2 == plen[i])};
          end
        end
        if (free && m < MSGS && $urandom_range(99) < 60) begin
          automatic int l = 1 + $urandom_range(9);
          pub_valid[i] <= 1; pidx[i] <= 0; plen[i] <= l;
          pub_beat[i]  <= '{tdata: enc(i, m, 0, l), tlast: (l == 1)};
        end
      end
    end
  end

  // ---- subscribers ----
  int order [NS][$];
  int rx [NS][NP];
  int cur_src [NS], cur_idx [NS];
  bit in_msg [NS];
  int slow_pct [NS] = '{70, 15, 50};   // subscriber 1 (behind the FIFO) is slow
  for (genvar j = 0; j < NS; j++) begin : g_sub
    always @(posedge clk) begin
      sub_ready[j] <= ($urandom_range(99) < slow_pct[j]);
      if (rst_n && sub_valid[j] && sub_ready[j]) begin
        automatic int src = int'(sub_beat[j].tdata[63:56]);
        automatic int msg = int'(sub_beat[j].tdata[55:40]);
        automatic int idx = int'(sub_beat[j].tdata[39:24]);
        automatic int len = int'(sub_beat[j].tdata[23:8]);
        checks++;
        if (src >= NP) begin
          failures++; $display("FAIL sub %0d bad source %0d", j, src);
        end else if (!in_msg[j]) begin
          if (idx != 0 || msg != rx[j][src]) begin
            failures++;
            if (failures < 10) $display("FAIL sub %0d start src=%0d msg=%0d idx=%0d", j, src, msg, idx);
          end
        end else if (src != cur_src[j] || idx != cur_idx[j] + 1) begin
          failures++;
          if (failures < 10) $display("FAIL sub %0d interleaved", j);
        end
        if (sub_beat[j].tlast != (idx == len - 1)) begin
          failures++; $display("FAIL sub %0d tlast", j);
        end
        cur_src[j] = src; cur_idx[j] = idx;
        if (sub_beat[j].tlast) begin
          in_msg[j] = 0;
          if (src < NP) rx[j][src]++;
          order[j].push_back(src * 65536 + msg);
        end else in_msg[j] = 1;
      end
    end
  end

  // FIFO occupancy seen from the ports: words the topic has retired minus words the
  // buffered subscriber has taken is a lower bound; reaching the depth means full.
  int fifo_full = 0, stalls = 0, contention = 0;
  int retired = 0, taken1 = 0;
  always @(posedge clk) if (rst_n) begin
    if (retired - taken1 == 4) fifo_full++;
    for (int i = 0; i < NP; i++) if (pub_valid[i] && pub_ready[i]) retired++;
    if (sub_valid[1] && sub_ready[1]) taken1++;
    if ((pub_valid[0] && !pub_ready[0]) || (pub_valid[1] && !pub_ready[1])) stalls++;
    if (pub_valid[0] && pub_valid[1]) contention++;
  end

  // ---- single-publisher, single-subscriber topic ----
  always @(posedge clk) begin
    p1_valid[0] <= 1'($urandom);
    p1_beat[0]  <= '{tdata: {$urandom, $urandom}, tlast: 1'($urandom)};
    s1_ready[0] <= 1'($urandom);
  end
  always @(negedge clk) if (rst_n) begin
    checks++;
    if (s1_valid[0] != p1_valid[0] || s1_beat[0] != p1_beat[0] || p1_ready[0] != s1_ready[0]) begin
      failures++; $display("FAIL 1:1 topic is not a direct connection");
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
    for (int j = 0; j < NS; j++) begin
      in_msg[j] = 0;
      for (int i = 0; i < NP; i++) rx[j][i] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (rx[0][0] == MSGS && rx[0][1] == MSGS && rx[1][0] == MSGS && rx[1][1] == MSGS &&
          rx[2][0] == MSGS && rx[2][1] == MSGS);
    repeat (5) @(posedge clk);
    checks++;
    if (order[0] != order[1] || order[0] != order[2] || order[0].size() != 2*MSGS) begin
      failures++; $display("FAIL subscribers saw different message orders");
    end
    checks++;
    if (fifo_full == 0 || stalls == 0 || contention == 0) begin
      failures++; $display("FAIL mechanism not exercised: fifo_full=%0d stalls=%0d contention=%0d", fifo_full, stalls, contention);
    end
    $display("fifo full cycles=%0d publisher stall cycles=%0d contention cycles=%0d", fifo_full, stalls, contention);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
