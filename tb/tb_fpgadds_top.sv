// tb_fpgadds_top -- end-to-end test of the two-topic example fabric at its default
// sizes (64-bit words, 512-deep subscriber FIFO).
//
// Six node models drive the adapter ports: nodes 1, 2 and 3 publish messages whose
// words encode (publisher port, message number, word address, length); nodes 4, 5
// and 6 take messages and check every word written into their memories. The test
// walks through the mechanisms of the fabric and counts each one:
//   1. latency: a lone message on topic B (no FIFO) ends at the subscriber L+1 cycles
//      after the publish start, on topic A (with FIFO) L+2 cycles;
//   2. non-blocking take on an empty topic returns at once with ok = 0;
//   3. message arbitration: both publishers of A, and both of B, start together;
//      each subscriber must see whole messages only;
//   4. FIFO fill: node 4 stops taking; topic A must then accept exactly 512 words (the
//      FIFO depth) beyond those node 4 took, and block its publishers, losing nothing;
//   5. broadcast stall: node 5 stops taking while node 6 keeps taking; topic B must
//      stall, and node 6 must not see any message twice;
//   6. all messages are finally delivered, and nodes 5 and 6 agree on the order.
module tb_fpgadds_top;
  import fpgadds_pkg::*;

  logic  clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic  pub_start [4];
  len_t  pub_len [4];
  logic  pub_busy [4];
  logic  pub_done [4];
  len_t  pub_rd_addr [4];
  word_t pub_rd_data [4];
  logic  sub_start [3];
  logic  sub_blocking [3];
  logic  sub_busy [3];
  logic  sub_done [3];
  logic  sub_ok [3];
  len_t  sub_count [3];
  logic  sub_wr_en [3];
  len_t  sub_wr_addr [3];
  word_t sub_wr_data [3];

  fpgadds_top dut (.*);

  localparam int FIFO_DEPTH = 512;   // the fabric's default, checked in step 4

  int checks = 0, failures = 0;

  function automatic word_t enc(int p, int msg, int addr, int len);
    return {8'(p), 12'(msg), 22'(addr), 22'(len)};
  endfunction

  // ---- publisher node memories ----
  int pmsg [4];
  always_comb for (int i = 0; i < 4; i++)
    pub_rd_data[i] = enc(i, pmsg[i], int'(pub_rd_addr[i]), int'(pub_len[i]));

  // words accepted by each publisher port so far
  int pub_words [4];
  int pub_blocked [4];
  always @(posedge clk) if (rst_n) for (int i = 0; i < 4; i++) begin
    if (pub_done[i]) pub_words[i] += int'(pub_len[i]);
  end

  task automatic publish(int p, int msg, int len);
    @(negedge clk);
    while (pub_busy[p]) @(negedge clk);
    pmsg[p] = msg; pub_len[p] = len_t'(len); pub_start[p] = 1;
    @(negedge clk);
    pub_start[p] = 0;
    while (pub_busy[p]) @(negedge clk);
  endtask

  // ---- subscriber node checkers ----
  int  s_cur_src [3], s_cur_msg [3], s_cur_len [3];
  int  s_next_msg [3][4];      // next message number expected from publisher port
  int  s_msgs [3];
  int  s_order [3][$];
  int  s_words [3] = '{0, 0, 0};
  always @(posedge clk) if (rst_n) for (int j = 0; j < 3; j++) begin
    if (sub_wr_en[j]) begin
      s_words[j]++;
      begin : chk
      automatic int p    = int'(sub_wr_data[j][63:56]);
      automatic int msg  = int'(sub_wr_data[j][55:44]);
      automatic int addr = int'(sub_wr_data[j][43:22]);
      automatic int len  = int'(sub_wr_data[j][21:0]);
      checks++;
      if (sub_wr_addr[j] == '0) begin
        s_cur_src[j] = p; s_cur_msg[j] = msg; s_cur_len[j] = len;
        if (p > 3 || msg != s_next_msg[j][p]) begin
          failures++; if (failures < 20) $display("FAIL sub %0d: message %0d from port %0d out of order", j, msg, p);
        end
      end
      if (p != s_cur_src[j] || msg != s_cur_msg[j] || addr != int'(sub_wr_addr[j]) || len != s_cur_len[j]) begin
        failures++; if (failures < 20) $display("FAIL sub %0d: word %h at addr %0d", j, sub_wr_data[j], sub_wr_addr[j]);
      end
      if ((j == 0 && !(p == 0 || p == 1)) || (j > 0 && !(p == 2 || p == 3))) begin
        failures++; $display("FAIL sub %0d got a message of the wrong topic", j);
      end
      end
    end
    if (sub_done[j] && sub_ok[j]) begin
      checks++;
      if (int'(sub_count[j]) != s_cur_len[j]) begin
        failures++; $display("FAIL sub %0d count %0d len %0d", j, sub_count[j], s_cur_len[j]);
      end
      s_next_msg[j][s_cur_src[j]]++;
      s_msgs[j]++;
      s_order[j].push_back(s_cur_src[j] * 4096 + s_cur_msg[j]);
    end
  end

  // subscriber node loops: keep taking (blocking) while enabled
  bit   take_en [3];
  logic loop_start [3];
  logic nb_start = 0;
  for (genvar j = 0; j < 3; j++) begin : g_take
    always @(negedge clk) begin
      loop_start[j] <= 0;
      if (rst_n && take_en[j] && !sub_busy[j] && !loop_start[j] && !sub_done[j])
        loop_start[j] <= 1;
    end
    assign sub_start[j] = loop_start[j] || (j == 0 && nb_start);
  end

  // mechanism counters
  int n_arb_a = 0, n_arb_b = 0, n_fifo_full = 0, n_bc_stall = 0, n_nb_empty = 0, n_latency = 0;
  always @(posedge clk) if (rst_n) begin
    if (pub_busy[0] && pub_busy[1]) n_arb_a++;
    if (pub_busy[2] && pub_busy[3]) n_arb_b++;
  end

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int sent [4];
  task automatic pub_n(int p, int n, int len_min, int len_max);
    for (int k = 0; k < n; k++) begin
      publish(p, sent[p], len_min + $urandom_range(len_max - len_min));
      sent[p]++;
    end
  endtask

  initial begin
    int t0, cyc, w0, r0, acc;
    for (int i = 0; i < 4; i++) begin
      pub_start[i] = 0; pub_len[i] = '0; pmsg[i] = 0; sent[i] = 0; pub_words[i] = 0; pub_blocked[i] = 0;
    end
    for (int j = 0; j < 3; j++) begin
      loop_start[j] = 0; sub_blocking[j] = 1; take_en[j] = 0; s_msgs[j] = 0;
      for (int i = 0; i < 4; i++) s_next_msg[j][i] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);

    // 2. non-blocking take on the empty topic A
    sub_blocking[0] = 0; nb_start = 1;
    @(negedge clk); nb_start = 0;
    checks++;
    if (!(sub_done[0] && !sub_ok[0])) begin failures++; $display("FAIL non-blocking take"); end
    else n_nb_empty++;
    sub_blocking[0] = 1;

    // 1. latency on B (nodes 5, 6 waiting in blocking takes) and on A
    take_en[0] = 1; take_en[1] = 1; take_en[2] = 1;
    repeat (3) @(negedge clk);
    fork
      publish(3, sent[3], 100);
      begin
        @(posedge pub_start[3]);
        t0 = int'($time);
        do @(negedge clk); while (!sub_done[1]);
        cyc = (int'($time) - t0) / 10;
      end
    join
    sent[3]++;
    checks++;
    if (cyc != 100 + 1) begin failures++; $display("FAIL topic B latency %0d cycles", cyc); end
    else n_latency++;
    repeat (3) @(negedge clk);
    fork
      publish(0, sent[0], 100);
      begin
        @(posedge pub_start[0]);
        t0 = int'($time);
        do @(negedge clk); while (!sub_done[0]);
        cyc = (int'($time) - t0) / 10;
      end
    join
    sent[0]++;
    checks++;
    if (cyc != 100 + 2) begin failures++; $display("FAIL topic A latency %0d cycles", cyc); end
    else n_latency++;

    // 3. concurrent publishers on both topics
    fork
      pub_n(0, 10, 1, 60);
      pub_n(1, 10, 1, 60);
      pub_n(2, 10, 1, 60);
      pub_n(3, 10, 1, 60);
    join
    repeat (50) @(negedge clk);

    // 4. FIFO fill: node 4 stops taking, nodes 1 and 2 publish 2 x 400 words
    // (node 4 is already waiting in a blocking take: it receives one more message)
    take_en[0] = 0;
    w0 = pub_words[0] + pub_words[1];
    r0 = s_words[0];
    fork
      begin
        fork
          pub_n(0, 2, 400, 400);
          pub_n(1, 2, 400, 400);
        join
      end
      begin
        repeat (3000) @(negedge clk);
        checks++;
        acc = pub_words[0] + pub_words[1] + int'(pub_rd_addr[0]) * int'(pub_busy[0]) +
              int'(pub_rd_addr[1]) * int'(pub_busy[1]) - w0;
        if (acc - (s_words[0] - r0) != FIFO_DEPTH || !pub_busy[0] || !pub_busy[1]) begin
          failures++;
          $display("FAIL FIFO fill: %0d words accepted, %0d taken", acc, s_words[0] - r0);
        end else n_fifo_full++;
        take_en[0] = 1;
      end
    join

    // 5. broadcast stall: node 5 stops, node 6 keeps taking
    // (node 5 is waiting in a blocking take: it receives the first message only)
    take_en[1] = 0;
    fork
      pub_n(2, 3, 20, 20);
      begin
        repeat (500) @(negedge clk);
        checks++;
        // the publisher is held at word 0 or 1 of a message until node 5 takes again;
        // node 6 cannot complete that message either
        if (s_msgs[2] != s_msgs[1] || !pub_busy[2] || pub_rd_addr[2] > len_t'(1)) begin failures++; $display("FAIL broadcast did not stall: s5=%0d s6=%0d busy=%0b addr=%0d", s_msgs[1], s_msgs[2], pub_busy[2], pub_rd_addr[2]); end
        else n_bc_stall++;
        take_en[1] = 1;
      end
    join

    // 6. drain and compare
    repeat (2000) @(negedge clk);
    checks++;
    if (s_msgs[0] != sent[0] + sent[1] || s_msgs[1] != sent[2] + sent[3] || s_msgs[2] != sent[2] + sent[3]) begin
      failures++;
      $display("FAIL delivery: A %0d/%0d, B %0d %0d/%0d", s_msgs[0], sent[0]+sent[1], s_msgs[1], s_msgs[2], sent[2]+sent[3]);
    end
    checks++;
    if (s_order[1] != s_order[2]) begin failures++; $display("FAIL nodes 5 and 6 disagree on order"); end

    checks++;
    if (n_arb_a == 0 || n_arb_b == 0 || n_fifo_full == 0 || n_bc_stall == 0 || n_nb_empty == 0 || n_latency != 2) begin
      failures++; $display("FAIL a mechanism did not occur");
    end
    $display("mechanisms: arbitration A=%0d B=%0d cycles, fifo full=%0d, broadcast stall=%0d, non-blocking empty=%0d, latency checks=%0d",
             n_arb_a, n_arb_b, n_fifo_full, n_bc_stall, n_nb_empty, n_latency);
    $display("messages: node4=%0d node5=%0d node6=%0d", s_msgs[0], s_msgs[1], s_msgs[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
