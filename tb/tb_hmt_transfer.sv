// tb_hmt_transfer -- message transfer times over a hardware-mapped topic for the
// message sizes of the publication's two-node transfer experiment.
//
// Two node adapters (dds_pub_adapter -> hmt -> dds_sub_adapter) exchange one message
// of each size 3, 12, 50, 196, 786 and 3146 kB. The sizes are read as
// 3*N*N bytes images (N = 32..1024), i.e. 384 .. 393216 64-bit words; this reading
// is an assumption, the text gives only the rounded kB values. For every size the
// test checks all words and that the transfer takes exactly words + 1 cycles from the
// publish start to the end of the take, and prints the time at 100 MHz beside the
// published fpgaDDS times (<0.01, 0.02, 0.06, 0.24, 0.98, 3.93 ms).
// It then checks the two scaling claims: a topic with three subscribers transfers a
// message in the same number of cycles as a 1:1 topic, and with two publishers
// sending at once the second message ends one message-time after the first.
module tb_hmt_transfer;
  import fpgadds_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  function automatic word_t pattern(int p, int a);
    return {8'(p), 24'(a * 7), 32'(a)};
  endfunction

  // ---------------- 1:1 topic --------------------------------------------------
  logic       p_start, p_busy, p_done;
  len_t       p_len, p_addr;
  word_t      p_data;
  logic       ps_valid [1];
  logic       ps_ready [1];
  axis_beat_t ps_beat  [1];
  logic       ss_valid [1];
  logic       ss_ready [1];
  axis_beat_t ss_beat  [1];
  logic       s_start, s_busy, s_done, s_ok, s_wr;
  len_t       s_count, s_addr;
  word_t      s_data;

  assign p_data = pattern(0, int'(p_addr));

  dds_pub_adapter u_pub (.clk, .rst_n, .start(p_start), .len(p_len), .busy(p_busy), .done(p_done),
    .rd_addr(p_addr), .rd_data(p_data), .m_valid(ps_valid[0]), .m_ready(ps_ready[0]), .m_beat(ps_beat[0]));
  hmt #(.NUM_PUB(1), .NUM_SUB(1)) u_topic (.clk, .rst_n, .pub_valid(ps_valid), .pub_ready(ps_ready),
    .pub_beat(ps_beat), .sub_valid(ss_valid), .sub_ready(ss_ready), .sub_beat(ss_beat));
  dds_sub_adapter u_sub (.clk, .rst_n, .start(s_start), .blocking(1'b1), .busy(s_busy), .done(s_done),
    .ok(s_ok), .count(s_count), .wr_en(s_wr), .wr_addr(s_addr), .wr_data(s_data),
    .s_valid(ss_valid[0]), .s_ready(ss_ready[0]), .s_beat(ss_beat[0]));

  int bad_words = 0;
  always @(posedge clk) if (s_wr && s_data != pattern(0, int'(s_addr))) bad_words++;

  // ---------------- 1:3 topic --------------------------------------------------
  logic       q_start, q_busy, q_done;
  len_t       q_addr;
  word_t      q_data;
  logic       qs_valid [1];
  logic       qs_ready [1];
  axis_beat_t qs_beat  [1];
  logic       qo_valid [3];
  logic       qo_ready [3];
  axis_beat_t qo_beat  [3];
  logic       r_done [3];
  logic       r_ok [3];
  len_t       r_count [3];
  logic       r_start;

  assign q_data = pattern(1, int'(q_addr));

  dds_pub_adapter u_pub3 (.clk, .rst_n, .start(q_start), .len(p_len), .busy(q_busy), .done(q_done),
    .rd_addr(q_addr), .rd_data(q_data), .m_valid(qs_valid[0]), .m_ready(qs_ready[0]), .m_beat(qs_beat[0]));
  hmt #(.NUM_PUB(1), .NUM_SUB(3)) u_topic3 (.clk, .rst_n, .pub_valid(qs_valid), .pub_ready(qs_ready),
    .pub_beat(qs_beat), .sub_valid(qo_valid), .sub_ready(qo_ready), .sub_beat(qo_beat));
  for (genvar j = 0; j < 3; j++) begin : g_r
    dds_sub_adapter u_r (.clk, .rst_n, .start(r_start), .blocking(1'b1), .busy(), .done(r_done[j]),
      .ok(r_ok[j]), .count(r_count[j]), .wr_en(), .wr_addr(), .wr_data(),
      .s_valid(qo_valid[j]), .s_ready(qo_ready[j]), .s_beat(qo_beat[j]));
  end

  // ---------------- 2:1 topic --------------------------------------------------
  logic       m_start [2];
  logic       m_busy [2];
  logic       m_done [2];
  len_t       m_addr [2];
  word_t      m_data [2];
  logic       ms_valid [2];
  logic       ms_ready [2];
  axis_beat_t ms_beat  [2];
  logic       mo_valid [1];
  logic       mo_ready [1];
  axis_beat_t mo_beat  [1];
  logic       t_start, t_done, t_ok;
  len_t       t_count;

  for (genvar i = 0; i < 2; i++) begin : g_m
    assign m_data[i] = pattern(2 + i, int'(m_addr[i]));
    dds_pub_adapter u_pm (.clk, .rst_n, .start(m_start[i]), .len(p_len), .busy(m_busy[i]), .done(m_done[i]),
      .rd_addr(m_addr[i]), .rd_data(m_data[i]), .m_valid(ms_valid[i]), .m_ready(ms_ready[i]), .m_beat(ms_beat[i]));
  end
  hmt #(.NUM_PUB(2), .NUM_SUB(1)) u_topic2 (.clk, .rst_n, .pub_valid(ms_valid), .pub_ready(ms_ready),
    .pub_beat(ms_beat), .sub_valid(mo_valid), .sub_ready(mo_ready), .sub_beat(mo_beat));
  dds_sub_adapter u_t (.clk, .rst_n, .start(t_start), .blocking(1'b1), .busy(), .done(t_done),
    .ok(t_ok), .count(t_count), .wr_en(), .wr_addr(), .wr_data(),
    .s_valid(mo_valid[0]), .s_ready(mo_ready[0]), .s_beat(mo_beat[0]));

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int NSIZES = 6;
  int    kb      [NSIZES] = '{3, 12, 50, 196, 786, 3146};
  int    side    [NSIZES] = '{32, 64, 128, 256, 512, 1024};
  string paper_t [NSIZES] = '{"<0.01", "0.02", "0.06", "0.24", "0.98", "3.93"};

  initial begin
    int t0, cyc, words, t_first, t_second;
    p_start = 0; s_start = 0; q_start = 0; r_start = 0; t_start = 0;
    m_start = '{0, 0}; p_len = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < NSIZES; k++) begin
      words = 3 * side[k] * side[k] / 8;
      @(negedge clk);
      s_start = 1; @(negedge clk); s_start = 0;     // subscriber waits (blocking take)
      p_len = len_t'(words); p_start = 1; t0 = int'($time);
      @(negedge clk); p_start = 0;
      while (!s_done) @(negedge clk);
      cyc = (int'($time) - t0) / 10;
      checks++;
      if (!s_ok || int'(s_count) != words || cyc != words + 1 || bad_words != 0) begin
        failures++;
        $display("FAIL %0d kB: ok=%0b count=%0d cycles=%0d bad=%0d", kb[k], s_ok, s_count, cyc, bad_words);
      end
      $display("%5d kB = %6d words: %6d cycles = %0.3f ms at 100 MHz (published: %s ms)",
               kb[k], words, cyc, real'(cyc) / 1.0e5, paper_t[k]);
    end

    // more subscribers: same time as 1:1
    words = 3 * 32 * 32 / 8;
    p_len = len_t'(words);
    @(negedge clk); r_start = 1; @(negedge clk); r_start = 0;
    q_start = 1; t0 = int'($time); @(negedge clk); q_start = 0;
    while (!(r_done[0] || r_done[1] || r_done[2])) @(negedge clk);
    cyc = (int'($time) - t0) / 10;
    checks++;
    if (!(r_done[0] && r_done[1] && r_done[2]) || cyc != words + 1 ||
        int'(r_count[0]) != words || int'(r_count[1]) != words || int'(r_count[2]) != words) begin
      failures++; $display("FAIL 1:3 topic: %0d cycles", cyc);
    end
    $display("1 publisher, 3 subscribers: %0d cycles for %0d words", cyc, words);

    // more publishers: the second message waits for the first
    @(negedge clk); t_start = 1; @(negedge clk); t_start = 0;
    m_start = '{1, 1}; t0 = int'($time); @(negedge clk); m_start = '{0, 0};
    while (!t_done) @(negedge clk);
    t_first = (int'($time) - t0) / 10;
    t_start = 1; @(negedge clk); t_start = 0;
    while (!t_done) @(negedge clk);
    t_second = (int'($time) - t0) / 10;
    checks++;
    if (t_first != words + 1 || t_second != 2 * words + 2 || int'(t_count) != words) begin
      failures++; $display("FAIL 2:1 topic: %0d / %0d cycles", t_first, t_second);
    end
    $display("2 publishers, 1 subscriber: messages end after %0d and %0d cycles", t_first, t_second);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
