// tb_axis_broadcast -- self-checking test of the 1:N stream broadcaster.
//
// A source sends the numbered words 0..K-1 (every 7th with TLAST) with random gaps;
// three subscribers accept at random, independently. Each subscriber must receive
// every word exactly once and in order, whatever the others do. A second phase holds
// one subscriber's ready low and checks that the topic stalls (no word retired, the
// other subscribers see each word at most once) and resumes without loss.
module tb_axis_broadcast;
  import fpgadds_pkg::*;

  localparam int N = 3;
  localparam int K = 3000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       s_valid, s_ready;
  axis_beat_t s_beat;
  logic       m_valid [N];
  logic       m_ready [N];
  axis_beat_t m_beat  [N];

  axis_broadcast #(.N(N)) dut (.*);

  int checks = 0, failures = 0;
  int sent = 0;
  bit hold1 = 0;
  int stall_cycles = 0;

  // source
  always @(posedge clk) begin
    if (!rst_n) begin
      s_valid <= 0; sent <= 0;
    end else begin
      automatic int nxt = sent;
      if (s_valid && s_ready) nxt = sent + 1;
      sent <= nxt;
      if (!s_valid || s_ready) begin
        if (nxt < K && $urandom_range(99) < 80) begin
          s_valid <= 1;
          s_beat  <= '{tdata: word_t'(nxt) * 64'h9E37_79B9 + 64'd1, tlast: (nxt % 7 == 6)};
        end else s_valid <= 0;
      end
    end
  end

  // subscribers
  int got [N];
  for (genvar i = 0; i < N; i++) begin : g_sink
    always @(posedge clk) begin
      m_ready[i] <= (hold1 && i == 1) ? 1'b0 : ($urandom_range(99) < 60);
      if (rst_n && m_valid[i] && m_ready[i]) begin
        checks++;
        if (m_beat[i].tdata != word_t'(got[i]) * 64'h9E37_79B9 + 64'd1 ||
            m_beat[i].tlast != (got[i] % 7 == 6)) begin
          failures++;
          if (failures < 10) $display("FAIL sub %0d word %0d: got %h", i, got[i], m_beat[i].tdata);
        end
        got[i]++;
      end
    end
  end

  always @(posedge clk) if (rst_n && s_valid && !s_ready) stall_cycles++;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int snap, snap0;
    for (int i = 0; i < N; i++) got[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (sent == K/2);
    // hold subscriber 1 for 50 cycles: topic must not advance past it
    @(negedge clk); hold1 = 1;
    repeat (2) @(posedge clk);
    snap = got[1]; snap0 = sent;
    repeat (50) @(posedge clk);
    checks++;
    if (got[1] != snap || sent > snap0 + 1 || got[0] > snap0 + 1 || got[2] > snap0 + 1) begin
      failures++; $display("FAIL stall: sent %0d->%0d got0=%0d", snap0, sent, got[0]);
    end
    @(negedge clk); hold1 = 0;
    wait (got[0] == K && got[1] == K && got[2] == K);
    repeat (5) @(posedge clk);
    checks++;
    if (got[0] != K || got[1] != K || got[2] != K) begin failures++; $display("FAIL duplicates"); end
    checks++;
    if (stall_cycles == 0) begin failures++; $display("FAIL never stalled"); end
    $display("stall cycles=%0d", stall_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
