// tb_dds_sub_adapter -- self-checking test of the subscriber (de-serializing) adapter.
//
// A stream source plays the topic. The test checks the two call versions:
//   * non-blocking take with nothing waiting: done in the next cycle with ok = 0, and
//     the topic is not touched (s_ready stays low);
//   * blocking take issued before the message exists: it waits, then receives it;
//   * non-blocking take with a message waiting: it receives it;
// and for every received message the memory writes (address 0.., data), the word
// count and ok. Messages arrive with random gaps between words.
module tb_dds_sub_adapter;
  import fpgadds_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       start, blocking, busy, done, ok, wr_en;
  len_t       count, wr_addr;
  word_t      wr_data;
  logic       s_valid, s_ready;
  axis_beat_t s_beat;

  dds_sub_adapter dut (.*);

  function automatic word_t msg_word(int msg, int i);
    return {16'(msg), 16'hBEEF, 32'(i * 3 + 1)};
  endfunction

  int checks = 0, failures = 0;

  // topic source: sends message (src_msg, src_len) when src_go is set
  bit src_go = 0;
  int src_msg, src_len, src_idx;
  always @(posedge clk) begin
    if (!rst_n) begin
      s_valid <= 0;
    end else begin
      automatic int i = src_idx;
      if (s_valid && s_ready) begin
        i = src_idx + 1;
        s_valid <= 0;
      end
      src_idx <= i;
      if (src_go && i < src_len && (!s_valid || s_ready) && $urandom_range(99) < 70) begin
        s_valid <= 1;
        s_beat  <= '{tdata: msg_word(src_msg, i), tlast: (i == src_len - 1)};
      end
    end
  end

  // memory write checker
  int wr_count = 0;
  always @(posedge clk) if (rst_n && wr_en) begin
    checks++;
    if (int'(wr_addr) != wr_count || wr_data != msg_word(src_msg, wr_count)) begin
      failures++;
      if (failures < 10) $display("FAIL write %0d: addr %0d data %h", wr_count, wr_addr, wr_data);
    end
    wr_count++;
  end

  int touched = 0;
  always @(posedge clk) if (rst_n && s_ready && !busy) touched++;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic call(bit blk, output bit r_ok, output int r_cnt, output int cycles);
    @(negedge clk);
    blocking = blk; start = 1; wr_count = 0;
    @(negedge clk);
    start = 0; cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
    r_ok = ok; r_cnt = int'(count);
  endtask

  task automatic load(int msg, int l);
    src_msg = msg; src_len = l; src_idx = 0;
  endtask

  initial begin
    bit r_ok; int r_cnt, cyc;
    int nb_fail = 0, nb_hit = 0, blk_wait = 0;
    start = 0; blocking = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int m = 0; m < 40; m++) begin
      automatic int l = 1 + $urandom_range(29);
      // non-blocking take on an empty topic
      load(m, l);
      call(0, r_ok, r_cnt, cyc);
      checks++;
      if (r_ok || cyc != 1 || s_valid) begin failures++; $display("FAIL nb empty ok=%0b cyc=%0d", r_ok, cyc); end
      else nb_fail++;
      if (m % 2 == 0) begin
        // blocking take first, message produced later
        fork
          call(1, r_ok, r_cnt, cyc);
          begin repeat (10) @(negedge clk); src_go = 1; end
        join
        blk_wait++;
      end else begin
        // message already waiting, non-blocking take
        src_go = 1;
        wait (s_valid);
        call(0, r_ok, r_cnt, cyc);
        nb_hit++;
      end
      src_go = 0;
      checks++;
      if (!r_ok || r_cnt != l || wr_count != l) begin
        failures++; $display("FAIL msg %0d ok=%0b count=%0d writes=%0d len=%0d", m, r_ok, r_cnt, wr_count, l);
      end
      repeat (2) @(negedge clk);
    end
    checks++;
    if (touched != 0) begin failures++; $display("FAIL topic read while idle"); end
    $display("non-blocking empty=%0d non-blocking hit=%0d blocking waits=%0d", nb_fail, nb_hit, blk_wait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
