// tb_dds_pub_adapter -- self-checking test of the publisher (serializing) adapter.
//
// The node memory is modelled as a function of the address, read combinationally.
// The test publishes messages of random length (1..40 words) into a sink that stalls
// at random, and checks every word's data,
// TLAST on the last word only, a single done pulse per message, that start is ignored
// while busy, and, with the sink always ready, that a len-word message completes
// len cycles after the first word is presented, i.e. len + 1 cycles after start.
module tb_dds_pub_adapter;
  import fpgadds_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       start, busy, done, m_valid, m_ready;
  len_t       len, rd_addr;
  word_t      rd_data;
  axis_beat_t m_beat;

  dds_pub_adapter dut (.*);

  function automatic word_t mem_word(int msg, len_t a);
    return {16'(msg), 16'hC0DE, 32'(a) ^ 32'h5A5A_0000};
  endfunction

  int cur_msg = 0;
  assign rd_data = mem_word(cur_msg, rd_addr);

  int checks = 0, failures = 0;
  int rx_idx = 0, dones = 0;
  int ready_pct = 60;

  always @(posedge clk) begin
    m_ready <= ($urandom_range(99) < ready_pct);
    if (rst_n && m_valid && m_ready) begin
      checks++;
      if (m_beat.tdata != mem_word(cur_msg, len_t'(rx_idx)) ||
          m_beat.tlast != (rx_idx == int'(len) - 1)) begin
        failures++;
        if (failures < 10) $display("FAIL msg %0d word %0d: %h last=%0b", cur_msg, rx_idx, m_beat.tdata, m_beat.tlast);
      end
      rx_idx++;
    end
    if (rst_n && done) dones++;
  end

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic publish(int l, int msg, output int cycles);
    @(negedge clk);
    cur_msg = msg; len = len_t'(l); rx_idx = 0; dones = 0; start = 1;
    @(negedge clk);
    start = 0;
    cycles = 1;
    while (!(dones == 1)) begin
      @(negedge clk);
      cycles++;
      // a second start while busy must be ignored
      if (cycles == 3) start = 1; else start = 0;
    end
    start = 0;
    checks++;
    if (rx_idx != l) begin failures++; $display("FAIL msg %0d: %0d of %0d words", msg, rx_idx, l); end
    repeat (3) @(negedge clk);
    checks++;
    if (dones != 1 || busy) begin failures++; $display("FAIL done pulses=%0d busy=%0b", dones, busy); end
  endtask

  initial begin
    int cyc;
    start = 0; len = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int m = 0; m < 60; m++) publish(1 + $urandom_range(39), m, cyc);
    ready_pct = 100;
    repeat (2) @(posedge clk);
    for (int l = 1; l <= 64; l = l * 2) begin
      publish(l, 100 + l, cyc);
      checks++;
      if (cyc != l + 1) begin failures++; $display("FAIL latency len=%0d took %0d cycles", l, cyc); end
    end
    // a zero-length start does nothing
    @(negedge clk); len = '0; start = 1; @(negedge clk); start = 0;
    checks++;
    if (busy || m_valid) begin failures++; $display("FAIL zero-length start"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
