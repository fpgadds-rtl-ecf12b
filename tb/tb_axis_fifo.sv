// tb_axis_fifo -- self-checking test of the subscriber FIFO against a queue model.
//
// Random pushes and pops on an 8-deep FIFO, with phases that fill it (writer fast,
// reader stopped) and drain it. Every word read is compared with a SystemVerilog
// queue; s_ready must be low exactly when the model holds DEPTH words (the topic is
// blocked, nothing dropped), m_valid high exactly when it holds any, and level must
// equal the model's size. A word written is readable in the next cycle.
module tb_axis_fifo;
  import fpgadds_pkg::*;

  localparam int DEPTH = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       s_valid, s_ready, m_valid, m_ready;
  axis_beat_t s_beat, m_beat;
  logic [$clog2(DEPTH):0] level;

  axis_fifo #(.DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  axis_beat_t model [$];
  int wr_pct = 50, rd_pct = 50;
  int full_seen = 0, n = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      checks++;
      if (s_ready != (model.size() < DEPTH) || m_valid != (model.size() > 0) ||
          int'(level) != model.size()) begin
        failures++;
        $display("FAIL flags: size=%0d s_ready=%0b m_valid=%0b level=%0d", model.size(), s_ready, m_valid, level);
      end
      if (model.size() == DEPTH && s_valid) full_seen++;
      if (m_valid && m_ready) begin
        checks++;
        if (model.size() == 0 || m_beat != model[0]) begin
          failures++; $display("FAIL data %h", m_beat.tdata);
        end
        if (model.size() > 0) void'(model.pop_front());
      end
      if (s_valid && s_ready) model.push_back(s_beat);
    end
    s_valid <= ($urandom_range(99) < wr_pct);
    s_beat  <= '{tdata: {$urandom, $urandom}, tlast: 1'($urandom)};
    m_ready <= ($urandom_range(99) < rd_pct);
  end

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2000) @(posedge clk);
    wr_pct = 90; rd_pct = 0;  repeat (40)   @(posedge clk);   // fill and hold full
    wr_pct = 0;  rd_pct = 90; repeat (40)   @(posedge clk);   // drain
    wr_pct = 80; rd_pct = 30; repeat (2000) @(posedge clk);
    wr_pct = 30; rd_pct = 80; repeat (2000) @(posedge clk);
    checks++;
    if (full_seen == 0) begin failures++; $display("FAIL full never reached"); end
    $display("writes blocked by full FIFO: %0d cycles", full_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
