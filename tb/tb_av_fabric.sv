// tb_av_fabric -- the autonomous-vehicle case study: six hardware nodes connected by
// six hardware-mapped topics, run in both execution modes.
//
// Topics (publisher -> subscribers):
//   A  image compensation -> Gaussian blur, red light detection, green light detection
//   B  Gaussian blur      -> image projection
//   C  image projection   -> lane following
//   D  lane following     -> lane control              (centre point)
//   E  red light detect.  -> lane control, green detect. (stop command, FIFO at both)
//   F  green light detect.-> lane control, red detect.   (start command, FIFO at both)
// Nodes are behavioural models (hw_node_model); lane control is the testbench.
// Message sizes (assumptions where marked): camera and topics A, B: 640x480 pixels of
// 3 bytes (a 0.3-megapixel camera; pixel format assumed) = 115200 words; topic C:
// 1000x600 pixels of 3 bytes = 225000 words; topic D: one point of three 64-bit
// values = 3 words (assumed); E and F: one 1-word command (assumed). Each node's
// compute phase is assumed to take one cycle per input word.
// Three camera frames run through each of two copies of the fabric, one with all
// nodes in sequential mode and one in dataflow mode. Red light is "seen" in frame 1,
// green in frame 2. The test checks that lane control gets every centre point in
// frame order from the lane-following node, that the stop and start commands wait in
// the subscriber FIFOs until read, that chain alpha (camera frame in -> centre point
// out) takes the sequential-mode time worked out from the sizes, and that dataflow
// mode is faster.
module tb_av_fabric;
  import fpgadds_pkg::*;

  localparam int IMG  = 640 * 480 * 3 / 8;    // 115200
  localparam int PROJ = 1000 * 600 * 3 / 8;   // 225000
  localparam int PT   = 3;
  localparam int NF   = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint alpha [2][NF];
  bit     finished [2];
  int     e_cmds [2], f_cmds [2];

  for (genvar md = 0; md < 2; md++) begin : g_mode
    // camera input to image compensation
    logic cam_valid, cam_ready;
    axis_beat_t cam_beat;
    longint cam_k; int cam_f;
    longint t_in [NF];
    always @(posedge clk) begin
      if (!rst_n) begin
        cam_k <= 0; cam_f <= 0; cam_valid <= 0;
      end else begin
        automatic longint k = cam_k;
        automatic int f = cam_f;
        if (cam_valid && cam_ready) begin
          if (k == 0) t_in[f] = $time / 10;
          k++;
          if (k == IMG) begin k = 0; f++; end
        end
        cam_k <= k; cam_f <= f;
        cam_valid <= (f < NF);
        cam_beat  <= '{tdata: {8'hCA, 16'(f), 40'(k)}, tlast: (k == IMG - 1)};
      end
    end

    // node -> topic streams
    logic       a_pv [1]; logic a_pr [1]; axis_beat_t a_pb [1];
    logic       a_sv [3]; logic a_sr [3]; axis_beat_t a_sb [3];
    logic       b_pv [1]; logic b_pr [1]; axis_beat_t b_pb [1];
    logic       b_sv [1]; logic b_sr [1]; axis_beat_t b_sb [1];
    logic       c_pv [1]; logic c_pr [1]; axis_beat_t c_pb [1];
    logic       c_sv [1]; logic c_sr [1]; axis_beat_t c_sb [1];
    logic       d_pv [1]; logic d_pr [1]; axis_beat_t d_pb [1];
    logic       d_sv [1]; logic d_sr [1]; axis_beat_t d_sb [1];
    logic       e_pv [1]; logic e_pr [1]; axis_beat_t e_pb [1];
    logic       e_sv [2]; logic e_sr [2]; axis_beat_t e_sb [2];
    logic       f_pv [1]; logic f_pr [1]; axis_beat_t f_pb [1];
    logic       f_sv [2]; logic f_sr [2]; axis_beat_t f_sb [2];
    int fd_ic, fd_gb, fd_ip, fd_lf, fd_rd, fd_gr;

    hw_node_model #(.NODE_ID(1), .IN_WORDS(IMG), .OUT_WORDS(IMG), .COMPUTE_CYCLES(IMG), .DATAFLOW(md)) u_ic (
      .clk, .rst_n, .s_valid(cam_valid), .s_ready(cam_ready), .s_beat(cam_beat),
      .m_valid(a_pv[0]), .m_ready(a_pr[0]), .m_beat(a_pb[0]), .frames_done(fd_ic));
    hw_node_model #(.NODE_ID(2), .IN_WORDS(IMG), .OUT_WORDS(IMG), .COMPUTE_CYCLES(IMG), .DATAFLOW(md)) u_gb (
      .clk, .rst_n, .s_valid(a_sv[0]), .s_ready(a_sr[0]), .s_beat(a_sb[0]),
      .m_valid(b_pv[0]), .m_ready(b_pr[0]), .m_beat(b_pb[0]), .frames_done(fd_gb));
    hw_node_model #(.NODE_ID(3), .IN_WORDS(IMG), .OUT_WORDS(PROJ), .COMPUTE_CYCLES(IMG), .DATAFLOW(md)) u_ip (
      .clk, .rst_n, .s_valid(b_sv[0]), .s_ready(b_sr[0]), .s_beat(b_sb[0]),
      .m_valid(c_pv[0]), .m_ready(c_pr[0]), .m_beat(c_pb[0]), .frames_done(fd_ip));
    hw_node_model #(.NODE_ID(4), .IN_WORDS(PROJ), .OUT_WORDS(PT), .COMPUTE_CYCLES(PROJ), .DATAFLOW(md)) u_lf (
      .clk, .rst_n, .s_valid(c_sv[0]), .s_ready(c_sr[0]), .s_beat(c_sb[0]),
      .m_valid(d_pv[0]), .m_ready(d_pr[0]), .m_beat(d_pb[0]), .frames_done(fd_lf));
    hw_node_model #(.NODE_ID(5), .IN_WORDS(IMG), .OUT_WORDS(1), .COMPUTE_CYCLES(IMG), .DATAFLOW(md),
                    .PUB_MASK(32'b010)) u_red (
      .clk, .rst_n, .s_valid(a_sv[1]), .s_ready(a_sr[1]), .s_beat(a_sb[1]),
      .m_valid(e_pv[0]), .m_ready(e_pr[0]), .m_beat(e_pb[0]), .frames_done(fd_rd));
    hw_node_model #(.NODE_ID(6), .IN_WORDS(IMG), .OUT_WORDS(1), .COMPUTE_CYCLES(IMG), .DATAFLOW(md),
                    .PUB_MASK(32'b100)) u_green (
      .clk, .rst_n, .s_valid(a_sv[2]), .s_ready(a_sr[2]), .s_beat(a_sb[2]),
      .m_valid(f_pv[0]), .m_ready(f_pr[0]), .m_beat(f_pb[0]), .frames_done(fd_gr));

    hmt #(.NUM_PUB(1), .NUM_SUB(3)) u_a (.clk, .rst_n, .pub_valid(a_pv), .pub_ready(a_pr), .pub_beat(a_pb),
      .sub_valid(a_sv), .sub_ready(a_sr), .sub_beat(a_sb));
    hmt #(.NUM_PUB(1), .NUM_SUB(1)) u_b (.clk, .rst_n, .pub_valid(b_pv), .pub_ready(b_pr), .pub_beat(b_pb),
      .sub_valid(b_sv), .sub_ready(b_sr), .sub_beat(b_sb));
    hmt #(.NUM_PUB(1), .NUM_SUB(1)) u_c (.clk, .rst_n, .pub_valid(c_pv), .pub_ready(c_pr), .pub_beat(c_pb),
      .sub_valid(c_sv), .sub_ready(c_sr), .sub_beat(c_sb));
    hmt #(.NUM_PUB(1), .NUM_SUB(1)) u_d (.clk, .rst_n, .pub_valid(d_pv), .pub_ready(d_pr), .pub_beat(d_pb),
      .sub_valid(d_sv), .sub_ready(d_sr), .sub_beat(d_sb));
    hmt #(.NUM_PUB(1), .NUM_SUB(2), .SUB_FIFO(32'b11)) u_e (.clk, .rst_n, .pub_valid(e_pv), .pub_ready(e_pr),
      .pub_beat(e_pb), .sub_valid(e_sv), .sub_ready(e_sr), .sub_beat(e_sb));
    hmt #(.NUM_PUB(1), .NUM_SUB(2), .SUB_FIFO(32'b11)) u_f (.clk, .rst_n, .pub_valid(f_pv), .pub_ready(f_pr),
      .pub_beat(f_pb), .sub_valid(f_sv), .sub_ready(f_sr), .sub_beat(f_sb));

    // lane control: centre points on D, always ready
    int lc_frame = 0, lc_word = 0;
    assign d_sr[0] = 1'b1;
    always @(posedge clk) if (rst_n && d_sv[0]) begin
      checks++;
      if (d_sb[0].tdata != {8'd4, 16'(lc_frame), 40'(lc_word)} || d_sb[0].tlast != (lc_word == PT - 1)) begin
        failures++; $display("FAIL mode %0d: centre point word %h", md, d_sb[0].tdata);
      end
      if (lc_word == PT - 1) begin
        alpha[md][lc_frame] = $time / 10 - t_in[lc_frame] + 1;
        lc_word = 0; lc_frame++;
        if (lc_frame == NF) finished[md] = 1;
      end else lc_word++;
    end

    // E and F subscribers read their FIFOs only at the end (asynchronous commands)
    bit read_cmds = 0;
    assign e_sr[0] = read_cmds; assign e_sr[1] = read_cmds;
    assign f_sr[0] = read_cmds; assign f_sr[1] = read_cmds;
    always @(posedge clk) if (rst_n && read_cmds) begin
      for (int j = 0; j < 2; j++) begin
        if (e_sv[j]) begin
          e_cmds[md]++; checks++;
          if (e_sb[j].tdata != {8'd5, 16'd1, 40'd0} || !e_sb[j].tlast) begin failures++; $display("FAIL stop command %h", e_sb[j].tdata); end
        end
        if (f_sv[j]) begin
          f_cmds[md]++; checks++;
          if (f_sb[j].tdata != {8'd6, 16'd2, 40'd0} || !f_sb[j].tlast) begin failures++; $display("FAIL start command %h", f_sb[j].tdata); end
        end
      end
    end
  end

  initial begin : watchdog
    repeat (8000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint seq0;
    finished = '{0, 0}; e_cmds = '{0, 0}; f_cmds = '{0, 0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (finished[0] && finished[1]);
    repeat (10) @(posedge clk);
    checks++;
    if (!g_mode[0].u_e.sub_valid[0] || !g_mode[0].u_f.sub_valid[0] ||
        !g_mode[1].u_e.sub_valid[1] || !g_mode[1].u_f.sub_valid[1]) begin
      failures++; $display("FAIL commands not waiting in the subscriber FIFOs");
    end
    g_mode[0].read_cmds = 1; g_mode[1].read_cmds = 1;
    repeat (10) @(posedge clk);
    for (int md = 0; md < 2; md++) begin
      checks++;
      if (e_cmds[md] != 2 || f_cmds[md] != 2) begin
        failures++; $display("FAIL mode %0d: %0d stop and %0d start commands delivered", md, e_cmds[md], f_cmds[md]);
      end
    end
    // sequential chain alpha, frame 0: image compensation receive + compute + send,
    // blur compute + send, projection compute + send, lane following compute + send
    seq0 = 3*IMG + 2*IMG + IMG + PROJ + PROJ + PT;
    checks++;
    if (alpha[0][0] < seq0 || alpha[0][0] > seq0 + 20) begin
      failures++; $display("FAIL sequential chain alpha %0d cycles, expected about %0d", alpha[0][0], seq0);
    end
    checks++;
    if (alpha[1][0] * 3 > alpha[0][0]) begin
      failures++; $display("FAIL dataflow mode not faster: %0d vs %0d", alpha[1][0], alpha[0][0]);
    end
    for (int f = 0; f < NF; f++)
      $display("frame %0d chain alpha: sequential %0d cycles (%0.2f ms), dataflow %0d cycles (%0.2f ms) at 100 MHz",
               f, alpha[0][f], real'(alpha[0][f]) / 1.0e5, alpha[1][f], real'(alpha[1][f]) / 1.0e5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
